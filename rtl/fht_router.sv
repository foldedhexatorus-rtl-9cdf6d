// fht_router: the router inside each chiplet of the FoldedHexaTorus network.
//
// The same design serves every chiplet; node_id_i, tied to the chiplet's index, selects
// its routing. It has P = 6 + NUM_CORES ports: ports 0..5 go to the six D2D links (see fht_pkg for
// their directions) and port 6+c to local core c. It is input queued: every input port
// has NUM_VC virtual-channel buffers of VC_DEPTH flits (fht_vc_fifo), and every output
// keeps one credit counter per downstream virtual channel, so a flit is sent only when
// the buffer it goes to has room. Freed slots are returned as credits on in_credit_o the
// cycle a flit leaves its buffer.
//
// Pipeline, three cycles from a flit on in_flit_i to the same flit on out_flit_o:
//   1. route lookup (fht_route_unit) and output-channel choice; the flit is written into
//      its virtual-channel buffer together with both;
//   2. switch allocation on the buffer fronts: each
//      input picks one ready virtual channel round-robin, then each output grants one
//      requesting input round-robin; the winner is read into the switch register;
//   3. switch traversal into the output register, which drives the link.
// The paper gives the router's kind (input queued, pipelined), its four virtual channels
// with four-flit buffers and its 3 ns latency at a 1 ns clock. The allocator and the
// pipeline split are this design's own.
//
// Deadlock freedom. The paper routes on shortest paths and breaks cyclic channel
// dependencies with the turn model, cycle breaking and a dual graph. This router keeps
// shortest paths and uses hop-indexed virtual channels instead: a flit injected by a core
// takes virtual channel 0 on its first link and virtual channel h on its (h+1)-th link.
// Channel dependencies then always go from a lower to a higher channel number, so no
// cycle can form, provided NUM_VC is at least the network diameter R+1. With four
// channels that holds up to R = 3 (37 chiplets). An assertion flags a flit that would
// need a channel beyond NUM_VC-1. Ejection to a core keeps the flit's channel.
//
// Virtual-channel allocation is wormhole style: a head flit may leave only if its output
// channel is free, and it holds that channel until its tail flit has left. All flits of a
// packet carry the destination, so every flit is routed alike.
// The Verilator linter reports rst_ni as both an asynchronous and a synchronous net (SYNCASYNCNET):
// the synchronous use is only the disable iff (!rst_ni) of the assertions; the flops
// themselves reset asynchronously only. The evt_* strobes have no load inside the design
// (UNUSEDSIGNAL): they are event markers for a testbench to count. WIDTHTRUNC marks VC and
// port indices that are wider than the arrays they index; their values stay in range by
// construction, and a_vc_in_range checks the VC values.
module fht_router #(
  parameter int unsigned R         = 3,
  parameter int unsigned NUM_CORES = 8,
  parameter int unsigned NUM_VC    = 4,
  parameter int unsigned VC_DEPTH  = 4,
  localparam int unsigned P        = fht_pkg::NUM_DIRS + NUM_CORES
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [fht_pkg::NODE_W-1:0] node_id_i,   // index of this chiplet, strapped
  input  fht_pkg::link_flit_t   in_flit_i   [P],
  output fht_pkg::link_credit_t in_credit_o [P],
  output fht_pkg::link_flit_t   out_flit_o  [P],
  input  fht_pkg::link_credit_t out_credit_i[P]
);

  import fht_pkg::*;

  localparam int unsigned CW = $clog2(VC_DEPTH + 1);
  localparam int unsigned OW = $clog2(P);
  localparam int unsigned VW = (NUM_VC > 1) ? $clog2(NUM_VC) : 1;

  // ---------------------------------------------------------------- input buffers
  logic [CW-1:0]       credits [P][NUM_VC];   // per output channel: free downstream slots
  logic [NUM_VC-1:0]   busy    [P];           // per output channel: a packet holds it
  logic [NUM_VC-1:0]   ready   [P];           // per input VC: may send this cycle
  logic [NUM_VC-1:0]   cs_wait [P];           // per input VC: waits for a credit
  logic [NUM_VC-1:0]   vc_wait [P];           // per input VC: head waits for a busy channel
  flit_t               q_data  [P][NUM_VC];
  logic [NUM_VC-1:0]   q_valid [P];
  logic [NUM_VC-1:0]   q_pop   [P];
  logic [4:0]          q_port  [P][NUM_VC];
  logic [VC_W-1:0]     q_ovc   [P][NUM_VC];

  // Route computation happens as a flit is written into its buffer (stage 1): one lookup
  // per input port. The output port and output channel are stored with the flit.
  typedef struct packed {
    logic [4:0]      port;
    logic [VC_W-1:0] ovc;
    flit_t           flit;
  } buf_t;

  logic [NODE_W-1:0] rt_node [P];
  logic [CORE_W-1:0] rt_core [P];
  logic [4:0]        rt_port [P];
  logic [3:0]        rt_hops [P];
  buf_t              wr_buf  [P];
  buf_t              q_buf   [P][NUM_VC];

  fht_route_unit #(.R(R), .NUM_LOOKUPS(P)) u_route (
    .node_id_i,
    .dst_node_i(rt_node),
    .dst_core_i(rt_core),
    .port_o    (rt_port),
    .hops_o    (rt_hops)
  );

  for (genvar p = 0; p < P; p++) begin : g_in
    assign rt_node[p] = in_flit_i[p].flit.dst_node;
    assign rt_core[p] = in_flit_i[p].flit.dst_core;
    // Output virtual channel: hop-indexed on D2D links, unchanged on ejection.
    always_comb begin
      wr_buf[p].port = rt_port[p];
      wr_buf[p].flit = in_flit_i[p].flit;
      if (rt_port[p] >= 5'(NUM_DIRS)) wr_buf[p].ovc = in_flit_i[p].vc;
      else if (p >= NUM_DIRS)         wr_buf[p].ovc = '0;
      else                            wr_buf[p].ovc = in_flit_i[p].vc + 1'b1;
    end

    for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
      logic full_unused;
      fht_vc_fifo #(.DEPTH(VC_DEPTH), .T(buf_t)) u_fifo (
        .clk_i, .rst_ni,
        .push_i     (in_flit_i[p].valid && in_flit_i[p].vc == VC_W'(v)),
        .wr_data_i  (wr_buf[p]),
        .pop_i      (q_pop[p][v]),
        .rd_data_o  (q_buf[p][v]),
        .not_empty_o(q_valid[p][v]),
        .full_o     (full_unused)
      );
      assign q_data[p][v] = q_buf[p][v].flit;
      assign q_port[p][v] = q_buf[p][v].port;
      assign q_ovc[p][v]  = q_buf[p][v].ovc;

      // May this buffer send now? Output channel state is read at the routed port.
      logic [OW-1:0] o_idx;
      logic [VW-1:0] ov_idx;
      logic       in_range;
      assign o_idx    = q_port[p][v][OW-1:0];
      assign ov_idx   = q_ovc[p][v][VW-1:0];
      assign in_range = (int'(q_port[p][v]) < P) && (int'(q_ovc[p][v]) < NUM_VC);
      assign cs_wait[p][v] = q_valid[p][v] && in_range && (credits[o_idx][ov_idx] == '0);
      assign vc_wait[p][v] = q_valid[p][v] && in_range && q_data[p][v].head && busy[o_idx][ov_idx];
      assign ready[p][v]   = q_valid[p][v] && in_range && !cs_wait[p][v] && !vc_wait[p][v];

      a_vc_in_range: assert property (@(posedge clk_i) disable iff (!rst_ni)
        q_valid[p][v] |-> (int'(q_ovc[p][v]) < NUM_VC))
        else $error("fht_router %0d: flit needs virtual channel beyond NUM_VC-1", node_id_i);
      a_core_in_range: assert property (@(posedge clk_i) disable iff (!rst_ni)
        q_valid[p][v] |-> (int'(q_port[p][v]) < P));
    end
  end

  // ---------------------------------------------------------------- allocation
  logic [NUM_VC-1:0]   in_gnt  [P];     // input-stage choice (one-hot)
  logic [P-1:0]        in_sel;          // input has a chosen VC
  logic [VC_W-1:0]     in_vc   [P];
  logic [4:0]          in_port [P];
  logic [P-1:0]        out_req [P];     // out_req[o][p]
  logic [P-1:0]        out_gnt [P];     // out_gnt[o][p]
  logic [P-1:0]        in_won;          // input p won its output

  for (genvar p = 0; p < P; p++) begin : g_inarb
    fht_rr_arbiter #(.N(NUM_VC)) u_arb (
      .clk_i, .rst_ni,
      .req_i    (ready[p]),
      .advance_i(in_won[p]),
      .gnt_o    (in_gnt[p])
    );
    always_comb begin
      in_vc[p] = '0;
      for (int v = 0; v < NUM_VC; v++) if (in_gnt[p][v]) in_vc[p] = VC_W'(v);
      in_sel[p]  = (in_gnt[p] != '0);
      in_port[p] = q_port[p][in_vc[p]];
    end
  end

  always_comb begin
    for (int o = 0; o < P; o++)
      for (int p = 0; p < P; p++)
        out_req[o][p] = in_sel[p] && (int'(in_port[p]) == o);
  end

  for (genvar o = 0; o < P; o++) begin : g_outarb
    fht_rr_arbiter #(.N(P)) u_arb (
      .clk_i, .rst_ni,
      .req_i    (out_req[o]),
      .advance_i(1'b1),
      .gnt_o    (out_gnt[o])
    );
  end

  // Winner of every output: its input port, virtual channels and flit.
  logic [P-1:0]        win_valid;
  logic [4:0]          win_in   [P];
  logic [VC_W-1:0]     win_ovc  [P];
  flit_t               win_flit [P];

  always_comb begin
    in_won = '0;
    for (int o = 0; o < P; o++) begin
      in_won      |= out_gnt[o];
      win_valid[o] = (out_gnt[o] != '0);
      win_in[o]    = '0;
      for (int p = 0; p < P; p++) if (out_gnt[o][p]) win_in[o] = 5'(p);
      win_ovc[o]   = q_ovc[win_in[o]][in_vc[win_in[o]]];
      win_flit[o]  = q_data[win_in[o]][in_vc[win_in[o]]];
    end
    for (int p = 0; p < P; p++)
      for (int v = 0; v < NUM_VC; v++)
        q_pop[p][v] = in_won[p] && (int'(in_vc[p]) == v);
  end

  // Event strobes for performance monitoring (read by testbenches).
  logic [P-1:0] evt_credit_stall;   // a buffered flit waits for a credit
  logic [P-1:0] evt_vc_busy;        // a head flit waits for its output channel
  logic [P-1:0] evt_conflict;       // an input lost switch allocation
  assign evt_conflict = in_sel & ~in_won;
  for (genvar p = 0; p < P; p++) begin : g_evt
    assign evt_credit_stall[p] = |cs_wait[p];
    assign evt_vc_busy[p]      = |vc_wait[p];
  end

  // ---------------------------------------------------------------- registers
  link_flit_t st_reg [P];   // switch register (stage 2 -> 3)

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int o = 0; o < P; o++) begin
        st_reg[o]     <= '0;
        out_flit_o[o] <= '0;
        busy[o]       <= '0;
        for (int v = 0; v < NUM_VC; v++) credits[o][v] <= CW'(VC_DEPTH);
      end
      for (int p = 0; p < P; p++) in_credit_o[p] <= '0;
    end else begin
      for (int p = 0; p < P; p++) begin
        in_credit_o[p].valid <= in_won[p];
        in_credit_o[p].vc    <= in_vc[p];
      end
      for (int o = 0; o < P; o++) begin
        out_flit_o[o]   <= st_reg[o];
        st_reg[o].valid <= win_valid[o];
        st_reg[o].vc    <= win_ovc[o];
        st_reg[o].flit  <= win_flit[o];
        if (win_valid[o] && win_flit[o].head && !win_flit[o].tail) busy[o][win_ovc[o]] <= 1'b1;
        if (win_valid[o] && win_flit[o].tail)                      busy[o][win_ovc[o]] <= 1'b0;
        for (int v = 0; v < NUM_VC; v++) begin
          logic dec, inc;
          dec = win_valid[o] && win_ovc[o] == VC_W'(v);
          inc = out_credit_i[o].valid && out_credit_i[o].vc == VC_W'(v);
          credits[o][v] <= credits[o][v] + CW'(inc) - CW'(dec);
        end
      end
    end
  end

  a_credit_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    out_credit_i[0].valid |-> credits[0][out_credit_i[0].vc] <= CW'(VC_DEPTH));

endmodule
