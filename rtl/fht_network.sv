// fht_network: the FoldedHexaTorus inter-chiplet interconnect, top level.
//
// N = 3R^2+3R+1 chiplets sit on a hexagon of radius R. Each holds one fht_router with six
// D2D ports and NUM_CORES core ports. Along each of the three hexagonal axes, every line
// of chiplets is closed into a folded ring (see fht_pkg), so each chiplet links to six
// others, no link passes over more than one chiplet, and the network diameter is R+1.
// Each D2D connection is a pair of fht_link instances, one per direction, each carrying
// flits one way and credits the other. Output port d of chiplet n feeds input port d^1
// of chiplet neighbor(n, d).
//
// The cores, caches and memories that use the network are not part of this design. Their
// router ports come out as the arrays below, indexed [chiplet][core]: a core injects a
// flit on inj_flit_i (virtual channel 0) and must hold a credit for it, starting from
// VC_DEPTH per virtual channel and regaining one on each inj_credit_o pulse; it receives
// flits on ej_flit_o and returns one ej_credit_i pulse for each flit it has consumed. At
// zero load a flit crossing h links takes 3(h+1) + h*(2*PHY_LAT + wire cycles) cycles
// from inj_flit_i to ej_flit_o.
//
// The topology, the radix, the router per chiplet, the four virtual channels with four-
// flit buffers, the 3 ns router and 2 ns PHY latencies, the 1 ns cycle and the 8 cores
// per chiplet follow the paper. The default radius R = 2 (19 chiplets, rows of 3-4-5-4-3)
// is the instance the paper draws in Fig. 3e; its evaluation sweeps many sizes. Four
// hop-indexed virtual channels keep the routing deadlock free up to R = 3 (37 chiplets);
// larger networks need NUM_VC >= R+1.
// The Verilator linter reports rst_ni as both an asynchronous and a synchronous net (SYNCASYNCNET):
// the synchronous use is only the disable iff (!rst_ni) of the assertions; the flops
// themselves reset asynchronously only.
module fht_network #(
  parameter int unsigned R             = 2,
  parameter int unsigned NUM_CORES     = 8,
  parameter int unsigned NUM_VC        = 4,
  parameter int unsigned VC_DEPTH      = 4,
  parameter int unsigned PHY_LAT       = 2,
  parameter int unsigned LINK_LEN_UM   = 17504,
  parameter int unsigned SQRT_ER_MILLI = 1761,
  localparam int unsigned N            = fht_pkg::num_nodes(R)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  fht_pkg::link_flit_t   inj_flit_i   [N][NUM_CORES],
  output fht_pkg::link_credit_t inj_credit_o [N][NUM_CORES],
  output fht_pkg::link_flit_t   ej_flit_o    [N][NUM_CORES],
  input  fht_pkg::link_credit_t ej_credit_i  [N][NUM_CORES]
);

  import fht_pkg::*;

  localparam int unsigned P = NUM_DIRS + NUM_CORES;

  // Router-side signals of every port.
  link_flit_t   r_in_flit   [N][P];
  link_credit_t r_in_credit [N][P];
  link_flit_t   r_out_flit  [N][P];
  link_credit_t r_out_credit[N][P];

  initial begin
    assert (R >= 2) else $error("fht_network: R must be at least 2");
    assert (NUM_VC >= R + 1)
      else $warning("fht_network: NUM_VC < R+1, hop-indexed channels run out on long paths");
  end

  for (genvar n = 0; n < N; n++) begin : g_node
    fht_router #(
      .R(R), .NUM_CORES(NUM_CORES), .NUM_VC(NUM_VC), .VC_DEPTH(VC_DEPTH)
    ) u_router (
      .clk_i, .rst_ni,
      .node_id_i   (NODE_W'(n)),
      .in_flit_i   (r_in_flit[n]),
      .in_credit_o (r_in_credit[n]),
      .out_flit_o  (r_out_flit[n]),
      .out_credit_i(r_out_credit[n])
    );

    for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
      assign r_in_flit[n][NUM_DIRS+c]    = inj_flit_i[n][c];
      assign inj_credit_o[n][c]          = r_in_credit[n][NUM_DIRS+c];
      assign ej_flit_o[n][c]             = r_out_flit[n][NUM_DIRS+c];
      assign r_out_credit[n][NUM_DIRS+c] = ej_credit_i[n][c];
    end

    // Link leaving port d of chiplet n; it arrives at port d^1 of chiplet m.
    for (genvar d = 0; d < NUM_DIRS; d++) begin : g_link
      localparam int M = neighbor(R, n, d);
      fht_link #(
        .PHY_LAT(PHY_LAT), .LINK_LEN_UM(LINK_LEN_UM), .SQRT_ER_MILLI(SQRT_ER_MILLI)
      ) u_link (
        .clk_i, .rst_ni,
        .in_flit_i   (r_out_flit[n][d]),
        .out_flit_o  (r_in_flit[M][d^1]),
        .in_credit_i (r_in_credit[M][d^1]),
        .out_credit_o(r_out_credit[n][d])
      );
    end
  end

endmodule
