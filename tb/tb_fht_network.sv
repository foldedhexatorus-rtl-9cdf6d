// tb_fht_network: end-to-end test of the whole FoldedHexaTorus network at its default
// size: radius 2, 19 chiplets, 8 cores each (152 cores), 4 virtual channels of 4 flits.
//
// The cores are modelled here. A source queues packets of 1 flit (control) or 4 flits
// (data) by a Bernoulli process and injects them under credit flow control. A sink takes
// flits and returns their credits, but holds them back now and then, so ejection
// backpressure occurs. The test runs in phases:
//   0. zero load: single flits between chosen chiplet pairs, including a pair at the
//      diameter (3 hops) and a pair on one chiplet. Each is checked to the cycle against
//      3(h+1) + 5h (3 cycles per router and 5 per link: two 2-cycle PHYs plus 1 cycle of
//      wire), where the testbench computes the hop count h itself.
//   1. the synthetic patterns the paper evaluates. Random uniform on the homogeneous
//      system; random uniform on the heterogeneous system, where the first and last
//      chiplet of every row are memory chiplets (Fig. 7b) that compute cores address half
//      the time; random permutation; tornado; neighbour. The paper does not define
//      tornado and neighbour for a hexagonal layout; here tornado sends chiplet i to
//      i + N/2 and neighbour sends it to i + 1 (mod N).
// Every packet must arrive once, whole, in order, at the right chiplet and core. It must
// arrive on virtual channel h-1, which, with hop-indexed channels, shows it took a
// shortest path. The test also counts credit stalls, output-channel waits, switch
// conflicts, ejection backpressure, multi-flit packets, use of the top virtual channel and
// diameter-length paths, and fails if any of them never happened.
module tb_fht_network;
  import fht_pkg::*;

  localparam int R  = 2;   // the network's default
  localparam int N  = num_nodes(R);
  localparam int NC = 8;
  localparam int NV = 4;
  localparam int DEPTH = 4;
  localparam int LINK_LAT = 5;
  localparam int MAXPKT = 65536;
  localparam int INJ_CYCLES = 2000;

  logic clk = 1'b0;
  logic rst_ni = 1'b0;
  link_flit_t   inj_flit   [N][NC];
  link_credit_t inj_credit [N][NC];
  link_flit_t   ej_flit    [N][NC];
  link_credit_t ej_credit  [N][NC];

  fht_network dut (
    .clk_i(clk), .rst_ni,
    .inj_flit_i(inj_flit), .inj_credit_o(inj_credit),
    .ej_flit_o(ej_flit), .ej_credit_i(ej_credit)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #3000000;   // 300000 cycles
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cycle, msg);
  endtask

  // ------------------------------------------------------------ reference distances
  int dmat [N][N];
  initial begin
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) dmat[i][j] = (i == j) ? 0 : 1000;
    for (int i = 0; i < N; i++)
      for (int d = 0; d < 6; d++) dmat[i][neighbor(R, i, d)] = 1;
    for (int k = 0; k < N; k++)
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          if (dmat[i][k] + dmat[k][j] < dmat[i][j]) dmat[i][j] = dmat[i][k] + dmat[k][j];
  end

  // ------------------------------------------------------------ mechanism counters
  int ev_credit_stall = 0, ev_vc_busy = 0, ev_conflict = 0, ev_ej_backpressure = 0;
  int ev_multiflit = 0, ev_top_vc = 0, ev_diameter = 0, ev_local = 0;
  logic [N-1:0] n_cs, n_vb, n_cf;
  for (genvar n = 0; n < N; n++) begin : g_mon
    assign n_cs[n] = |dut.g_node[n].u_router.evt_credit_stall;
    assign n_vb[n] = |dut.g_node[n].u_router.evt_vc_busy;
    assign n_cf[n] = |dut.g_node[n].u_router.evt_conflict;
  end
  always @(posedge clk) if (rst_ni) begin
    ev_credit_stall <= ev_credit_stall + $countones(n_cs);
    ev_vc_busy      <= ev_vc_busy + $countones(n_vb);
    ev_conflict     <= ev_conflict + $countones(n_cf);
  end

  // ------------------------------------------------------------ packet scoreboard
  int pk_src [MAXPKT], pk_dst [MAXPKT], pk_core [MAXPKT], pk_len [MAXPKT];
  int pk_t0 [MAXPKT], pk_got [MAXPKT];
  int npkt = 0, ndone = 0;
  longint lat_sum = 0;
  int flits_delivered = 0;

  // sources
  int srcq [N][NC][$];
  int cur_pkt [N][NC], cur_idx [N][NC], cred [N][NC];
  // sinks
  int pend [N][NC][NV];
  int open_pkt [N][NC][NV];
  int open_idx [N][NC][NV];
  int last_arrival;

  bit traffic_on = 0;
  int pattern = 0;       // 0 uniform, 1 heterogeneous, 2 permutation, 3 tornado, 4 neighbour
  int perm [N];
  real rate = 0.02;      // packets per core per cycle

  function automatic bit is_mem(int n);
    int s;
    s = node_s(R, n);
    return (node_q(R, n) == row_qmin(R, s)) || (node_q(R, n) == row_qmin(R, s) + row_len(R, s) - 1);
  endfunction

  function automatic int new_pkt(int s, int c, int d, int dc, int len);
    int id;
    id = npkt % MAXPKT;
    pk_src[id] = s; pk_dst[id] = d; pk_core[id] = dc; pk_len[id] = len;
    pk_t0[id] = cycle; pk_got[id] = 0;
    npkt++;
    srcq[s][c].push_back(id);
    return id;
  endfunction

  // Drive sources and sinks at the falling edge.
  always @(negedge clk) begin
    for (int n = 0; n < N; n++) begin
      for (int c = 0; c < NC; c++) begin
        // credits from the router's injection port
        if (inj_credit[n][c].valid) cred[n][c]++;
        // traffic generation
        if (traffic_on && !(pattern == 1 && is_mem(n)) &&
            ($urandom % 100000) < int'(rate * 100000.0)) begin
          int d, dc, len;
          dc = $urandom % NC;
          case (pattern)
            1: begin
              if ($urandom % 2 == 0) begin
                do d = $urandom % N; while (!is_mem(d));
              end else begin
                do d = $urandom % N; while (is_mem(d));
              end
            end
            2: begin d = perm[n]; dc = c; end
            3: begin d = (n + N / 2) % N; dc = c; end
            4: begin d = (n + 1) % N; dc = c; end
            default: d = $urandom % N;
          endcase
          len = ($urandom % 2 == 0) ? 1 : 4;
          void'(new_pkt(n, c, d, dc, len));
        end
        // injection
        inj_flit[n][c] = '0;
        if (cur_pkt[n][c] < 0 && srcq[n][c].size() != 0) begin
          cur_pkt[n][c] = srcq[n][c].pop_front();
          cur_idx[n][c] = 0;
        end
        if (cur_pkt[n][c] >= 0 && cred[n][c] > 0) begin
          int id;
          id = cur_pkt[n][c];
          cred[n][c]--;
          inj_flit[n][c].valid = 1'b1;
          inj_flit[n][c].vc    = '0;
          inj_flit[n][c].flit.head     = (cur_idx[n][c] == 0);
          inj_flit[n][c].flit.tail     = (cur_idx[n][c] == pk_len[id] - 1);
          inj_flit[n][c].flit.dst_node = NODE_W'(pk_dst[id]);
          inj_flit[n][c].flit.dst_core = CORE_W'(pk_core[id]);
          inj_flit[n][c].flit.src_node = NODE_W'(n);
          inj_flit[n][c].flit.data     = {16'(id), 16'(cur_idx[n][c])};
          cur_idx[n][c]++;
          if (cur_idx[n][c] == pk_len[id]) cur_pkt[n][c] = -1;
        end
        // ejection
        ej_credit[n][c] = '0;
        if (ej_flit[n][c].valid) begin
          flit_t f;
          int v, id, idx, h;
          f = ej_flit[n][c].flit;
          v = int'(ej_flit[n][c].vc);
          id = int'(f.data[31:16]); idx = int'(f.data[15:0]);
          flits_delivered++;
          last_arrival = cycle;
          pend[n][c][v]++;
          checks++;
          if (pk_dst[id] != n || pk_core[id] != c) fail($sformatf("packet %0d at %0d.%0d", id, n, c));
          checks++;
          if (int'(f.src_node) != pk_src[id]) fail("source field corrupted");
          h = dmat[pk_src[id]][n];
          checks++;
          if (v != ((h == 0) ? 0 : h - 1)) fail($sformatf("packet %0d arrived on vc %0d after %0d hops", id, v, h));
          if (v == R) ev_top_vc++;      // highest channel a shortest path can reach
          checks++;
          if (f.head) begin
            if (open_pkt[n][c][v] != -1) fail("new head while a packet is open");
            open_pkt[n][c][v] = id; open_idx[n][c][v] = 0;
          end
          if (open_pkt[n][c][v] != id || idx != open_idx[n][c][v]) fail($sformatf("flit %0d.%0d out of order", id, idx));
          open_idx[n][c][v]++;
          if (f.tail) begin
            checks++;
            if (open_idx[n][c][v] != pk_len[id]) fail("packet length wrong");
            open_pkt[n][c][v] = -1;
            pk_got[id]++;
            checks++;
            if (pk_got[id] != 1) fail("packet delivered twice");
            ndone++;
            lat_sum += cycle - pk_t0[id];
            if (pk_len[id] > 1) ev_multiflit++;
            if (h == R + 1) ev_diameter++;
            if (h == 0) ev_local++;
          end
        end
        for (int v = 0; v < NV; v++) begin
          if (pend[n][c][v] > 0 && !ej_credit[n][c].valid) begin
            if ($urandom % 4 != 0) begin
              pend[n][c][v]--;
              ej_credit[n][c].valid = 1'b1;
              ej_credit[n][c].vc    = VC_W'(v);
            end else ev_ej_backpressure++;
          end
        end
      end
    end
  end

  task automatic zero_load(int s, int d);
    int h, t0, t1, expect_lat;
    bit seen;
    h = dmat[s][d];
    expect_lat = 3 * (h + 1) + LINK_LAT * h;
    void'(new_pkt(s, 0, d, 3, 1));
    t0 = cycle;
    seen = 0;
    for (int k = 0; k < 100 && !seen; k++) begin
      @(negedge clk);
      #1;
      if (ej_flit[d][3].valid) begin seen = 1; t1 = cycle; end
    end
    checks++;
    if (!seen || t1 - t0 != expect_lat)
      fail($sformatf("zero-load %0d->%0d (%0d hops): %0d cycles, expected %0d", s, d, h, t1 - t0, expect_lat));
    else $display("zero-load %0d->%0d, %0d hops: %0d cycles", s, d, h, expect_lat);
    repeat (5) @(negedge clk);
  endtask

  task automatic run_pattern(int pat, string name);
    int p0, d0, t0;
    longint l0;
    p0 = npkt; d0 = ndone; l0 = lat_sum; t0 = cycle;
    pattern = pat;
    traffic_on = 1;
    repeat (INJ_CYCLES) @(negedge clk);
    traffic_on = 0;
    while (ndone != npkt && cycle - last_arrival < 2000) @(negedge clk);
    checks++;
    if (ndone != npkt) fail($sformatf("%s: %0d of %0d packets never arrived", name, npkt - ndone, npkt - p0));
    $display("%-14s %6d packets, mean latency %0d cycles, %0d cycles to drain",
             name, ndone - d0, int'((lat_sum - l0) / ((ndone - d0) > 0 ? (ndone - d0) : 1)),
             cycle - t0 - INJ_CYCLES);
  endtask

  initial begin
    int far_s, far_d;
    for (int n = 0; n < N; n++)
      for (int c = 0; c < NC; c++) begin
        inj_flit[n][c] = '0; ej_credit[n][c] = '0;
        cur_pkt[n][c] = -1; cur_idx[n][c] = 0; cred[n][c] = DEPTH;
        for (int v = 0; v < NV; v++) begin pend[n][c][v] = 0; open_pkt[n][c][v] = -1; end
      end
    // random permutation of chiplets
    for (int i = 0; i < N; i++) perm[i] = i;
    for (int i = N - 1; i > 0; i--) begin
      int j, t;
      j = $urandom % (i + 1); t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    repeat (3) @(negedge clk);
    rst_ni = 1'b1;
    repeat (2) @(negedge clk);

    // zero-load latency
    far_s = 0; far_d = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) if (dmat[i][j] > dmat[far_s][far_d]) begin far_s = i; far_d = j; end
    zero_load(N / 2, N / 2);
    zero_load(N / 2, neighbor(R, N / 2, 0));
    zero_load(0, N - 1);
    zero_load(far_s, far_d);
    zero_load(5, 5 + N / 2);

    run_pattern(0, "uniform");
    run_pattern(1, "heterogeneous");
    run_pattern(2, "permutation");
    run_pattern(3, "tornado");
    run_pattern(4, "neighbour");

    $display("events: credit_stall=%0d vc_busy=%0d conflict=%0d ej_backpressure=%0d",
             ev_credit_stall, ev_vc_busy, ev_conflict, ev_ej_backpressure);
    $display("events: multiflit=%0d top_vc=%0d diameter_paths=%0d local=%0d flits=%0d",
             ev_multiflit, ev_top_vc, ev_diameter, ev_local, flits_delivered);
    checks += 8;
    if (ev_credit_stall == 0)    fail("no credit stall happened");
    if (ev_vc_busy == 0)         fail("no output-channel wait happened");
    if (ev_conflict == 0)        fail("no switch conflict happened");
    if (ev_ej_backpressure == 0) fail("no ejection backpressure happened");
    if (ev_multiflit == 0)       fail("no multi-flit packet");
    if (ev_top_vc == 0)          fail("highest hop-indexed channel never used");
    if (ev_diameter == 0)        fail("no diameter-length path");
    if (ev_local == 0)           fail("no same-chiplet packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
