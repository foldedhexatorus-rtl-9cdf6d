// tb_fht_router: self-checking test of one FoldedHexaTorus router (the centre chiplet,
// node 18, of a radius-3 network, with 8 core ports: 14 ports in all).
//
// Directed part, each checked to the cycle:
//   - a flit from a core to each of the six neighbours leaves on that direction's port
//     exactly 3 cycles after it entered (the paper's 3 ns router latency at 1 ns), on
//     virtual channel 0, and frees its input slot with a credit;
//   - a flit arriving on a D2D port on channel v leaves on channel v+1 (hop-indexed
//     channels), and a flit for a local core leaves on that core's port on its own channel;
//   - with no credits returned, exactly VC_DEPTH = 4 flits leave towards one channel; the
//     rest follow once credits come back;
//   - two 3-flit packets from two cores to the same output leave whole, one after the other.
// Random part: all 14 inputs send packets of 1 to 4 flits to random destinations while the
// downstream side returns credits after random delays. Every flit that leaves is checked
// against a shortest-path distance table the testbench computes itself: a D2D output must
// bring the flit one hop closer, an ejection must go to the right core, the channel must
// follow the hop-indexed rule, packets on one output channel must not interleave, and
// flits of one input stream must stay in order. At the end every flit sent must have left.
module tb_fht_router;
  import fht_pkg::*;

  localparam int R = 3;
  localparam int N = num_nodes(R);
  localparam int NODE = 18;
  localparam int NC = 8;
  localparam int P = 6 + NC;
  localparam int NV = 4;
  localparam int DEPTH = 4;

  logic clk = 1'b0;
  logic rst_ni = 1'b0;
  link_flit_t   in_flit   [P];
  link_credit_t in_credit [P];
  link_flit_t   out_flit  [P];
  link_credit_t out_credit[P];

  int checks = 0, failures = 0;
  int cycle = 0;
  int dmat [N][N];

  fht_router #(.R(R), .NUM_CORES(NC), .NUM_VC(NV), .VC_DEPTH(DEPTH)) dut (
    .clk_i(clk), .rst_ni, .node_id_i(NODE_W'(NODE)), .in_flit_i(in_flit), .in_credit_o(in_credit),
    .out_flit_o(out_flit), .out_credit_i(out_credit)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    $display("FAIL @%0d: %s", cycle, msg);
  endtask

  function automatic flit_t mk(int dst, int core, bit head, bit tail, int tag);
    flit_t f;
    f = '0;
    f.head = head; f.tail = tail;
    f.dst_node = NODE_W'(dst); f.dst_core = CORE_W'(core);
    f.src_node = NODE_W'(NODE);
    f.data = DATA_W'(tag);
    return f;
  endfunction

  task automatic idle_inputs();
    for (int p = 0; p < P; p++) in_flit[p] = '0;
  endtask

  // Wait for a flit on output o; returns cycles waited (-1 on timeout).
  task automatic wait_out(int o, output link_flit_t got, output int waited);
    waited = -1;
    for (int k = 1; k <= 40; k++) begin
      @(negedge clk);
      if (out_flit[o].valid) begin got = out_flit[o]; waited = k; return; end
    end
  endtask

  // ------------------------------------------------------------------ random phase state
  bit          rnd_mode = 0;
  bit          auto_credit = 1;
  int          in_cred   [P][NV];
  int          pend      [P][NV];
  int          sent_flits = 0, recv_flits = 0;
  // per input stream: active packet
  int          st_left [P], st_vc [P], st_dst [P], st_core [P], st_seq [P];
  // per output channel: owner of the open packet (-1 none)
  int          own [P][NV];
  int          last_seq [P][NV][P];
  int          pkt_first [P];          // next flit of input p starts a packet

  // Downstream credit return (random delay) and input credit bookkeeping.
  always @(negedge clk) begin
    for (int o = 0; o < P; o++) begin
      out_credit[o] = '0;
      if (out_flit[o].valid) pend[o][out_flit[o].vc]++;
      if (auto_credit && (!rnd_mode || $urandom % 2 == 0)) begin
        for (int v = 0; v < NV; v++) begin
          if (pend[o][v] > 0 && !out_credit[o].valid) begin
            pend[o][v]--;
            out_credit[o].valid = 1'b1;
            out_credit[o].vc = VC_W'(v);
          end
        end
      end
    end
    for (int p = 0; p < P; p++)
      if (in_credit[p].valid) in_cred[p][in_credit[p].vc]++;
  end

  // Output checker used in the random phase.
  always @(negedge clk) begin
    if (rnd_mode) begin
      for (int o = 0; o < P; o++) begin
        if (out_flit[o].valid) begin
          flit_t f;
          int ip, iv, sq, d, ov;
          f  = out_flit[o].flit;
          ov = int'(out_flit[o].vc);
          ip = int'(f.data[31:24]); iv = int'(f.data[23:16]); sq = int'(f.data[15:0]);
          d  = int'(f.dst_node);
          recv_flits++;
          checks++;
          if (d == NODE) begin
            if (o != 6 + int'(f.dst_core)) fail($sformatf("eject to port %0d for core %0d", o, f.dst_core));
            checks++;
            if (ov != iv) fail("ejection changed the channel");
          end else begin
            if (o >= 6) fail("flit for another chiplet ejected");
            else if (dmat[neighbor(R, NODE, o)][d] != dmat[NODE][d] - 1)
              fail($sformatf("port %0d is not on a shortest path to %0d", o, d));
            checks++;
            if (ov != ((ip >= 6) ? 0 : iv + 1)) fail($sformatf("out channel %0d from in %0d/%0d", ov, ip, iv));
          end
          checks++;
          if (sq <= last_seq[ip][iv][o]) fail("stream reordered");
          last_seq[ip][iv][o] = sq;
          checks++;
          if (f.head) begin
            if (own[o][ov] != -1) fail("head on an open output channel");
            own[o][ov] = ip * NV + iv;
          end else if (own[o][ov] != ip * NV + iv) fail("packets interleaved on one output channel");
          if (f.tail) own[o][ov] = -1;
        end
      end
    end
  end

  initial begin
    link_flit_t got;
    int waited, n_out, first, cnt_a, cnt_b;
    bit order_ok;

    // distances, computed independently of the route unit
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) dmat[i][j] = (i == j) ? 0 : 1000;
    for (int i = 0; i < N; i++)
      for (int d = 0; d < 6; d++) dmat[i][neighbor(R, i, d)] = 1;
    for (int k = 0; k < N; k++)
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          if (dmat[i][k] + dmat[k][j] < dmat[i][j]) dmat[i][j] = dmat[i][k] + dmat[k][j];
    for (int p = 0; p < P; p++)
      for (int v = 0; v < NV; v++) begin
        in_cred[p][v] = DEPTH; pend[p][v] = 0; own[p][v] = -1;
        for (int o = 0; o < P; o++) last_seq[p][v][o] = -1;
      end

    idle_inputs();
    for (int o = 0; o < P; o++) out_credit[o] = '0;
    repeat (3) @(posedge clk);
    rst_ni = 1'b1;
    @(negedge clk);

    // 1. core -> each neighbour, latency 3
    for (int d = 0; d < 6; d++) begin
      int crd;
      in_flit[6].valid = 1; in_flit[6].vc = '0;
      in_flit[6].flit = mk(neighbor(R, NODE, d), 0, 1, 1, 100 + d);
      crd = 0;
      @(negedge clk); idle_inputs();
      for (int k = 1; k <= 6; k++) begin
        if (in_credit[6].valid) crd++;
        for (int o = 0; o < P; o++) if (out_flit[o].valid) begin
          checks++;
          if (o != d || k != 3 || out_flit[o].vc != 0 || out_flit[o].flit.data != DATA_W'(100 + d))
            fail($sformatf("dir %0d: flit on port %0d after %0d cycles vc %0d", d, o, k, out_flit[o].vc));
          else $display("core -> dir %0d: 3-cycle latency", d);
        end
        @(negedge clk);
      end
      checks++;
      if (crd != 1) fail("input credit not returned exactly once");
    end

    // 2. network -> network: channel v -> v+1
    for (int v = 0; v < 3; v++) begin
      in_flit[1].valid = 1; in_flit[1].vc = VC_W'(v);
      in_flit[1].flit = mk(neighbor(R, NODE, 4), 0, 1, 1, 200 + v);
      @(negedge clk); idle_inputs();
      wait_out(4, got, waited);
      checks++;
      if (waited != 2 || got.vc != VC_W'(v + 1)) fail($sformatf("transit: waited %0d vc %0d", waited, got.vc));
    end

    // 3. network -> eject
    in_flit[3].valid = 1; in_flit[3].vc = 2;
    in_flit[3].flit = mk(NODE, 5, 1, 1, 300);
    @(negedge clk); idle_inputs();
    wait_out(11, got, waited);
    checks++;
    if (waited != 2 || got.vc != 2 || got.flit.data != 300) fail($sformatf("eject: waited %0d vc %0d", waited, got.vc));
    repeat (10) @(negedge clk);

    // 4. credit stall: no credits back from output 0
    auto_credit = 0;
    for (int i = 0; i < 6; i++) begin
      int ip;
      ip = 6 + (i % 2);
      in_flit[ip].valid = 1; in_flit[ip].vc = 0;
      in_flit[ip].flit = mk(neighbor(R, NODE, 0), 0, 1, 1, 400 + i);
      if (i % 2 == 1) begin @(negedge clk); idle_inputs(); end
    end
    n_out = 0;
    for (int k = 0; k < 30; k++) begin
      if (out_flit[0].valid) n_out++;
      @(negedge clk);
    end
    checks++;
    if (n_out != DEPTH) fail($sformatf("%0d flits left without credits, expected %0d", n_out, DEPTH));
    auto_credit = 1;
    for (int k = 0; k < 30; k++) begin
      if (out_flit[0].valid) n_out++;
      @(negedge clk);
    end
    checks++;
    if (n_out != 6) fail($sformatf("%0d flits after credits returned, expected 6", n_out));
    repeat (10) @(negedge clk);

    // 5. wormhole: two 3-flit packets to the same output channel
    for (int i = 0; i < 3; i++) begin
      in_flit[8].valid = 1; in_flit[8].vc = 0;
      in_flit[8].flit = mk(neighbor(R, NODE, 2), 0, i == 0, i == 2, 500 + i);
      in_flit[9].valid = 1; in_flit[9].vc = 0;
      in_flit[9].flit = mk(neighbor(R, NODE, 2), 0, i == 0, i == 2, 600 + i);
      @(negedge clk);
    end
    idle_inputs();
    first = -1; cnt_a = 0; cnt_b = 0; order_ok = 1;
    for (int k = 0; k < 30; k++) begin
      if (out_flit[2].valid) begin
        int tag;
        tag = int'(out_flit[2].flit.data);
        if (first == -1) first = tag / 100;
        if (tag / 100 == first) begin if (cnt_b != 0) order_ok = 0; cnt_a++; end
        else begin if (cnt_a != 3) order_ok = 0; cnt_b++; end
      end
      @(negedge clk);
    end
    checks++;
    if (!order_ok || cnt_a != 3 || cnt_b != 3) fail($sformatf("wormhole order: %0d then %0d", cnt_a, cnt_b));
    repeat (10) @(negedge clk);
    for (int p = 0; p < P; p++)
      for (int v = 0; v < NV; v++) in_cred[p][v] = DEPTH;

    // 6. random traffic
    rnd_mode = 1;
    for (int p = 0; p < P; p++) begin st_left[p] = 0; st_seq[p] = 0; pkt_first[p] = 1; end
    for (int cyc = 0; cyc < 20000; cyc++) begin
      for (int p = 0; p < P; p++) begin
        in_flit[p] = '0;
        if (st_left[p] == 0 && cyc < 18000 && $urandom % 3 == 0) begin
          st_left[p] = 1 + $urandom % 4;
          st_vc[p]   = (p >= 6) ? 0 : $urandom % 3;
          st_dst[p]  = ($urandom % 4 == 0) ? NODE : $urandom % N;
          st_core[p] = $urandom % NC;
        end
        if (st_left[p] > 0 && in_cred[p][st_vc[p]] > 0 && $urandom % 4 != 0) begin
          in_cred[p][st_vc[p]]--;
          in_flit[p].valid = 1;
          in_flit[p].vc = VC_W'(st_vc[p]);
          in_flit[p].flit = mk(st_dst[p], st_core[p], 0, st_left[p] == 1, 0);
          in_flit[p].flit.data = {8'(p), 8'(st_vc[p]), 16'(st_seq[p] + 1)};
          st_left[p]--;
          sent_flits++;
        end
      end
      // mark heads: the first flit of each packet
      for (int p = 0; p < P; p++) if (in_flit[p].valid) begin
        in_flit[p].flit.head = (pkt_first[p] == 1);
        pkt_first[p] = in_flit[p].flit.tail ? 1 : 0;
        st_seq[p]++;
      end
      @(negedge clk);
    end
    idle_inputs();
    repeat (200) @(negedge clk);
    checks++;
    if (recv_flits != sent_flits) fail($sformatf("sent %0d flits, %0d left", sent_flits, recv_flits));
    $display("random phase: %0d flits routed", recv_flits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
