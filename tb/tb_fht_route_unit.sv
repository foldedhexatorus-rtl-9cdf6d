// tb_fht_route_unit: self-checking test of the wiring and shortest-path routing of the
// FoldedHexaTorus at the default radius R = 3 (37 chiplets).
//
// One route unit per chiplet. The testbench first checks the wiring produced by
// fht_pkg::neighbor: six distinct neighbours per chiplet, every link matched by the
// reverse link on port d^1, and every link spanning at most one intermediate chiplet
// (hexagonal distance at most 2, the paper's link-range of one). It then computes all
// pairwise distances itself by Floyd-Warshall and checks the diameter against R+1, the
// value printed in the paper's Fig. 3e. Finally, for every source and destination it
// follows the route units hop by hop and checks that the walk reaches the destination in
// exactly the shortest distance, that hops_o reports that distance, and that a flit for
// the own chiplet goes to core port 6+core.
module tb_fht_route_unit;
  import fht_pkg::*;

  localparam int R = 3;
  localparam int N = num_nodes(R);

  logic [NODE_W-1:0] dst_node;
  logic [CORE_W-1:0] dst_core;
  logic [4:0]        port [N];
  logic [3:0]        hops [N];
  int checks = 0, failures = 0;
  int dmat [N][N];

  for (genvar n = 0; n < N; n++) begin : g_ru
    logic [NODE_W-1:0] dn [1];
    logic [CORE_W-1:0] dc [1];
    logic [4:0]        po [1];
    logic [3:0]        ho [1];
    assign dn[0] = dst_node;
    assign dc[0] = dst_core;
    assign port[n] = po[0];
    assign hops[n] = ho[0];
    fht_route_unit #(.R(R)) u_ru (
      .node_id_i(NODE_W'(n)), .dst_node_i(dn), .dst_core_i(dc), .port_o(po), .hops_o(ho)
    );
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int hexdist(int a, int b);
    int dq, ds;
    dq = node_q(R, a) - node_q(R, b);
    ds = node_s(R, a) - node_s(R, b);
    return (iabs(dq) + iabs(ds) + iabs(dq + ds)) / 2;
  endfunction

  initial begin
    int diam, cur, steps;
    dst_node = '0; dst_core = '0;
    #1;
    // wiring
    for (int n = 0; n < N; n++) begin
      for (int d = 0; d < 6; d++) begin
        int m;
        m = neighbor(R, n, d);
        checks++;
        if (m < 0 || m >= N || m == n) begin failures++; $display("bad neighbour %0d.%0d", n, d); end
        checks++;
        if (neighbor(R, m, d ^ 1) != n) begin failures++; $display("link %0d.%0d not reciprocal", n, d); end
        checks++;
        if (hexdist(n, m) > 2) begin failures++; $display("link %0d.%0d range > 1", n, d); end
        for (int e = 0; e < d; e++) begin
          checks++;
          if (neighbor(R, n, e) == m) begin failures++; $display("node %0d ports %0d,%0d same", n, e, d); end
        end
      end
    end
    // distances
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) dmat[i][j] = (i == j) ? 0 : 1000;
    for (int i = 0; i < N; i++)
      for (int d = 0; d < 6; d++) dmat[i][neighbor(R, i, d)] = 1;
    for (int k = 0; k < N; k++)
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          if (dmat[i][k] + dmat[k][j] < dmat[i][j]) dmat[i][j] = dmat[i][k] + dmat[k][j];
    diam = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) if (dmat[i][j] > diam) diam = dmat[i][j];
    checks++;
    if (diam != R + 1) begin failures++; $display("diameter %0d, expected %0d", diam, R + 1); end
    // routes
    for (int t = 0; t < N; t++) begin
      dst_node = NODE_W'(t);
      dst_core = CORE_W'(t % 8);
      #1;
      for (int s = 0; s < N; s++) begin
        if (s != t) begin
          checks++;
          if (int'(hops[s]) != dmat[s][t]) begin
            failures++; $display("hops %0d->%0d = %0d, expected %0d", s, t, hops[s], dmat[s][t]);
          end
        end
        cur = s; steps = 0;
        while (cur != t && steps < 20) begin
          checks++;
          if (port[cur] >= 6) begin failures++; $display("route %0d->%0d ejects at %0d", s, t, cur); break; end
          cur = neighbor(R, cur, int'(port[cur]));
          steps++;
        end
        checks++;
        if (cur != t || steps != dmat[s][t]) begin
          failures++; $display("route %0d->%0d took %0d hops, shortest %0d", s, t, steps, dmat[s][t]);
        end
      end
      checks++;
      if (int'(port[t]) != 6 + t % 8) begin failures++; $display("local port at %0d = %0d", t, port[t]); end
    end
    $display("diameter %0d over %0d chiplets", diam, N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
