// fht_route_unit: shortest-path routing table of the FoldedHexaTorus.
//
// For each of its NUM_LOOKUPS lookup ports it maps the destination chiplet and core of a
// flit to the output port of the router of chiplet node_id_i. The chiplet index is an
// input, strapped per position, so that every chiplet can use the same design. Ports 0..5 are the six D2D directions
// of fht_pkg, and port 6+c is local core c. hops_o gives the shortest-path length. The
// table is built once at elaboration, by a breadth-first search from every chiplet over
// the topology; with node_id_i tied to a constant, synthesis keeps only that chiplet's
// row. Each destination takes the first direction on a shortest path, ties going
// to the lowest port number. Lookups are combinational. The router uses one lookup port
// per virtual-channel buffer.
//
// The paper routes on shortest paths (Dijkstra with the turn model, cycle breaking and a
// dual graph, to stay deadlock free). This design keeps the shortest paths but avoids
// deadlock differently, with hop-indexed virtual channels in fht_router, so no turn is
// forbidden here.
module fht_route_unit #(
  parameter int unsigned R           = 3,
  parameter int unsigned NUM_LOOKUPS = 1
) (
  input  logic [fht_pkg::NODE_W-1:0] node_id_i,
  input  logic [fht_pkg::NODE_W-1:0] dst_node_i [NUM_LOOKUPS],
  input  logic [fht_pkg::CORE_W-1:0] dst_core_i [NUM_LOOKUPS],
  output logic [4:0]                 port_o     [NUM_LOOKUPS],
  output logic [3:0]                 hops_o     [NUM_LOOKUPS]
);

  localparam int unsigned N = fht_pkg::num_nodes(R);

  typedef logic [N-1:0][N-1:0][6:0] table_t;   // [src][dst]: [6:4] first direction, [3:0] hops

  function automatic table_t build_table();
    table_t t;
    int     hop   [N];
    int     first [N];
    int     queue [N];
    int     nbr   [N*fht_pkg::NUM_DIRS];   // [i*6+d]: neighbour of i in direction d
    int     head, tail, u, w;
    // The wiring is computed once; the searches below only index it.
    for (int i = 0; i < N; i++)
      for (int d = 0; d < fht_pkg::NUM_DIRS; d++) nbr[i*fht_pkg::NUM_DIRS+d] = fht_pkg::neighbor(R, i, d);
    for (int src = 0; src < N; src++) begin
      for (int i = 0; i < N; i++) begin
        hop[i]   = -1;
        first[i] = 0;
        queue[i] = 0;
      end
      hop[src] = 0;
      queue[0] = src;
      head     = 0;
      tail     = 1;
      for (int step = 0; step < N; step++) begin
        if (head < tail) begin
          u = queue[head];
          head++;
          for (int d = 0; d < fht_pkg::NUM_DIRS; d++) begin
            w = nbr[u*fht_pkg::NUM_DIRS+d];
            if (hop[w] < 0) begin
              hop[w]      = hop[u] + 1;
              first[w]    = (u == src) ? d : first[u];
              queue[tail] = w;
              tail++;
            end
          end
        end
      end
      for (int i = 0; i < N; i++) t[src][i] = {3'(first[i]), 4'(hop[i])};
    end
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  for (genvar k = 0; k < NUM_LOOKUPS; k++) begin : g_lookup
    logic [6:0] entry;
    always_comb begin
      entry     = (int'(dst_node_i[k]) < N && int'(node_id_i) < N) ?
                  TABLE[node_id_i][dst_node_i[k]] : '0;
      port_o[k] = {2'b00, entry[6:4]};
      hops_o[k] = entry[3:0];
      if (dst_node_i[k] == node_id_i) begin
        port_o[k] = 5'(fht_pkg::NUM_DIRS) + 5'(dst_core_i[k]);
        hops_o[k] = '0;
      end
    end
  end

endmodule
