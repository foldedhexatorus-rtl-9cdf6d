// fht_pkg: types, constants and topology functions shared by the FoldedHexaTorus
// inter-chiplet network.
//
// Chiplets sit on a hexagon of radius R, in axial coordinates (q, s) with |q|, |s| and
// |q+s| all at most R, which gives 3R^2+3R+1 chiplets. They are numbered row by row:
// s runs from -R to R and, within a row, q rises. Each chiplet has six D2D ports, two per
// hexagonal axis: axis 0 holds s constant, axis 1 holds q constant, axis 2 holds q+s
// constant. Along every line of k chiplets on an axis the chiplets form a folded ring:
// position i links to i+2, and the two end pairs (0,1) and (k-2,k-1) close the ring.
// Every link therefore spans at most one intermediate chiplet. Port 2a is the "next" hop
// on that ring for axis a, and port 2a+1 the "previous" hop, so the far end of port d is
// always port d^1. The fold, the radix of six and the hexagonal placement follow the
// paper's Fig. 3e. The numbering, the port order and the flit format are this design's
// own.
//
// Flits are single-cycle words that carry their own destination, so a router can route
// any flit without packet state. A packet is a run of flits on one virtual channel, marked
// by head and tail bits (both set for a one-flit packet).
package fht_pkg;

  localparam int unsigned NODE_W   = 9;  // up to 511 chiplets (R <= 12)
  localparam int unsigned CORE_W   = 4;  // up to 16 cores per chiplet
  localparam int unsigned DATA_W   = 32;
  localparam int unsigned VC_W     = 3;  // up to 8 virtual channels
  localparam int unsigned NUM_DIRS = 6;  // network radix of the topology

  typedef struct packed {
    logic              head;
    logic              tail;
    logic [NODE_W-1:0] dst_node;
    logic [CORE_W-1:0] dst_core;
    logic [NODE_W-1:0] src_node;
    logic [DATA_W-1:0] data;
  } flit_t;

  // One direction of a channel: a flit with the virtual channel it travels on.
  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
    flit_t           flit;
  } link_flit_t;

  // The reverse direction: one freed buffer slot of virtual channel vc.
  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
  } link_credit_t;

  function automatic int num_nodes(int r);
    return 3 * r * r + 3 * r + 1;
  endfunction

  function automatic int imax(int a, int b);
    return (a > b) ? a : b;
  endfunction

  function automatic int imin(int a, int b);
    return (a < b) ? a : b;
  endfunction

  function automatic int iabs(int a);
    return (a < 0) ? -a : a;
  endfunction

  // Smallest q in row s.
  function automatic int row_qmin(int r, int s);
    return imax(-r, -r - s);
  endfunction

  function automatic int row_len(int r, int s);
    return 2 * r + 1 - iabs(s);
  endfunction

  function automatic int node_index(int r, int q, int s);
    int idx;
    idx = 0;
    for (int ss = -r; ss < s; ss++) idx += row_len(r, ss);
    return idx + q - row_qmin(r, s);
  endfunction

  function automatic int node_s(int r, int idx);
    int rem;
    rem = idx;
    for (int ss = -r; ss <= r; ss++) begin
      if (rem < row_len(r, ss)) return ss;
      rem -= row_len(r, ss);
    end
    return r;
  endfunction

  function automatic int node_q(int r, int idx);
    int s;
    s = node_s(r, idx);
    return row_qmin(r, s) + idx - node_index(r, row_qmin(r, s), s);
  endfunction

  // Ring order of a folded line of k chiplets: 0, 2, 4, ..., then the odd positions
  // downwards back to 1.
  function automatic int ring_next(int i, int k);
    if (i % 2 == 0) begin
      if (i + 2 < k) return i + 2;
      return (i + 1 < k) ? i + 1 : i - 1;
    end
    return (i >= 3) ? i - 2 : 0;
  endfunction

  function automatic int ring_prev(int i, int k);
    if (i % 2 == 0) return (i == 0) ? 1 : i - 2;
    if (i + 2 < k) return i + 2;
    return (i + 1 < k) ? i + 1 : i - 1;
  endfunction

  // Index of the chiplet at the far end of port dir (0..5) of chiplet idx.
  function automatic int neighbor(int r, int idx, int dir);
    int q, s, t, lo, hi, i, j, k;
    q = node_q(r, idx);
    s = node_s(r, idx);
    t = q + s;
    case (dir / 2)
      0: begin lo = row_qmin(r, s); hi = imin(r, r - s); i = q - lo; end
      1: begin lo = imax(-r, -r - q); hi = imin(r, r - q); i = s - lo; end
      default: begin lo = imax(-r, t - r); hi = imin(r, t + r); i = q - lo; end
    endcase
    k = hi - lo + 1;
    j = (dir % 2 == 0) ? ring_next(i, k) : ring_prev(i, k);
    case (dir / 2)
      0:       return node_index(r, lo + j, s);
      1:       return node_index(r, q, lo + j);
      default: return node_index(r, lo + j, t - (lo + j));
    endcase
  endfunction

  // Wire flight time in 1 ns cycles, L * sqrt(eps_r) / c rounded up. sqrt_er_milli is
  // sqrt(eps_r) times 1000; c = 299.792 um/ps.
  function automatic int wire_cycles(int len_um, int sqrt_er_milli);
    longint ps;
    ps = (longint'(len_um) * sqrt_er_milli + 299791) / 299792;
    return int'((ps + 999) / 1000);
  endfunction

endpackage
