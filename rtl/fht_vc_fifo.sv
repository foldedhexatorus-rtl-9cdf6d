// fht_vc_fifo: one virtual-channel input buffer of a router.
//
// A first-in first-out buffer of DEPTH flits, written with push and read from the front
// (rd_data is valid while not_empty) and advanced with pop. Push and pop may happen in the
// same cycle. Credit flow control upstream guarantees that no flit arrives when the
// buffer is full; an assertion checks this, and an assertion checks that an empty buffer
// is never popped. The paper gives the size, four flits per virtual channel; the circular
// buffer with read and write pointers is this design's own choice. Reset empties the
// buffer (asynchronous, active low).
// The Verilator linter reports rst_ni as both an asynchronous and a synchronous net (SYNCASYNCNET):
// the synchronous use is only the disable iff (!rst_ni) of the assertions; the flops
// themselves reset asynchronously only.
module fht_vc_fifo #(
  parameter int unsigned DEPTH = 4,
  parameter type         T     = fht_pkg::flit_t
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic push_i,
  input  T     wr_data_i,
  input  logic pop_i,
  output T     rd_data_o,
  output logic not_empty_o,
  output logic full_o
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [PW-1:0]   rd_ptr, wr_ptr;
  logic [PW:0]     count;

  assign rd_data_o   = mem[rd_ptr];
  assign not_empty_o = (count != 0);
  assign full_o      = (count == (PW+1)'(DEPTH));

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push_i) wr_ptr <= incr(wr_ptr);
      if (pop_i)  rd_ptr <= incr(rd_ptr);
      count <= count + (PW+1)'(push_i) - (PW+1)'(pop_i);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push_i) mem[wr_ptr] <= wr_data_i;
  end

  a_no_overflow:  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i |-> (!full_o || pop_i));
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> not_empty_o);

endmodule
