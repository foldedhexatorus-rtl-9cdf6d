// fht_rr_arbiter: round-robin arbiter used by the router's switch allocator.
//
// Grants one of N requests per cycle (gnt_o is one-hot or zero, combinational). The
// requests above the last granted position are served first, lowest index first; if there
// are none, the lowest request overall wins. So every persistent requester is served
// within N grants. The last grant is stored one-hot and moves on the clock edge when
// advance_i is set; it resets to requester N-1, so requester 0 has priority first. The
// paper does not describe the allocator; round-robin is this design's own choice.
module fht_rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [N-1:0] req_i,
  input  logic         advance_i,
  output logic [N-1:0] gnt_o
);

  logic [N-1:0] last_oh;
  logic [N-1:0] above;
  logic [N-1:0] masked;

  always_comb begin
    above  = ~((last_oh << 1) - N'(1));   // positions strictly above the last grant
    masked = req_i & above;
    gnt_o  = (masked != '0) ? (masked & (~masked + N'(1))) : (req_i & (~req_i + N'(1)));
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                       last_oh <= {1'b1, {(N-1){1'b0}}};
    else if (advance_i && gnt_o != '0) last_oh <= gnt_o;
  end

endmodule
