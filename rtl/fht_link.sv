// fht_link: cycle-level model of one direction of a die-to-die link of the
// FoldedHexaTorus, together with its reverse credit channel.
//
// A flit entering on in_flit_i leaves on out_flit_o LAT cycles later, and a credit
// entering on in_credit_i leaves on out_credit_o LAT cycles later, where
// LAT = 2*PHY_LAT + wire_cycles(LINK_LEN_UM). A link passes a transmit PHY, the substrate
// wire and a receive PHY. The paper gives the PHY latency (2 ns) and the wire delay
// L*sqrt(eps_r)/c rounded up to whole 1 ns cycles, with eps_r = 3.1 on organic and 3.3 on
// glass substrates. Counting the PHY latency once at each end is this design's reading.
// So is the default length: twice the side of a 74 mm^2 chiplet plus two 150 um gaps,
// an upper bound for a link-range-one link, which still needs only one cycle of flight.
// The analog PHY itself is not modelled, only its delay. Both channels are plain shift
// registers that reset to empty; a link accepts one flit and one credit per cycle.
module fht_link #(
  parameter int unsigned PHY_LAT       = 2,
  parameter int unsigned LINK_LEN_UM   = 17504,
  parameter int unsigned SQRT_ER_MILLI = 1761   // sqrt(3.1), organic substrate
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  fht_pkg::link_flit_t   in_flit_i,
  output fht_pkg::link_flit_t   out_flit_o,
  input  fht_pkg::link_credit_t in_credit_i,
  output fht_pkg::link_credit_t out_credit_o
);

  localparam int unsigned LAT = 2 * PHY_LAT + fht_pkg::wire_cycles(LINK_LEN_UM, SQRT_ER_MILLI);

  fht_pkg::link_flit_t   fpipe [LAT];
  fht_pkg::link_credit_t cpipe [LAT];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < LAT; i++) begin
        fpipe[i] <= '0;
        cpipe[i] <= '0;
      end
    end else begin
      fpipe[0] <= in_flit_i;
      cpipe[0] <= in_credit_i;
      for (int i = 1; i < LAT; i++) begin
        fpipe[i] <= fpipe[i-1];
        cpipe[i] <= cpipe[i-1];
      end
    end
  end

  assign out_flit_o   = fpipe[LAT-1];
  assign out_credit_o = cpipe[LAT-1];

endmodule
