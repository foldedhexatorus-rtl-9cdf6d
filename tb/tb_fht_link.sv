// tb_fht_link: self-checking test of the D2D link latency model.
//
// Random flits and credits are driven into two links: one of the default length and one
// 200 mm long. The expected delays are worked out by hand from the paper's numbers:
// 2 ns per PHY, two PHYs per link, and L*sqrt(3.1)/c rounded up to whole 1 ns cycles,
// which is 1 cycle for 17.5 mm (0.10 ns) and 2 cycles for 200 mm (1.17 ns). Each output
// is compared with the input of exactly that many cycles before.
module tb_fht_link;
  import fht_pkg::*;

  localparam int LAT_A = 5;   // 2 + 2 + 1
  localparam int LAT_B = 6;   // 2 + 2 + 2

  logic clk = 1'b0;
  logic rst_ni = 1'b0;
  link_flit_t   fin, fout_a, fout_b;
  link_credit_t cin, cout_a, cout_b;
  link_flit_t   fhist [64];
  link_credit_t chist [64];
  int checks = 0, failures = 0;

  fht_link dut_a (.clk_i(clk), .rst_ni, .in_flit_i(fin), .out_flit_o(fout_a),
                  .in_credit_i(cin), .out_credit_o(cout_a));
  fht_link #(.LINK_LEN_UM(200000)) dut_b (.clk_i(clk), .rst_ni, .in_flit_i(fin),
                  .out_flit_o(fout_b), .in_credit_i(cin), .out_credit_o(cout_b));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fin = '0; cin = '0;
    for (int i = 0; i < 64; i++) begin fhist[i] = '0; chist[i] = '0; end
    repeat (2) @(posedge clk);
    rst_ni = 1'b1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      // outputs now reflect inputs driven LAT cycles ago
      if (cyc >= 8) begin
        checks += 4;
        if (fout_a !== fhist[(cyc - LAT_A) % 64]) begin failures++; $display("flit A cyc %0d", cyc); end
        if (cout_a !== chist[(cyc - LAT_A) % 64]) begin failures++; $display("credit A cyc %0d", cyc); end
        if (fout_b !== fhist[(cyc - LAT_B) % 64]) begin failures++; $display("flit B cyc %0d", cyc); end
        if (cout_b !== chist[(cyc - LAT_B) % 64]) begin failures++; $display("credit B cyc %0d", cyc); end
      end
      fin = link_flit_t'({$urandom, $urandom, $urandom});
      cin = link_credit_t'($urandom);
      fhist[cyc % 64] = fin;
      chist[cyc % 64] = cin;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
