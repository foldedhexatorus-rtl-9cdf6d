// tb_fht_vc_fifo: self-checking test of one virtual-channel buffer.
//
// Random pushes and pops (pops only when not empty, pushes only when not full, as credit
// flow control guarantees) are compared each cycle with a reference queue: front data,
// not_empty and full. A directed phase fills the buffer to exactly four flits, the
// paper's buffer depth, checks full, then drains it in order.
module tb_fht_vc_fifo;
  import fht_pkg::*;

  localparam int DEPTH = 4;

  logic  clk = 1'b0;
  logic  rst_ni = 1'b0;
  logic  push, pop;
  flit_t wr, rd;
  logic  not_empty, full;
  int    checks = 0, failures = 0;
  flit_t model [$];

  fht_vc_fifo #(.DEPTH(DEPTH), .T(flit_t)) dut (
    .clk_i(clk), .rst_ni, .push_i(push), .wr_data_i(wr), .pop_i(pop),
    .rd_data_o(rd), .not_empty_o(not_empty), .full_o(full)
  );

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_state();
    checks++;
    if (not_empty !== (model.size() != 0) || full !== (model.size() == DEPTH)) begin
      failures++;
      $display("state mismatch: size=%0d not_empty=%0b full=%0b", model.size(), not_empty, full);
    end
    if (model.size() != 0) begin
      checks++;
      if (rd !== model[0]) begin
        failures++;
        $display("data mismatch: got %h expected %h", rd, model[0]);
      end
    end
  endtask

  function automatic flit_t rand_flit();
    flit_t f;
    f = flit_t'({$urandom, $urandom, $urandom});
    return f;
  endfunction

  initial begin
    push = 0; pop = 0; wr = '0;
    repeat (3) @(posedge clk);
    rst_ni = 1'b1;
    @(negedge clk);
    check_state();
    // directed: fill to DEPTH
    for (int i = 0; i < DEPTH; i++) begin
      push = 1; wr = rand_flit();
      @(posedge clk); model.push_back(wr);
      @(negedge clk); push = 0;
      check_state();
    end
    checks++;
    if (!full) begin failures++; $display("not full after %0d pushes", DEPTH); end
    // drain
    while (model.size() != 0) begin
      pop = 1;
      @(posedge clk); void'(model.pop_front());
      @(negedge clk); pop = 0;
      check_state();
    end
    // random
    for (int cyc = 0; cyc < 3000; cyc++) begin
      push = (model.size() < DEPTH || ($urandom % 2 == 0 && model.size() != 0)) && ($urandom % 3 != 0);
      pop  = (model.size() != 0) && ($urandom % 2 == 0);
      if (model.size() == DEPTH && !pop) push = 0;
      wr   = rand_flit();
      @(posedge clk);
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(wr);
      @(negedge clk);
      push = 0; pop = 0;
      check_state();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
