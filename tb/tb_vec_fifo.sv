// tb_vec_fifo: random push/pop traffic against a queue model.
//
// A 40-bit, depth-3 FIFO gets random pushes (only when not full) and pops
// (only when not empty), including simultaneous push and pop. After every
// clock edge the occupancy and the head entry must match a SystemVerilog
// queue holding what was pushed and not yet popped.
module tb_vec_fifo;
  localparam int W = 40, DEPTH = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic         push = 1'b0, pop = 1'b0;
  logic [W-1:0] din, dout;
  logic [1:0]   count;
  logic [W-1:0] model[$];
  int           n_full = 0, n_both = 0;

  vec_fifo #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .count);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    #1;
    for (int n = 0; n < 3000; n++) begin
      push = ($urandom % 2 == 0) && (model.size() < DEPTH || pop);
      pop  = ($urandom % 3 != 0) && (model.size() > 0);
      if (push && model.size() == DEPTH && !pop) push = 1'b0;
      din  = {$urandom, 8'($urandom)};
      if (push && pop) n_both++;
      if (model.size() == DEPTH) n_full++;
      @(posedge clk);
      #1;
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(din);
      checks++;
      if (int'(count) != model.size()) begin failures++; $display("FAIL count %0d exp %0d", count, model.size()); end
      if (model.size() > 0) begin
        checks++;
        if (dout != model[0]) begin failures++; $display("FAIL head %h exp %h", dout, model[0]); end
      end
    end
    checks++;
    if (n_full == 0 || n_both == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
