// tb_repeat_vector: every accepted vector must come out exactly TS times.
//
// Sends random vectors with random input gaps and a randomly stalling
// consumer (out_ready), and checks that the output stream is each input
// repeated TS = 5 times, in order, that inputs are refused while copies are
// still pending, and that a new vector can be accepted in the cycle the last
// copy is taken (no bubble).
module tb_repeat_vector;
  import lstm_pkg::*;
  localparam int N = 3, TS = 5, NV = 60;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef data_t [N-1:0] vec_t;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  vec_t din, dout;
  vec_t sent[$];
  int   n_out = 0, n_sent = 0, n_nobubble = 0;
  bit   free_run = 1'b0;

  repeat_vector #(.N(N), .TS(TS)) dut (.clk, .rst_n, .in_valid, .in_ready, .din, .out_valid, .out_ready, .dout);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    #1;
    while (n_out < NV * TS) begin
      bit in_fire, out_fire;
      if (!in_valid && n_sent < NV && ($urandom % 2 == 0 || free_run)) begin
        in_valid = 1'b1;
        for (int k = 0; k < N; k++) din[k] = data_t'($urandom);
      end
      out_ready = free_run || ($urandom % 4 != 0);
      #1;  // let the combinational ready settle
      in_fire  = in_valid && in_ready;
      out_fire = out_valid && out_ready;
      if (out_fire) begin
        checks++;
        if (dout != sent[n_out / TS]) begin failures++; $display("FAIL copy %0d sent=%0d left=%0d", n_out, n_sent, dut.left); end
        n_out++;
        if (in_fire) n_nobubble++;
      end
      if (in_fire) begin
        sent.push_back(din);
        n_sent++;
      end
      @(posedge clk);
      #1;
      if (in_fire) in_valid = 1'b0;
      if (n_sent == NV / 2) free_run = 1'b1;
    end
    checks++;
    if (n_nobubble == 0) begin failures++; $display("FAIL no back-to-back handover"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // refuse input while copies are pending unless the last one is leaving
  always @(posedge clk) if (rst_n && in_ready && out_valid && !(out_ready && dut.left == 1)) begin
    failures++;
    $display("FAIL accepted while busy");
  end
endmodule
