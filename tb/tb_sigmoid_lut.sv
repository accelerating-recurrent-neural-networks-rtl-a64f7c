// tb_sigmoid_lut: sweeps the sigmoid table over and beyond its input range.
//
// Inputs are driven every cycle (the unit is fully pipelined); each output
// must equal the reference from tb_ref_pkg (the same table recomputed with
// $exp) two register stages later (visible after the second clock edge). Also checks that the table is within 1/1024
// of the true sigmoid of the table point and that it saturates outside +-8.
module tb_sigmoid_lut;
  import lstm_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  acc_t  x;
  data_t y;
  sigmoid_lut dut (.clk, .x, .y);

  int xs[$];

  initial begin
    // the whole table range in steps of one entry, plus random and extreme values
    for (int k = -600; k < 600; k++) xs.push_back(k <<< 14);
    for (int n = 0; n < 2000; n++) xs.push_back(int'($urandom));
    xs.push_back(32'h7fffffff);
    xs.push_back(32'h80000000);
    for (int n = 0; n < xs.size() + 1; n++) begin
      if (n < xs.size()) x <= acc_t'(xs[n]);
      @(posedge clk);
      #1;
      if (n >= 1) begin
        int e;
        e = sig_ref(xs[n-1]);
        checks++;
        if (int'(y) != e) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d y=%0d exp=%0d", xs[n-1], y, e);
        end
      end
    end
    // accuracy of the table points and saturation
    for (int k = -512; k < 512; k++) begin
      real t;
      t = 1.0 / (1.0 + $exp(-real'(k) / 64.0));
      checks++;
      if ((real'(sig_ref(k <<< 14)) / 1024.0 - t) > 1.0 / 1024.0 || (t - real'(sig_ref(k <<< 14)) / 1024.0) > 1.0 / 1024.0) failures++;
    end
    checks++;
    if (sig_ref(32'h7fffffff) != 1024 || sig_ref(32'h80000000) != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
