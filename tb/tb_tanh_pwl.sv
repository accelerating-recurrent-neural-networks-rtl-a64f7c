// tb_tanh_pwl: checks the piecewise-linear tanh against the reference and
// against the true tanh.
//
// Drives one input per cycle and compares each output, two cycles later,
// with tanh_ref from tb_ref_pkg (bit exact). Separately requires the
// approximation to stay within 0.025 of $tanh, to be odd, and to saturate.
module tb_tanh_pwl;
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
  tanh_pwl dut (.clk, .x, .y);

  int xs[$];

  initial begin
    for (int k = -5000; k <= 5000; k += 7) xs.push_back(k <<< 10);   // -4.9 .. 4.9
    for (int n = 0; n < 2000; n++) xs.push_back(int'($urandom) >>> ($urandom % 12));
    xs.push_back(32'h7fffffff);
    xs.push_back(32'h80000000);
    xs.push_back(32'h80000001);
    for (int n = 0; n < xs.size() + 1; n++) begin
      if (n < xs.size()) x <= acc_t'(xs[n]);
      @(posedge clk);
      #1;
      if (n >= 1) begin
        int e;
        real xr;
        e  = tanh_ref(xs[n-1]);
        xr = real'(xs[n-1]) / 1048576.0;
        checks++;
        if (int'(y) != e) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d y=%0d exp=%0d", xs[n-1], y, e);
        end
        checks++;
        if ((real'(y) / 1024.0 - $tanh(xr)) > 0.025 || ($tanh(xr) - real'(y) / 1024.0) > 0.025) begin
          failures++;
          if (failures < 10) $display("FAIL accuracy x=%f y=%0d", xr, y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
