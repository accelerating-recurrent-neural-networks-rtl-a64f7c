// tb_lstm_tail: element-wise LSTM tail with LH = 4.
//
// Random activated gates (i, f, o in [0, 1], g in [-1, 1]) and random 32-bit
// cell states are offered with random gaps. For each input the expected c_t
// and h_t are computed with tb_ref_pkg::cell_ref-style arithmetic; c_t must
// appear 2 cycles and h_t LT_tail = 5 cycles after the input.
module tb_lstm_tail;
  import lstm_pkg::*;
  import tb_ref_pkg::*;

  localparam int LH = 4;
  localparam int LT_C = 2;
  localparam int LT_TAIL = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic             in_valid = 1'b0, c_valid, out_valid;
  data_t [4*LH-1:0] gates;
  acc_t  [LH-1:0]   c_prev, c_new;
  data_t [LH-1:0]   h;

  lstm_tail #(.LH(LH)) dut (.clk, .rst_n, .in_valid, .gates, .c_prev, .c_valid, .c_new, .out_valid, .h);

  typedef acc_t  [LH-1:0] cvec_t;
  typedef data_t [LH-1:0] hvec_t;
  cvec_t qc[$];
  hvec_t qh[$];
  int    qtc[$], qth[$];
  cvec_t exp_c, got_c;
  hvec_t exp_h, got_h;
  int    t0;
  int    n_c = 0, n_h = 0;
  localparam int N = 400;

  initial forever begin
    @(posedge clk);
    #1;
    if (rst_n && c_valid) begin
      n_c++;
      got_c = qc.pop_front();
      t0 = qtc.pop_front();
      checks++;
      if (cycle - t0 != LT_C) begin failures++; $display("FAIL c latency %0d", cycle - t0); end
      for (int j = 0; j < LH; j++) begin
        checks++;
        if (int'(c_new[j]) != int'(got_c[j])) begin
          failures++;
          $display("FAIL c[%0d] %0d exp %0d", j, int'(c_new[j]), int'(got_c[j]));
        end
      end
    end
    if (rst_n && out_valid) begin
      n_h++;
      got_h = qh.pop_front();
      t0 = qth.pop_front();
      checks++;
      if (cycle - t0 != LT_TAIL) begin failures++; $display("FAIL h latency %0d", cycle - t0); end
      for (int j = 0; j < LH; j++) begin
        checks++;
        if (int'(h[j]) != int'(got_h[j])) begin
          failures++;
          $display("FAIL h[%0d] %0d exp %0d", j, int'(h[j]), int'(got_h[j]));
        end
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    #1;
    for (int n = 0; n < N; n++) begin
      for (int j = 0; j < LH; j++) begin
        int gi, gf, gg, go, c0, fc, cn;
        gi = $urandom % 1025;
        gf = $urandom % 1025;
        gg = int'($urandom % 2049) - 1024;
        go = $urandom % 1025;
        c0 = int'($urandom) >>> ($urandom % 12 + 8);
        gates[int'(GATE_I)*LH+j] = data_t'(gi);
        gates[int'(GATE_F)*LH+j] = data_t'(gf);
        gates[int'(GATE_G)*LH+j] = data_t'(gg);
        gates[int'(GATE_O)*LH+j] = data_t'(go);
        c_prev[j] = acc_t'(c0);
        fc = int'((longint'(gf) * longint'(c0)) >>> 10);
        cn = fc + gi * gg;
        exp_c[j] = acc_t'(cn);
        exp_h[j] = data_t'(sat16((longint'(go) * longint'(tanh_ref(cn))) >>> 10));
      end
      in_valid = 1'b1;
      qc.push_back(exp_c);
      qh.push_back(exp_h);
      qtc.push_back(cycle);
      qth.push_back(cycle);
      @(posedge clk);
      #1;
      in_valid = 1'b0;
      repeat ($urandom % 3) begin
        @(posedge clk);
        #1;
      end
    end
    repeat (8) @(posedge clk);
    #2;
    checks++;
    if (n_c != N || n_h != N) begin failures++; $display("FAIL counts %0d %0d", n_c, n_h); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
