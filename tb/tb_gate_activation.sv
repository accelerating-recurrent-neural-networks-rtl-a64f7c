// tb_gate_activation: adder + sigmoid/tanh stage with LH = 3.
//
// Random pre-activation pairs (gx, gh) are offered with random gaps, also
// back to back. For every in_valid the expected gate vector is computed with
// tb_ref_pkg (sigmoid for rows of gates i, f, o; tanh for gate g) and queued
// together with the cycle number; each out_valid must match the queue head
// and arrive exactly LT_sigma = 3 cycles after its input.
module tb_gate_activation;
  import lstm_pkg::*;
  import tb_ref_pkg::*;

  localparam int LH = 3;
  localparam int LT_SIGMA = 3;

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

  logic                in_valid = 1'b0, out_valid;
  acc_t  [4*LH-1:0]    gx, gh;
  data_t [4*LH-1:0]    gates;

  gate_activation #(.LH(LH)) dut (.clk, .rst_n, .in_valid, .gx, .gh, .out_valid, .gates);

  typedef data_t [4*LH-1:0] gvec_t;
  gvec_t q[$];
  int    qt[$];
  gvec_t got_e, drv_e;
  int    got_t0;
  int n_out = 0;

  // pre-activations spread over about +-10 so both saturated and linear parts are hit
  function automatic acc_t rnd_pre();
    return acc_t'(int'($urandom) >>> (7 + $urandom % 4));
  endfunction

  // outputs are sampled just after each clock edge, when all flops have settled
  initial forever begin
    @(posedge clk);
    #1;
    if (rst_n && out_valid) begin
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        got_e  = q.pop_front();
        got_t0 = qt.pop_front();
        if (cycle - got_t0 != LT_SIGMA) begin failures++; $display("FAIL latency %0d", cycle - got_t0); end
        for (int r = 0; r < 4 * LH; r++) begin
          checks++;
          if (int'(gates[r]) != int'(got_e[r])) begin
            failures++;
            $display("FAIL row %0d got %0d exp %0d", r, int'(gates[r]), int'(got_e[r]));
          end
        end
      end
      n_out++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    // inputs change 1 time unit after a clock edge, with blocking assignments
    @(posedge clk);
    #1;
    for (int n = 0; n < 300; n++) begin
      for (int r = 0; r < 4 * LH; r++) begin
        gx[r] = rnd_pre();
        gh[r] = rnd_pre();
      end
      in_valid = 1'b1;
      qt.push_back(cycle);
      for (int r = 0; r < 4 * LH; r++) begin
        int p;
        p = int'(gx[r]) + int'(gh[r]);
        drv_e[r] = data_t'((r / LH == int'(GATE_G)) ? tanh_ref(p) : sig_ref(p));
      end
      q.push_back(drv_e);
      @(posedge clk);
      #1;
      in_valid = 1'b0;
      repeat ($urandom % 3) begin
        @(posedge clk);
        #1;
      end
    end
    repeat (6) @(posedge clk);
    checks++;
    if (n_out != 300 || q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
