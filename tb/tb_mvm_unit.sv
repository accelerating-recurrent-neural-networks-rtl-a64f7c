// tb_mvm_unit: checks mvm_unit results and latency for three reuse factors.
//
// Three instances (R = 1 fully parallel, R = 3 with a padded last pass, and
// R = 9 with fewer inputs than passes, as for an input MVM of a 2-wide input)
// get random weights, biases and vectors. Each result is compared with
// bias + W*v computed here in 32-bit wrapping arithmetic, and `done` must
// come exactly R cycles after `start` (LT_mvm = LT_mult + R - 1, LT_mult = 1).
// Starts are issued back to back, so the initiation interval R is checked too.
module tb_mvm_unit;
  import lstm_pkg::*;

  localparam int NO = 6;
  localparam int NA = 5, RA = 1;
  localparam int NB = 7, RB = 3;
  localparam int NC = 2, RC = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // one generic driver per instance, written out with a macro-free task
  data_t w_a [NO][NA]; data_t [NA-1:0] v_a; acc_t [NO-1:0] b_a, y_a; logic st_a, busy_a, done_a;
  data_t w_b [NO][NB]; data_t [NB-1:0] v_b; acc_t [NO-1:0] b_b, y_b; logic st_b, busy_b, done_b;
  data_t w_c [NO][NC]; data_t [NC-1:0] v_c; acc_t [NO-1:0] b_c, y_c; logic st_c, busy_c, done_c;

  mvm_unit #(.N_IN(NA), .N_OUT(NO), .R(RA)) u_a (.clk, .rst_n, .start(st_a), .v(v_a), .w(w_a), .bias(b_a), .busy(busy_a), .done(done_a), .y(y_a));
  mvm_unit #(.N_IN(NB), .N_OUT(NO), .R(RB)) u_b (.clk, .rst_n, .start(st_b), .v(v_b), .w(w_b), .bias(b_b), .busy(busy_b), .done(done_b), .y(y_b));
  mvm_unit #(.N_IN(NC), .N_OUT(NO), .R(RC)) u_c (.clk, .rst_n, .start(st_c), .v(v_c), .w(w_c), .bias(b_c), .busy(busy_c), .done(done_c), .y(y_c));

  function automatic data_t rnd16();
    return data_t'($urandom);
  endfunction

  initial begin
    st_a = 0; st_b = 0; st_c = 0;
    foreach (w_a[o, k]) w_a[o][k] = rnd16();
    foreach (w_b[o, k]) w_b[o][k] = rnd16();
    foreach (w_c[o, k]) w_c[o][k] = rnd16();
    for (int o = 0; o < NO; o++) begin b_a[o] = acc_t'($urandom); b_b[o] = acc_t'($urandom); b_c[o] = acc_t'($urandom); end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    fork
      // instance A
      for (int n = 0; n < 12; n++) begin
        int exp_y [NO];
        int lat;
        for (int k = 0; k < NA; k++) v_a[k] = rnd16();
        for (int o = 0; o < NO; o++) begin
          exp_y[o] = int'(b_a[o]);
          for (int k = 0; k < NA; k++) exp_y[o] += int'(w_a[o][k]) * int'(v_a[k]);
        end
        st_a <= 1'b1; @(posedge clk); st_a <= 1'b0;
        lat = 1;
        while (!done_a) begin @(posedge clk); lat++; end
        lat--;
        check(lat == RA, $sformatf("A latency %0d", lat));
        for (int o = 0; o < NO; o++) check(int'(y_a[o]) == exp_y[o], $sformatf("A y[%0d] %0d exp %0d", o, y_a[o], exp_y[o]));
      end
      // instance B, next start in the done cycle (II = R)
      for (int n = 0; n < 12; n++) begin
        int exp_y [NO];
        int lat;
        for (int k = 0; k < NB; k++) v_b[k] = rnd16();
        for (int o = 0; o < NO; o++) begin
          exp_y[o] = int'(b_b[o]);
          for (int k = 0; k < NB; k++) exp_y[o] += int'(w_b[o][k]) * int'(v_b[k]);
        end
        st_b <= 1'b1; @(posedge clk); st_b <= 1'b0;
        lat = 1;
        while (!done_b) begin @(posedge clk); lat++; end
        lat--;
        check(lat == RB, $sformatf("B latency %0d", lat));
        for (int o = 0; o < NO; o++) check(int'(y_b[o]) == exp_y[o], $sformatf("B y[%0d] %0d exp %0d", o, y_b[o], exp_y[o]));
      end
      // instance C
      for (int n = 0; n < 8; n++) begin
        int exp_y [NO];
        int lat;
        for (int k = 0; k < NC; k++) v_c[k] = rnd16();
        for (int o = 0; o < NO; o++) begin
          exp_y[o] = int'(b_c[o]);
          for (int k = 0; k < NC; k++) exp_y[o] += int'(w_c[o][k]) * int'(v_c[k]);
        end
        st_c <= 1'b1; @(posedge clk); st_c <= 1'b0;
        lat = 1;
        while (!done_c) begin @(posedge clk); lat++; end
        lat--;
        check(lat == RC, $sformatf("C latency %0d", lat));
        check(!busy_c, "C idle at done");
        for (int o = 0; o < NO; o++) check(int'(y_c[o]) == exp_y[o], $sformatf("C y[%0d] %0d exp %0d", o, y_c[o], exp_y[o]));
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
