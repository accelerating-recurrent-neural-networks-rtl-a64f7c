// tb_td_dense: dense layer on a stream, N_IN = 6, N_OUT = 3, reuse factor 2.
//
// Loads random weights and biases through the cfg port, streams random
// vectors with a randomly stalling consumer, and compares every output with
// sat16((b + W*v) >>> 10) from tb_ref_pkg. With the consumer always ready the
// result must appear R + 1 cycles after the input is accepted.
module tb_td_dense;
  import lstm_pkg::*;
  import tb_ref_pkg::*;
  localparam int NI = 6, NO = 3, R = 2, NV = 200;

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

  logic              in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  data_t [NI-1:0]    din;
  data_t [NO-1:0]    dout;
  logic              cfg_we = 1'b0;
  logic [15:0]       cfg_addr;
  logic [31:0]       cfg_data;

  td_dense #(.N_IN(NI), .N_OUT(NO), .R(R)) dut (.clk, .rst_n, .in_valid, .in_ready, .din, .out_valid, .out_ready, .dout,
                                                .cfg_we, .cfg_addr, .cfg_data);

  int w[], b[], v[];
  int exp_q[$];
  int t_in[$];
  int n_out = 0;

  initial begin
    w = new[NO * NI];
    b = new[NO];
    v = new[NI];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    #1;
    foreach (w[k]) w[k] = int'($urandom % 4096) - 2048;
    foreach (b[k]) b[k] = int'($urandom) >>> 8;
    for (int a = 0; a < NO * NI + NO; a++) begin
      cfg_we   = 1'b1;
      cfg_addr = 16'(a);
      cfg_data = (a < NO * NI) ? 32'(w[a]) : 32'(b[a - NO * NI]);
      @(posedge clk);
      #1;
    end
    cfg_we = 1'b0;
    while (n_out < NV) begin
      if (!in_valid && t_in.size() < NV && ($urandom % 2 == 0)) begin
        in_valid = 1'b1;
        for (int k = 0; k < NI; k++) begin
          v[k] = int'($urandom % 8192) - 4096;
          din[k] = data_t'(v[k]);
        end
      end
      out_ready = (n_out < NV / 2) ? ($urandom % 3 != 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        int t0;
        t0 = t_in.pop_front();
        for (int o = 0; o < NO; o++) begin
          checks++;
          if (int'(dout[o]) != exp_q[0]) begin failures++; $display("FAIL out %0d y[%0d]=%0d exp %0d", n_out, o, int'(dout[o]), exp_q[0]); end
          void'(exp_q.pop_front());
        end
        if (n_out >= NV / 2) begin
          checks++;
          if (cycle - t0 != R + 1) begin failures++; $display("FAIL latency %0d", cycle - t0); end
        end
        n_out++;
      end
      if (in_valid && in_ready) begin
        for (int o = 0; o < NO; o++) exp_q.push_back(dense_ref(NI, o, w, b, v, 0));
        t_in.push_back(cycle);
      end
      @(posedge clk);
      #1;
      if (in_valid && t_in.size() > 0 && cycle - 1 == t_in[t_in.size() - 1]) in_valid = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
