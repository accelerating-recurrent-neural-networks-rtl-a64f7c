// tb_lstm_layer: one LSTM layer against a bit-exact reference, with timing.
//
// Two layers with LX = 3, LH = 4, TS = 5 are tested side by side:
//   u = 0: RH = 2, RX = 10, LT_EXTRA = 2 (two extra loop stages, so
//          ii = RH + 8 + 2 = 12), every h_t returned;
//   u = 1: RH = 1, RX = 4, LT_EXTRA = 0 (ii = RH + 8 = 9, input MVM faster
//          than the loop), last h only.
// Each gets random weights through its cfg port and NSEQ random sequences,
// offered as fast as the layer accepts them. Every output is compared with
// tb_ref_pkg::lstm_ref. Timing, while the consumer is always ready:
//   * consecutive outputs of layer 0 are exactly ii cycles apart,
//     also across sequence boundaries (no gap between sequences);
//   * outputs of layer 1 are ii * TS = 45 cycles apart (the layer's initiation interval);
//   * the first output of layer 0 comes RX + ii + 2 cycles after the cycle
//     in which the first input is offered and accepted (the sampling edge, mvm_x,
//     one loop iteration, output FIFO).
// Afterwards the consumer stalls at random: the layer must report stalls
// (ev_stall) and still produce correct data.
module tb_lstm_layer;
  import lstm_pkg::*;
  import tb_ref_pkg::*;

  localparam int LX = 3, LH = 4, TS = 5, NSEQ = 8, NFAST = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;
  int done_units = 0;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wait (done_units == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar u = 0; u < 2; u++) begin : g_u
    localparam int RH = (u == 0) ? 2 : 1;
    localparam int RX = (u == 0) ? 10 : 4;
    localparam int LTE = (u == 0) ? 2 : 0;
    localparam bit RSEQ = (u == 0);
    localparam int II = RH + 8 + LTE;

    logic           x_valid = 1'b0, x_ready, h_valid, h_ready = 1'b0;
    data_t [LX-1:0] x;
    data_t [LH-1:0] h_out;
    logic           cfg_we = 1'b0;
    logic [15:0]    cfg_addr;
    logic [31:0]    cfg_data;
    logic           ev_launch, ev_stall, seq_done;

    lstm_layer #(.LX(LX), .LH(LH), .TS(TS), .RX(RX), .RH(RH), .LT_EXTRA(LTE), .RETURN_SEQ(RSEQ)) dut (
      .clk, .rst_n, .x_valid, .x_ready, .x, .h_valid, .h_ready, .h_out,
      .cfg_we, .cfg_addr, .cfg_data, .ev_launch, .ev_stall, .seq_done);

    int wx[], wh[], b[], xs[], hs[];
    int exp_h[$];        // expected outputs, LH values each
    int n_stall = 0, n_out = 0, n_exp_out = 0, t_first_in = -1, t_last_out = -1;
    bit stalling = 1'b0;

    always @(posedge clk) if (rst_n && ev_stall) n_stall <= n_stall + 1;

    // producer: load weights, then stream all sequences
    initial begin
      wx = new[4 * LH * LX];
      wh = new[4 * LH * LH];
      b  = new[4 * LH];
      foreach (wx[k]) wx[k] = int'($urandom % 1024) - 512;
      foreach (wh[k]) wh[k] = int'($urandom % 1024) - 512;
      foreach (b[k])  b[k]  = int'($urandom % 1048576) - 524288;
      wait (rst_n);
      @(posedge clk);
      #1;
      for (int a = 0; a < 4 * LH * (LX + LH + 1); a++) begin
        cfg_we   = 1'b1;
        cfg_addr = 16'(a);
        cfg_data = (a < 4 * LH * LX) ? 32'(wx[a]) :
                   (a < 4 * LH * (LX + LH)) ? 32'(wh[a - 4 * LH * LX]) : 32'(b[a - 4 * LH * (LX + LH)]);
        @(posedge clk);
        #1;
      end
      cfg_we = 1'b0;
      for (int s = 0; s < NSEQ; s++) begin
        xs = new[TS * LX];
        foreach (xs[k]) xs[k] = int'($urandom % 2048) - 1024;
        lstm_ref(LX, LH, TS, wx, wh, b, xs, hs);
        for (int t = 0; t < TS; t++) begin
          if (RSEQ || t == TS - 1) begin
            for (int j = 0; j < LH; j++) exp_h.push_back(hs[t * LH + j]);
            n_exp_out++;
          end
        end
        for (int t = 0; t < TS; t++) begin
          x_valid = 1'b1;
          for (int k = 0; k < LX; k++) x[k] = data_t'(xs[t * LX + k]);
          #1;
          while (!x_ready) begin
            @(posedge clk);
            #2;
          end
          if (t_first_in < 0) t_first_in = cycle;
          @(posedge clk);
          #1;
          x_valid = 1'b0;
        end
      end
    end

    // consumer and checker
    initial begin
      logic bad;
      wait (rst_n);
      forever begin
        @(posedge clk);
        #1;
        h_ready = !stalling || ($urandom % (RSEQ ? 80 : 300) == 0);
        #1;
        if (h_valid && h_ready) begin
          checks++;
          bad = 1'b0;
          for (int j = 0; j < LH; j++) begin
            int e;
            e = exp_h.pop_front();
            if (int'(h_out[j]) != e) begin
              bad = 1'b1;
              $display("FAIL u%0d out %0d h[%0d]=%0d exp %0d", u, n_out, j, int'(h_out[j]), e);
            end
          end
          if (bad) failures++;
          if (n_out == 0) begin
            checks++;
            if (u == 0 && cycle - t_first_in != RX + II + 2) begin
              failures++;
              $display("FAIL u%0d first-output latency %0d exp %0d", u, cycle - t_first_in, RX + II + 2);
            end
          end else if (!stalling) begin
            checks++;
            if (cycle - t_last_out != (RSEQ ? II : II * TS)) begin
              failures++;
              $display("FAIL u%0d output spacing %0d", u, cycle - t_last_out);
            end
          end
          t_last_out = cycle;
          n_out++;
          if (n_out == (RSEQ ? NFAST * TS : NFAST)) stalling = 1'b1;
          if (n_out == NSEQ * (RSEQ ? TS : 1)) begin
            checks++;
            if (n_stall == 0) begin failures++; $display("FAIL u%0d never stalled", u); end
            $display("u%0d: %0d outputs, %0d stall cycles", u, n_out, n_stall);
            done_units++;
          end
        end
      end
    end
  end
endmodule
