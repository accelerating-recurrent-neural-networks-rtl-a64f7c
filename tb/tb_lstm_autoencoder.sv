// tb_lstm_autoencoder: end-to-end test of the whole autoencoder at its
// default sizes (IN_DIM 2, LSTM widths 32/8/8/32, TS 8, RH 1, RX 9,
// three extra loop stages).
//
// Loads random weights into all five layers through the cfg port, streams
// NSEQ random input sequences back to back, and compares every
// reconstructed output vector with a bit-exact reference chain built from
// tb_ref_pkg (LSTM0 -> LSTM1 last h -> repeat -> LSTM2 -> LSTM3 -> dense).
// During the second sequence the consumer stops taking outputs for a long
// stretch, so back-pressure reaches the layers.
//
// It also counts the mechanisms of the design and fails if one never occurs:
//   * timestep launches in every layer (NSEQ * TS each);
//   * layer overlap: LSTM1 launching while LSTM0 is still inside a sequence;
//   * repeat: LSTM2 runs TS timesteps for each single LSTM1 output;
//   * encoder of the next sequence overlapping the decoder of the previous;
//   * stalls on a full output (ev_stall) in some layer;
//   * timestep loop ii = RH + 8 + 3 = 12 cycles between LSTM0 launches.
// Prints the latency from the first input to the last output of sequence 0.
module tb_lstm_autoencoder;
  import lstm_pkg::*;
  import tb_ref_pkg::*;

  localparam int IN = 2, L0 = 32, L1 = 8, L2 = 8, L3 = 32, TS = 8, II = 12;
  localparam int NSEQ = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic              in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  data_t [IN-1:0]    in_data, out_data;
  logic              cfg_we = 1'b0;
  logic [2:0]        cfg_sel;
  logic [15:0]       cfg_addr;
  logic [31:0]       cfg_data;
  logic [3:0]        ev_launch, ev_stall, seq_done;

  lstm_autoencoder dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data,
    .cfg_we, .cfg_sel, .cfg_addr, .cfg_data, .ev_launch, .ev_stall, .seq_done);

  // weights: wx, wh, b per layer (flat), dense w/b
  int wx0[], wh0[], b0[], wx1[], wh1[], b1[], wx2[], wh2[], b2[], wx3[], wh3[], b3[], wd[], bd[];
  int exp_q[$];

  function automatic void rnd_layer(int lx, int lh, output int wx[], output int wh[], output int b[]);
    wx = new[4 * lh * lx];
    wh = new[4 * lh * lh];
    b  = new[4 * lh];
    foreach (wx[k]) wx[k] = int'($urandom % 512) - 256;   // +-0.25
    foreach (wh[k]) wh[k] = int'($urandom % 256) - 128;   // +-0.125
    foreach (b[k])  b[k]  = int'($urandom % 1048576) - 524288;
  endfunction

  task automatic load_layer(int sel, int lx, int lh, int wx[], int wh[], int b[]);
    int nx, nh;
    nx = 4 * lh * lx;
    nh = 4 * lh * lh;
    for (int a = 0; a < nx + nh + 4 * lh; a++) begin
      cfg_we   = 1'b1;
      cfg_sel  = 3'(sel);
      cfg_addr = 16'(a);
      cfg_data = (a < nx) ? 32'(wx[a]) : (a < nx + nh) ? 32'(wh[a - nx]) : 32'(b[a - nx - nh]);
      @(posedge clk);
      #1;
    end
    cfg_we = 1'b0;
  endtask

  // mechanism counters
  int n_launch[4] = '{0, 0, 0, 0};
  int n_stall = 0, n_overlap01 = 0, n_encdec = 0, n_seqdone1 = 0, n_ii_ok = 0, n_ii_bad = 0;
  bit l0_active = 1'b0, dec_active = 1'b0;
  int l0_last = -1;
  int t_first_in = -1, t_seq0_out = -1, n_out = 0, pause_left = 0;
  bit paused = 1'b0;

  always @(posedge clk) begin
    if (rst_n) begin
      for (int l = 0; l < 4; l++) if (ev_launch[l]) n_launch[l] <= n_launch[l] + 1;
      if (ev_stall != '0) n_stall <= n_stall + 1;
      if (ev_launch[1] && l0_active) n_overlap01 <= n_overlap01 + 1;
      if (ev_launch[0] && dec_active) n_encdec <= n_encdec + 1;
      if (seq_done[1]) n_seqdone1 <= n_seqdone1 + 1;
      if (ev_launch[0]) begin
        l0_active <= 1'b1;
        if (l0_last >= 0 && l0_active) begin
          if (cycle - l0_last == II) n_ii_ok <= n_ii_ok + 1;
          else n_ii_bad <= n_ii_bad + 1;
        end
        l0_last <= cycle;
      end
      if (seq_done[0]) l0_active <= 1'b0;
      if (ev_launch[2]) dec_active <= 1'b1;
      if (seq_done[3]) dec_active <= 1'b0;
    end
  end

  initial begin
    int xs[], h0[], h1[], r1[], h2[], h3[], v[];
    rnd_layer(IN, L0, wx0, wh0, b0);
    rnd_layer(L0, L1, wx1, wh1, b1);
    rnd_layer(L1, L2, wx2, wh2, b2);
    rnd_layer(L2, L3, wx3, wh3, b3);
    wd = new[IN * L3];
    bd = new[IN];
    foreach (wd[k]) wd[k] = int'($urandom % 512) - 256;
    foreach (bd[k]) bd[k] = int'($urandom % 1048576) - 524288;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    #1;
    load_layer(0, IN, L0, wx0, wh0, b0);
    load_layer(1, L0, L1, wx1, wh1, b1);
    load_layer(2, L1, L2, wx2, wh2, b2);
    load_layer(3, L2, L3, wx3, wh3, b3);
    for (int a = 0; a < IN * L3 + IN; a++) begin
      cfg_we   = 1'b1;
      cfg_sel  = 3'd4;
      cfg_addr = 16'(a);
      cfg_data = (a < IN * L3) ? 32'(wd[a]) : 32'(bd[a - IN * L3]);
      @(posedge clk);
      #1;
    end
    cfg_we = 1'b0;
    // stream the sequences
    for (int s = 0; s < NSEQ; s++) begin
      xs = new[TS * IN];
      foreach (xs[k]) xs[k] = int'($urandom % 2048) - 1024;
      lstm_ref(IN, L0, TS, wx0, wh0, b0, xs, h0);
      lstm_ref(L0, L1, TS, wx1, wh1, b1, h0, h1);
      r1 = new[TS * L1];
      for (int t = 0; t < TS; t++) for (int j = 0; j < L1; j++) r1[t * L1 + j] = h1[(TS - 1) * L1 + j];
      lstm_ref(L1, L2, TS, wx2, wh2, b2, r1, h2);
      lstm_ref(L2, L3, TS, wx3, wh3, b3, h2, h3);
      for (int t = 0; t < TS; t++)
        for (int o = 0; o < IN; o++) exp_q.push_back(dense_ref(L3, o, wd, bd, h3, t * L3));
      for (int t = 0; t < TS; t++) begin
        in_valid = 1'b1;
        for (int k = 0; k < IN; k++) in_data[k] = data_t'(xs[t * IN + k]);
        #1;
        while (!in_ready) begin
          @(posedge clk);
          #2;
        end
        if (t_first_in < 0) t_first_in = cycle;
        @(posedge clk);
        #1;
        in_valid = 1'b0;
      end
    end
  end

  // consumer: always ready, except for a long pause during the second sequence
  initial begin
    wait (rst_n);
    forever begin
      @(posedge clk);
      #1;
      if (n_out == TS + 2 && !paused) begin
        paused = 1'b1;
        pause_left = 400;
      end
      if (pause_left > 0) pause_left--;
      out_ready = (pause_left == 0);
      #1;
      if (out_valid && out_ready) begin
        for (int o = 0; o < IN; o++) begin
          int e;
          e = exp_q.pop_front();
          checks++;
          if (int'(out_data[o]) != e) begin
            failures++;
            $display("FAIL output %0d y[%0d]=%0d exp %0d", n_out, o, int'(out_data[o]), e);
          end
        end
        n_out++;
        if (n_out == TS) begin
          t_seq0_out = cycle;
          $display("sequence 0: first input to last output %0d cycles", cycle - t_first_in);
        end
        if (n_out == NSEQ * TS) begin
          for (int l = 0; l < 4; l++) begin
            checks++;
            if (n_launch[l] != NSEQ * TS) begin failures++; $display("FAIL layer %0d launches %0d", l, n_launch[l]); end
          end
          $display("overlap L0/L1 %0d, repeat: %0d L1 outputs -> %0d L2 timesteps, encoder/decoder overlap %0d, stall cycles %0d, L0 ii ok %0d bad %0d",
                   n_overlap01, n_seqdone1, n_launch[2], n_encdec, n_stall, n_ii_ok, n_ii_bad);
          checks++; if (n_overlap01 == 0) begin failures++; $display("FAIL no L0/L1 overlap"); end
          checks++; if (n_seqdone1 != NSEQ || n_launch[2] != NSEQ * TS) begin failures++; $display("FAIL repeat"); end
          checks++; if (n_encdec == 0) begin failures++; $display("FAIL no encoder/decoder overlap"); end
          checks++; if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
          checks++; if (n_ii_ok == 0 || n_ii_bad != 0 && n_ii_ok < TS) begin failures++; $display("FAIL ii"); end
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end
endmodule
