// tb_small_autoencoder: the small two-layer LSTM autoencoder in its three
// published Zynq configurations, built from the library blocks.
//
// Network: x_t (2 values) -> LSTM (9 units, last h only) -> repeat x 8
//          -> LSTM (9 units) -> time-distributed dense (2 values), TS = 8.
// The two 9-unit LSTM layers and TS = 8 follow the published small
// autoencoder; the input width 2 is this design's assumption (the same as the
// top). The three configurations differ only in the reuse factors
// (RH, RX) = (1, 1), (2, 2), (1, 9) and run side by side, each with
// LT_EXTRA = 0 (the plain latency model, 100 MHz designs).
//
// Each configuration gets its own random weights and NSEQ random sequences,
// offered back to back, and every output is compared with the bit-exact
// reference of tb_ref_pkg. Timing checks, consumer always ready:
//   * consecutive timestep launches of the encoder layer are exactly
//     ii = RH + 8 cycles apart (9, 10, 9), also across sequences;
//   * the encoder finishes one sequence every II = ii * TS cycles
//     (72, 80, 72).
module tb_small_autoencoder;
  import lstm_pkg::*;
  import tb_ref_pkg::*;

  localparam int IN = 2, LH = 9, TS = 8, NSEQ = 3, NZ = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;
  int n_done = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wait (n_done == NZ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void rnd_layer(int lx, int lh, output int wx[], output int wh[], output int b[]);
    wx = new[4 * lh * lx];
    wh = new[4 * lh * lh];
    b  = new[4 * lh];
    foreach (wx[k]) wx[k] = int'($urandom % 1024) - 512;
    foreach (wh[k]) wh[k] = int'($urandom % 512) - 256;
    foreach (b[k])  b[k]  = int'($urandom % 1048576) - 524288;
  endfunction

  for (genvar z = 0; z < NZ; z++) begin : g_z
    localparam int RH = (z == 1) ? 2 : 1;
    localparam int RX = (z == 0) ? 1 : (z == 1) ? 2 : 9;
    localparam int II = RH + 8;

    logic           in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1;
    data_t [IN-1:0] in_data, out_data;
    logic           v_er, r_er, v_rd, r_rd, v_dd, r_dd;
    data_t [LH-1:0] h_enc, h_rep, h_dec;
    logic           we_e = 1'b0, we_d = 1'b0, we_o = 1'b0;
    logic [15:0]    cfg_addr;
    logic [31:0]    cfg_data;
    logic           ev_launch_e, ev_stall_e, seq_done_e;
    logic           ev_launch_d, ev_stall_d, seq_done_d;

    lstm_layer #(.LX(IN), .LH(LH), .TS(TS), .RX(RX), .RH(RH), .LT_EXTRA(0), .RETURN_SEQ(1'b0)) u_enc (
      .clk, .rst_n, .x_valid(in_valid), .x_ready(in_ready), .x(in_data),
      .h_valid(v_er), .h_ready(r_er), .h_out(h_enc),
      .cfg_we(we_e), .cfg_addr, .cfg_data,
      .ev_launch(ev_launch_e), .ev_stall(ev_stall_e), .seq_done(seq_done_e));

    repeat_vector #(.N(LH), .TS(TS)) u_rep (
      .clk, .rst_n, .in_valid(v_er), .in_ready(r_er), .din(h_enc),
      .out_valid(v_rd), .out_ready(r_rd), .dout(h_rep));

    lstm_layer #(.LX(LH), .LH(LH), .TS(TS), .RX(RX), .RH(RH), .LT_EXTRA(0), .RETURN_SEQ(1'b1)) u_dec (
      .clk, .rst_n, .x_valid(v_rd), .x_ready(r_rd), .x(h_rep),
      .h_valid(v_dd), .h_ready(r_dd), .h_out(h_dec),
      .cfg_we(we_d), .cfg_addr, .cfg_data,
      .ev_launch(ev_launch_d), .ev_stall(ev_stall_d), .seq_done(seq_done_d));

    td_dense #(.N_IN(LH), .N_OUT(IN), .R(1)) u_out (
      .clk, .rst_n, .in_valid(v_dd), .in_ready(r_dd), .din(h_dec),
      .out_valid, .out_ready, .dout(out_data),
      .cfg_we(we_o), .cfg_addr, .cfg_data);

    int wx0[], wh0[], b0[], wx1[], wh1[], b1[], wd[], bd[];
    int exp_q[$];
    int last_launch = -1, last_done = -1, n_ii_ok = 0, n_ii_bad = 0, n_II_ok = 0, n_II_bad = 0;

    // encoder timing
    always @(posedge clk) begin
      if (rst_n && ev_launch_e) begin
        if (last_launch >= 0) begin
          if (cycle - last_launch == II) n_ii_ok <= n_ii_ok + 1;
          else n_ii_bad <= n_ii_bad + 1;
        end
        last_launch <= cycle;
      end
      if (rst_n && seq_done_e) begin
        if (last_done >= 0) begin
          if (cycle - last_done == II * TS) n_II_ok <= n_II_ok + 1;
          else n_II_bad <= n_II_bad + 1;
        end
        last_done <= cycle;
      end
    end

    // weight load and input stream
    initial begin
      int xs[], h0[], h1[], r1[];
      int nx, nh;
      rnd_layer(IN, LH, wx0, wh0, b0);
      rnd_layer(LH, LH, wx1, wh1, b1);
      wd = new[IN * LH];
      bd = new[IN];
      foreach (wd[k]) wd[k] = int'($urandom % 1024) - 512;
      foreach (bd[k]) bd[k] = int'($urandom % 1048576) - 524288;
      wait (rst_n);
      @(posedge clk);
      #1;
      nx = 4 * LH * IN;
      nh = 4 * LH * LH;
      for (int a = 0; a < nx + nh + 4 * LH; a++) begin
        we_e = 1'b1;
        cfg_addr = 16'(a);
        cfg_data = (a < nx) ? 32'(wx0[a]) : (a < nx + nh) ? 32'(wh0[a - nx]) : 32'(b0[a - nx - nh]);
        @(posedge clk);
        #1;
      end
      we_e = 1'b0;
      nx = 4 * LH * LH;
      for (int a = 0; a < nx + nh + 4 * LH; a++) begin
        we_d = 1'b1;
        cfg_addr = 16'(a);
        cfg_data = (a < nx) ? 32'(wx1[a]) : (a < nx + nh) ? 32'(wh1[a - nx]) : 32'(b1[a - nx - nh]);
        @(posedge clk);
        #1;
      end
      we_d = 1'b0;
      for (int a = 0; a < IN * LH + IN; a++) begin
        we_o = 1'b1;
        cfg_addr = 16'(a);
        cfg_data = (a < IN * LH) ? 32'(wd[a]) : 32'(bd[a - IN * LH]);
        @(posedge clk);
        #1;
      end
      we_o = 1'b0;
      for (int s = 0; s < NSEQ; s++) begin
        xs = new[TS * IN];
        foreach (xs[k]) xs[k] = int'($urandom % 2048) - 1024;
        lstm_ref(IN, LH, TS, wx0, wh0, b0, xs, h0);
        r1 = new[TS * LH];
        for (int t = 0; t < TS; t++) for (int j = 0; j < LH; j++) r1[t * LH + j] = h0[(TS - 1) * LH + j];
        lstm_ref(LH, LH, TS, wx1, wh1, b1, r1, h1);
        for (int t = 0; t < TS; t++)
          for (int o = 0; o < IN; o++) exp_q.push_back(dense_ref(LH, o, wd, bd, h1, t * LH));
        for (int t = 0; t < TS; t++) begin
          in_valid = 1'b1;
          for (int k = 0; k < IN; k++) in_data[k] = data_t'(xs[t * IN + k]);
          #1;
          while (!in_ready) begin
            @(posedge clk);
            #2;
          end
          @(posedge clk);
          #1;
          in_valid = 1'b0;
        end
      end
    end

    // output check
    initial begin
      int n_out;
      logic bad;
      n_out = 0;
      wait (rst_n);
      forever begin
        @(posedge clk);
        #1;
        if (out_valid) begin
          checks++;
          bad = 1'b0;
          for (int o = 0; o < IN; o++) begin
            int e;
            e = exp_q.pop_front();
            if (int'(out_data[o]) != e) begin
              bad = 1'b1;
              $display("FAIL z%0d output %0d y[%0d]=%0d exp %0d", z, n_out, o, int'(out_data[o]), e);
            end
          end
          if (bad) failures++;
          n_out++;
          if (n_out == NSEQ * TS) begin
            $display("config %0d (RH %0d, RX %0d): launch spacing %0d ok %0d bad, sequence spacing %0d ok %0d bad",
                     z, RH, RX, n_ii_ok, n_ii_bad, n_II_ok, n_II_bad);
            checks++;
            if (n_ii_bad != 0 || n_ii_ok != NSEQ * TS - 1) begin
              failures++;
              $display("FAIL z%0d ii", z);
            end
            checks++;
            if (n_II_bad != 0 || n_II_ok != NSEQ - 1) begin
              failures++;
              $display("FAIL z%0d II", z);
            end
            n_done++;
            break;
          end
        end
      end
    end
  end
endmodule
