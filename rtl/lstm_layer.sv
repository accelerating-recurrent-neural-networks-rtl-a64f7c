// lstm_layer: one LSTM layer split into two coarse-grain pipelined sub-layers.
//
// Sub-layer 1, mvm_x, multiplies each input vector x_t by the input weights
// Wx (4*LH x LX) and adds the bias. It has no dependence on earlier
// timesteps, so it can run ahead: its results wait in a two-entry vector
// FIFO. Sub-layer 2 is the recurrent loop: mvm_h multiplies the previous
// hidden vector h_{t-1} by Wh (4*LH x LH), gate_activation adds the two MVM
// results and applies sigmoid/tanh, and lstm_tail produces c_t and h_t; h_t
// is fed straight back into mvm_h for timestep t+1 in the cycle it appears.
//
// Timing. mvm_x accepts one input every RX cycles. One loop iteration takes
//   ii = LT_mvm_h + LT_EXTRA + LT_sigma + LT_tail = RH + LT_EXTRA + 3 + 5
// cycles, so a sequence of TS timesteps occupies the loop for II = ii * TS
// cycles, with no gap between sequences. Balancing the two sub-layers means
// choosing RX close to ii (RX = RH + 8 with LT_EXTRA = 0) so that mvm_x, with
// a factor RX fewer multipliers, finishes each input in the shadow of the
// loop. The split into sub-layers, the reuse factors and the latencies
// LT_mvm = R, LT_sigma = 3, LT_tail = 5 follow the published design.
// LT_EXTRA adds register stages on the mvm_h result; it models the longer
// loop of a faster clock (the published 300 MHz designs have ii = 12 with
// RH = 1, i.e. LT_EXTRA = 3). The interfaces below are this design's own.
//
// Interfaces.
//  * x_valid/x_ready/x: input vectors, TS per sequence, valid/ready handshake.
//  * h_valid/h_ready/h_out: hidden vectors. With RETURN_SEQ = 1 every h_t is
//    sent; with RETURN_SEQ = 0 only the last one of each sequence. Results go
//    through a two-entry output FIFO, and a timestep is only launched when
//    there will be room for its result, so a slow consumer stalls the loop
//    (ev_stall) instead of losing data.
//  * cfg_we/cfg_addr/cfg_data: weight load. Addresses 0 .. 4*LH*LX-1 hold Wx
//    row-major (row = gate*LH + unit, gates ordered i, f, g, o), the next
//    4*LH*LH hold Wh, the next 4*LH the 32-bit biases; weights take the low
//    16 bits of cfg_data. Weights must not change during inference.
//  * ev_launch / ev_stall / seq_done: one-cycle status strobes (a timestep
//    entered the loop / a timestep was ready but the output was full / the
//    last timestep of a sequence left the tail).
// h_{-1} and c_{-1} are zero at the start of every sequence.
//
// Lint note: verilator reports rst_n as "flopped as both synchronous and
// async" (SYNCASYNCNET). The registers use rst_n as an asynchronous reset
// only; the other use is the `disable iff (!rst_n)` of the assertions, which
// is simulation-only checking and creates no logic.
module lstm_layer
  import lstm_pkg::*;
#(
  parameter int LX         = 2,
  parameter int LH         = 32,
  parameter int TS         = 8,
  parameter int RX         = 9,
  parameter int RH         = 1,
  parameter int LT_EXTRA   = 0,
  parameter bit RETURN_SEQ = 1'b1,
  parameter int ADDR_W     = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // input stream
  input  logic               x_valid,
  output logic               x_ready,
  input  data_t [LX-1:0]     x,
  // output stream
  output logic               h_valid,
  input  logic               h_ready,
  output data_t [LH-1:0]     h_out,
  // weight load
  input  logic               cfg_we,
  input  logic [ADDR_W-1:0]  cfg_addr,
  input  logic [31:0]        cfg_data,
  // status
  output logic               ev_launch,
  output logic               ev_stall,
  output logic               seq_done
);

  localparam int NG      = 4 * LH;      // gate rows
  localparam int NWX     = NG * LX;
  localparam int NWH     = NG * LH;
  localparam int XDEPTH  = 2;
  localparam int ODEPTH  = 2;
  localparam int TW      = (TS > 1) ? $clog2(TS) : 1;

  // ---------------------------------------------------------------- weights
  data_t wx   [NG][LX];
  data_t wh   [NG][LH];
  acc_t  [NG-1:0] bias;
  acc_t  [NG-1:0] zero_bias;

  assign zero_bias = '0;

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      if (int'(cfg_addr) < NWX)
        wx[int'(cfg_addr) / LX][int'(cfg_addr) % LX] <= data_t'(cfg_data[DATA_W-1:0]);
      else if (int'(cfg_addr) < NWX + NWH)
        wh[(int'(cfg_addr) - NWX) / LH][(int'(cfg_addr) - NWX) % LH] <= data_t'(cfg_data[DATA_W-1:0]);
      else if (int'(cfg_addr) < NWX + NWH + NG)
        bias[int'(cfg_addr) - NWX - NWH] <= acc_t'(cfg_data);
    end
  end

  // ------------------------------------------------------ sub-layer 1: mvm_x
  logic                 mx_start, mx_busy, mx_done, mx_inflight;
  acc_t  [NG-1:0]       mx_y;
  logic                 xb_pop;
  logic  [NG*ACC_W-1:0] xb_dout;
  logic  [1:0]          xb_count;
  acc_t  [NG-1:0]       xb_gx;

  assign xb_gx = xb_dout;

  // room for the vector in flight, the one accepted now and what is queued
  assign x_ready  = !mx_busy &&
                    (int'(xb_count) - int'(xb_pop) + int'(mx_inflight) + 1 <= XDEPTH);
  assign mx_start = x_valid && x_ready;

  mvm_unit #(.N_IN(LX), .N_OUT(NG), .R(RX)) u_mvm_x (
    .clk, .rst_n, .start(mx_start), .v(x), .w(wx), .bias(bias),
    .busy(mx_busy), .done(mx_done), .y(mx_y)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        mx_inflight <= 1'b0;
    else if (mx_start) mx_inflight <= 1'b1;
    else if (mx_done)  mx_inflight <= 1'b0;
  end

  vec_fifo #(.W(NG*ACC_W), .DEPTH(XDEPTH)) u_xbuf (
    .clk, .rst_n, .push(mx_done), .din(mx_y), .pop(xb_pop),
    .dout(xb_dout), .count(xb_count)
  );

  // ---------------------------------------------- sub-layer 2: recurrent loop
  logic              launch, loop_busy, out_pending;
  logic [TW-1:0]     t_next;       // timestep index of the next launch
  logic [TW-1:0]     t_cur;        // timestep index in the loop
  data_t [LH-1:0]    h_fb;         // h_{t-1}
  data_t [LH-1:0]    mh_v;
  acc_t  [LH-1:0]    c_reg;        // c_{t-1}
  logic              mh_done, mh_busy;
  acc_t  [NG-1:0]    mh_y;
  logic              act_valid;
  data_t [NG-1:0]    gates;
  logic              c_valid, tail_valid;
  acc_t  [LH-1:0]    c_new;
  data_t [LH-1:0]    tail_h;
  logic              loop_free, produces, out_push, out_pop, out_ok;
  logic  [1:0]       out_count;

  assign loop_free = !loop_busy || tail_valid;
  assign produces  = RETURN_SEQ || (int'(t_next) == TS - 1);
  assign out_push  = tail_valid && out_pending;
  assign out_ok    = !produces ||
                     (int'(out_count) + int'(out_push) - int'(out_pop) + 1 <= ODEPTH);
  assign launch    = loop_free && (xb_count != '0) && out_ok;
  assign ev_launch = launch;
  assign ev_stall  = loop_free && (xb_count != '0) && !out_ok;

  // h_{t-1}: zero for the first timestep, else the tail result (forwarded in
  // the cycle it appears)
  always_comb begin
    if (t_next == '0)    mh_v = '0;
    else if (tail_valid) mh_v = tail_h;
    else                 mh_v = h_fb;
  end

  mvm_unit #(.N_IN(LH), .N_OUT(NG), .R(RH)) u_mvm_h (
    .clk, .rst_n, .start(launch), .v(mh_v), .w(wh), .bias(zero_bias),
    .busy(mh_busy), .done(mh_done), .y(mh_y)
  );

  // optional register stages on the mvm_h result (LT_EXTRA cycles)
  logic              hd_valid;
  acc_t  [NG-1:0]    hd_y;

  if (LT_EXTRA == 0) begin : g_no_extra
    assign hd_valid = mh_done;
    assign hd_y     = mh_y;
  end else begin : g_extra
    logic [LT_EXTRA-1:0] vq;
    acc_t [NG-1:0]       yq [LT_EXTRA];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vq <= '0;
      end else begin
        vq[0] <= mh_done;
        for (int k = 1; k < LT_EXTRA; k++) vq[k] <= vq[k-1];
      end
    end

    always_ff @(posedge clk) begin
      yq[0] <= mh_y;
      for (int k = 1; k < LT_EXTRA; k++) yq[k] <= yq[k-1];
    end

    assign hd_valid = vq[LT_EXTRA-1];
    assign hd_y     = yq[LT_EXTRA-1];
  end

  // the mvm_x result of this timestep is consumed with the mvm_h result
  assign xb_pop = hd_valid;

  gate_activation #(.LH(LH)) u_act (
    .clk, .rst_n, .in_valid(hd_valid), .gx(xb_gx), .gh(hd_y),
    .out_valid(act_valid), .gates(gates)
  );

  lstm_tail #(.LH(LH)) u_tail (
    .clk, .rst_n, .in_valid(act_valid), .gates(gates), .c_prev(c_reg),
    .c_valid(c_valid), .c_new(c_new), .out_valid(tail_valid), .h(tail_h)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loop_busy   <= 1'b0;
      out_pending <= 1'b0;
      t_next      <= '0;
      t_cur       <= '0;
      h_fb        <= '0;
      c_reg       <= '0;
    end else begin
      if (launch) begin
        loop_busy   <= 1'b1;
        out_pending <= produces;
        t_cur       <= t_next;
        t_next      <= (int'(t_next) == TS - 1) ? '0 : t_next + TW'(1);
      end else if (tail_valid) begin
        loop_busy   <= 1'b0;
        out_pending <= 1'b0;
      end
      if (tail_valid) h_fb <= tail_h;
      if (c_valid)    c_reg <= (int'(t_cur) == TS - 1) ? '0 : c_new;
    end
  end

  assign seq_done = tail_valid && (int'(t_cur) == TS - 1);

  // ------------------------------------------------------------ output FIFO
  logic [LH*DATA_W-1:0] ob_dout;

  assign out_pop = h_valid && h_ready;

  vec_fifo #(.W(LH*DATA_W), .DEPTH(ODEPTH)) u_obuf (
    .clk, .rst_n, .push(out_push), .din(tail_h), .pop(out_pop),
    .dout(ob_dout), .count(out_count)
  );

  assign h_valid = (out_count != '0);
  assign h_out   = ob_dout;

  // mvm_h is only ever started on an idle unit: one timestep in the loop
  a_one_in_loop : assert property (@(posedge clk) disable iff (!rst_n) !(launch && mh_busy));
  a_x_ready     : assert property (@(posedge clk) disable iff (!rst_n) hd_valid |-> xb_count != '0);

endmodule
