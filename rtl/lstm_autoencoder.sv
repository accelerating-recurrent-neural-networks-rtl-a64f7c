// lstm_autoencoder: LSTM autoencoder for anomaly detection on time series,
// with every layer mapped to its own hardware and all layers pipelined.
//
// Structure (encoder, then decoder):
//   x_t -> LSTM0 (LH0) -> LSTM1 (LH1, last h only) -> repeat x TS
//       -> LSTM2 (LH2) -> LSTM3 (LH3) -> time-distributed dense -> y_t
// The default sizes 32, 8, 8, 32 with TS = 8 timesteps are the nominal
// gravitational-wave autoencoder of the published work; the input width
// IN_DIM = 2 is this design's assumption. Each LSTM layer is an lstm_layer
// with its own reuse factors (RXn for the input MVM, RHn for the recurrent
// MVM); the defaults (RH, RX) = (1, 9) are the published design point for
// the large FPGA. LT_EXTRA = 3 extra register stages in every recurrent loop
// give the published timestep interval of that design at 300 MHz,
// ii = RH + 8 + 3 = 12 cycles, so each layer accepts a sequence every
// 12 * 8 = 96 cycles. The input MVM (9 cycles with RX = 9) finishes well
// inside one loop iteration. With LT_EXTRA = 0 the loop is the 9-cycle
// (RH + 8) model used for the design-space exploration.
//
// Layers hand vectors on as soon as they exist, so LSTM1 works on timestep t
// while LSTM0 is on t+1, and likewise LSTM3 behind LSTM2 and the dense layer
// behind LSTM3. LSTM2 can only begin once LSTM1 has produced its single
// output, so encoder and decoder do not overlap within one sequence; the
// next sequence's encoder does overlap the current decoder.
//
// Interface: valid/ready input stream of x_t vectors (TS per sequence) and
// valid/ready output stream of reconstructed y_t vectors. Weights are loaded
// through cfg_*: cfg_sel picks LSTM0..3 (0..3) or the dense layer (4), and
// cfg_addr follows the map of lstm_layer / td_dense. Status vectors give the
// per-layer one-cycle strobes of lstm_layer (timestep launched, stalled on a
// full output, sequence finished).
//
// Lint note: verilator reports rst_n as "flopped as both synchronous and
// async" (SYNCASYNCNET). The registers of the sub-blocks use rst_n as an asynchronous reset
// only; the other use is the `disable iff (!rst_n)` of the sub-blocks' assertions, which
// is simulation-only checking and creates no logic.
module lstm_autoencoder
  import lstm_pkg::*;
#(
  parameter int IN_DIM = 2,
  parameter int LH0    = 32,
  parameter int LH1    = 8,
  parameter int LH2    = 8,
  parameter int LH3    = 32,
  parameter int TS     = 8,
  parameter int RX0    = 9,
  parameter int RH0    = 1,
  parameter int RX1    = 9,
  parameter int RH1    = 1,
  parameter int RX2    = 9,
  parameter int RH2    = 1,
  parameter int RX3    = 9,
  parameter int RH3    = 1,
  parameter int RD     = 1,
  parameter int LT_EXTRA = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  data_t [IN_DIM-1:0]  in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output data_t [IN_DIM-1:0]  out_data,
  input  logic                cfg_we,
  input  logic [2:0]          cfg_sel,
  input  logic [15:0]         cfg_addr,
  input  logic [31:0]         cfg_data,
  output logic [3:0]          ev_launch,
  output logic [3:0]          ev_stall,
  output logic [3:0]          seq_done
);

  logic           v01, r01, v1r, r1r, vr2, rr2, v23, r23, v3d, r3d;
  data_t [LH0-1:0] h0;
  data_t [LH1-1:0] h1;
  data_t [LH1-1:0] rep;
  data_t [LH2-1:0] h2;
  data_t [LH3-1:0] h3;

  lstm_layer #(.LX(IN_DIM), .LH(LH0), .TS(TS), .RX(RX0), .RH(RH0), .LT_EXTRA(LT_EXTRA), .RETURN_SEQ(1'b1)) u_lstm0 (
    .clk, .rst_n,
    .x_valid(in_valid), .x_ready(in_ready), .x(in_data),
    .h_valid(v01), .h_ready(r01), .h_out(h0),
    .cfg_we(cfg_we && cfg_sel == 3'd0), .cfg_addr, .cfg_data,
    .ev_launch(ev_launch[0]), .ev_stall(ev_stall[0]), .seq_done(seq_done[0])
  );

  lstm_layer #(.LX(LH0), .LH(LH1), .TS(TS), .RX(RX1), .RH(RH1), .LT_EXTRA(LT_EXTRA), .RETURN_SEQ(1'b0)) u_lstm1 (
    .clk, .rst_n,
    .x_valid(v01), .x_ready(r01), .x(h0),
    .h_valid(v1r), .h_ready(r1r), .h_out(h1),
    .cfg_we(cfg_we && cfg_sel == 3'd1), .cfg_addr, .cfg_data,
    .ev_launch(ev_launch[1]), .ev_stall(ev_stall[1]), .seq_done(seq_done[1])
  );

  repeat_vector #(.N(LH1), .TS(TS)) u_repeat (
    .clk, .rst_n,
    .in_valid(v1r), .in_ready(r1r), .din(h1),
    .out_valid(vr2), .out_ready(rr2), .dout(rep)
  );

  lstm_layer #(.LX(LH1), .LH(LH2), .TS(TS), .RX(RX2), .RH(RH2), .LT_EXTRA(LT_EXTRA), .RETURN_SEQ(1'b1)) u_lstm2 (
    .clk, .rst_n,
    .x_valid(vr2), .x_ready(rr2), .x(rep),
    .h_valid(v23), .h_ready(r23), .h_out(h2),
    .cfg_we(cfg_we && cfg_sel == 3'd2), .cfg_addr, .cfg_data,
    .ev_launch(ev_launch[2]), .ev_stall(ev_stall[2]), .seq_done(seq_done[2])
  );

  lstm_layer #(.LX(LH2), .LH(LH3), .TS(TS), .RX(RX3), .RH(RH3), .LT_EXTRA(LT_EXTRA), .RETURN_SEQ(1'b1)) u_lstm3 (
    .clk, .rst_n,
    .x_valid(v23), .x_ready(r23), .x(h2),
    .h_valid(v3d), .h_ready(r3d), .h_out(h3),
    .cfg_we(cfg_we && cfg_sel == 3'd3), .cfg_addr, .cfg_data,
    .ev_launch(ev_launch[3]), .ev_stall(ev_stall[3]), .seq_done(seq_done[3])
  );

  td_dense #(.N_IN(LH3), .N_OUT(IN_DIM), .R(RD)) u_dense (
    .clk, .rst_n,
    .in_valid(v3d), .in_ready(r3d), .din(h3),
    .out_valid, .out_ready, .dout(out_data),
    .cfg_we(cfg_we && cfg_sel == 3'd4), .cfg_addr, .cfg_data
  );

endmodule
