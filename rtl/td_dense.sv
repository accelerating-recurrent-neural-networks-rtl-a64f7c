// td_dense: time-distributed dense output layer of the autoencoder.
//
// Applies the same fully connected layer y_t = W * h_t + b to every timestep
// of the last LSTM layer's output, producing the reconstruction of the input
// sample. The activation is linear. The multiply runs on an mvm_unit with
// reuse factor R (N_OUT * ceil(N_IN/R) multipliers); the 32-bit result is
// saturated to Q6.10.
//
// Interface and timing: valid/ready input and output streams. An input is
// accepted when nothing is in flight and the output register is empty or
// being emptied; the result is valid R+1 cycles later and held until taken.
// With R = 1 a new vector can enter every 2 cycles, far faster than an LSTM
// layer produces them. Weight load: addresses 0 .. N_OUT*N_IN-1 hold W
// row-major (low 16 bits of cfg_data), the next N_OUT the 32-bit biases.
// The linear activation and R = 1 are this design's choices.
//
// Lint note: verilator reports rst_n as "flopped as both synchronous and
// async" (SYNCASYNCNET). The registers use rst_n as an asynchronous reset
// only; the other use is the `disable iff (!rst_n)` of the assertions, which
// is simulation-only checking and creates no logic.
module td_dense
  import lstm_pkg::*;
#(
  parameter int N_IN   = 32,
  parameter int N_OUT  = 2,
  parameter int R      = 1,
  parameter int ADDR_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  data_t [N_IN-1:0]  din,
  output logic              out_valid,
  input  logic              out_ready,
  output data_t [N_OUT-1:0] dout,
  input  logic              cfg_we,
  input  logic [ADDR_W-1:0] cfg_addr,
  input  logic [31:0]       cfg_data
);

  localparam int NW = N_OUT * N_IN;

  data_t w [N_OUT][N_IN];
  acc_t  [N_OUT-1:0] bias;

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      if (int'(cfg_addr) < NW)
        w[int'(cfg_addr) / N_IN][int'(cfg_addr) % N_IN] <= data_t'(cfg_data[DATA_W-1:0]);
      else if (int'(cfg_addr) < NW + N_OUT)
        bias[int'(cfg_addr) - NW] <= acc_t'(cfg_data);
    end
  end

  logic             start, busy, done, inflight;
  acc_t [N_OUT-1:0] y;

  assign in_ready = !inflight && (!out_valid || out_ready);
  assign start    = in_valid && in_ready;

  mvm_unit #(.N_IN(N_IN), .N_OUT(N_OUT), .R(R)) u_mvm (
    .clk, .rst_n, .start(start), .v(din), .w(w), .bias(bias),
    .busy(busy), .done(done), .y(y)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inflight  <= 1'b0;
      out_valid <= 1'b0;
      dout      <= '0;
    end else begin
      if (start)     inflight <= 1'b1;
      else if (done) inflight <= 1'b0;
      if (done) begin
        out_valid <= 1'b1;
        for (int o = 0; o < N_OUT; o++) dout[o] <= acc_to_data(y[o]);
      end else if (out_valid && out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  a_no_start_busy : assert property (@(posedge clk) disable iff (!rst_n) !(start && busy));

endmodule
