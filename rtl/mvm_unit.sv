// mvm_unit: matrix-vector multiply y = W*v + bias with a reuse factor R.
//
// This is the LSTM "kernel" used for both sub-layer MVMs of an LSTM layer
// (mvm_x on the input vector, mvm_h on the fed-back hidden vector) and for
// the dense output layer. A reuse factor R means each multiplier is used R
// times per product: the unit has N_OUT * ceil(N_IN/R) multipliers and runs
// R passes. Pass r multiplies input columns [r*C, r*C+C), C = ceil(N_IN/R),
// against every row and adds the C products of each row to that row's
// accumulator. R = 1 is the fully unrolled case.
//
// Timing: a one-cycle `start` presents `v`; pass 0 runs in that cycle on `v`
// directly, later passes use a latched copy. The registered result `y` and a
// one-cycle `done` appear R cycles after `start`, i.e. the latency is
// LT_mult + (R-1) with a one-cycle multiplier stage, as in the published
// latency model. `y` holds until the next start. `start` must not be raised
// while `busy` (the unit is not pipelined across vectors: its initiation
// interval is R). The unit always runs all R passes, also when N_IN < R, so
// its latency is exactly R; that is what lets mvm_x be slowed down to match
// the recurrent loop. The column-per-pass split is this design's own choice.
//
// Lint note: verilator reports rst_n as "flopped as both synchronous and
// async" (SYNCASYNCNET). The registers use rst_n as an asynchronous reset
// only; the other use is the `disable iff (!rst_n)` of the assertions, which
// is simulation-only checking and creates no logic.
module mvm_unit
  import lstm_pkg::*;
#(
  parameter int N_IN  = 32,
  parameter int N_OUT = 128,
  parameter int R     = 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  data_t [N_IN-1:0]             v,
  input  data_t                        w [N_OUT][N_IN],
  input  acc_t  [N_OUT-1:0]            bias,
  output logic                         busy,
  output logic                         done,
  output acc_t  [N_OUT-1:0]            y
);

  localparam int C  = (N_IN + R - 1) / R;  // columns (multipliers per row) per pass
  localparam int NP = C * R;               // input length padded to whole passes
  localparam int PW = (R > 1) ? $clog2(R) : 1;

  data_t [NP-1:0]    vpad;   // input vector zero padded to whole passes
  data_t [NP-1:0]    vreg;   // latched input for passes 1..R-1
  data_t [NP-1:0]    vsrc;   // input seen by the current pass
  logic  [PW-1:0]    pass;   // index of the pass running while busy
  logic  [PW-1:0]    cur;
  acc_t              chunk [N_OUT];  // sum of this pass's products per row

  always_comb begin
    vpad = '0;
    for (int i = 0; i < N_IN; i++) vpad[i] = v[i];
    cur  = start ? '0 : pass;
    vsrc = start ? vpad : vreg;
  end

  // Multiplier c of a row sees column r*C + c in pass r.
  for (genvar c = 0; c < C; c++) begin : g_col
    data_t vcand [R];
    data_t vsel;
    for (genvar r = 0; r < R; r++) begin : g_pass
      assign vcand[r] = vsrc[r*C + c];
    end
    assign vsel = vcand[cur];
  end

  for (genvar o = 0; o < N_OUT; o++) begin : g_row
    acc_t prod [C];
    for (genvar c = 0; c < C; c++) begin : g_mul
      data_t wcand [R];
      for (genvar r = 0; r < R; r++) begin : g_pass
        if (r*C + c < N_IN) begin : g_w
          assign wcand[r] = w[o][r*C + c];
        end else begin : g_pad
          assign wcand[r] = '0;   // padding column, its input is zero too
        end
      end
      assign prod[c] = mul_dd(wcand[cur], g_col[c].vsel);
    end
    always_comb begin
      chunk[o] = '0;
      for (int c = 0; c < C; c++) chunk[o] = chunk[o] + prod[c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      pass <= '0;
      vreg <= '0;
      y    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        vreg <= vpad;
        for (int o = 0; o < N_OUT; o++) y[o] <= bias[o] + chunk[o];
        if (R == 1) begin
          done <= 1'b1;
        end else begin
          busy <= 1'b1;
          pass <= PW'(1);
        end
      end else if (busy) begin
        for (int o = 0; o < N_OUT; o++) y[o] <= y[o] + chunk[o];
        if (int'(pass) == R - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          pass <= '0;
        end else begin
          pass <= pass + PW'(1);
        end
      end
    end
  end

  // A new vector may only start once the previous one has finished.
  a_no_start_when_busy : assert property (@(posedge clk) disable iff (!rst_n) !(start && busy));

endmodule
