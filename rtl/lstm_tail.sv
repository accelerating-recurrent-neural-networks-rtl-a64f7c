// lstm_tail: the element-wise tail of an LSTM cell.
//
// Computes, for each of the LH lanes in parallel (tail reuse factor 1),
//   c_t = f * c_{t-1} + i * g
//   h_t = o * tanh(c_t)
// from the activated gates. This gives 3 multipliers per lane; f * c_{t-1} is
// a 16 x 32-bit product because the cell state is kept in 32 bits, which on an
// FPGA takes two DSP slices (hence 4*LH DSPs per tail in the published
// resource model). tanh is the piecewise-linear tanh_pwl.
//
// Timing: LT_tail = 5 cycles from in_valid to out_valid, fully pipelined.
//   1: register f*c_{t-1} (rescaled to Q12.20) and i*g
//   2: register c_t = sum   -> c_valid / c_new (for the caller's state register)
//   3-4: tanh(c_t)
//   5: register h_t = o * tanh(c_t), saturated to Q6.10
// c_prev is sampled in the in_valid cycle. The five-cycle latency is the
// value the published latency model uses for the tail; the stage split is
// this design's choice.
module lstm_tail
  import lstm_pkg::*;
#(
  parameter int LH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  data_t [4*LH-1:0]  gates,   // i, f, g, o blocks of LH
  input  acc_t  [LH-1:0]    c_prev,
  output logic              c_valid,
  output acc_t  [LH-1:0]    c_new,
  output logic              out_valid,
  output data_t [LH-1:0]    h
);

  acc_t  [LH-1:0] fc_q;
  acc_t  [LH-1:0] ig_q;
  data_t [LH-1:0] o_q1;
  data_t [LH-1:0] o_q2;
  data_t [LH-1:0] o_q3;
  data_t [LH-1:0] o_q4;
  data_t [LH-1:0] tc;
  logic  [4:0]    vpipe;

  always_ff @(posedge clk) begin
    for (int j = 0; j < LH; j++) begin
      fc_q[j]  <= acc_t'((48'(signed'(gates[int'(GATE_F)*LH+j])) * 48'(signed'(c_prev[j]))) >>> FRAC);
      ig_q[j]  <= mul_dd(gates[int'(GATE_I)*LH+j], gates[int'(GATE_G)*LH+j]);
      o_q1[j]  <= gates[int'(GATE_O)*LH+j];
      c_new[j] <= fc_q[j] + ig_q[j];
      h[j]     <= acc_to_data(mul_dd(o_q4[j], tc[j]));
    end
    o_q2 <= o_q1;
    o_q3 <= o_q2;
    o_q4 <= o_q3;
  end

  for (genvar j = 0; j < LH; j++) begin : g_lane
    tanh_pwl u_tanh (.clk(clk), .x(c_new[j]), .y(tc[j]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[3:0], in_valid};
  end
  assign c_valid   = vpipe[1];
  assign out_valid = vpipe[4];

endmodule
