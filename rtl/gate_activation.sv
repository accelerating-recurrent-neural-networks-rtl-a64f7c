// gate_activation: the adder and activation stage of an LSTM layer.
//
// For every one of the 4*LH gate rows it adds the input-side pre-activation
// gx (mvm_x result, which already carries the bias) to the recurrent-side
// pre-activation gh (mvm_h result), and applies the gate's activation:
// sigmoid for the input, forget and output gates, tanh for the candidate
// (g) gate. Rows are ordered i, f, g, o, LH rows each (gate_e in lstm_pkg).
// All rows work in parallel.
//
// Timing: LT_sigma = 3 cycles from in_valid to out_valid: cycle 1 registers
// the 32-bit sum, cycles 2-3 are the two-cycle sigmoid table or
// piecewise-linear tanh. Fully pipelined. The three-cycle latency is the
// value the published latency model uses for the sigmoid; the stage split is
// this design's choice.
module gate_activation
  import lstm_pkg::*;
#(
  parameter int LH = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  acc_t  [4*LH-1:0]     gx,
  input  acc_t  [4*LH-1:0]     gh,
  output logic                 out_valid,
  output data_t [4*LH-1:0]     gates
);

  acc_t [4*LH-1:0] pre_q;
  logic [2:0]      vpipe;

  always_ff @(posedge clk) begin
    for (int r = 0; r < 4 * LH; r++) pre_q[r] <= gx[r] + gh[r];
  end

  for (genvar g = 0; g < 4; g++) begin : g_gate
    for (genvar j = 0; j < LH; j++) begin : g_lane
      if (g == int'(GATE_G)) begin : g_tanh
        tanh_pwl u_act (.clk(clk), .x(pre_q[g*LH+j]), .y(gates[g*LH+j]));
      end else begin : g_sigm
        sigmoid_lut u_act (.clk(clk), .x(pre_q[g*LH+j]), .y(gates[g*LH+j]));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[1:0], in_valid};
  end
  assign out_valid = vpipe[2];

endmodule
