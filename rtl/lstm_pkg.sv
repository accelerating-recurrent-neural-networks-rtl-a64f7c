// lstm_pkg: number formats and small arithmetic helpers shared by the LSTM
// autoencoder datapath.
//
// Two fixed-point formats are used throughout. Activations, inputs and
// weights are 16-bit signed Q6.10 (data_t). Biases, matrix-vector
// accumulators and the LSTM cell state are 32-bit signed Q12.20 (acc_t), so
// the full product of two Q6.10 values lands in Q12.20 without a shift. The
// 16/32-bit widths follow the published design; the split into integer and
// fraction bits is this implementation's choice. Products are truncated by
// arithmetic shift, 32-bit sums wrap, and narrowing to 16 bits saturates.
//
// The package also holds the nine breakpoints of the piecewise-linear tanh:
// TANH_PT[k] = round(1024 * tanh(k/2)), k = 0..8.
//
// Lint note: modules that import the package but do not use every constant
// (for example mvm_unit and TANH_PT) get verilator UNUSEDPARAM warnings for
// those package constants; the constants are used by other modules.
package lstm_pkg;

  localparam int DATA_W = 16;  // inputs, weights, hidden vectors
  localparam int ACC_W  = 32;  // biases, accumulators, cell state
  localparam int FRAC   = 10;  // fraction bits of data_t
  localparam int AFRAC  = 2 * FRAC;  // fraction bits of acc_t

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Gate order inside the 4*LH rows of every weight matrix.
  typedef enum logic [1:0] {
    GATE_I = 2'd0,
    GATE_F = 2'd1,
    GATE_G = 2'd2,
    GATE_O = 2'd3
  } gate_e;

  localparam int TANH_PTS = 9;
  localparam logic [10:0] TANH_PT[TANH_PTS] = '{
    11'd0, 11'd473, 11'd780, 11'd927, 11'd987, 11'd1010, 11'd1019, 11'd1022, 11'd1023
  };

  // Narrow a Q12.20 value to Q6.10 by dropping 10 fraction bits, saturating.
  function automatic data_t acc_to_data(acc_t a);
    acc_t s;
    s = a >>> FRAC;
    if (s > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (s < -acc_t'(32768)) return data_t'(16'sh8000);
    else                         return data_t'(s[DATA_W-1:0]);
  endfunction

  // Full product of two Q6.10 values, Q12.20.
  function automatic acc_t mul_dd(data_t a, data_t b);
    return acc_t'(a) * acc_t'(b);
  endfunction

endpackage
