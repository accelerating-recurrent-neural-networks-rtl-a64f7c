// repeat_vector: turns one vector into a sequence of TS copies.
//
// In the autoencoder the encoder's last LSTM layer returns only its final
// hidden vector (the latent code). The decoder's first LSTM layer needs a
// sequence, so this block repeats that vector once per timestep, like a
// Keras RepeatVector layer.
//
// Interface and timing: valid/ready streams on both sides. A vector accepted
// on the input is held in a register and offered TS times on the output; the
// first copy is valid the cycle after acceptance. The next input is accepted
// in the cycle the last copy is taken, so back-to-back sequences leave no gap.
module repeat_vector
  import lstm_pkg::*;
#(
  parameter int N  = 8,
  parameter int TS = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  data_t [N-1:0] din,
  output logic          out_valid,
  input  logic          out_ready,
  output data_t [N-1:0] dout
);

  localparam int CW = $clog2(TS + 1);

  logic [CW-1:0] left;   // copies still to send
  logic          last_pop;

  assign out_valid = (left != '0);
  assign last_pop  = out_valid && out_ready && (left == CW'(1));
  assign in_ready  = !out_valid || last_pop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left <= '0;
      dout <= '0;
    end else if (in_valid && in_ready) begin
      left <= CW'(TS);
      dout <= din;
    end else if (out_valid && out_ready) begin
      left <= left - CW'(1);
    end
  end

endmodule
