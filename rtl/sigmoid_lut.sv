// sigmoid_lut: logistic sigmoid by table lookup.
//
// The published design computes sigmoid with a block-RAM lookup table holding
// precomputed values over a fixed input range; this module does the same.
// The table size and range are this design's choice: 1024 entries covering
// [-8, 8) in steps of 1/64. Entry k holds round(1024 / (1 + exp(-(k-512)/64))),
// i.e. sigmoid of (k-512)/64 in Q6.10; inputs outside the range clamp to the
// first or last entry. The table is loaded from rtl/sigmoid_lut.mem.
//
// Interface and timing: x is a Q12.20 pre-activation, y the Q6.10 result.
// Two-cycle latency: cycle 1 registers the clamped table index, cycle 2 is
// the registered ROM read (the form a block RAM takes). Fully pipelined, one
// new input per cycle. No reset on the datapath registers; the table is a ROM.
module sigmoid_lut
  import lstm_pkg::*;
(
  input  logic  clk,
  input  acc_t  x,
  output data_t y
);

  localparam int ADDR_W     = 10;
  localparam int STEP_SHIFT = 6;                 // 2^-6 = 1/64 per entry
  localparam int SHIFT      = AFRAC - STEP_SHIFT; // Q12.20 -> table steps

  logic [DATA_W-1:0] rom [2**ADDR_W];
  initial $readmemh("rtl/sigmoid_lut.mem", rom);

  acc_t              step;
  logic [ADDR_W-1:0] idx_d;
  logic [ADDR_W-1:0] idx_q;

  always_comb begin
    step = x >>> SHIFT;
    if (step >= acc_t'(2**(ADDR_W-1)))       idx_d = '1;
    else if (step < -acc_t'(2**(ADDR_W-1)))  idx_d = '0;
    else                                     idx_d = ADDR_W'(step + acc_t'(2**(ADDR_W-1)));
  end

  always_ff @(posedge clk) begin
    idx_q <= idx_d;
    y     <= data_t'(rom[idx_q]);
  end

endmodule
