// tanh_pwl: hyperbolic tangent as a piecewise-linear function.
//
// The published design uses a piecewise-linear tanh to keep latency low; the
// segments are this design's choice. |x| in [0, 4) is cut into eight segments
// of width 0.5; on segment k the output interpolates linearly between the
// breakpoints TANH_PT[k] and TANH_PT[k+1] (round(1024*tanh(k/2)), from
// lstm_pkg). For |x| >= 4 the output is 1023/1024. The sign is restored at
// the end (tanh is odd). Maximum error against tanh is about 0.02.
//
// Interface and timing: x is Q12.20 (a pre-activation or a cell state), y is
// Q6.10. Two-cycle latency, fully pipelined: cycle 1 registers sign, segment
// and the 10-bit position inside the segment; cycle 2 registers the
// interpolated result.
module tanh_pwl
  import lstm_pkg::*;
(
  input  logic  clk,
  input  acc_t  x,
  output data_t y
);

  localparam int SEG_SHIFT = AFRAC - 1;   // segment width 0.5 = 2^19 in Q12.20

  logic [ACC_W-1:0] mag;
  logic             neg_q;
  logic             sat_q;
  logic [2:0]       seg_q;
  logic [9:0]       pos_q;
  logic [10:0]      lo;
  logic [10:0]      hi;
  logic [21:0]      delta;
  logic [10:0]      yabs;

  always_comb mag = x[ACC_W-1] ? (~x + 1'b1) : x;

  always_ff @(posedge clk) begin
    neg_q <= x[ACC_W-1];
    sat_q <= (mag >> SEG_SHIFT) >= (ACC_W)'(8);
    seg_q <= mag[SEG_SHIFT+2:SEG_SHIFT];
    pos_q <= mag[SEG_SHIFT-1:SEG_SHIFT-10];
  end

  always_comb begin
    lo    = TANH_PT[{1'b0, seg_q}];
    hi    = TANH_PT[int'(seg_q) + 1];
    delta = 22'(hi - lo) * 22'(pos_q);
    yabs  = sat_q ? TANH_PT[TANH_PTS-1] : (lo + 11'(delta >> 10));
  end

  always_ff @(posedge clk) begin
    y <= neg_q ? -data_t'(yabs) : data_t'(yabs);
  end

endmodule
