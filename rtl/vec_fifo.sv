// vec_fifo: a small first-in first-out buffer of whole vectors.
//
// Sub-layers of the accelerator pass complete vectors to each other through
// streams. This FIFO is that stream: between mvm_x and the recurrent loop of
// a layer it holds gate pre-activations (double buffering lets mvm_x work on
// timestep t+1 while the loop processes t), and at a layer's output it holds
// hidden vectors until the next layer takes them. The depth (2 by default)
// is this design's choice.
//
// Interface and timing: `push` writes `din` at the clock edge, `pop` removes
// the head; both may happen in the same cycle. `dout` is the head entry
// (valid while count > 0), read combinationally from the storage array.
// `count` is the occupancy. Pushing when full or popping when empty is a
// protocol error, checked by assertions.
//
// Lint note: verilator reports rst_n as "flopped as both synchronous and
// async" (SYNCASYNCNET). The registers use rst_n as an asynchronous reset
// only; the other use is the `disable iff (!rst_n)` of the assertions, which
// is simulation-only checking and creates no logic.
module vec_fifo #(
  parameter int W     = 4096,
  parameter int DEPTH = 2,
  localparam int CW   = $clog2(DEPTH + 1),
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [W-1:0]  din,
  input  logic          pop,
  output logic [W-1:0]  dout,
  output logic [CW-1:0] count
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr;
  logic [AW-1:0] wr_ptr;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  assign dout = mem[rd_ptr];

  a_no_overflow  : assert property (@(posedge clk) disable iff (!rst_n)
                                    !(push && !pop && int'(count) == DEPTH));
  a_no_underflow : assert property (@(posedge clk) disable iff (!rst_n) !(pop && count == '0));

endmodule
