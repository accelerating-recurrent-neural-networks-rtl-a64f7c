# Low-latency LSTM autoencoder with balanced sub-layer pipelines

An LSTM layer cannot be pipelined like a feed-forward layer. Each timestep
needs the hidden vector h<sub>t-1</sub> of the step before, so the recurrent
part of a layer forms a loop. The loop decides how often the layer can take
a new timestep. However many multipliers a layer gets, they wait on that
loop.

This design applies that idea to a four-layer LSTM autoencoder of the kind
used to flag anomalies in gravitational-wave detector strain data. The
autoencoder learns to reconstruct normal noise, so a large reconstruction
error marks a candidate event. The design rests on two points:

* **Split every layer in two.** The product of the input weights with
  x<sub>t</sub> (`mvm_x`) depends on no earlier timestep. It runs ahead of
  the loop and queues its results. Only the recurrent product with
  h<sub>t-1</sub> (`mvm_h`), the gate activations and the cell update stay
  in the loop.
* **Give each half its own reuse factor.** A reuse factor R means every
  multiplier is used R times per product, so a unit needs R times fewer
  multipliers and takes R cycles. The loop sets the pace, so `mvm_h` gets R<sub>h</sub>
  small (1 = fully parallel). `mvm_x` can be made as slow as one loop
  iteration at no cost, so it gets a large R<sub>x</sub> and few multipliers.
  This is the "balanced" setting.

All layers sit on chip at once and hand vectors on as soon as they exist.
Layer N+1 therefore works on timestep t while layer N works on t+1.

## Network

```
x_t (IN_DIM) -> LSTM0 (32) -> LSTM1 (8, last h only) -> repeat x TS
             -> LSTM2 (8)  -> LSTM3 (32) -> time-distributed dense (IN_DIM) -> y_t
```

The defaults are:

* LSTM widths 32/8/8/32;
* TS = 8 timesteps per sequence;
* reuse factors (R<sub>h</sub>, R<sub>x</sub>) = (1, 9) in every layer.

These are the published U250 design point at 300 MHz. `IN_DIM = 2` is this
design's assumption (one channel per detector).

The encoder (LSTM0, LSTM1) compresses a sequence into LSTM1's last hidden
vector. `repeat_vector` feeds that vector to LSTM2 TS times. The decoder
(LSTM2, LSTM3, dense) rebuilds the sequence. LSTM2 cannot start a sequence
before LSTM1 has finished it, so the encoder and decoder of one sequence
never overlap. The encoder of the next sequence does overlap the decoder of
the current one.

## Timing model

One pass around the recurrent loop takes

```
ii = LT_mvm_h + LT_EXTRA + LT_sigma + LT_tail = RH + LT_EXTRA + 3 + 5   cycles
```

The terms are:

* **LT_mvm = R.** The MVM unit registers the multiplier outputs and their
  adder tree in one cycle, then runs R passes.
* **LT_sigma = 3.** One cycle for the add of the two MVM results, then two
  for the activation.
* **LT_tail = 5.** The cell update.
* **LT_EXTRA.** Optional register stages on the `mvm_h` result.

A layer is busy with one sequence for **II = ii × TS** cycles. Sequences
follow each other with no gap. `mvm_x` finishes in RX cycles, so the layer is
balanced when RX ≤ ii. With LT_EXTRA = 0 that gives the rule RX = RH + 8.

With LT_EXTRA = 0 the loop is exactly the simple analytical model: ii = R<sub>h</sub> + 8.
That gives 9 to 18 cycles for R<sub>h</sub> = 1 to 10, and the published
Zynq designs (ii 9/10/9). The published 300 MHz designs reach ii = 12 with R<sub>h</sub> = 1,
because routing adds cycles. The top therefore sets `LT_EXTRA = 3`.

| quantity (defaults) | this RTL | published U2 |
|---|---|---|
| timestep interval ii | 1 + 3 + 3 + 5 = 12 cycles | 12 |
| layer interval II | 96 cycles | 96 |
| first input to last output of a sequence | 263 cycles (0.877 µs at 300 MHz) | 0.867 µs |
| multipliers, all layers + dense | 9,424 | 9,021 DSP slices |

Multipliers per layer are:

```
4*LH*LH/RH (mvm_h) + 4*LH*ceil(LX/RX) (mvm_x) + 3*LH (tail)
```

The f·c<sub>t-1</sub> product of the tail is 16×32 bits, which on an FPGA
costs two DSP slices.

The published design comes from high-level synthesis. That tool replaces
multiplications by trivial weights with adders, so its DSP count is lower
than the multiplier count here.

## Inside one layer (`lstm_layer`)

```
 x_t --> mvm_x (RX) --> xbuf FIFO (2) --+
                                        v
   h_{t-1} --> mvm_h (RH) --> [LT_EXTRA] --> + --> sigmoid/tanh --> tail --> h_t --> out FIFO (2)
      ^                                                            |  c_t
      +------------------------------------------------------------+
```

**Input side.** `mvm_x` accepts a new x<sub>t</sub> whenever it is idle and
the input FIFO, counting the vector in flight, has room. Its result already
includes the bias.

**Recurrent side.** A timestep is *launched* (`mvm_h` started) when all of
these hold:

* the loop is free, or frees in this cycle;
* its `mvm_x` result is waiting;
* the output FIFO will have room for the h<sub>t</sub> this timestep
  produces.

The last rule is a credit check. A slow consumer holds timesteps back, and
`ev_stall` is raised, instead of losing data.

**Forwarding and reset.** The new h<sub>t</sub> is forwarded into `mvm_h` in
the cycle it leaves the tail, so back-to-back timesteps have no bubble. For
the first timestep of a sequence, h<sub>-1</sub> is zero. The cell state is
cleared after the last timestep, so every sequence starts from
h = c = 0.

**Outputs.** With `RETURN_SEQ = 0` (LSTM1), only the last h of a sequence is
pushed. The unit also raises three status strobes: `ev_launch`, `ev_stall`
and `seq_done`.

**Gate order.** The 4·LH gate rows are ordered i, f, g, o, with LH rows per
gate:

* i, f, o use the sigmoid;
* g (the candidate, or input-modulation, gate) uses tanh;
* c<sub>t</sub> = f·c<sub>t-1</sub> + i·g;
* h<sub>t</sub> = o·tanh(c<sub>t</sub>).

## Numbers and activation functions

* **Formats.** Inputs, weights, gates and hidden vectors are 16-bit Q6.10.
  Biases, MVM accumulators and the cell state are 32-bit Q12.20. A Q6.10 ×
  Q6.10 product is therefore already Q12.20.
* **Rounding.** Products are truncated. 32-bit sums wrap. Every conversion to
  16 bits saturates.
* **Sigmoid.** A 1024-entry ROM over [-8, 8) in steps of 1/64. Entry k is
  round(1024 / (1 + e<sup>-(k-512)/64</sup>)) (`rtl/sigmoid_lut.mem`).
  Inputs outside the range clamp. Latency is 2 cycles.
* **tanh.** Piecewise-linear, with 8 segments of width 0.5 on |x| < 4 between
  breakpoints round(1024·tanh(k/2)). It saturates at 1023/1024 and uses odd
  symmetry. The maximum error is about 0.02. Latency is 2 cycles.

The 16/32-bit widths, a sigmoid lookup table and a piecewise-linear tanh
come from the published design. The fraction split, the table size and
range, and the tanh segments are this design's choices.

## Interfaces of the top (`lstm_autoencoder`)

| port | meaning |
|---|---|
| `in_valid/in_ready/in_data[IN_DIM]` | x<sub>t</sub> stream, TS vectors per sequence, valid/ready handshake |
| `out_valid/out_ready/out_data[IN_DIM]` | reconstructed y<sub>t</sub> stream |
| `cfg_we, cfg_sel[2:0], cfg_addr[15:0], cfg_data[31:0]` | weight load, selects LSTM0..3 (0..3) or the dense layer (4) |
| `ev_launch[3:0], ev_stall[3:0], seq_done[3:0]` | per-layer one-cycle status strobes |

Weights live in registers and must be written before inference. Within an
LSTM layer the address map is:

1. W<sub>x</sub>, row-major: 4·LH rows (row = gate·LH + unit) × LX columns;
2. then W<sub>h</sub>: 4·LH × LH;
3. then the 4·LH biases.

Weights take the low 16 bits of `cfg_data`; biases take all 32. The dense
layer holds W (N_OUT × N_IN, row-major), then its N_OUT biases.

Parameters of the top:

* widths: `IN_DIM`, `LH0..LH3`;
* sequence length: `TS`;
* per-layer reuse factors: `RX0..RX3`, `RH0..RH3`;
* `RD` for the dense layer;
* `LT_EXTRA`.

To get the other published designs, override these:

* U1: RXn = 1.
* U3: RHn = 4, RXn = 12. With `LT_EXTRA = 1` this gives the published
  ii = 13.
* The Zynq-sized layers: an `lstm_layer` with LH = 9 and LT_EXTRA = 0.

## Files

| file | contents |
|---|---|
| `rtl/lstm_pkg.sv` | types `data_t`/`acc_t`, gate enum, fixed-point helpers, tanh breakpoints |
| `rtl/mvm_unit.sv` | matrix-vector multiply with reuse factor R, latency R |
| `rtl/sigmoid_lut.sv`, `rtl/sigmoid_lut.mem` | sigmoid table |
| `rtl/tanh_pwl.sv` | piecewise-linear tanh |
| `rtl/gate_activation.sv` | gx + gh and the four gate activations (3 cycles) |
| `rtl/lstm_tail.sv` | c<sub>t</sub>, h<sub>t</sub> (5 cycles) |
| `rtl/vec_fifo.sv` | small FIFO of whole vectors |
| `rtl/lstm_layer.sv` | one LSTM layer: both sub-layers, loop control, weights |
| `rtl/repeat_vector.sv` | issues one vector TS times |
| `rtl/td_dense.sv` | time-distributed dense output layer |
| `rtl/lstm_autoencoder.sv` | the top |
| `tb/tb_ref_pkg.sv` | bit-exact reference model (integer arithmetic) |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Simulating

Run from the repository root. The sigmoid table is read as
`rtl/sigmoid_lut.mem`. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_lstm_autoencoder \
    rtl/lstm_pkg.sv tb/tb_ref_pkg.sv tb/tb_lstm_autoencoder.sv
./obj_dir/Vtb_lstm_autoencoder
```

Every testbench ends by printing `TB_RESULT checks=N failures=M`. Each has a
watchdog.

* `tb_lstm_autoencoder` uses the top with all defaults. It loads random
  weights, streams three sequences back to back, and compares every output
  with the reference chain. It also pauses the consumer for 400 cycles. It
  fails unless each of these happens at least once:
  * layer overlap;
  * the repeat expansion;
  * encoder/decoder overlap across sequences;
  * stalls;
  * the 12-cycle ii.

  Run time is about 10 s.
* `tb_small_autoencoder` builds a smaller two-layer autoencoder from the
  library blocks: LSTM(9, last h) → repeat → LSTM(9) → dense. It runs the
  three published Zynq configurations side by side:

  | (RH, RX) | ii | II |
  |---|---|---|
  | (1, 1) | 9 | 72 |
  | (2, 2) | 10 | 80 |
  | (1, 9) | 9 | 72 |

  It checks those spacings exactly, and every output bit-exactly.
* `tb_lstm_layer` checks two small layers bit-exactly, one with
  LT_EXTRA = 2 and one returning only the last h. It checks the exact output
  spacing (ii, and ii·TS), the first-output latency RX + ii + 2, and
  correctness under random back-pressure.
* The block testbenches check:
  * every MVM result and its latency R;
  * full sweeps of the activation functions against the table formula and
    against `$exp`/`$tanh`;
  * tail latencies 2 and 5;
  * FIFO ordering;
  * repeat counts;
  * dense results and latency R+1.

## Departures from the published design, and limits

* The published design is generated by high-level synthesis with the
  weights as constants. Here the weights are run-time registers behind a
  configuration port. Weight ROMs would be an easy change, but they would
  remove the multiplier-to-adder savings noted above.
* The latencies LT_mvm = R, LT_sigma = 3 and LT_tail = 5 are the published
  model's numbers, built exactly. The 3 extra cycles at 300 MHz are modelled
  as plain register stages (`LT_EXTRA`) and not tied to a clock target.
* With LT_EXTRA = 3, U3 (RH = 4) comes out at ii = 15 instead of the
  published 13. The published tool evidently overlapped part of the longer
  MVM; use LT_EXTRA = 1 to match.
* A separate comparison in the published results gives 0.40 µs end to end
  (120 cycles at 300 MHz). That figure cannot be reached by any schedule
  that waits for LSTM1's last output before starting LSTM2. This design
  instead matches the 0.867 µs quoted for the four-layer model.
* Not part of the RTL:
  * the signal conditioning of the strain data (whitening, band-pass,
    normalisation);
  * the anomaly decision (reconstruction error against a threshold);
  * the design-space search that picks the reuse factors.

  All three are software steps around the accelerator.
* The numbers were checked against the reference model, not against a
  trained network. The accuracy of Q6.10 with these activation
  approximations on real detector data has not been evaluated here.
