# A streaming LSTM layer engine in Q8.8 fixed point

An LSTM layer spends nearly all of its arithmetic in eight matrix-vector
products: for each of its four gates (input *i*, forget *f*, output *o* and
candidate *c~*), one product with the layer input *x* and one with the
previous output *h*. This engine computes those products with
multiply-accumulate (MAC) units fed by memory streams. Weights and vectors
are never stored on chip. For every row of a weight matrix, the DMA engines
stream the row together with the vector it multiplies. The MAC units
accumulate the row, then pass the sum through a configurable piecewise-linear
sigmoid or tanh. A final element-wise stage forms the new cell state and the
new output:

```
i  = sig(Wxi x + Whi h + bi)      f = sig(Wxf x + Whf h + bf)
o  = sig(Wxo x + Who h + bo)      c~ = tanh(Wxc x + Whc h + bc)
c_t = f * c_{t-1} + i * c~        h_t = o * tanh(c_t)
```

The engine was sized for a two-layer character-level language model: 128
hidden units and a 65-symbol one-hot alphabet. The host CPU runs the time
loop. For each layer of each time step, it points the DMA engines at that
layer's weights and vectors and starts the engine. The engine writes `c_t`
and `h_t` back over `c_{t-1}` and `h_{t-1}`. After the last layer, a
separate output matrix-vector unit computes the character scores
`y = Wy h + by`.

The design is described in the paper *Recurrent Neural Networks Hardware
Implementation on FPGA* (Chang, Martini, Culurciello). This RTL reconstructs
the design from that description. The paper gives the block structure, the
number format, the 13-segment non-linearity and the three-stage schedule. It
does not give the register map, the stream assignment, buffer depths or
rounding. Those are decided here, and each one is marked as such below and in
the header comment of the file concerned.

## Number format

Every value on a stream is **Q8.8**: a signed 16-bit word with 8 fractional
bits, covering -128.0 to +127.996.

* A product of two Q8.8 words is Q16.16. Products, and sums of products,
  are kept in **32 bits**. The accumulators wrap modulo 2^32, which never
  happens at the model's sizes.
* A 32-bit value becomes Q8.8 again only in a **rescale**: an arithmetic
  shift right by 8 (truncation toward minus infinity), then saturation to
  `0x7FFF` / `0x8000`. The paper states only that 32-bit values are converted
  to 16 bits; truncation and saturation are this design's choice.
* The rescale is applied in four places:
  * after the adder of each gate;
  * inside every line segment;
  * after `c_t`;
  * after `h_t`.

  The host can read a sticky STATUS flag that records whether any rescale
  clipped a value during an operation.

## One time step in three stages

This is the least obvious part of the design. The engine has three gate
modules but only two of them run at a time:

* gate A is a sigmoid gate;
* gate B is a tanh gate;
* gate C is a second sigmoid gate.

An LSTM time step therefore runs as three sequential stages, under the
control of `lstm_ctrl`:

| stage | gates working | results | destination |
|-------|---------------|---------|-------------|
| IC    | A (sigmoid), B (tanh) | i, c~ | vector FIFOs i, c~ |
| FO    | A (sigmoid), C (sigmoid) | f, o | vector FIFOs f, o |
| EW    | ewise module | c_t, h_t | output streams 0 and 1 |
| OUT (separate operation) | output MAC | y | output stream 2 |

All data arrives on four 32-bit valid/ready input streams, and `router`
switches them per stage:

| stage | in0 | in1 | in2 | in3 |
|-------|-----|-----|-----|-----|
| IC | x, to A and B | `{Whi, Wxi}` to A | `{Whc, Wxc}` to B | h_{t-1}, to A and B |
| FO | x, to A and C | `{Whf, Wxf}` to A | `{Who, Wxo}` to C | h_{t-1}, to A and C |
| EW | c_{t-1} to ewise | idle | idle | idle |
| OUT | idle | Wy (bits 15:0) | idle | h, to output MAC |

### The weight stream

A weight word packs two 16-bit elements: `Wx[r][j]` in bits 15:0 and
`Wh[r][j]` in bits 31:16. This lets one 32-bit DMA port feed both MACs of a
gate, so the two matrices must be stored interleaved in memory.

### The vector streams

* A vector word carries one Q8.8 value in bits 15:0; the upper half is
  ignored.
* Results go out sign-extended to 32 bits. A `c_t` or `h_t` buffer therefore
  has the same format as the `c_{t-1}` or `h_{t-1}` buffer it was read from,
  and the host can let the engine overwrite state in place.
* The x and h streams are broadcast to both active gates. A broadcast word
  advances only when both gates accept it.
* The engine has no vector buffer. The DMA re-sends x and h once per weight
  row, ROWS times per stage.

### Row layout

The bias is not a separate input. Each weight row has one extra last
element that holds the bias, and the vectors carry a matching element of
1.0. x and h are zero-padded to the same length, so both MACs of a gate see
rows of the same length. One streamed row is therefore `COLS = 128 + 1`
elements:

```
x word stream, per row:   x0 x1 ... x64  0 ... 0   1.0      (65 symbols, padded to 128, bias one)
h word stream, per row:   h0 h1 ...           h127 1.0
weight words, per row:    {Wh[r][0],Wx[r][0]} ... {0, b[r]}  (bias only in the Wx half)
```

### Metering the inputs

The sync buffers inside the gates (next section) would otherwise swallow the
first words of the next stage while the current stage drains. To prevent
this, `lstm_ctrl` counts the words accepted on each input port. It closes
each port once the port has delivered its share for the stage:

* ROWS x COLS words on every port in IC and FO;
* ROWS words of `c_{t-1}` on in0 in EW;
* ROWS x COLS words on in1 and in3 in OUT.

A stage ends when both of its result streams have delivered ROWS elements.
In IC and FO these are FIFO pushes; in EW and OUT they are output-stream
handshakes. When the EW or OUT stage ends, the engine pulses `done` and
returns to idle.

## The gate: sync, two MACs, adder, rescale, non-linearity

```
x ─┐          ┌─ x,Wx ─ MAC ─┐
h ─┤  sync  ──┤               (+)── rescale ── 13-segment f() ── out
W ─┘          └─ h,Wh ─ MAC ─┘
```

**Sync.** The DMA engines run independently, so the k-th elements of x, h
and W arrive in different cycles, and one stream may start many cycles after
another. `stream_sync` gives each input a small FIFO, four words by default
(`SYNC_DEPTH`). It releases a beat only when every FIFO holds a word, and
then pops all of them together, so matching elements always reach the MACs
in the same cycle.

**MAC.** Each `mac` multiplies the element pair and accumulates. After
`COLS` elements it emits the row sum and starts the next row from zero, so
the rows of a matrix come out as consecutive elements of the product vector.
The two MACs run in lock step. Their 32-bit sums are added in 32 bits and
rescaled to Q8.8.

**Timing.** A gate accepts one element per cycle. A row result leaves the
non-linearity 1 (sync) + 1 (MAC) + 13 (segments) cycles after the row's last
element.

## The piecewise-linear non-linearity

`nonlinear` approximates tanh or sigmoid with 13 straight lines
`y = a*x + b`. Segment *k* holds `a`, `b` and an upper limit `lim`. The
samples pass through 13 pipelined `line_segment` stages, and each stage
works as follows:

* If no earlier stage has taken the sample and `x <= lim`, the stage
  computes `a*x + b` with its own multiplier and rescale.
* Otherwise the sample passes through the stage unchanged.

Segments must therefore be ordered by rising `lim`. The last segment should
have `lim = 0x7FFF`; a sample that no segment takes leaves as 0. Latency is
13 cycles and throughput is one sample per cycle.

Nothing about the shape is fixed in hardware: the tables are configuration
registers, loaded before use. Whether a gate is a sigmoid or a tanh gate
depends only on the table it was given. There are four tables:

| table | user |
|-------|------|
| 0 | gate A |
| 1 | gate B |
| 2 | gate C |
| 3 | the tanh inside ewise |

The testbenches use this construction, with L = 3 for tanh and L = 6 for
sigmoid:

* segment 0: `a = 0`, `b = f(-L)`, `lim = -L`;
* segments 1 to 11: chords of `f` over eleven equal intervals of
  `[-L, L]`. The chord over `[x0, x1]` has `a = (f(x1) - f(x0)) / (x1 - x0)`,
  `b = f(x0) - a*x0`, `lim = x1`;
* segment 12: `a = 0`, `b = f(L)`, `lim = 0x7FFF`.

All values are rounded to Q8.8. The maximum error is 0.031 for tanh and
0.016 for sigmoid. Any other segmentation with rising limits works as well.

## The element-wise stage

`ewise` follows the paper's block diagram:

1. A 4-port sync aligns `i`, `c~` and `f` (from the FIFOs) with `c_{t-1}`
   (from in0).
2. Two multipliers and a 32-bit adder form `i*c~ + f*c_{t-1}`, which is
   rescaled and registered as `c_t`.
3. `c_t` goes both to output stream 0 and into a tanh non-linearity. An
   eager fork lets either branch take it first.
4. A 2-port sync pairs `tanh(c_t)` with `o` from its FIFO. A last multiplier
   and rescale give `h_t`.

`c_t` therefore leaves about 14 cycles ahead of the matching `h_t`.

## The output layer

`out_matvec` is the extra matrix-vector product used after the last LSTM
layer: a 2-port sync, one MAC and a rescale, with no non-linearity. It
emits the scores `y` in Q8.8; a softmax or argmax is left to software. It
runs as its own operation (CTRL op 1). Its ROWS may differ from the LSTM's;
for example, the language model uses 65.

## Registers and the host's sequence

The register port is word-addressed: a write strobe, a 9-bit address, 32-bit
write data and combinational read data.

| address | name | access | contents |
|---------|------|--------|----------|
| 0x000 | CTRL | W | bit 0 start (ignored while busy), bit 1 op: 0 = LSTM step, 1 = output layer. Reads back op. |
| 0x001 | STATUS | R | bit 0 busy, bit 1 done, bits 4:2 stage (0 idle, 1 IC, 2 FO, 3 EW, 4 OUT), bit 5 a value was clipped. Done and clipped are sticky until the next start. |
| 0x002 | ROWS | RW | weight matrix height, at most `FIFO_DEPTH` (128) for an LSTM step |
| 0x003 | COLS | RW | streamed row length, padding and bias included |
| 0x100 + 64t + 4s + f | table t, segment s | RW | f = 0 slope a, 1 offset b, 2 limit lim (Q8.8 in bits 15:0) |

The host drives one time step of a two-layer model as follows:

1. Once, load the four tables (sigmoid, tanh, sigmoid, tanh) and write COLS.
2. For each layer:
   1. Write ROWS = 128.
   2. Queue on the DMA engines, in order:
      * in0: x, ROWS times for IC, again ROWS times for FO, then
        `c_{t-1}`;
      * in3: h, 2 x ROWS times;
      * in1: the i rows, then the f rows;
      * in2: the c~ rows, then the o rows.
   3. Queue the receive buffers for `c_t` (out0) and `h_t` (out1).
   4. Write CTRL = 1 and wait for `done`.
   5. For the next layer, copy `h_t` into that layer's x buffer.
3. For the output layer, write ROWS = 65 and queue h (65 times) on in3 and
   Wy on in1. Write CTRL = 3 and read y from out2.
4. Pick the next symbol from y. It becomes the next step's one-hot x.

Each output stream raises `tlast` on the last element of its vector.

## Timing and throughput

* With all streams delivering one word per cycle, stages IC and FO each take
  ROWS x COLS cycles plus about 16 cycles of pipeline.
* EW takes about ROWS + 20 cycles.
* For the 128-unit model this is 2 x 16,512 + 128 = 33,152 cycles per
  layer. A full time step (two layers plus the 65 x 129 output layer) needs
  at least 74,689 cycles.
* In simulation, with every stream delivering one word per cycle, a step
  takes 74,785 cycles. The 96 extra cycles are pipeline fill and drain over
  the seven stages of a step.
* Generating 1000 characters takes 74.8 M cycles, or 0.53 s at 142 MHz,
  against the 0.93 s the paper reports for its implementation.
* With the random stream gaps of the end-to-end testbench, a step measures
  about 89,000 cycles.
* During IC and FO, four MACs do useful work in every cycle, and all four
  input ports stream: up to 4 x 4 B per cycle, 2.27 GB/s at 142 MHz.

## Where this RTL departs from, or goes beyond, the paper

* **Stream assignment, word packing, register map, sync and FIFO depths,
  rounding and saturation** are this design's; the paper does not specify
  them. The paper has the host set memory locations "in the control
  registers". Here, buffer addresses belong to the DMA engines, which are not
  part of this RTL, so the registers hold sizes and commands only.
* **Input metering** in `lstm_ctrl` is added here. The engine needs it
  because the sync buffers would otherwise read ahead into the next stage.
  The paper does not say how its implementation avoids this.
* **Output streams.** Three output streams are used: `c_t`, `h_t` and `y`.
  The paper speaks of four full-duplex 32-bit DMA ports without saying which
  ones write results.
* **Which gate does which.** Gate A computes `i` and then `f`, and gate C
  computes `o`. The paper says only that two gates run per stage.
* **The output layer** has no non-linearity, and its scores are Q8.8.
* **Resources and rates differ from the paper's report:**
  * This RTL instantiates 62 multipliers: 3 gates x (2 MACs + 13 segments),
    ewise (3 + 13) and the output MAC. The paper lists 50 DSP blocks, so its
    implementation probably built some of its multipliers in logic or shared
    them.
  * The paper reports 388.8 M-ops/s and a peak memory bandwidth of
    1.236 GB/s for one module. This RTL would reach about 566 M-ops/s and
    2.27 GB/s if the memory system could keep up. The paper's figures suggest
    that its DMA delivered data below one word per cycle.
* **Not included:**
  * the AXI DMA engines, the DDR3 memory and the ARM host;
  * the mapping of the register port onto an AXI-Lite slave;
  * clock generation. The paper's module runs at 142 MHz; no timing
    constraints are given here.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares the
block against integer reference arithmetic written separately in
`tb/lstm_ref_pkg.sv`, and each ends with a line
`TB_RESULT checks=N failures=M`. The stream sources and sinks
(`tb_stream_src`, `tb_stream_sink`) insert random gaps and back-pressure.

| testbench | what it establishes |
|-----------|--------------------|
| `tb_stream_fifo` | order, full and empty behaviour, pointer wrap at a depth of 5, fall-through latency |
| `tb_stream_sync` | alignment under independent gaps, hold-back while one port has not started, one beat per cycle when all keep up |
| `tb_mac` | row sums with wrap-around, one element per cycle |
| `tb_rescale` | truncation and clipping corners, random values |
| `tb_line_segment` | hit, pass and clip rules |
| `tb_nonlinear` | exact match with the segment model, error bound against the real functions, every segment used, 13-cycle latency |
| `tb_gate` | sigmoid and tanh gates with late x, clipped sums |
| `tb_ewise` | `c_t` and `h_t` with independent back-pressure on both outputs, clipping |
| `tb_out_matvec` | scores, positive and negative clipping |
| `tb_router` | the routing tables above, for all stages |
| `tb_config_regs` | read-back, table outputs, start pulse, sticky flags |
| `tb_lstm_ctrl` | stage order, stage end conditions, input metering |
| `tb_lstm_top` | end to end at the default size (see below) |
| `tb_char_rnn` | the 1000-character generation run at full stream rate: all results, and the cycle count of every step against the streaming bound |

`tb_lstm_top` runs four time steps of the two-layer, 128-unit, 65-symbol
model at the RTL's default parameters, using random weights and feeding each
predicted symbol back as the next input.

* It checks every `c_t`, `h_t` and `y` bit-exactly, together with `tlast`.
* It counts how often each mechanism occurs, and fails if one never does:
  * every stage;
  * sync waits;
  * broadcast holds;
  * output back-pressure;
  * a FIFO filled with a whole vector;
  * flat segments reached;
  * rescale clipping, which must also set the STATUS flag.
* It runs in about 15 s.

`tb_char_rnn` repeats the model of `tb_lstm_top` for 1000 time steps, the
length of text generated in the paper's experiment. Its streams never pause,
and it checks every result (about 900,000 checks). Each step must take
between 74,689 and 74,689 + 280 busy cycles. It runs in about 2 minutes.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/lstm_pkg.sv tb/lstm_ref_pkg.sv tb/tb_lstm_top.sv --top-module tb_lstm_top
obj_dir/Vtb_lstm_top
```

Replace `tb_lstm_top` by any other testbench name to run that one instead.

## Files

| file | content |
|------|---------|
| `rtl/lstm_pkg.sv` | Q8.8 types, segment struct, stage and op encodings, register map, rescale function |
| `rtl/lstm_top.sv` | the engine: registers, router, gates, FIFOs, ewise, output MAC, controller |
| `rtl/lstm_ctrl.sv` | stage sequencer and input metering |
| `rtl/router.sv` | per-stage stream switching |
| `rtl/config_regs.sv` | register file and segment tables |
| `rtl/gate.sv` | one gate |
| `rtl/ewise.sv` | element-wise stage |
| `rtl/out_matvec.sv` | output-layer product |
| `rtl/mac.sv` | multiply-accumulate unit |
| `rtl/nonlinear.sv` | 13-stage piecewise-linear function |
| `rtl/line_segment.sv` | one stage of the function |
| `rtl/rescale.sv` | Q16.16 to Q8.8 |
| `rtl/stream_sync.sv` | stream aligner |
| `rtl/stream_fifo.sv` | valid/ready FIFO |
| `tb/*.sv` | testbenches, reference package, stream source and sink models |

Parameters of `lstm_top`:

* `FIFO_DEPTH` (default 128) is the largest ROWS an LSTM step may use.
* `SYNC_DEPTH` (default 4) is the per-port buffer of every sync block.
  Deeper sync buffers absorb longer DMA start-up skew. They do not change
  throughput once all streams are running.
