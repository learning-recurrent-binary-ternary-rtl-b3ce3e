# An LSTM inference engine for binary and ternary recurrent weights

An LSTM layer spends nearly all of its work in eight matrix-vector products,
`W_fh h`, `W_fx x`, `W_ih h`, and so on. If every weight is trained to be
`+1`/`-1` (binary) or `+1`/`0`/`-1` (ternary), each of those multiplications
reduces to "add the activation, subtract it, or skip it". A MAC unit then
needs an adder and a multiplexer, with no multiplier. Each weight also costs
1 or 2 bits of memory and bandwidth instead of 12. The price is that training
has to batch-normalise each binary/ternary product for the network to learn
at all, so a per-row normalisation step appears at inference too.

This repository holds synthesizable SystemVerilog for such an engine. It runs
one LSTM time step per `start`:

```
f = sigma(BN(W_fh h) + BN(W_fx x) + b_f)      i, o: likewise
g = tanh (BN(W_gh h) + BN(W_gx x) + b_g)
c = f*c_prev + i*g
h = o * tanh(BN(c))                           (BN of c optional)
```

By default it has 100 MAC lanes, binary weights and 12-bit fixed-point
activations. The design follows the binary/ternary LSTM accelerator of
Ardakani et al., "Learning Recurrent Binary/Ternary Weights" (ICLR 2019).
That paper gives the engine's function and headline numbers: the MAC counts,
the 12-bit activations, multiplexers instead of multipliers, weights held in
DRAM, and 400 MHz. Almost all of the microarchitecture below is this design's
own, and the text says so where it matters.

## The dataflow of one time step

Stack the four gate matrices into one matrix of `4*d_h` rows and
`d_h + d_x` columns. Row `r` belongs to LSTM unit `r/4` and gate `r%4`, in the
order f, i, o, g. The input to the matrix is the vector `[h_{t-1}; x_t]`.

* The rows are cut into **row groups** of `N_MAC`. Each MAC lane owns one row
  of the current group.
* For a group, the controller walks the **columns**: first the `d_h`
  elements of `h_{t-1}`, then the `d_x` elements of `x_t`. It broadcasts one
  element per cycle to all lanes and takes one **weight word** (one weight
  per lane) from the weight stream.
* Each lane keeps **two accumulators**, one for the `h` part and one for the
  `x` part. The two products of a gate are normalised with different
  parameters, so they must not be summed early.
* On a group's last column, every lane copies its two sums into **hold
  registers** and starts from zero on the next group. The **post-processor**
  then walks the group one LSTM unit per cycle. Lanes `4u..4u+3` hold unit
  `u`'s four gate rows, which it turns into f, i, o, g and then c_t and h_t.
  It writes c_t back in place and h_t into the second half of a
  **ping-pong pair** of h buffers. The MAC array is meanwhile already on the
  next group.
* When the last group is written back, the two h buffers swap roles and
  `done` pulses.

Timing follows from this:

```
cycles per step = ceil(4*d_h / N_MAC) * (d_h + d_x)       (one weight word each)
                + tail <= N_MAC/4 + 6                       (last group's post-processing)
```

Two cases stall the MAC array:

* The weight stream has no valid word. The engine just waits.
* A row group is shorter than the post-processor's walk of the previous group
  (`d_h + d_x` below about `N_MAC/4 + 2`). Its last column is then held back
  until the hold registers are free.

`perf_cycles`, `perf_wait_w` and `perf_wait_post` count these for the last
step.

With 100 lanes at 400 MHz the simulated step times of the evaluated tasks
are:

| layer (d_h, d_x)                  | cycles/step | at 400 MHz | ideal 4·d_h·(d_h+d_x)/100 |
|-----------------------------------|------------:|-----------:|--------------------------:|
| MNIST pixel LSTM (100, 1)         |        434  |   1.09 µs  |                      404 |
| PTB characters (1000, 50)         |     42 030  |   105 µs   |                   42 000 |
| War & Peace (512, 87)             |     12 596  |  31.5 µs   |                   12 267 |
| Linux kernel (512, 101)           |     12 890  |  32.2 µs   |                   12 554 |
| Text8 (2000, 27)                  |    162 190  |   405 µs   |                  162 160 |
| PTB words, small (300, 300)       |      7 230  |  18.1 µs   |                    7 200 |
| PTB words, medium (650, 650)      |     33 830  |  84.6 µs   |                   33 800 |
| PTB words, large, one layer (1500, 1500) | 180 030 | 450 µs |                  180 000 |
| QA encoder, one direction (256, 256) |    5 643 |  14.1 µs   |                    5 242 |

The input widths are the vocabulary sizes for the character tasks and one
pixel for MNIST. For the word models and the QA encoder they are assumed
equal to the layer size. The "ideal" column is one accumulation per lane per
cycle with no idle lanes, which is how the original's per-step latencies
work out: its chart gives, for example, 1010 and 105 000 (labelled ps, but
they only match as ns at 400 MHz) for MNIST and PTB characters. This engine
is within 1–8 % of that. The loss comes from a last group that is only partly
used (4·512 = 2048 rows is 20.48 groups) and from the post-processing tail.

**High-speed variants.** The original also sizes a "high-speed" engine, at
the same area as a 12-bit baseline, with 1000 binary or 500 ternary MAC
units. These are `N_MAC = 1000` and `N_MAC = 500, WMODE = W_TERNARY` here,
and they work (see `tb_bt_lstm_highspeed`). On large layers they reach the
expected speed-up, for example PTB characters in 4455 cycles (9.4x) and
8530 cycles (4.9x). On small layers they do not. A layer with fewer than
`N_MAC` gate rows leaves lanes idle, and the one-unit-per-cycle
post-processor adds up to 256 cycles. MNIST takes 206 cycles on the
1000-lane engine, against the roughly 40 that the original's chart implies.
Reaching that would need a dataflow that also splits columns across lanes,
as DaDianNao's tiles do. The original builds on that dataflow but does not
describe it.

## Number formats and how to load a trained model

| quantity                                | format                                   |
|-----------------------------------------|------------------------------------------|
| x, h, c, gate values f/i/o/g            | 12-bit signed Q3.8 (1.0 = 256, range [-8, 8)) |
| accumulators                            | 24-bit signed, same scale as activations |
| BN scales a_h, a_x, a_c                 | 16-bit signed, 12 fractional bits (1.0 = 4096) |
| biases (folded)                         | 16-bit signed Q7.8                       |
| binary weight code                      | 1 bit: `1` = +1, `0` = -1                |
| ternary weight code                     | 2 bits: `01` = +1, `11` = -1, `00`/`10` = 0 |

Only the 12-bit activation width comes from the original. The split, the
other widths and the codes are this design's choice.

At inference, BN's mean `E` and variance `V` are fixed numbers, so each gate
row's
`BN(W_h h; phi_h, 0) + BN(W_x x; phi_x, 0) + b` is an affine map of its two
accumulator values. The engine evaluates

```
pre = floor((a_h*acc_h + a_x*acc_x) / 4096) + bias       saturated to 12 bits
a_h = phi_h / sqrt(V_h + eps)       a_x = phi_x / sqrt(V_x + eps)
bias = b - a_h*E_h - a_x*E_x
```

Here `phi`, `b`, `E` and `V` are the trained real-valued quantities. Since
acc and pre carry the same scale (1.0 = 256), `a_h` and `a_x` need no
rescaling: store `round(4096*a)`. The bias is stored as `round(256*bias)`. If the model also normalises the
cell state, `BN(c) = floor(a_c*c/4096) + b_c` is folded the same way. Set
`a_c = 4096`, `b_c = 0` when it does not. The binary/ternary scale factor
`alpha` of the training method is absorbed into `a_h` and `a_x`, because it
multiplies a whole product.

The parameters of one unit form one `bn_unit_t` (`btl_pkg`): four
`{a_h, a_x, bias}` triples, `gate[0..3]` = f, i, o, g, plus `a_c` and
`b_c`. They total 224 bits. Because of this step, a few
multipliers remain in the engine: two per gate row in `bn_fold`, and four in
`cell_update`. They sit in the post-processor, which handles one unit per
cycle. The `N_MAC` lanes themselves contain none.

**Nonlinearities.** `nl_act` uses the piecewise-linear "PLAN" sigmoid. Its
slopes are 1/4, 1/8 and 1/32, with breakpoints at 1, 2.375 and 5, and
`sigma(-x) = 1 - sigma(x)`. tanh comes from `tanh(x) = 2*sigma(2x) - 1`. The
error is below 0.025 for sigma and 0.05 for tanh, and `tb_nl_act` checks
both bounds exhaustively. How the original evaluates sigma and tanh is not
known, so this is a substitute. A model should be fine-tuned, or at least
validated, with the same approximation and rounding.

## Weight stream

The weights are not stored on chip. In the original they live in DRAM,
which it leaves out of its results. Here the DRAM is replaced by a
valid/ready stream of `N_MAC*WB`-bit words (`WB` = 1 binary, 2 ternary), in
this order:

```
for group G in 0 .. ceil(4*d_h/N_MAC)-1:
  for column k in 0 .. d_h+d_x-1:          (k < d_h: h column k, else x column k-d_h)
    word[i*WB +: WB] = code of W[G*N_MAC + i][k]      for lane i
```

Lanes whose row is at or beyond `4*d_h` are ignored. A memory controller
that streams this layout at one word per cycle keeps the lanes fully busy:
100 bits/cycle for the default engine, which is 40 Gbit/s at 400 MHz, 12x
less than 12-bit weights would need.

## Using the engine

Ports of `bt_lstm_top`. The host ports may be used only while `busy` is low.

* `x_we/x_addr/x_data` write `x_t`.
* `p_we/p_addr/p_data` write the `bn_unit_t` of unit `p_addr`.
* `st_we/st_addr/st_h/st_c` write an initial `h` and `c`, before the first
  step of a sequence.
* `rd_addr` returns `rd_h` and `rd_c` asynchronously. After `done`, `rd_h`
  is `h_t`.
* `start` with `cfg_dh` (1..H_MAX) and `cfg_dx` (0..X_MAX) runs one step.
  `done` pulses once at its end, and the next `start` may follow in the very
  next cycle.

A sequence therefore consists of loading the parameters once, writing the
initial state, and then for each t writing `x_t`, pulsing `start` and waiting
for `done`. A stacked LSTM runs one layer at a time: the host copies each
layer's `h` into the next layer's `x` and reloads the parameters (the
weights come from the stream anyway). A bidirectional layer is two passes.
The softmax classifier, the attention of the QA model, and training are
outside the engine.

## Module map

| file                 | role |
|----------------------|------|
| `rtl/btl_pkg.sv`     | widths, weight modes, `bn_gate_t`/`bn_unit_t`, saturation helper |
| `rtl/bt_mac.sv`      | one lane: sign/zero multiplexer, two accumulators, two hold registers |
| `rtl/mac_array.sv`   | `N_MAC` lanes sharing the broadcast activation |
| `rtl/lstm_ctrl.sv`   | step sequencer: groups, columns, stream handshake, hand-off, counters |
| `rtl/post_unit.sv`   | one unit per cycle: 4 x `bn_fold` + 4 x `nl_act`, then `cell_update` (2 stages) |
| `rtl/bn_fold.sv`     | folded batch normalisation of one gate row |
| `rtl/nl_act.sv`      | PLAN sigmoid / tanh |
| `rtl/cell_update.sv` | `c = f*c + i*g`, `h = o*tanh(BN(c))` |
| `rtl/vec_buffer.sv`  | register-file vector buffer (1 write, 2 asynchronous reads) |
| `rtl/bt_lstm_top.sv` | ties them together: h ping-pong pair, c, x and parameter buffers |

Parameters of the top: `N_MAC` (multiple of 4, default 100), `WMODE`
(`W_BINARY` or `W_TERNARY`), and `H_MAX`/`X_MAX` (default 2048, enough for
the 2000-unit Text8 layer, the largest evaluated). At the defaults, synthesis
gives about 9.9 kbit of flip-flops, mostly the 200 accumulators and 200 hold
registers of 24 bits, plus 557 kbit of buffer arrays. About 459 kbit of the
arrays is BN parameters, 224 bits per unit. On silicon they would be SRAM
macros with a registered read, which would add one pipeline stage in front of
the MAC array and the post-processor. `vec_buffer` reads asynchronously
instead.

## Verification

Each testbench checks itself against a reference written independently in
`tb/tb_ref_pkg.sv`. That reference uses real-valued formulas with an explicit
floor, a separate LSTM step function, and a hash-based weight generator
`wgen` that both the stream model and the reference use. So no weight table
is stored.

| testbench | what it covers |
|-----------|----------------|
| `tb_bt_mac`, `tb_mac_array` | both weight modes, random h/x splits, idle cycles, extreme sums |
| `tb_bn_fold`, `tb_cell_update` | random and saturating cases against the reference |
| `tb_nl_act` | all 4096 inputs of both functions, bit-exact and against exact sigma/tanh |
| `tb_vec_buffer` | random writes and dual reads against a model |
| `tb_post_unit` | full and partial groups, written values and units, `U + 3` cycle timing |
| `tb_lstm_ctrl` | column/phase/address sequence, group hand-off, word count, cycle bounds, hold-back |
| `tb_bt_lstm_top` | reduced binary (16 lanes) and ternary (8 lanes) engines over multi-step sequences; requires a stalled stream, a post-processor hold-back, a partial group, d_x = 0, ping-pong reuse, saturated c, cell BN and ternary zeros to each occur |
| `tb_bt_lstm_full` | default engine on all evaluated layer sizes, with the cycle bounds above; the large word model's two layers run stacked through the host ports |
| `tb_bt_lstm_highspeed` | 1000-lane binary and 500-lane ternary engines, and the 100-lane ternary engine, on task-sized layers |

Each testbench prints `TB_RESULT checks=N failures=M`. To run one with plain
Verilator, from the repository root:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/btl_pkg.sv tb/tb_ref_pkg.sv tb/tb_bt_lstm_full.sv --top-module tb_bt_lstm_full
./obj_dir/Vtb_bt_lstm_full
```

Drop `tb/tb_ref_pkg.sv` for the testbenches that do not import it
(`tb_vec_buffer`). The full-size run takes a few seconds.

Verilator simulates two-valued logic, so the buffers start with random
contents. The tests write everything they read, and a real host must do the
same (`h`, `c`, `x` and the parameters).

## Where this departs from, or goes beyond, the original

* **Dataflow.** The original builds on DaDianNao's tiled dataflow, but gives
  no detail. The row-group/column broadcast, the hold registers and the
  overlapped post-processing here are a simpler stand-in. As a result,
  small layers on the 1000- and 500-lane engines fall well short of the
  original's latency (see above).
* **Batch normalisation.** The original's hardware section speaks of the
  plain LSTM equations. This engine implements the BN-augmented equations
  that its training method produces, folded for inference, plus the optional
  BN of c.
* **Formats, encodings, rounding, sigma/tanh approximation, reset,
  handshakes and on-chip buffers** are this design's choices (see above).
* **Not included.** The DRAM and its controller, the full-precision 12-bit
  baseline engine, the classifier, multi-layer sequencing, and training.
* **Not verified.** The 400 MHz clock and the area and power of the original
  are properties of its 65 nm implementation. This RTL has only been
  simulated and checked by open-source synthesis for size; no timing closure
  was attempted. The post-processor's three multipliers in series (BN fold,
  then cell update) are split over two pipeline stages, which may not be
  enough at that clock.
