# BRDS: a sparse LSTM layer accelerator in SystemVerilog

An LSTM layer spends nearly all of its time in eight matrix-vector products per
time step. The four input matrices `W_fx, W_ix, W_gx, W_ox` (H x X) multiply the input
`x_t`, and the four recurrent matrices `W_fh .. W_oh` (H x H) multiply the previous
output `h_{t-1}`. Most of these weights can be pruned away with little loss of
accuracy. Plain unstructured pruning, though, leaves rows with very different numbers
of nonzeros, and parallel hardware then stalls on the longest row.

This design follows the row-balanced, dual-ratio scheme of the BRDS accelerator
(S. A. Ghasemzadeh, E. Bank Tavakoli, M. Kamal, A. Afzali-Kusha and M. Pedram, "BRDS: An FPGA-based LSTM
Accelerator with Row-Balanced Dual-Ratio Sparsification"):

* **Row-balanced.** Every row of every input matrix keeps exactly `X_SP` nonzeros. Every
  row of every recurrent matrix keeps exactly `H_SP`. All rows therefore cost the same
  number of multiplies, and a fixed set of multipliers is always fully busy.
* **Dual ratio.** The input and recurrent matrices are pruned to different ratios,
  because they tolerate pruning differently. The datapath has one *Large* and one
  *Small* multiplier array and sends each weight set to the array that fits it.

The RTL computes one LSTM time step:

```
f = sig(W_fx x + W_fh h + b_f)     i = sig(W_ix x + W_ih h + b_i)
g = tanh(W_gx x + W_gh h + b_g)    o = sig(W_ox x + W_oh h + b_o)
c_t = f * c_{t-1} + i * g          h_t = o * tanh(c_t)
```

Run it repeatedly for a sequence: `h_t` and `c_t` stay on chip and become the state
for the next step. The default parameters are the evaluated speech-recognition
(TIMIT) configuration:

* `X = 153`, `H = 1024`
* `X_SP = 20` and `H_SP = 64`, which prunes 87% of each input row and 94% of each
  recurrent row
* `Q = 4` parallel lanes, with 84 multipliers per lane (336 in all)
* 16-bit data

At these sizes one time step takes 1040 clock cycles, about 5.2 us at the 200 MHz
target clock.

## Number format and "recovery"

All data are 16-bit two's complement fixed point with 8 fraction bits (Q7.8).

* **Adds.** Every adder computes at full width and then saturates to 16 bits.
* **Multiplies.** Every multiplier computes the full 32-bit product, shifts it right by
  8 (arithmetic, so it rounds toward minus infinity), and then saturates.

The saturation step is the "recovery" that follows every add and multiply. The shared
helpers are `sat`, `fx_add` and `fx_mul` in `brds_pkg`. The fraction width is the
`FRAC` parameter. It is this design's choice: the 16-bit total is the evaluated one.

## How a sparse row is stored

A pruned row is kept as two parallel lists:

* its nonzero values, in memory `M_WX` for the input weights or `M_WH` for the
  recurrent weights;
* for each value, a **relative index**: the number of zero columns skipped since the
  previous nonzero of the same row. These go in `M_AdX` / `M_AdH`.

Example: a row `[0, a, 0, 0, b, c]` is stored as values `a b c` and relative indices
`1 2 0`.

Relative indices are smaller than absolute ones. They would fit in fewer bits, but this
RTL keeps them `n` bits wide like the weights.

### Decoding the indices (`address_decoder`)

The decoder turns relative indices back into absolute columns with a running sum:

```
col[0] = base + rel[0]
col[j] = col[j-1] + 1 + rel[j]
```

The chain is combinational, so the columns are ready in the same cycle as the
indices.

A row with more nonzeros than there are multiplier lanes is split into `NCH` chunks,
one memory row each. Between chunks the decoder carries the next column in a register:
`base` is 0 on the first chunk of a row and one past the previous chunk's last column
after that. In the TIMIT configuration a row is exactly one chunk.

### Memory layout

The accelerator has `Q` lanes. Lane `q` owns the matrix rows `i` with `i mod Q = q`,
and every per-row memory has one bank per lane:

| memory | one row holds | rows per lane bank |
|---|---|---|
| `M_WX`, `M_AdX` | `RX` weights or indices: one chunk of one gate row | `(H/Q) * 4 * NCH` |
| `M_WH`, `M_AdH` | `RH` weights or indices | `(H/Q) * 4 * NCH` |
| `M_B` | one bias | `(H/Q) * 4` |
| `M_C` | one cell state | `H/Q` |

For matrix row `i`, gate `g` (f, i, g, o = 0..3) and chunk `k`:

* the **local** row in lane `i mod Q` is `((i/Q)*4 + g)*NCH + k`;
* on the load interface the **global** row is `local*Q + lane`.

So consecutive global rows go to consecutive lanes. The four gate rows of one matrix
row sit next to each other in their bank.

The operand vectors are **replicated**, because every multiplier lane reads a
different column in every cycle (`replicated_ram`):

* Each lane has `ceil(R/2)` copies of `x` (`M_X`) and of `h` (`M_H`).
* Each copy is a memory with two read ports and one shared write port.
* Read port `k` of a lane is served by copy `k/2`.
* A write goes to every copy at once, so the copies stay identical.

With the defaults this means 10 copies of `M_X` and 32 of `M_H` per lane. The whole
TIMIT layer holds 15.4 Mbit of on-chip memory in total.

## One lane's datapath

Each lane is one chain of Address Decoders, Gate, Buffer and Function. All `Q` lanes
take the same command from the controller in lockstep. A new chunk enters the chain
every cycle:

| cycle | what happens |
|---|---|
| c0 | The controller issues local weight row `r` and bias row `(i/Q)*4+g` to every lane. |
| c1 | The weight rows, index rows and bias arrive. The two address decoders turn the indices into columns, which address the replicated `M_X` and `M_H` copies. |
| c2 | The gathered `x` and `h` operands, the weights and the bias enter the Gate. |
| c3 | **Mult arrays.** The MA Selector (`ma_selector`) routes the input set and the recurrent set to the Large (`RL = 64`) and Small (`RS = 20`) multiplier arrays. `sel_x_large` picks which set goes to the Large array. A set narrower than its array is padded with zeros. All products are registered. |
| c4 | **Tree adder.** A ternary tree of three-input saturating adders (`tree_adder`, built from `add3_dsp`, the three-input add one DSP slice can do) sums all `RL + RS` products. 84 operands need 5 levels. The result is registered. |
| c5 | **Accumulator.** Adds up the chunk sums of one row. It restarts on the first chunk. |
| c6 | **Bias adder.** On the row's last chunk, adds the bias and produces the pre-activation. |
| c6+ | The **Buffer** (`buffer_unit`) delays the pre-activation by `BUF_DELAY` cycles on its way to the Function module. |

The Gate (`gate_unit`) covers cycles c3 to c6. It has a latency of 4 cycles and
accepts one chunk per cycle.

### The Function module's schedule (`function_unit`)

This is the least obvious part of the design. One Function module per lane has:

* a sigmoid unit and a tanh unit (piecewise linear, one cycle each);
* **one** multiplier;
* one accumulator.

It receives the four gates of a row in the order f, i, g, o. It must form three
products, `f*c_{t-1}`, `i*g` and `o*tanh(c_t)`, with that single multiplier, while the
next row is already arriving. Each product is issued when its operands exist:

| event (after activation) | action |
|---|---|
| `f` arrives | Fetch `c_{t-1}` from `M_C`; keep `sig(f)`. |
| `i` activated | Multiply `sig(f) * c_{t-1}` into the accumulator; keep `sig(i)`. |
| `g` activated | Multiply `sig(i) * tanh(g)` and add it to the accumulator. The result is `c_t`, which is written to `M_C` at once and sent into the Buffer's feedback register. |
| one cycle later | The Buffer returns `c_t`, and the tanh unit computes `tanh(c_t)` (the tanh unit is free then, because `g` has passed). |
| `o` and `tanh(c_t)` both present | Multiply them to give `h_t`, which leaves the module with its row index. |

With gates arriving back to back, the multiplier is never asked for two products in
the same cycle. The fed-back `c_t` also never meets a `g` at the tanh unit. Assertions
in the module check both rules.

### Activation units (`activation_pwl`)

Sigmoid and tanh are piecewise linear, `y = a*x + b`:

* The input is clamped to [-4, 4) and cut into `SEG = 16` pieces of width 0.5.
* Each piece's `(a, b)` pair sits in a small table loaded at run time.
* The same hardware therefore computes either function.

The testbenches fill the table with chords of the true functions. For piece `s`, with
`x0 = (s-8)/2`, `x1 = x0 + 0.5` and `F` the function:

```
a = 2*(F(x1) - F(x0))
b = F(x0) - a*x0
```

Both are rounded to Q7.8. The worst error is below 0.03.

## Hidden state: ping-pong banks and the write collector

`h_{t-1}` must stay readable for the whole step, while elements of `h_t` are already
being produced. Each copy of `M_H` therefore holds two banks of `H` words:

* the bank `h_rbank` is read (it holds `h_{t-1}`);
* `h_t` is written to the other bank;
* at the end of the step the controller flips `h_rbank`.

A host `LOAD` of `M_H` (the initial state `h_0`) writes the read bank.

Every element of `h_t` must reach every copy of `M_H` in every lane. The copies share
one write port, and the `Q` Function modules can finish rows in the same cycle.

A **collector** in `embedded_memory` handles this:

* it has one slot per lane;
* each cycle it writes one parked element into all copies, lowest lane first;
* each write is reported to the controller and on the `h_wr_*` outputs.

The controller counts these writes. When all `H` have landed it pulses `done` and
flips `h_rbank`.

## Controller and timing (`lstm_controller`)

After `RUN`, the controller issues one command per cycle. It walks:

* the row groups `rg = 0 .. H/Q-1` (lane `q` computes row `rg*Q+q`);
* within a group, the gates f, i, g, o;
* within a gate, the `NCH` chunks.

Issue takes `H/Q * 4 * NCH` cycles. The pipeline and the collector add a small fixed
tail:

* 13 cycles with `Q = 2`;
* 16 cycles at the defaults (1024 + 16 = 1040 cycles per step).

## Host commands and the DRAM bus

The host drives a valid/ready port (`cmd_valid`, `cmd_ready`) with the packed struct
`cmd_t = {op, mem, dram_addr, row0, nrows}`. The commands are:

* **`LOAD`**: copies `nrows` rows of memory `mem`, starting at global row `row0`, from
  consecutive DRAM words starting at `dram_addr`. Rows are laid out lane by lane within
  a row, then row by row. The number of words per row depends on the memory:
  * `RX` for `M_WX` / `M_AdX`
  * `RH` for `M_WH` / `M_AdH`
  * 2 for the activation table (`a` then `b`; row = `func*SEG + piece`, func 0 =
    sigmoid, 1 = tanh)
  * 1 for `M_B`, `M_X`, `M_H` and `M_C`

  Only stored nonzeros travel. When the DRAM keeps up, a LOAD streams one word per
  cycle.
* **`STORE`**: writes `h` elements `row0 .. row0+nrows-1` of the most recent step to
  DRAM from `dram_addr` onward.
* **`RUN`**: computes one time step. `busy` stays high until `done`.

The DRAM itself is outside the design. Its bus is brought out as ports:

* requests: `dram_req`, `dram_we`, `dram_addr`, `dram_wdata`;
* the DRAM answers with `dram_gnt`, and read data return in order with `dram_rvalid` /
  `dram_rdata`.

Any latency and any number of stall cycles are allowed.

`sel_x_large` sets the MA Selector. It must not change during a `RUN`.

## Parameters of `brds_top`

| parameter | default | meaning |
|---|---|---|
| `N`, `FRAC` | 16, 8 | data width, fraction bits |
| `X`, `H` | 153, 1024 | input size, hidden size (`H` divisible by `Q`) |
| `Q` | 4 | lanes (Gate, Buffer and Function copies) |
| `RX`, `RH` | 20, 64 | stored weights per memory row for `W_x`, `W_h` (`X_SP = RX*NCH`, `H_SP = RH*NCH`) |
| `RL`, `RS` | 64, 20 | Large and Small multiplier array widths |
| `NCH` | 1 | chunks (memory rows) per sparse row |
| `SEG` | 16 | activation pieces |
| `BUF_DELAY` | 2 | Buffer stages between Gate and Function |
| `CW` | 16 | column index width |

To run a model whose input matrices are pruned less than the recurrent ones, swap the
array sizes or set `sel_x_large = 1`. Whichever weight set is wider must go to an array
at least as wide.

## Where this design departs from the paper, or fills gaps in it

The paper describes the block diagram, the storage format and the arithmetic units.
Everything else below is this design's own choice.

* **Number format.** Q7.8. The paper gives only the 16-bit width. Recovery is
  implemented as saturation, and multiplies round down.
* **Activation functions.** The paper names piecewise-linear units without giving the
  pieces. The pieces here are 16 chords of width 0.5.
* **Schedule.** The cycle-level schedule is original: the command pipeline, the
  Function module's product order, and the Buffer's fixed delay and one-cycle feedback
  of `c_t`. The paper defers its timing to an earlier accelerator it does not describe.
* **`M_H` size.** The paper sizes `M_H` at `H` words yet keeps both `h_t` and `h_{t-1}`
  in it. Here it has two banks of `H` words (ping-pong).
* **Write collector.** Serialising simultaneous `h_t` elements through the collector is
  this design's own.
* **Weight memory depth.** The text sizes `M_WX` as `4H x X_SP` words, with rows `R`
  weights wide. A figure prints the depth of `M_WH` as `4 x H x (H/R_h)`. This design
  follows the text: `4*H*NCH` rows over all lanes.
* **Chunk order.** With `NCH > 1`, chunks of a gate row are adjacent: row, then gate,
  then chunk. With one chunk per row this equals the paper's order: the four gate rows
  of a matrix row, then the next matrix row.
* **Throughput.** Each lane takes one chunk per cycle, so the datapath does 336
  multiply-accumulates per cycle. A TIMIT step is `4*1024*(20+64)*2` = 688k operations
  in 1040 cycles: about 132 GOPS at 200 MHz. The paper reports 200 GOPS for the same
  configuration but does not say how it counts operations. This schedule does not reach
  that figure.
* **Not built: the DRAM chip.** It is outside the design.
* **Not built: the pruning algorithm.** It runs in software before the weights are
  loaded.
* **Not built: multi-step control.** The controller runs one step per `RUN` and has no
  sequence loop. The host issues `RUN` once per time step (loading each new `x_t`).
* **Index width.** Relative indices are stored at the full `n` bits, not narrowed.

## Verification and how far to trust it

Every module has a self-checking testbench in `tb/`. Each one:

* compares against values computed independently in the testbench;
* ends with `TB_RESULT checks=<n> failures=<m>`;
* has a watchdog.

The testbenches use the shared reference functions in `tb/tb_ref_pkg.sv`, which copy
the saturating arithmetic and the piecewise activations bit for bit. Every testbench
was also run against a deliberately broken copy of its module, and every one reported
failures.

There are two system-level tests:

* **`tb_brds_top`** runs a small configuration (`X = 16`, `H = 12`, `Q = 2`,
  `RX = RH = 4`, `NCH = 2`). It runs three steps, with the selector switched, and then
  a `STORE`. It checks:
  * every `h_t` element against a reference model of the whole step;
  * the step's cycle count;
  * the DRAM contents after `STORE`.

  It also counts, and requires to occur at least once:
  * DRAM stalls;
  * multi-chunk rows;
  * a saturating bias add;
  * both selector settings;
  * collector waits;
  * bank flips.
* **`tb_brds_full`** runs the default TIMIT size. It loads about 0.7 million words
  through the DRAM model with random stalls, runs one step, and checks all 1024
  elements of `h_t` and the stored copy. It takes seconds.

A third system test, **`tb_brds_ptb`**, sizes the design for the large Penn Treebank
language model: 1500 inputs and 1500 hidden units, pruned to 450 and 600 nonzeros per
row. It uses `RX = RS = 45`, `RH = RL = 60` and `NCH = 10` chunks per row, and runs
one step of 15015 cycles with about 12.6 million words loaded. It takes about a minute
and a half. The hidden size is the standard one for that model.

What is *not* verified:

* timing closure at 200 MHz;
* FPGA resource use against the paper's figures;
* accuracy on real pruned models (the weights are random).

The behavioural DRAM (`tb/dram_model.sv`) is a testbench model only.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary -j 0 --top-module tb_brds_top \
    rtl/brds_pkg.sv $(ls rtl/*.sv | grep -v brds_pkg) \
    tb/tb_ref_pkg.sv tb/dram_model.sv tb/tb_brds_top.sv
./obj_dir/Vtb_brds_top
```

* **Other testbenches.** Replace the top module and the last file with
  `tb_brds_full` or any `tb_<module>`. The unit testbenches need only `brds_pkg`, the
  module under test and its sub-modules, and `tb_ref_pkg`.
* **Package order.** The package must come first.
* **Warnings.** Verilator's lint prints a few width and reset-usage warnings; the
  opening comment of each affected module explains them. Add `-Wno-fatal` if your
  Verilator stops on warnings.
* **Changing the configuration.** Set `brds_top` parameters. Keep `H` a multiple of
  `Q`, `RX <= RS` and `RH <= RL` (or the reverse with `sel_x_large = 1`), and
  `X_SP`, `H_SP` equal to `RX*NCH`, `RH*NCH`.

## Files

| file | block |
|---|---|
| `rtl/brds_pkg.sv` | shared types (`cmd_t`, memory and gate enums) and saturating arithmetic |
| `rtl/brds_top.sv` | the accelerator: command pipeline and `Q` lanes |
| `rtl/lstm_controller.sv` | time-step sequencer |
| `rtl/dram_controller.sv` | LOAD / STORE engine |
| `rtl/embedded_memory.sv` | all on-chip arrays, banking, `h_t` collector |
| `rtl/lane_ram.sv`, `rtl/word_ram.sv`, `rtl/replicated_ram.sv` | memory primitives |
| `rtl/address_decoder.sv` | relative-to-absolute index decoding |
| `rtl/gate_unit.sv` | Gate module: `ma_selector`, `mult_array`, `tree_adder` (`add3_dsp`), accumulator, bias adder |
| `rtl/buffer_unit.sv` | Gate-to-Function delay and `c_t` feedback |
| `rtl/function_unit.sv` | activations, shared multiplier, `c_t` / `h_t` |
| `rtl/activation_pwl.sv` | piecewise-linear sigmoid / tanh |
| `tb/tb_*.sv` | one testbench per module, plus `tb_brds_full` and `tb_brds_ptb` |
| `tb/tb_ref_pkg.sv`, `tb/dram_model.sv` | reference arithmetic, behavioural DRAM |
