# Recurrent neural network inference in fixed-point logic

This is synthesizable SystemVerilog for small recurrent neural networks (LSTM
and GRU layers followed by fully connected layers) that classify a
short sequence in a microsecond or two. Such networks run in the trigger and
data-acquisition systems of particle-physics experiments. There, an event must
be classified within a few microseconds, so all weights sit in on-chip memory
and every multiply is done by parallel hardware. The default build is a top-quark
jet tagger. Its input is a sequence of 20 jet constituents with 6 features each.
It has one LSTM layer of 20 units, a 64-unit ReLU layer and one sigmoid output. With the
default reuse factors it returns a score 306 clock cycles after accepting a
jet (about 1.5 µs at 200 MHz). Other parameter values build
the larger jet-flavour and QuickDraw classifiers that the same architecture
was evaluated on.

The structure follows the way the hls4ml tool maps a Keras recurrent layer onto an
FPGA: one recurrent cell is built out of two matrix-vector
multiplies, with lookup-table activations and element-wise products after them.
The main configuration knobs are the reuse factors and the static or non-static
layer mode. The RTL here is written by hand in that structure. It is not HLS output.

## Blocks

| file | what it is |
|---|---|
| `rnn_pkg.sv` | fixed-point type (16 bits, 6 integer), enums, weight-bus encoding |
| `dense.sv` | `y = W x + b` with a reuse factor: the one multiplier array everything uses |
| `act_lut.sv` | sigmoid / tanh of a vector by a 1024-entry table |
| `hadamard.sv` | element-wise product of two vectors |
| `relu_vec.sv` | element-wise ReLU |
| `softmax.sv` | softmax over N scores by an exp table and a reciprocal table |
| `lstm_cell.sv` | one LSTM state update |
| `gru_cell.sv` | one GRU state update |
| `rnn_layer.sv` | a whole sequence through one cell (static) or a chain of cells (non-static) |
| `rnn_net.sv` | top: recurrent layer → dense+ReLU → [dense+ReLU] → dense → sigmoid/softmax |

## Number format

Every stored value and every wire between blocks is a 16-bit two's-complement
number with 10 fractional bits. The range is [-32, 32) and the step is 1/1024. Inside a
multiply-accumulate, products and sums are kept at full width. Narrowing back
to 16 bits happens once per output: the low fractional bits are dropped
(rounding toward minus infinity) and the result wraps on overflow. These are the default
rules of the HLS fixed-point type. The widths are parameters in `rnn_pkg`
(`DATA_W`, `DATA_I`). The activation tables need at least 7 fractional bits.

## Reuse factor: how a matrix-vector multiply is spread over time

`dense` computes `N_OUT` dot products of length `N_IN`, which is `N_IN*N_OUT`
multiplications in all. The reuse factor `R` is how many of these
each hardware multiplier performs. The block therefore has `N_IN*N_OUT/R`
multipliers and produces its result `R` cycles after accepting an input.
`R = 1` is fully parallel. Larger `R` trades latency for multipliers. The
multiplier array can be assigned to the work in two ways, and the RTL picks one
at elaboration:

* **R divides N_IN.** Each output has `P = N_IN/R` multipliers of its own. In cycle
  `r`, multiplier `j` of output `o` multiplies `W[o][j*R + r]` by `x[j*R + r]`.
* **N_IN divides R.** Each multiplier works through `Q = R/N_IN` outputs in turn.
  In cycle `r`, multiplier `m` handles output `m*Q + r/N_IN` and input `r % N_IN`.

Every reuse value used by the evaluated networks falls into one of the two
cases; an elaboration-time assertion rejects any other. The weights are
stored as `R` wide words, one word per cycle, each holding the weights that
all multipliers need in that cycle. This is what lets the synthesis tool
build the memory as a narrow-deep RAM rather than registers.

In a recurrent cell the kernel multiply `W x_t` and the recurrent multiply
`U h_{t-1}` are two `dense` instances that run side by side. Their reuse factors
are `REUSE_X` and `REUSE_H`. The gates of all four (LSTM) or three (GRU)
types are stacked into one tall matrix, so each cell has exactly two multiplier arrays.
The defaults `REUSE_X = 6`, `REUSE_H = 5` give 6·80/6 = 80 and 20·80/5 = 320
multipliers; the slower of the two takes 6 cycles.

## The cells

**LSTM** (rows ordered i, f, c, o, as Keras stores them; one bias vector):

    i = σ(W_i x + U_i h + b_i)    f = σ(W_f x + U_f h + b_f)
    g = tanh(W_c x + U_c h + b_c) o = σ(W_o x + U_o h + b_o)
    c' = f·c + i·g                 h' = o·tanh(c')

**GRU** (rows z, r, h; reset gate applied after the recurrent multiply; separate
kernel and recurrent biases, i.e. Keras `reset_after=True`):

    z = σ(W_z x + b_z + U_z h + r_z)   r = σ(W_r x + b_r + U_r h + r_r)
    ĥ = tanh(W_h x + b_h + r·(U_h h + r_h))
    h' = z·h + (1 - z)·ĥ

This GRU variant is the one whose parameter count, 3·(N_IN·N_H + N_H² + 2·N_H), matches the
published model sizes (1680 for the top tagger).

Each cell uses `max(REUSE_X, REUSE_H)` cycles for the multiplies. Three registered steps follow:
gate activations, new cell state (or candidate), and new hidden state. That makes
`max(REUSE_X, REUSE_H) + 3` cycles from `in_valid` to `out_valid`.

## Activations

`act_lut` maps its input to a 1024-entry table. For the sigmoid the table spans [-8, 8), and for tanh
it spans [-4, 4). Inputs outside the range use the end entries. Entry `k` is
`floor(f(x_k)·2^14)`, where `x_k` is the left edge of bin `k`. The index is taken straight from the input bits:
`(x >>> (10 - log2(1024/range))) + 512`, clamped to [0, 1023]. The table is
computed at elaboration by a constant function that uses `$exp`, so no data file is
read and synthesis sees a ROM. Range, size and rounding follow the
defaults of the HLS activation library.

`softmax` subtracts the largest score and looks up `exp(d)` for `d` in [-16, 0] in
steps of 1/64, with 1024 entries and 14 fractional bits. It then sums the results, looks up the
reciprocal of the sum in a second 1024-entry table over [0, N), and multiplies. The
larger softmax table was needed for the multi-class networks. The table
layout and the max subtraction are this implementation's choice.

## Static and non-static layers

`rnn_layer` applies the cell to every step of a sequence. The state starts at zero for every
sequence, and only the final `h` is passed on.

* **Static** (`MODE_STATIC`, the default): one cell, its state registers, and a step
  counter. A new sequence is accepted only when the previous one has left the
  layer, so the initiation interval (II) equals the latency: `SEQ_LEN·(L + 2)` cycles, with
  `L` the cell latency (20·11 = 220 at the defaults).
  This mode uses the least hardware.
* **Non-static** (`MODE_NONSTATIC`): `SEQ_LEN` cells, one per time step, each with
  its own copy of the weights. Cell `t` hands its state and the sequence to cell
  `t+1`. A new sequence enters as soon as cell 0 is free, so up to `SEQ_LEN`
  sequences are in flight at once. This uses about `SEQ_LEN` times the multipliers and memory
  and gives about `SEQ_LEN` times the throughput at the same latency.

This is the behaviour described for the non-static mode: the interval between sequences is
one cell update plus the hand-off, `L + 2` cycles, SEQ_LEN times shorter than in static mode.
Each cell handles one update at a time and is not pipelined internally. Pipelining the cells would
let several sequences share one cell and shorten the interval further. That is
mentioned as possible but is not built here, and neither is caching several sequences
in static mode.

## The network top and its timing

`rnn_net` chains `rnn_layer` → `dense` (N_H→N_D1) → ReLU → optionally `dense`
(N_D1→N_D2) → ReLU → `dense` (→N_OUT) → sigmoid if `N_OUT = 1`, softmax
otherwise. All blocks use valid/ready handshakes, and every output is held
until taken. In static mode the latency from acceptance to `out_valid` is

    SEQ_LEN·(max(REUSE_X, REUSE_H) + 5) + REUSE_D1 + REUSE_DO + 2   (+ REUSE_D2 + 1 with N_D2 > 0)

which gives 20·11 + 20 + 64 + 2 = 306 cycles at the defaults. For comparison, the published static HLS
implementation of this model reports an II of about 315 cycles and a latency of 1.6–1.7 µs.
The reuse factors of the fully connected layers were not published.
Here `REUSE_D1 = N_H` (one multiplier per hidden unit) and `REUSE_DO = N_D1`
(a single multiplier for the output).

### Parameters of the evaluated networks

| network | CELL | SEQ_LEN | N_IN | N_H | N_D1 | N_D2 | N_OUT | REUSE_X/H | REUSE_D1/D2/DO |
|---|---|---|---|---|---|---|---|---|---|
| top tagging (default) | LSTM or GRU | 20 | 6 | 20 | 64 | 0 | 1 | 6/5 | 20/–/64 |
| jet flavour | LSTM or GRU | 15 | 6 | 120 | 50 | 10 | 3 | 48/40 | 120/50/10 |
| QuickDraw | LSTM or GRU | 100 | 3 | 128 | 256 | 128 | 5 | 48/32 | 128/256/128 |

The dense-layer reuse values of the two larger networks are likewise this
design's choice.

## Loading weights

The trained weights are not compiled in. They are written after reset through one
bus that reaches every memory: `wr_en`, `wr_sel` (which matrix; see
`rnn_pkg::wsel_e`), `wr_addr` (element `o·N_in + i` of a matrix, or `o` of a
bias) and `wr_data`. The selector values are

| wr_sel | target |
|---|---|
| 0 / 1 | recurrent-layer kernel W / its bias |
| 2 / 3 | recurrent kernel U / recurrent bias (GRU only) |
| 4 / 5 | first hidden dense layer weights / bias |
| 6 / 7 | second hidden dense layer (when N_D2 > 0) |
| 8 / 9 | output dense layer |

In non-static mode a write goes to every cell's copy at once. Reset (`rst_n`,
active low, synchronous) clears only control state. The weights survive it.

## Differences from the published design

* The cells are not internally pipelined, so neither mode overlaps sequences inside one cell (see above).
* The weights are loaded at run time through a bus instead of being fixed at synthesis.
* The reuse factors of the fully connected layers are this design's choice.
* The softmax table layout is this design's choice. The published work only says the table had to be
  made larger and more precise for the multi-class models.
* Cycle counts come from this RTL's own register placement. They are close to, but not
  equal to, the published HLS latencies.
* The word format is a package-wide setting (`DATA_W`, `DATA_I` in `rnn_pkg`). The QuickDraw
  models were found to need 10 integer bits, i.e. 20-bit words with 10 fractional bits;
  a QuickDraw build must change the package. The QuickDraw-shaped tests here run at 16/6.
* No FPGA-specific resources are instantiated. Multipliers and memories are
  inferred.

## Simulation

All testbenches are in `tb/`, are self-checking and print
`TB_RESULT checks=<n> failures=<m>`. They compare the RTL bit for bit against a
software model in `tb_ref_pkg.sv`, which computes the same fixed-point network
directly from the formulas with `$exp` and not from the RTL tables. Weights and inputs are random.

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
      rtl/rnn_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_rnn_net_case.sv tb/tb_rnn_net.sv \
      --top-module tb_rnn_net -o sim && ./obj_dir/sim

(Listing `rnn_pkg.sv` and `tb_ref_pkg.sv` first makes the packages compile
before the files that import them.)

| testbench | what it runs |
|---|---|
| `tb_dense`, `tb_act_lut`, `tb_hadamard`, `tb_relu_vec`, `tb_softmax` | the datapath blocks, both reuse cases, latency checked |
| `tb_lstm_cell`, `tb_gru_cell` | single updates, latency and hold behaviour |
| `tb_rnn_layer` | static and non-static layers, back-pressure, overlap of sequences |
| `tb_rnn_net` | end to end: default top tagger, static GRU, non-static LSTM, two-hidden-layer softmax network. It counts stalls, sequences in flight, ReLU zeros and table clamps, and fails if any never happened |
| `tb_rnn_net_full` | the top with all defaults, four jets, latency of 306 cycles checked |
| `tb_workloads` | all evaluated networks at full size: flavour and QuickDraw with LSTM and GRU, top tagger with GRU and non-static LSTM (about 1.5 min) |
