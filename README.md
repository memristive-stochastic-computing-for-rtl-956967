# Weight updates computed on bit streams from memristive crossbars

A training step of stochastic gradient descent (SGD) replaces every parameter by
`theta_n = theta_{n-1} - eta * grad`. In ordinary hardware that is a multiply-accumulate
per parameter. In stochastic computing the same update is one XNOR gate and one 2:1
multiplexer per bit. The price is that every number must be a long random bit stream.
Such streams are usually costly to make. Here they come almost free from the physics of
conductive-bridging RAM (CBRAM) cells. These cells switch on after a random, Poisson-
distributed time. A programming pulse of a chosen width therefore turns each cell on with a
chosen probability, and a row of cells read out together is a row of independent random
bits with that probability.

This RTL implements that update engine, as described by Lammie, Eshraghian, Lu and Rahimi
Azghadi, "Memristive Stochastic Computing for Deep Learning Parameter Optimization"
(IEEE TCAS-II, 2021). The digital blocks are synthesizable SystemVerilog. The crossbar
tiles are a behavioural model of the devices. The network's forward and backward passes,
which produce the gradients, are not part of it.

## Numbers as bit streams

A value `v` in [-1, 1] is carried as a stream in which each bit is 1 with probability
`p = (v + 1) / 2` (bipolar coding). Two facts make the update cheap:

* **Multiplication.** For independent streams with values `a` and `b`, the stream
  `XNOR(a, b)` has value `a * b`.
* **Scaled addition.** A multiplexer that picks stream `a` with probability `s` and
  stream `b` otherwise gives `s*a + (1-s)*b`. With `s = 1/2` that is `(a + b) / 2`.

The update is therefore built as follows:

```
grad stream  --XNOR--  (-eta) stream   ->  -eta*grad
                                              |  MUX, select p = 1/2
theta_{n-1} stream  --------------------------+  ->  (theta_{n-1} - eta*grad) / 2
count the ones, 2c/N - 1, times 2 (upscaling), clip to [-1, 1]   ->  theta_n
```

The learning rate enters as the stream of `-eta`, whose one-probability is `(1 - eta)/2`.
That negation turns the addition into the subtraction SGD needs.

The result is an estimate, not an exact value. The decoded value has a standard deviation
of `4 * sqrt(p(1-p)/N)`, where `N` is the stream length. That is at most about 0.016 for
`N = 16384`. A learning rate of 0.01 moves a weight by less than that in one step, so
small steps survive only on average over many updates. Also, a weight near zero can come
back with the wrong sign. This fits the published finding that stable training needs
streams longer than 8 Kbit and learning rates of at least 0.1.

## Generating a stream by programming a row

A cell switches on within a pulse of length `t` with probability
`P = 1 - exp(-t * e^(V/V0) / tau0)`. At a fixed voltage this is `1 - exp(-t/tau)`.

* **Tile model** (`rram_tile`). Time advances in clock ticks of `tau / TICKS_PER_TAU`. In
  each tick of a pulse, every cell of the opened row that is still off switches on with
  probability `1 - exp(-1/TICKS_PER_TAU)`. Switching is memoryless, so `n` ticks give
  exactly `1 - exp(-n/TICKS_PER_TAU)`. A cell never switches back off until its row is
  reset.
* **Encoder** (`pulse_encoder`). It inverts that law. It rounds `p` to
  `i / 2^P_BITS` and looks up `n = round(-TICKS_PER_TAU * ln(1 - i/2^P_BITS))`. The table
  is computed when the design is elaborated, not stored as data. With the defaults
  (`TICKS_PER_TAU = 64`, `P_BITS = 8`), pulses run from 0 ticks (`v = -1`) to 355 ticks
  (`p = 255/256`). `v = +1` uses the last entry, so a weight of exactly +1 is stored as
  `p = 255/256`.
* **Reading.** Opening a row shows which of its cells conduct. The sense amplifiers
  (`csa_array`) latch that row. Each amplifier takes its reference from the neighbouring
  column, so a row is read in two steps: even columns, then odd columns.

## Where a parameter lives

With the defaults, each parameter's stream is 16384 bits long, and all of it must be
available at once. Only one row of a tile can be read at a time. So parameter `r` occupies
row `r` of each of 128 tiles of 128 x 128 cells, and one read of row `r` in all 128 tiles
yields the whole stream. A bank of 128 tiles holds 128 parameters.

There are four such banks: two for gradients and two for weights, 512 tiles in total.
During an update, the selected gradient and weight banks are read. Each new weight is
written into the *other* weight bank. The gradient and weight rows just consumed are reset
while that write is in progress. After the last row, `bank` flips, and the next update
reads what this one wrote.

The gradient bank that the next update programs was cleared during the previous update.
This is the "half of the tiles reset while the other half generate" arrangement.

## One update, row by row

`update_controller` handles one row at a time:

| step     | cycles | what happens |
|----------|--------|--------------|
| `S_GVAL` | 1      | accept `grad_r`, start the gradient encoder |
| `S_GPROG`| n_g+1  | error pulse train on gradient row `r` of the bank being read |
| `S_RD0`  | 1      | open row `r` of gradient and weight tiles, sense the even columns |
| `S_RD1`  | 1      | sense the odd columns |
| `S_DEC`  | 1      | XNOR, MUX and first decoder stage on the complete 16384-bit streams |
| `S_DWAIT`| 2      | adder tree; `theta_n` is reported, the weight encoder starts, consumed rows are reset |
| `S_WPROG`| n_w+1  | weight pulse train on row `r` of the other weight bank |

A row takes `n_g + n_w + 8` cycles, where `n_g` and `n_w` are the encoder's pulse lengths
for the gradient and the new weight. This is at most 718 cycles with the defaults. A load
(`CMD_LOAD`) resets and then programs weight row `r` of the current bank for each row.

The decoder (`sc_decoder`) counts the ones of each tile's 128 bits in its first cycle. In
its second cycle it adds the 128 counts, forms `(2c - N)/N` in Q1.14, multiplies by
`2^up_shift` and clips to [-1, 1]. Its `sat` output reports the clip.

## Top-level interface (`sc_param_optimizer`)

| port | dir | meaning |
|------|-----|---------|
| `cmd_valid`, `cmd_ready`, `cmd` | in/out/in | `CMD_LOAD` (initial weights) or `CMD_UPDATE` (one SGD step over all rows) |
| `val_valid`, `val_ready`, `val_data` | in/out/in | one value per row, in row order: `theta_0` for a load, the gradient for an update. 16-bit Q1.14, so 1.0 = 16384; clipped to [-1, 1] |
| `eta_stream[N-1:0]` | in | stream of `-eta`, sampled in the `S_DEC` cycle; should be fresh for each row |
| `sel_stream[N-1:0]` | in | downscaling select stream, one-probability 1/2, sampled with `eta_stream` |
| `up_shift[1:0]` | in | upscaling factor `2^up_shift`; 1 undoes the 1/2 of the MUX |
| `res_valid`, `res_row`, `res_data`, `res_sat` | out | each new weight as it is produced, and whether it was clipped |
| `busy`, `bank` | out | operation in progress; weight bank that now holds the weights |

Parameters: `N_TILES` (128 tiles per bank), `ROWS` (128), `COLS` (128),
`TICKS_PER_TAU` (64) and `P_BITS` (8). The stream length `N = N_TILES * COLS` must be a
power of two. Reset is asynchronous and active low. The tile model needs no reset: its
cells start off.

## Files

| file | contents |
|------|----------|
| `rtl/sc_pkg.sv` | value format (Q1.14), pulse-length type, tile control struct, command enum |
| `rtl/rram_tile.sv` | behavioural model of a 128 x 128 probabilistic CBRAM tile |
| `rtl/csa_array.sv` | paired-column sense amplifiers with two-step read register |
| `rtl/pulse_encoder.sv` | value to programming-pulse length, pulse generator |
| `rtl/xnor_multiplier.sv` | bipolar stochastic multiplier |
| `rtl/mux_scaled_adder.sv` | stochastic scaled adder |
| `rtl/sc_decoder.sv` | parallel bit-stream-to-binary converter with upscaling and clip |
| `rtl/update_controller.sv` | row sequencer, bank ping-pong, handshakes |
| `rtl/sc_param_optimizer.sv` | top level: 4 x `N_TILES` tiles and sense amplifiers, two encoders, datapath |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/sc_opt_tb_body.svh` | end-to-end test shared by the three top-level testbenches |

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog.
The top-level runs compare every new weight with `clip(theta_{n-1} - eta*grad)`. The bound
is six standard deviations of the stochastic estimate plus the encoder's resolution. Each
run also checks every row's cycle count, and counts that loads, updates, bank swaps, resets
during programming, two-step reads, zero-length pulses and clips all occurred.

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/sc_pkg.sv tb/tb_sc_param_optimizer_full.sv --top-module tb_sc_param_optimizer_full
./obj_dir/Vtb_sc_param_optimizer_full
```

* `tb_sc_param_optimizer_full`: the default size, with 512 tiles, 16384-bit streams and
  128 rows. It runs one load and four updates, the last of which drives weights into
  the clip. This takes about 100,000 cycles, or 10 s of simulation after a 20 s build.
* `tb_sc_param_optimizer`: 32 tiles per bank and 16 rows. It is quick.
* `tb_sc_param_optimizer_lr_sweep`: full stream length and 16 rows, for `eta` = 0.01, 0.1
  and 0.5. It prints the RMS error of every update.

Assertions in the controller and the top check that only one pulse train runs at a time,
that no pulse is applied during a read, and that the decoder only sees rows read completely
in both sense steps. The tile model draws its device noise from `$urandom`. Use `+verilator+seed+<n>` for other
random sequences.

## What the architecture fixes and what is chosen here

These follow the published architecture:

* 128 x 128 tiles
* 128 tiles per 16-Kbit stream
* 512 tiles in total, through doubling for gradient/weight and again for reset
* one row opened at a time
* parallel read-out through current sense amplifiers, with pairwise column sharing and
  two-step reads
* XNOR multiplication by the negative learning rate
* MUX scaled addition with a downscaling factor, and an upscaling factor
* device switching following `1 - exp(-t e^(V/V0)/tau0)`
* gradients clipped to [-1, 1]

These choices are this design's own:

* **Mapping of parameters to rows.** One value per row, spread over 128 tiles. The
  description also speaks of "varying the pulse width applied to each column". That would
  put one value per column, but it is incompatible with its own count of 128 tiles for one
  16-Kbit stream read one row at a time. The row mapping, which the figure of the read-out
  also shows, is used.
* **Tick length, encoder table and number format.** The encoder is described only as a
  ready-made block. `TICKS_PER_TAU`, `P_BITS` and Q1.14 were chosen to give about 7 bits
  of resolution near `p = 1/2`.
* **Decoder.** A popcount and adder tree, because the whole stream is present at once,
  rather than a serial up/down counter. Upscaling is a power of two applied after
  decoding, followed by a clip.
* **The `-eta` and select streams** come from outside. How they are generated is not
  described.
* **One shared multiplier, adder and decoder** behind a bank multiplexer.
* **Schedule.** Strictly sequential steps per row, a one-cycle row reset, and a
  valid/ready command and data interface. No timing for the system is given.

Not built:

* the gradient computation (done by the host training the network)
* SGD with momentum, which was evaluated in software only, with no datapath for the
  velocity described
* the high-voltage programming drivers
* power, area and device-to-device variation

Only 128 parameters are held at once. A network such as the small MNIST CNN used in the
evaluation, with about 22,000 parameters, would be updated in groups of 128 through the
load and update commands.
