# A lookup-table turbo equalizer with coarsely quantized messages

A channel with intersymbol interference (ISI) mixes every transmitted symbol
with its neighbours: the received sample `r_k` is `sum_l h_l d_(k-l)` plus
noise. A turbo receiver alternates between an equalizer, which undoes the ISI
with a forward-backward (BCJR-type) recursion over the channel states, and a
channel decoder. Each passes soft information about the symbols to the other.
The usual equalizer carries wide vectors of log-probabilities (11 bits per
state entry in a typical fixed-point design, 77 bits for 8 states) and spends
adders, comparators and multipliers on every state transition.

The equalizer in this RTL does no arithmetic at all. Every quantity it
handles is a small unsigned index (a *message*) of a few bits. Every update
is a table lookup that maps a few input messages to one output message.
The tables are designed offline with the information bottleneck method: each
table is a compression that keeps as much information as possible about
one variable of interest, here the channel state or the transmitted symbol.
The hardware does not know what an index means; that meaning is fixed
entirely by the table contents, which are loaded at run time.

The RTL contains the whole receiver datapath between the received samples
and the channel decoders:

* a quantizer that turns samples into channel messages;
* three unrolled equalizer runs, i.e. two turbo iterations;
* in each run, a fully pipelined equalizer that takes one window of symbols
  per clock cycle and produces `N_B` output messages per clock cycle;
* the channel pipelines that hold the received data while a decoder works.

The decoders themselves, which are 4-bit lookup-table LDPC decoders in the
reference setup, and the interleavers are not part of this RTL. Their
connections are module ports.

## Messages

| message | meaning | width (default) |
|---|---|---|
| `t_r` | quantized channel sample | `W_R` = 5 |
| `t_d` | decoder feedback (extrinsic information about `d_k`) | `W_D` = 3 |
| `t_alpha` | forward message: what the past says about the state | `W_A` = 8 |
| `t_beta` | backward message: what the future says about the state | `W_A` = 8 |
| `z_alpha`, `z_beta` | intermediate messages inside an update | `W_A` = 8 |
| `t_e` | equalizer output (extrinsic information for the decoder) | `W_E` = 4 |

A message value `t` of the alphabet `{1, ..., 2^w}` is carried as the index
`t-1`. A design with fewer bits, for example 6-bit metrics, runs on the 8-bit
hardware by using only the first 64 index values.

## The three updates and their two-input tables

For one symbol position the equalizer performs three updates. Each full
update would be a single three-input table. This design uses the *reduced*
form, in which every three-input table is split into two-input tables.

```
forward :  z_alpha  = F1(t_alpha, t_r)        2^(W_A+W_R) entries
           t_alpha' = F2(z_alpha, t_d)        2^(W_A+W_D) entries
backward:  z_beta   = B1(t_beta', t_d)        2^(W_A+W_D) entries
           t_beta   = B2(z_beta,  t_r)        2^(W_A+W_R) entries
final   :  t_e      = E (z_alpha, t_beta')    2^(2*W_A)   entries
```

Here `t_alpha'` is the forward message handed to the next position, and
`t_beta'` is the backward message arriving from the next position. Splitting
the tables shrinks each forward or backward update from
`2^(W_A+W_R+W_D)` = 65536 entries to `2^W_A (2^W_R + 2^W_D)` = 10240 entries.
The final update shrinks from 2^21 to 2^16 entries. The cost is a small loss
in error rate, reported at about 0.1 to 0.2 dB for the forward/backward
split.

The final update reuses `z_alpha`, which already holds the channel message of
its position. It does not see the feedback `t_d` of its own symbol, so its
output is extrinsic with respect to the decoder.

A table address is the concatenation `{first input, second input}` in the
order listed above, with the first input in the upper bits. All forward
units of a run share one table pair, all backward units one pair and all
final units one table. Because the tables do not change from one recursion
step to the next, one table per update kind is enough.

### Table hardware (`ib_lut`)

A table is a bank of memory cells plus a selection network. Bit `y[0]` of
the address steers the first rank of 2:1 multiplexers, which pick between
adjacent entries, and each further bit steers the next rank. In the RTL the
read is an array index, which synthesis turns into that multiplexer tree.
Cells are written one entry per clock through a write port.

With `SYMMETRIC=1` only the half of the table with `y[0]=0` is stored. The
other half follows from the symmetry `LUT(y) = ~LUT'(~y[w-1:1])`, which
holds for symmetric channels: when `y[0]=1`, the remaining address bits and
the output are inverted. This halves the cells at the cost of one inverting
multiplexer per address and output bit. The table contents must have been
designed to be symmetric. The default is the full table.

## The X-shaped pipeline (`x_equalizer`)

Running a forward-backward recursion over a whole frame would take time in
proportion to the frame length. Instead, the frame is cut into sub-blocks of
`N_B` symbols. Each sub-block is equalized on its own *window*: the sub-block
plus `N_O` symbols of overlap on each side,

```
window position p:  0 .. N_O-1 | N_O .. N_O+N_B-1 | N_O+N_B .. N_W-1
                    left overlap     sub-block        right overlap
N_W = N_B + 2*N_O = 30 at the defaults
```

The forward recursion starts at the left edge from a fixed start message
`alpha_init`. It has forgotten that arbitrary start by the time it reaches
the sub-block. The backward recursion does the same from the right edge with
`beta_init`. Outputs are produced only for the `N_B` sub-block symbols.

The recursions are unrolled in space: every update of every window position
has its own hardware unit. A new window therefore enters every clock cycle,
and `N_B` output messages leave every clock cycle. Each unit has `S_P`
register stages. With `S_P = 3`, one window occupies `(N_O+N_B+1)*S_P` = 63
cycles of pipeline, during which 62 other windows are in flight behind it.

```
 cycle after entry:  0   S_P  2S_P  ...                       (N_O+N_B)S_P
 forward unit f   :  f=0  f=1  f=2  ...   works on position p=f   --->
 backward unit b  :  b=0  b=1  b=2  ...   works on position p=N_W-1-b  <---
```

* **Forward units** `f = 0 .. N_O+N_B-1` handle position `p = f`. Unit `f`
  works on the window `f*S_P` cycles after the window entered. It takes
  `t_alpha` from unit `f-1`; unit 0 takes `alpha_init`.
* **Backward units** `b = 0 .. N_O+N_B-1` handle position `p = N_W-1-b` and
  start at the right edge. Unit `b` works `b*S_P` cycles after entry. It takes
  `t_beta'` from unit `b-1`; unit 0 takes `beta_init`.
* The two chains cross in the middle of the sub-block. Drawn with position
  across and time down, they form an X.
* **Channel and feedback shift registers.** Position `p` of a window arrives
  in parallel with all other positions. Its `(t_r, t_d)` pair is held in a
  shift register. The register is tapped after `p*S_P` cycles for the forward
  unit and after `(N_W-1-p)*S_P` cycles for the backward unit.
* **Metric shift registers.** The final unit of sub-block symbol `i` sits at
  position `p = N_O+i`. It needs `z_alpha` of forward unit `p`, which is ready
  at `(p+1)*S_P`. It also needs `t_beta'`, the output of backward unit
  `N_W-2-p`, which is ready at `(N_W-1-p)*S_P`. The earlier of the two waits
  `|2p+2-N_W|*S_P` cycles in a shift register. Near the centre of the
  sub-block the wait is zero; towards either end it grows by `2*S_P` per
  symbol.
* **Output shift registers.** Final results appear at different times.
  Each one is delayed to the common output time
  `LAT = (N_O+N_B+1)*S_P`, so that all `N_B` messages of a window leave in
  the same cycle.
* The valid flag and the frame first/last flags travel in a reset shift
  register of depth `LAT`.

There is no stall and no backpressure. Cycles without a window pass through
the pipeline as bubbles.

At the defaults a run has 20 forward, 20 backward and 10 final units. That
is 5.9 Mbit of table cells per run, because every unit has its own copy of
its table, loaded by a broadcast write. The last backward unit (position
`N_O`) feeds no final update: synthesis removes it. It is kept because the
structure then has `N_O+N_B` units in each direction.

## Windows and frames (`window_builder`)

A frame arrives as consecutive sub-blocks, one per valid cycle, marked
`first` and `last`. Window `j` needs the first `N_O` symbols of sub-block
`j+1`, so it is emitted (registered) in the cycle after sub-block `j+1`
arrives. For the last sub-block of a frame, the window is emitted one cycle
after that sub-block was taken in. Beyond the frame edges, the overlap
positions are filled with configurable pad messages (`pad_r`, `pad_d`). A
new frame may start in the cycle right after the previous frame's last
sub-block. An assertion checks that frames are not interleaved. `N_O <= N_B`
is required.

## The turbo chain (`turbo_eq_top`)

```
in_r --> quantizer --+--> windows --> equalizer run 0 --> te[0] --> decoder 0
                     |                      (t_d = prior)               |
                     +--> channel pipeline (DEC_DELAY) --> windows --> run 1 --> te[1] --> decoder 1
                     |                        fb_req[1] / fb_td[0] <----------+            |
                     +--> channel pipeline (DEC_DELAY) --> windows --> run 2 --> te[2] --> decoder 2
                                               fb_req[2] / fb_td[1] <----------------------+
```

* **Run 0** has no decoder feedback yet. Every symbol gets the configured
  prior message `prior_d`.
* **Channel pipelines.** While decoder `k-1` works, the quantized sub-blocks
  of the frame travel through a `DEC_DELAY`-cycle channel pipeline. When a
  sub-block leaves it, the top raises `fb_req[k]`. In that same cycle the
  decoder must drive the sub-block's `N_B` feedback messages on `fb_td[k-1]`,
  already re-ordered into symbol order.
* **Timing.** The output of run `k` for a sub-block leaves exactly
  `k*DEC_DELAY` cycles after the output of run 0 for the same sub-block.
  Run 0's output for sub-block `j` appears `2 + LAT` cycles after sub-block
  `j+1` was presented, or `3 + LAT` cycles after sub-block `j` if it is the
  last one of its frame.
* **Sizing `DEC_DELAY`.** It must cover the equalizer latency, the whole
  frame (an LDPC decoder starts only when its codeword is complete) and the
  decoder's own latency. The default of 256 cycles suits short frames. A
  64800-symbol codeword is 6480 sub-blocks and needs a `DEC_DELAY` of more
  than 6480 cycles.

### Configuration

Writes are made with `cfg_we` high for one cycle, while no frame is in
flight. `cfg_eq_mask` selects the runs a table or register write goes to,
so each run can have its own tables and even its own effective message
widths.

| `cfg_sel` | `cfg_addr` | `cfg_data` |
|---|---|---|
| `TBL_F1`, `TBL_F2`, `TBL_B1`, `TBL_B2`, `TBL_E` | table address, `{first input, second input}` (the `y[0]=0` half only, when symmetric) | entry |
| `TBL_QTH` | threshold number 0 .. 2^W_R-2 (shared by all runs) | signed threshold, ascending |
| `TBL_REG` | `REG_ALPHA_INIT`, `REG_BETA_INIT`, `REG_PAD_R`, `REG_PAD_D`, `REG_PRIOR_D` | message |

Loading all tables of one run at the defaults takes 86016 writes.

### Quantizer (`ib_quantizer`)

The channel message is the number of thresholds that do not exceed the
sample: `t_r = #{k : r >= thr[k]}`. With thresholds from an information
bottleneck design this is the IB channel quantizer. With equal spacing it is
a uniform quantizer. It has one register stage and handles `N_B` samples per
cycle.

## Parameters

| parameter | default | origin |
|---|---|---|
| `W_R` | 5 | channel message width of the evaluated IB setups |
| `W_D` | 3 | feedback width used for the table-size figures |
| `W_A` | 8 | metric width of the table-size study and the FTN setup; 9 was also evaluated, 6 and 7 for complexity |
| `W_E` | 4 | own choice, matching a 4-bit message decoder |
| `N_B` | 10 | sub-block length of the illustrated structure; the real optimum depends on the setup |
| `N_O` | 10 | overlap stated as sufficient for the magnetic recording channel |
| `S_P` | 3 | pipeline stages per update, as illustrated; in general `ceil(logic levels / 8)` |
| `N_EQ` | 3 | three unrolled runs (two turbo iterations) |
| `DEC_DELAY` | 256 | own choice |
| `W_IN` | 10 | own choice (sample width) |
| `SYMMETRIC` | 0 | own choice; 1 halves all tables |

## How far this follows the reference design, and where it departs

These parts follow the reference design:

* the message widths;
* the reduced two-input table structure for forward, backward and final
  updates, including which messages enter which table;
* the multiplexer-tree table with memory cells, and the symmetric half
  table;
* sub-blocks with overlap;
* the fully unrolled X-shaped arrangement, with its three kinds of shift
  register;
* three unrolled equalizer runs that share a pipeline of received channel
  values.

These are this design's own choices, where the reference is silent:

* the cycle-exact schedule of the units;
* where the pipeline registers sit inside an update: one after the first
  table, the rest after the second;
* the table address order;
* the index encoding of messages;
* start messages and frame-edge padding as configurable registers;
* the window emission rule;
* the fixed-slot decoder hand-over with `fb_req`;
* the write port and the configuration map;
* the threshold form of the quantizer;
* the output message width.

Departures and omissions:

* **Full (three-input) tables** and the mixed variants (reduced
  forward/backward with a full final table) are not built. Only the fully
  reduced structure is.
* **Two-level and shared multi-level logic tables.** The minimised AND/OR
  forms of a table, and the gate-sharing algorithm, depend on the designed
  table contents. Only the generic memory-and-multiplexer table is built.
  It computes the same function for any contents, but it is much larger
  than the minimised logic the reference design's area figures assume.
* **Metric shift registers.** In this schedule the symbol-alignment delays
  run `8,6,4,2,0,2,4,6,8,10` times `S_P` for `N_B=10`, because `z_alpha` of a
  position is ready one step before the backward message from its right
  neighbour. A perfectly symmetric X would need `2*sum(2k)` stages, one step
  less at the ends. The output alignment registers add
  `1,2,3,4,5,4,3,2,1,0` times `S_P` stages of `W_E` bits. Storage therefore
  differs slightly from the reference memory count.
* **Not included:** the conventional arithmetic equalizer (Forney or
  Ungerboeck metric with max-log updates and Ladner-Fischer adders), which
  is a comparison baseline; the hybrid option of lookup forward/backward
  with an arithmetic final update; the decoders; the interleavers.
* **Table design.** The information-bottleneck design of the tables and
  thresholds happens offline and is not part of the hardware. No designed
  tables are supplied. The testbenches use hashed pseudo-random tables,
  which test the datapath exactly but equalize nothing. Error-rate results
  therefore cannot be reproduced with this RTL alone.

## Files

| file | content |
|---|---|
| `rtl/ib_eq_pkg.sv` | widths, table selector enum, configuration struct |
| `rtl/ib_lut.sv` | two-input table: memory cells + multiplexer tree, optional symmetry |
| `rtl/fwd_update.sv`, `rtl/bwd_update.sv`, `rtl/final_update.sv` | the three reduced updates |
| `rtl/delay_line.sv` | shift register used for every delay, including the channel pipeline |
| `rtl/window_builder.sv` | sub-blocks to overlapping windows |
| `rtl/x_equalizer.sv` | one pipelined equalizer run |
| `rtl/ib_quantizer.sv` | threshold quantizer |
| `rtl/turbo_eq_top.sv` | top level |
| `tb/tb_ib_pkg.sv` | test table contents and the sequential reference equalizer |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/turbo_tb_env.sv` | stimulus, decoder model and checker for the top |
| `tb/tb_turbo_eq_top.sv` | end-to-end test at reduced sizes |
| `tb/tb_turbo_eq_top_full.sv` | end-to-end test at the default sizes |
| `tb/tb_turbo_eq_top_w9.sv` | end-to-end test with 9-bit metrics (`W_A=9`) |
| `tb/tb_turbo_eq_top_ftn.sv` | whole 64800-symbol codewords on a faster-than-Nyquist channel, `DEC_DELAY=8192` |
| `tb/tb_x_equalizer_sym.sv` | one equalizer run with `SYMMETRIC=1` half tables |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. It also has
a watchdog that counts a failure if the test hangs. Run one with Verilator 5
from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_turbo_eq_top_full \
  -y rtl -y tb +libext+.sv rtl/ib_eq_pkg.sv tb/tb_ib_pkg.sv tb/tb_turbo_eq_top_full.sv
./obj_dir/Vtb_turbo_eq_top_full
```

For another testbench, replace the name in both places. Include
`tb/tb_ib_pkg.sv` whenever the testbench imports it.

The full-size run loads 258k table entries and streams six frames through
all three runs. It takes a few seconds.

What the tests establish:

* **Per update.** Random inputs every cycle must give the composed table
  values after exactly `S_P` cycles.
* **`x_equalizer`.** 300 random windows with bubbles must match a plain
  sequential forward/backward/final loop. Each must leave exactly
  `(N_O+N_B+1)*S_P` cycles after it entered.
* **`window_builder`.** Frames of 1 to 5 sub-blocks, with bubbles and with
  back-to-back frames, must give exactly the padded windows.
* **Top level.** An EPR4 channel (`h = [.5,.5,-.5,-.5]`) with noise drives
  all three runs. A decoder model maps each output to feedback. The test
  checks every message, flag and output cycle against the reference, and
  counts frame edges, bubbles, back-to-back frames, single-sub-block frames
  and feedback hand-overs. A mechanism that never occurs counts as a
  failure.
* **Symmetric tables.** `tb_x_equalizer_sym` loads only the half tables and
  checks a whole run against the reference, which expands them with the
  inversion rule.
* **Workloads.** `tb_turbo_eq_top_w9` runs the top with 9-bit metrics. The
  final table then has 2^18 entries, and about 0.9 million configuration
  writes are needed. `tb_turbo_eq_top_ftn` sends two whole 64800-symbol
  codewords (6480 sub-blocks each). They pass through a 12-tap
  faster-than-Nyquist channel whose tables model only three taps. The
  decoder slot is raised to 8192 cycles so that a codeword fits before its
  feedback is due. At the default 256 cycles, a codeword that long cannot be
  decoded in time. This test runs for under a minute.
