# PeZO perturbation engine

Zeroth-order (ZO) training estimates a gradient from two forward passes
instead of back-propagation: every weight is nudged by `+eps*u`, the loss is
measured, every weight is nudged to `-eps*u`, the loss is measured again, and
the difference of the two losses, divided by `2*eps`, says how far to move
along `u`. The catch on an FPGA or ASIC is `u`: the textbook method wants a
fresh Gaussian random number for every weight in every pass, which would take
hundreds of Gaussian generators running side by side.

The PeZO scheme removes that cost in two ways:

* **Reuse.** A short list of random numbers is repeated to cover all the
  weights. Either a fixed pool of 4095 numbers is generated offline and read
  round and round (*pre-generation*), or 31 small LFSRs produce 31 numbers
  that are repeated over a weight matrix (*on-the-fly generation*). Pool size
  and RNG count are one less than a power of two on purpose, so the repetition
  never lines up with the power-of-two shapes of weight matrices.
* **Uniform instead of Gaussian, with modulus scaling.** The numbers are
  uniform, which is cheap, and are scaled so that the length (L2 norm) of each
  repeated group equals the expected length of a Gaussian vector of the same
  size. For the on-the-fly generator the scale factor is looked up in a table
  and rounded to a power of two, so scaling is a shift.

This repository holds synthesizable SystemVerilog for both generators, the
lanes that apply the perturbation and the update to a stream of weights, and a
small sequencer that runs a whole ZO-SGD step. The forward-pass engine that
produces the losses and the memory that holds the weights are outside: the top
module has ports for them.

## One ZO step as the engine runs it

`zo_step_ctrl` runs one step with one random direction (`q = 1`). The weights
make three trips through the update lanes (`zo_weight_update`), each trip
called a *pass*, and every pass must see exactly the same `u`:

| order | what happens | lane coefficient `c` | weights after |
|---|---|---|---|
| 1 | checkpoint the generator (`gen_mark`) | | |
| 2 | pass POS | `+eps` | `theta + eps*u` |
| 3 | forward pass, loss `L+` arrives | | |
| 4 | rewind the generator (`gen_rewind`) | | |
| 5 | pass NEG | `-2*eps` | `theta - eps*u` |
| 6 | forward pass, loss `L-` arrives | | |
| 7 | `g = (L+ - L-)/(2*eps)`, rewind | | |
| 8 | pass UPD | `eps - eta*g` | `theta - eta*g*u` |

Each lane computes `w + round(c*u)` with saturation. The last pass restores
`theta` and applies the update in one go. `eps` is a power of two,
`eps = 2^-eps_exp`, so the division by `2*eps` is a shift and the whole update
coefficient costs one multiplier. Mark and rewind are pulses in cycles of
their own, while no pass is open, so they can never meet a weight beat. After
the update pass the generator simply carries on, so the next step gets new
numbers.

The "rewind" is what turns a random generator into a replayable one: the pool
generator saves and restores its read pointer (12 bits); the on-the-fly
generator saves and restores all 31 LFSR states and the rotation.

## Pre-generation: a pool read as an endless ring (`pregen_pool`)

The pool holds 4095 numbers of 12 bits, already scaled offline. The
perturbation for the whole model is the pool repeated end to end, and a single
read pointer walks along it. The pointer is never reset: when a weight matrix
ends part-way through the pool, the next matrix starts with the numbers that
were left over, and the next step starts where the previous one stopped.
Example with a 6-number pool `2 4 0 1 3 5`: a 16-weight matrix takes
`240135 240135 2401`, a 4-weight matrix then takes `35 24`, the next 16-weight
matrix `0135 240135 240135`.

The engine must hand out up to 8 numbers per clock, so the pool is spread over
8 block RAMs: number `i` sits in bank `i mod 8`, row `i / 8`. Any 8 consecutive
numbers then fall in 8 different banks, one read each. The exception is the
end of the ring: a beat that starts at 4090 needs 4090..4094 and then 0..2,
and both 4090 and 2 live in bank 2 (4095 is not a multiple of 8). The wrapped
lanes are served by the second port of each RAM, which just reads row 0, so no
bank ever needs two reads on one port. Latency is two cycles: RAM read, then
lane routing and widening to the common perturbation format.

## On-the-fly: 31 LFSRs, one combination per matrix (`otf_rng_array`, `otf_generator`)

The RNG array is 31 copies of a 14-bit maximal-length Galois LFSR
(`urng_lfsr`, polynomial taps 14, 13, 12, 2, period 16383). All copies use the
same polynomial and differ only in their seed (`1 + 528*j` for RNG `j`), so
they run in a fixed phase relation to each other. One step of the array gives
one *combination*: a vector of 31 numbers.

How a combination becomes a perturbation:

* A weight matrix uses one combination, repeated: its `e`-th weight gets array
  position `e mod 31`. Whatever is left of the last repetition is dropped, and
  the next matrix starts at position 0 with the next combination (the array
  steps once per matrix, on the beat flagged `last`). Unlike the pool, nothing
  carries over between matrices.
* When RNG1 (index 0) comes back to its seed the array has gone through all
  16383 combinations. At that point the array *rotates*: the RNG that sat at
  the first position moves to the end. The rotation is only an index offset
  `rot`: position `p` reads RNG `(p + rot) mod 31`. The same numbers then
  appear in a different order, which gives `31 * 16383` distinct ordered
  combinations before anything repeats.
* The RNG pointer (`ptr`) is the array position where RNG1 currently sits,
  `(31 - rot) mod 31`. Whatever the rotation, RNG1's output is the address of
  the scale table.

A raw LFSR value `v` (1..16383) stands for the uniform number
`(v - 8192) / 8192` in (-1, 1).

## Modulus scaling with a power-of-two table (`scale_lut`)

This is the part that needs the most care. For a combination `u` of
dimension `d = 31`, the target length is the expected length of a standard
Gaussian vector of that dimension,

    E||u_hat|| = sqrt(2) * Gamma((d+1)/2) / Gamma(d/2)   (= 5.5231 for d = 31)

and the combination should be multiplied by `s = E||u_hat|| / ||u||`.
Computing `||u||` and a division every step would be costly. Two facts make a
table possible:

1. Because all RNGs run the same sequence at fixed offsets, the value of RNG1
   alone tells which of the 16383 combinations the array holds. A table with
   one entry per RNG1 value (2^14 entries) therefore covers every combination.
2. Rotating the array reorders the numbers but does not change `||u||`, so
   the same table serves all rotations, addressed by RNG1 wherever it sits.

Each entry stores `k = round(log2(s))`, a signed 4-bit exponent, and the
generator multiplies by `2^k` with a shift. The table is filled by the host
before training; the formula the testbench uses to compute it is exactly:
run the 31 LFSRs from their seeds through one period; at each state compute
`||u||` over the 31 values `(v_j - 8192)/8192`; store
`k = floor(log2(5.5231/||u||) + 0.5)`, clamped to [-8, 7], at address `v_0`.
For uniform numbers `||u||` is about `sqrt(31/3) = 3.2`, so most entries
are `k = 1`; the clamp never binds in practice.

The pool numbers of the pre-generation strategy are scaled in the same spirit
offline, so `pregen_pool` needs no table.

Timing: the table is a synchronous RAM, so a read returns one cycle after
its address. To keep it off the critical path of a matrix change, the table
is addressed not with RNG1's present value but with the value RNG1 will hold
in the next cycle (`lead_d` of `otf_rng_array`: the seed restored by a rewind,
the next LFSR state on a step, otherwise the present state). The exponent
therefore arrives in the same cycle as its combination, and the generator
takes one beat every cycle, across matrix boundaries and rewinds, even for a
stream of one-beat matrices. The only cycle it refuses a beat (`ready` low)
is the one after a table write, when the entry being read may be stale; the
host writes the table between steps, so this never falls in a pass.

## Number formats

| quantity | bits | fraction bits | range |
|---|---|---|---|
| pool entry | 12 | 8 | -8 .. +8 |
| perturbation `u` (both generators) | 16 | 12 | -8 .. +8, saturating |
| weight | 16 | 14 | -2 .. +2, saturating |
| lane coefficient, `eta` | 24 | 20 | -8 .. +8 |
| loss | 32 | 16 | |
| scale exponent | 4 (signed) | | 2^-8 .. 2^7 |

The on-the-fly value in Q4.12 is `(v - 8192) * 2^(k - 1)`, rounded towards
minus infinity. The lane result is `w + floor(c*u / 2^18 + 1/2)`.

## Top-level interface and timing (`pezo_top`)

* **Host load** (no pass running): `cfg_we` with `cfg_sel = CFG_POOL` writes
  pool entry `cfg_addr` from `cfg_wdata[11:0]`; `CFG_LUT` writes scale
  exponent `cfg_addr` from `cfg_wdata[3:0]`.
* **Step**: pulse `step_start` with `eps_exp` (1..20) and `eta` held for the
  whole step. `step_busy` is high until `step_done` pulses.
* **Weight stream**: on `pass_start` the weight memory sends beats of up to 8
  weights: `w_in_count` valid lanes from lane 0, `w_in_last` on the last beat
  of each weight matrix, `w_in_end` on the last beat of the model. A beat
  moves on `w_in_valid && w_in_ready`. The result appears on `w_out_*` three
  cycles later with the same tags; lanes beyond the count return their input
  unchanged. The `w_out_end` beat closes the pass.
* **Forward engine**: after passes POS and NEG the engine pulses `fwd_req`
  and waits for `loss_valid` with `loss`.
* **Mode**: `mode` selects the pool (`MODE_PREGEN`) or the RNG array
  (`MODE_OTF`); change it only between steps. Both sources keep their state,
  so switching back continues where each left off.
* **Status**: `pool_ptr`, `pool_wrap`, `rng_rot`, `rng_ptr`,
  `rng_circle_end`.

Parameters of the top: `LANES = 8`, `POOL_N = 4095`, `N_RNG = 31`,
`RNG_W = 14`, `ROT_EACH_STEP = 0` (see the departures below). The pool has one bank per lane, so `LANES` must be a power of
two.

## Files

| file | contents |
|---|---|
| `rtl/pezo_pkg.sv` | formats, enums for mode / host target / pass phase, LFSR tap masks |
| `rtl/urng_lfsr.sv` | one LFSR uniform generator |
| `rtl/otf_rng_array.sv` | 31 LFSRs, rotation at the end of a period, RNG pointer, checkpoint |
| `rtl/scale_lut.sv` | 2^14-entry table of power-of-two exponents |
| `rtl/otf_generator.sv` | on-the-fly source: repetition per matrix, scaling with the table read ahead |
| `rtl/pool_bank.sv` | one dual-port RAM bank |
| `rtl/pregen_pool.sv` | pre-generation source: 8 interleaved banks, ring pointer, checkpoint |
| `rtl/zo_weight_update.sv` | 8 lanes of `w + round(c*u)` |
| `rtl/zo_step_ctrl.sv` | the ZO-SGD step sequencer |
| `rtl/pezo_top.sv` | everything wired together |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_pezo_roberta_layer.sv` | workload test: one RoBERTa-base encoder layer |
| `tb/tb_pezo_otf8.sv` | end-to-end test with 8-bit RNGs |

## What follows the PeZO paper and what is this design's own

Taken from the paper: the two reuse strategies; pool of 2^12 - 1 twelve-bit
numbers split over 8 block RAMs; the pointer that carries leftovers over;
2^5 - 1 RNGs, LFSR-based, 8 to 14 bits (14 chosen here, it covers both
requirements the paper reports); one combination per matrix with the leftover
dropped; the RNG shift and the RNG pointer; the table of 2^b power-of-two
scale factors addressed by the pointed RNG; the Gaussian-norm formula.

Choices made here, where the paper says nothing: the LFSR polynomial and
seeds; the number formats; 8 lanes per cycle; the bank interleaving and the
second-port read at the pool's wrap; the rotation as an index offset; the
checkpoint/rewind of both generators; the read-ahead table address; the step
sequence, the power-of-two `eps` and the single restore-and-update pass; all
handshakes.

Points where the paper's own statements differ, and what was followed:

* **31 or 32 RNGs, 4095 or 4096 pool entries.** The method section says
  sizes are one less than a power of two and only *named* as powers of two;
  the hardware section says 32 RNGs and 4096 numbers. This design uses 31 and
  4095.
* **When the RNG array rotates.** The text says after every clock cycle; the
  illustration rotates at the end of the RNG period ("circle end"), which is
  also what makes the count `n * 2^b` of combinations come out. This design
  rotates once per period by default; the parameter `ROT_EACH_STEP = 1`
  (on `pezo_top`, `otf_generator` and `otf_rng_array`) selects the text's
  reading, a rotation with every step. The scale table serves both, since
  rotation does not change the norm.
* **Number of queries.** The gradient estimate averages over `q` random
  directions; the sequencer does `q = 1` only, the setting of the MeZO
  method the paper builds on. More queries would need a second generator
  checkpoint (one at the start of the step, one per query) and `q` stored
  loss differences.
* **Period 2^b versus 2^b - 1.** The paper counts 2^b combinations per period;
  an LFSR never produces 0, so the period here is 2^b - 1 and table entry 0 is
  unused.

Cost differs from the paper's table of resources, because this RTL does more
than generate numbers: after synthesis the whole top has 1776 flip-flops and
114,688 memory bits (pool 8 x 512 x 12, table 16384 x 4). Of the flip-flops,
434 are the on-the-fly checkpoint copy, another 434 the live LFSRs, and most of
the rest the two-stage lane pipelines and the weight delay line. The paper
reports 16 flip-flops for the pool generator and 449/512 for the on-the-fly
generator, without a checkpoint and without an output pipeline.

## Verification

Every module has a self-checking testbench in `tb/` that compares against a
reference written independently from the description above (its own LFSR
model written bit by bit, real-number arithmetic for scaling, rounding and the
update coefficient) and prints `TB_RESULT checks=N failures=M`.

| testbench | size | what it establishes |
|---|---|---|
| `tb_urng_lfsr` | default | full 16383-state period, no repeats, load/step priority |
| `tb_otf_rng_array` | 7 RNGs x 5 bits | array order, pointer, rotation exactly once per period (and every step with `ROT_EACH_STEP = 1`), look-ahead value, rewind |
| `tb_scale_lut` | default | every entry, read latency |
| `tb_otf_generator` | 11 RNGs x 6 bits | repetition with wrap inside a beat, leftover drop, scaling incl. saturation, 2-cycle latency, no lost cycle at steps and rewinds, one after a table write, rewind |
| `tb_pregen_pool` | default | ring read over ~80 wraps, second-port wrap, latency, rewind |
| `tb_zo_weight_update` | default | rounding and saturation of all lanes |
| `tb_zo_step_ctrl` | default | 300 steps of the sequence, update coefficient |
| `tb_pezo_top` | **all defaults** | 1664 full ZO steps in both modes, every weight beat checked |
| `tb_pezo_otf8` | `RNG_W = 8`, rest default | as `tb_pezo_top`, with the 8-bit RNGs found sufficient for RoBERTa; 841 steps, the array rotates through all 31 positions and back |
| `tb_pezo_roberta_layer` | **all defaults** | the 7,087,872 weights of one RoBERTa-base encoder layer, 2 steps per strategy, one beat per cycle |

`tb_pezo_top` computes the scale table itself, loads pool and table through
the host port, and runs: a pre-generation step with `eta = 0` (weights must
come back bit-exact), 20 more steps (the pool pointer wraps), a switch to
on-the-fly with an `eta = 0` step (weights back within 1 LSB of rounding),
steps until RNG1 has gone through its full period and the array has rotated,
and a switch back. It counts pool wraps, leftovers carried, leftovers dropped,
rotations, rewinds, mode switches, lane saturations and beats taken in the
cycle right after an array step. It fails if any of them never happened
or if `w_in_ready` ever drops inside a pass. It takes about one second.

`tb_pezo_roberta_layer` streams the 16 tensors of one RoBERTa-base encoder
layer (hidden size 768, feed-forward size 3072: four 768 x 768 projections,
768 x 3072 and 3072 x 768 feed-forward matrices, their biases and two layer
norms) through two steps of each strategy, at one beat per cycle with no
gaps. Besides checking all 7 M weights of every pass (about 96 M checks) it
checks that each pass takes exactly as many cycles as it has beats (8
numbers per clock, no lost cycle at the 16 matrix changes) and that an
`eta = 0` step returns the whole layer. It takes about 15 seconds.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
        rtl/pezo_pkg.sv tb/tb_pezo_top.sv --top-module tb_pezo_top
    ./obj_dir/Vtb_pezo_top

Replace `tb_pezo_top` with any other testbench name. Under
`verilator --lint-only -Wall` the RTL draws only three kinds of warning: the
reset is used both asynchronously and in the assertions' `disable iff`, the
upper bits of the 16-bit host port are unused, and the package constant
`PERT_FRAC` is not read by every module that imports the package.

## Sizing against the models the paper trains

Weights are streamed and never stored here, and nothing counts matrix sizes,
so any model size runs; it sets the pass length. One RoBERTa-base encoder
layer is simulated in full (above); the whole model is twelve such layers
plus about 39 M embedding weights. At 8 weights per cycle one
pass over RoBERTa-base (125 M parameters) is 15.6 M cycles, a full step three
times that, about 67 ms at the 700 MHz the PeZO authors report for their
FPGA generators (this RTL has not been timed on any device). The RNG width
of 14 bits covers what the paper reports as necessary (8 bits for RoBERTa models, 14 for OPT models).
The weakest point is rate, not capacity: perturbing one LLaMA2-7B attention
layer (4 x 4096 x 4096 = 67 M numbers) takes 8.4 M cycles, whereas an FPGA
inference of that layer at 225 MHz has been reported to take about 2 ms,
which would need roughly 148 numbers per cycle. The on-the-fly generator
scales to more lanes with `LANES` alone; the pool needs one bank per lane.
