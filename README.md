# A compute-in-memory Metropolis-Hastings sampler built from SRAM bitcells

Markov chain Monte Carlo (MCMC) spends most of its time drawing random
numbers and moving samples between a processor and memory. This design moves
the whole Metropolis-Hastings loop into an SRAM macro. The random proposal is
made by the bitcells themselves. A "pseudo-read" weakens a row of cells
until thermal noise flips each one with a probability of about 45%. The
accepted samples never leave the array: a rejected candidate is overwritten
by the previous sample, and the current sample is copied to the next address,
both by a copy path inside the array that bypasses the sense amplifiers and
write drivers.

The RTL describes the macro at the level of the digital decisions it takes:

* 64 compartments, each a 64 x 64 array of 6T cells (4096 bits, 256 kb in
  all), with its own decoder, precharge control, copy path, 4-bit R/W port
  and accept/reject circuit;
* one shared "accurate [0,1]" random number generator: 64 cells followed by a
  three-stage XOR tree;
* a controller that runs the same command stream in all 64 compartments, so
  that each compartment grows its own Markov chain in lock step with the
  others.

The analog part, cells that flip at random under a lowered supply, is a
behavioural model (`bitcell_flip_model`). Everything else is synthesizable
SystemVerilog.

## How a chain is laid out in the array

A compartment row has 64 columns in 16 **groups** of 4 columns. A group holds
4 bits and is the unit of every R/W access and every copy. A sample of
4·G bits (G = 1, 2, 4, 8 for 4-, 8-, 16-, 32-bit samples) occupies G
neighbouring groups of one row. This design calls that a **slot**. Slots are
numbered along a row and then row by row:

| precision | groups per slot G | slots per row | slots per compartment | samples in the macro |
|---|---|---|---|---|
| 4 bit  | 1 | 16 | 1024 | 65536 |
| 8 bit  | 2 | 8  | 512  | 32768 |
| 16 bit | 4 | 4  | 256  | 16384 |
| 32 bit | 8 | 2  | 128  | 8192  |

A run fills slots `a_start` .. `a_end` of every compartment. When it is done,
slot A of compartment c holds sample number A − a_start of chain c, with the
first sample x0 in `a_start`.

## The proposal: pseudo-read

For a pseudo-read, the precharge circuits of the selected groups hold both
bit lines high, the cell supply is lowered, and the word line is pulsed. A
cell of the selected row in a precharged group loses its value to noise.
Cells on other rows (word line low) and cells of the same row in groups
whose precharge is off keep their data. In the RTL the effect is an XOR: the
noise model supplies, for each cell, a flip bit that is 1 with probability
`BFR_PER_MILLE`/1000 (default 450), and `sram_subarray` XORs the flip bits
into the precharged groups of the selected row.

Since every bit flips independently with the same probability, the chance
of going from value i to value j equals the chance of going from j to i. The
proposal is symmetric, so the Metropolis-Hastings ratio reduces to
p(x*)/p(x_i). The flip-rate itself does not have to be known or stable: it
changes the mixing speed of the chain, not its stationary distribution. The
whole sample is proposed in a single pseudo-read, whatever its width,
because all its groups are in one row and their precharge enables are raised
together (`bl_conditioning`).

## The uniform number u: reset, pseudo-read, XOR tree

The accept test needs a uniform u in [0,1), and bits with a 45% chance of
being 1 are not uniform. `accurate_rng` therefore first resets its 64 cells
to 0 and then pseudo-reads them, so that each raw bit is 1 with probability
λ0 = p_BFR. `msxor` then folds the 64 bits in three XOR stages (32, 16, then
8 gates), pairing group 2k with group 2k+1 at every stage. If the inputs of
an XOR are independent with P(1) = λ, its output has P(1) = 2λ(1 − λ). This
map moves any λ in (0, 0.5) towards 0.5, and does so quickly: from 0.40 it
goes to 0.48, then 0.4992, then 0.49999872. The 8-bit result R3 is u·256.
Because of the reset, every raw bit starts from 0. λ0 is then the flip rate,
which is below one half, rather than a value that depends on what the cell
held before.

Timing: `start` in cycle t resets the cells; the pseudo-read happens in
t+1; u is valid from t+2. The controller starts it in the RANDOM step, so
u is ready for the check. A single u serves all 64 compartments for a given
address.

## The acceptance test in integers

`calc_circuit` accepts when u < p(x*)/p(x_i), computed without division as

    accept  <=>  R3 · p(x_i)  <  256 · p(x*)

and then takes x* as its new current value x_i. The target density p(x) is a
table of 256 unsigned 16-bit weights (`pdf_table`), written by the host,
indexed by the top min(4G, 8) bits of a sample. Weights need not be
normalised. A zero weight makes a value unreachable. With p(x_i) = 0 every
candidate of non-zero weight is accepted.

The current value x_i is held in a register of the calculation circuit, so
only the candidate has to be read out of the array. The candidate is read
4 bits per cycle and assembled there.

## Keeping the chain in memory: the in-memory copy

Each group has a **select unit** with two controls. A puts the group's four
BL/BLB pairs on an 8-line bus (BFA0..7). B connects the output side of the
bus (BFB0..7) back to the group's bit lines, which writes the cells of the
active row. Eight buffers (the **copy unit**) drive the bus from the A side
to the B side. With one row's word line high, A on group s and B on group d
copy group s into group d, with no trip through the R/W circuits. A
malformed command (two sources, source equal to destination, broken BL/BLB
pair) raises `err`.

Two copies per sample keep the chain in the array:

* **restore**: in every compartment that *rejected* x*, slot A−1 is copied
  over slot A. The word line of compartments that accepted stays low, so
  they keep x*.
* **forward**: in every compartment, slot A is copied to slot A+1. The next
  pseudo-read then starts from the current chain value, and the proposal is
  a random perturbation of x_i.

A copy only works within a row. If slot A is the first slot of its row
(restore) or the last (forward), the other slot is in another row. In that
case the controller writes the chain value held in the calculation circuit
through the normal write drivers, one group per cycle.

## The per-sample schedule

The controller (`mcmc_controller`) issues one command per cycle to all
compartments:

| step | cycles | what happens |
|---|---|---|
| RANDOM | 1 | pseudo-read of slot A (all G groups); start the u generator |
| READ | G | slot A read into the candidate register, one group per cycle |
| CALCULATE | 1 | accept/reject in every compartment |
| RESTORE | 2G (G at a row start) | copy A−1 → A where rejected |
| FORWARD | 2G (G at a row end) | copy A → A+1 everywhere |

At A = a_start there is no CALCULATE or RESTORE: the pseudo-read of the
host-written seed becomes x0. At A = a_end there is no FORWARD. The RESTORE
step is always spent, even when every compartment accepted: the schedule
does not depend on the data. Each group copy takes `COPY_CYC` = 2 cycles.

Inside a row a sample therefore takes 2 + 5G cycles: 7, 12, 22 and 42
cycles at 4, 8, 16 and 32 bits. Across the macro that is 64 samples per
period. The pseudo-read costs the same for any width, while reads and copies
grow with G, so doubling the width less than halves the sample rate.

## Interface

All signals are synchronous to `clk`; `rst_n` is an asynchronous active-low
reset. It clears the control state, the counters and the density table, but
not the bitcell arrays.

* **Memory port** (only while `busy` is low): `mem_en`, `mem_we`, `mem_comp`,
  `mem_row`, `mem_grp`, `mem_wdata[3:0]` access one group of one compartment.
  The read data comes out on `mem_rdata` in the next cycle and holds until
  the next read.
* **Density table**: `pdf_we`, `pdf_addr[7:0]`, `pdf_wdata[15:0]`.
* **Sampler**: put `prec`, `a_start`, `a_end` and pulse `start` for one
  cycle. Seed slot `a_start` of every compartment first. `busy` stays high
  until `done` pulses. If `a_start > a_end` or `a_end` is beyond the last
  slot at that precision, `cfg_err` pulses and nothing starts.
* **Observation**: `obs_calc` pulses one cycle after each check, with the
  u used (`obs_u`), the decisions (`obs_accept`), the candidates
  (`obs_x_new`) and the chain values after the check (`obs_x_cur`). Eight
  32-bit counters (`cnt_calc`, `cnt_accept`, `cnt_reject`, `cnt_random`,
  `cnt_rest_copy`, `cnt_rest_write`, `cnt_fwd_copy`, `cnt_fwd_write`) count
  since reset.

Typical use: write the density table, write a seed into slot `a_start` of
each compartment, start, wait for `done`, read the slots back.

## Files

| file | contents |
|---|---|
| `rtl/mcmc_pkg.sv` | geometry, command struct `macro_op_t`, mode and precision enums, slot helpers |
| `rtl/mcmc_cim_top.sv` | the macro: 64 compartments, RNG, controller, density table, host ports |
| `rtl/mcmc_controller.sv` | per-sample schedule |
| `rtl/compartment.sv` | one compartment |
| `rtl/sram_subarray.sv` | 64 x 64 cell array with read, masked write and pseudo-read |
| `rtl/wl_decoder.sv`, `rtl/bl_conditioning.sv` | word-line decoder, precharge enables |
| `rtl/select_unit.sv`, `rtl/copy_unit.sv` | in-memory copy path |
| `rtl/rw_circuit.sv` | 4-bit sense/write port with column multiplexer |
| `rtl/calc_circuit.sv`, `rtl/pdf_table.sv` | accept/reject check, density table |
| `rtl/accurate_rng.sv`, `rtl/msxor.sv` | uniform generator and XOR tree |
| `rtl/bitcell_flip_model.sv` | behavioural noise model (uses `$urandom`) |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_mcmc_cim_top.sv` | end-to-end test with 4 compartments |
| `tb/tb_mcmc_cim_full.sv` | end-to-end test of the macro at full size |
| `tb/tb_mcmc_gmm.sv` | full-size test that the chains reproduce a Gaussian-mixture target |
| `tb/tb_mcmc_mgd.sv` | the same for a bivariate Gaussian on a 16 x 16 grid |
| `tb/mcmc_top_checks.svh`, `tb/tb_util.svh` | shared checking code |

## Simulating

With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl \
        rtl/mcmc_pkg.sv tb/tb_mcmc_cim_top.sv --top-module tb_mcmc_cim_top
    ./obj_dir/Vtb_mcmc_cim_top

Any other testbench runs the same way. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.
The end-to-end tests check the chains independently of the design's
internals. From the memory contents and the recorded u and candidates, they
recompute every decision with their own copy of the density table. They
check that each stored sample is the candidate or the previous sample as
that decision says, that the run takes exactly the cycles of the schedule
above, and that candidates differ from the previous value in about 45% of
their bits. They also require every mechanism to occur at least once:
accept, reject, restore by copy and by write-back, forward by copy and by
write-back, memory reads and writes, all four precisions, and a refused
configuration.

`tb_mcmc_cim_full` uses the default parameters. It fills all 65536 4-bit
slots, then all 8192 32-bit slots, plus shorter 8- and 16-bit runs. It takes
about 80 s in Verilator. `tb_mcmc_cim_top` takes well under a second.

The density used by the tests is a mixture of four Gaussians over the table
index, with every seventh entry set to zero.

`tb_mcmc_gmm` checks that the sampler does its actual job, also at the
default parameters. The target is the four-Gaussian benchmark mixture:
means -2, 0, 3 and 2.5, standard deviations 1, 1, 5 and 3, over x in
[-10, 10]. It is mapped linearly onto the density index, with equal
weights, since the weights are not specified. Every compartment runs its
own chain over the whole array, at each of the four precisions. The stored
samples after a burn-in of 32 per chain go into 16 bins of the density
index. Their total variation distance from the target must stay below a
limit. The limit is 0.06 for the 63488 4-bit samples and rises to 0.12 for
the 6144 32-bit samples. Over several simulator seeds the measured distances
were 0.01-0.03 (4-bit), 0.016-0.021 (8-bit), 0.024-0.054 (16-bit) and
0.032-0.061 (32-bit). The test takes about 2 minutes. The burn-in and the
limits are choices of the test; the source does not fix them. A chain that
has reached a state of nonzero density must also never step into a
zero-density state; that check matters for the other tests' table, which
has zero entries. Because one u serves all 64 chains, their accept
decisions are correlated. Each chain on its own is still a valid Metropolis
chain, but the spread of the histogram is larger than for 64 independent
chains.

`tb_mcmc_mgd` does the same for a two-dimensional target. The 8-bit
density index is read as two 4-bit coordinates, x in the upper half and y
in the lower, each spanning [-5, 5]. The table holds a zero-mean Gaussian
with identity covariance on that 16 x 16 grid. The covariance is the test's
choice, as it is not specified. The test runs 8-bit and 32-bit chains over
the whole array and bins them on a 4 x 4 grid of (x, y). The measured
distances were 0.017-0.049 and 0.026-0.047, against limits of 0.08 and
0.12. A finer 2-D target, or one in more than two dimensions, needs more
index bits than the 256-entry table has.

## What is modelled and where it departs from the source description

Taken from the source design: the 256 kb array of 64 compartments of 64 x 64
cells in groups of 4 columns; the per-group precharge that confines a
pseudo-read; pseudo-read as the proposal; the symmetric proposal that
reduces the test to p(x*)/p(x_i); the reset-then-pseudo-read uniform
generator with 64 cells in 8 groups of 8 and a three-stage XOR tree giving 8
bits; one u shared by all compartments; the select units with A/B controls
and the 8-line buffered copy bus; the restore copy only in rejecting
compartments, with the word lines of the others off; the forward copy; the
order random, read, calculate, copy, copy; combined groups for 8-, 16- and
32-bit samples, with reads and copies done one group at a time.

Choices of this design, where the description is silent:

* Pseudo-read is modelled as an independent flip per cell with a fixed
  probability. Temperature and supply dependence are not modelled.
* The density is a 256-entry table on the top 8 bits of the sample (all 4
  bits for 4-bit samples). A fine density over 32-bit values cannot be
  represented this way. Neither can a two-dimensional one finer than
  16 x 16, nor one in more dimensions.
* One run fills at most the whole array, i.e. 8192 samples of 32 bits.
  A benchmark of a million samples therefore means about 123 runs, with
  the host reading the samples out between them.
* Copies across a row boundary are replaced by a write-back through the R/W
  port.
* Cycle counts: 1 for a pseudo-read, read or write, 2 for a group copy, 1
  for the check. A 4-bit sample in the middle of a row therefore takes 7
  cycles. The source reports 6 ns per 4-bit sample; matching that would
  need a clock of about 1.17 GHz. The source probably overlaps the
  CALCULATE step with other steps, which this schedule does not do.
* The host interface, density table, observation ports and counters.
* The order of the 8 bus lines (BL_k on line 2k, BLB_k on line 2k+1) and
  which groups feed which XOR gate.
* The source states the accept test once as "p(x_i) > u·p(x*)". That
  contradicts its own algorithm and would sample the wrong distribution. The
  RTL uses u·p(x_i) < p(x*).
* The source says two independent groups of copy circuits handle restore
  and forward. Its timing puts the two copies in successive slots, so here
  one copy path per compartment does both in turn.
* The copy path supports samples of up to 32 bits. The source mentions
  copies of up to 64 bits but evaluates nothing wider than 32.

Not modelled at all: the supply switching (cell supply lowered to 0.5 V,
precharge and buffer supplies, the split precharge rails of the uniform
generator), transistor-level cell behaviour, the sense-amplifier analog
timing and energy. In this RTL, all of these reduce to the mode of each
command.

The statistics are only as good as the noise model. Real cells would have
per-cell bias and correlation, which the XOR tree is there to absorb for u.
Nothing absorbs them for the proposal, where they would only slow mixing if
the flips stay symmetric.
