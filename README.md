# Fixed-latency ORBGRAND decoder

This is synthesizable SystemVerilog for a universal soft-decision decoder of
short binary linear block codes. Its throughput and latency are fixed.

GRAND (guessing random additive noise decoding) does not use the structure
of the code. It guesses the error pattern the channel added. Each guess `e`
is flipped into the hard-decided received word, and the result is checked
against the parity-check matrix `H`. The first guess that gives a zero
syndrome is the decoded codeword. ORBGRAND (ordered reliability bits GRAND)
first sorts the received bits from least to most reliable. It then tries the
error patterns in a fixed order over those sorted positions.

GRAND decoders are usually built around one pattern generator that is reused
many times. That gives a good average, but the worst case is very slow
(tens of thousands of cycles). This design goes the other way. Every pattern
of the schedule gets its own hardware:

- The schedule has `Q_max` patterns, split into `Q_max/Q_S` pipeline stages.
- Each stage tests `Q_S` patterns at once.
- A new frame enters every clock cycle.
- Every frame leaves exactly `L = Q_max/Q_S + 2 + log2(N)` cycles later,
  however many guesses it needed.

When a frame is decoded early, most of the later pipeline registers are not
loaded for it. So the variable amount of work saves power instead of buying
throughput.

The default build is the main configuration:

| Symbol | Default | Meaning |
|---|---|---|
| `N` | 128 | Maximum code length. |
| `B` | 8 | LLR width: 1 sign bit and 7 magnitude bits. |
| `M` | 127 | Rows of the H memory. 127 rows allow any code rate down to 1/128. |
| `Q_max` | 8192 | Patterns in the schedule. |
| `Q_S` | 512 | Patterns tested per stage. |

With these values there are 16 pattern stages and T = 18 stages in all.
The latency is 25 cycles, and the decoder takes one frame per cycle.

## The error-pattern schedule

The decoder hardware does not depend on the schedule. The schedule is just
the contents of the pattern memories, loaded at run time. The intended
schedule is *LUT-aided iLWO* (LUT = look-up table):

1. **LUT part.** The first `Q_LUT = 512` patterns are the error patterns
   seen most often on the sorted hard decisions in a long channel simulation.
   They are stored in order of how often they occur.
2. **iLWO part.** The remaining 7680 patterns follow the *improved logistic
   weight order* (iLWO), skipping any pattern already in the LUT part.

iLWO orders the patterns by this weight:

```
iLW(e) = sum_i (i+1) * (v_i + 1)
```

Here `v_0 < v_1 < ...` are the sorted positions that the pattern flips.
Patterns with few flips are favoured over patterns with many flips that sit
on less reliable positions.

The empirical LUT patterns are not reproduced here, because they depend on
channel statistics that are not available. Instead, the testbenches build a
pure iLWO schedule (see *Verification*). Any other schedule can be loaded,
with one restriction that comes from the sorter pruning described below:

> Patterns that flip 2 or more bits must only touch the N/2 least reliable
> positions. The single-bit patterns on the N/2 most reliable positions must
> be contiguous in the schedule.

## Pipeline

```
 llr[N] ─► STAGE 0 ───────────────► STAGE 1 ──► STAGE 2 … ──► STAGE T-2 ──► STAGE T-1 ─► out_yhat
           sorter (log2N cycles)    patterns    patterns      patterns      pi^-1(z)     out_yhat_vld
           H*HD(y)^T, NOR           0..Q_S-1    Q_S..2Q_S-1   last Q_S      output reg
           pi(H)
```

There is a register between every two stages. The values that travel with
each frame are:

| Signal | Meaning |
|---|---|
| `valid` | Frame tag. It separates frames from bubbles. |
| `yhat`, `yhat_vld` | The decoded word in natural order, and whether it is valid. |
| `z`, `z_vld` | A valid codeword found by the previous stage, still in sorted order. |
| `phd` = pi(HD(y)) | The hard decisions in sorted order. |
| `pi` | The sort permutation. `pi[j]` is the natural position of the j-th least reliable bit. |
| `pih` = pi(H) | H with its columns in sorted order. |

### Stage 0 (`stage0`)

An LLR holds `{sign, magnitude}`. With BPSK mapping (0 → +1, 1 → −1), the
sign bit is the hard decision HD(y). Stage 0 does the following:

- **Sort.** The pipelined bitonic sorter (`bitonic_sorter`) orders the LLRs
  by magnitude. Each entry carries its sign and its natural index. There is
  one register bank per merge phase, so the sort takes log2 N cycles.
- **Check the hard decisions.** At the same time, `hd_syndrome` computes
  `s = H·HD(y)^T` over GF(2). Each syndrome bit is an AND per column feeding
  an XOR tree. The syndrome is registered in the first sorter cycle. It is
  NORed in the second cycle, which gives `yhat_vld`.
  - From then on, `yhat_vld` holds the last log2(N)−2 sorter banks, which
    saves switching for frames that are already codewords.
  - Holding those banks changes no result: the downstream flags mark their
    contents as unused.
- **Permute H.** `h_permute` builds `pi(H)` from the H memory (`h_memory`)
  and the sorted index vector: `pih[r][j] = H[r][pi[j]]`.
- **Load the stage-0/1 register.**
  - For a codeword, only `yhat = HD(y)` and `yhat_vld = 1` are loaded.
  - Otherwise, `phd`, `pi` and `pih` are loaded and `yhat` is not.

### Pattern stages 1 … T-2 (`grand_stage`)

Each pattern stage holds a `Q_S × N` pattern memory (`pattern_memory`).
Row 0 has the highest priority. The stage works as follows:

1. **Test all patterns.** `syndrome_matrix` forms `z_i = phd XOR e_i` for
   every pattern and computes the syndrome `pih·z_i^T` of each. A syndrome
   of zero means that `z_i` is a codeword.
2. **Pick one.** `priority_select` chooses the zero syndrome with the lowest
   row index. The stage forwards that candidate as `z`, with `z_vld = 1`.
3. **Finish an earlier hit.** A frame can arrive with `z_vld = 1`, meaning
   the previous stage found a codeword. The stage then returns that
   candidate to natural order with `inv_permute`: `yhat[pi[j]] = z[j]`. It
   also sets `yhat_vld = 1`, which is the OR of the two incoming flags.
4. **Pass on a finished frame.** A frame that arrives with `yhat_vld = 1`
   only has its `yhat` copied forward.

The output register is loaded selectively. This is the power-saving part of
the design, and the part that is easiest to get wrong:

| Frame at stage input | Registers loaded |
|---|---|
| `yhat_vld` or `z_vld` set (already decoded) | `yhat`, `yhat_vld` |
| Undecoded, and a pattern of this stage hits | `z`, `z_vld`, `pi` |
| Undecoded, no hit | `phd`, `pih`, `pi` |

A register that is not loaded keeps the contents of some older frame. The
next stage still computes syndromes on that stale `phd`/`pih`. For this
reason a stage raises `z_vld` only for a frame that is still undecoded at
its input. The architecture leaves this rule implicit; without it, a stale
"hit" could overwrite a correct result.

Stage 1 is `grand_stage` with `HAS_ZIN = 0`, because stage 0 only ever
produces natural-order words. The last pattern stage, T-2, has `FWD = 0`: it
does not pass `phd` and `pih` on, since nothing after it tests patterns.

### Stage T-1 (`last_stage`)

The last stage has no pattern memory:

- If `z_vld` is set, it outputs `pi^-1(z)`.
- Otherwise it passes `yhat` through.
- `out_yhat_vld = yhat_vld OR z_vld`.
- `out_yhat_vld = 0` means that no pattern of the schedule gave a codeword.
  `out_yhat` then has no meaning.

The outputs are registered. That register brings the latency to the 25
cycles stated above: 7 sorter banks, the stage-0/1 register, 16 stage
registers and the output register.

## The sorter and its pruning

The sorter is a standard bitonic network with log2 N merge phases.

- Phase p sorts blocks of 2^p entries, alternately ascending and descending.
  The last phase merges everything ascending.
- A compare-and-swap exchanges its two entries only when they are strictly
  out of order, so equal magnitudes keep their order.
- The first compare-and-swap set of the last phase splits the N/2 least
  reliable entries from the N/2 most reliable ones.

With `PRUNE = 1` (the default), the remaining log2(N)−1 sets that act only
on the most reliable half are left out. That half then comes out in some
internal order. The pruning is safe under the schedule restriction given
earlier:

- Only single-bit patterns touch that half.
- Those patterns are contiguous in the schedule.
- A code with minimum distance ≥ 3 has at most one of them that gives a
  codeword.

Under these conditions the order inside the half cannot change the decoded
word. `PRUNE = 0` builds the full sorter.

## Using the decoder

### Ports of `orbgrand_decoder`

| Port | Width | Use |
|---|---|---|
| `clk`, `rst_n` | 1 | `rst_n` is an asynchronous, active-low reset. It clears only the valid and flag bits. |
| `in_valid`, `llr[N]` | 1, B each | One frame per cycle. `llr[i] = {sign, magnitude}`. |
| `h_wr_en`, `h_wr_row`, `h_wr_data` | 1, ⌈log2 M⌉, N | Writes one row of H. Row numbers ≥ M are ignored. |
| `pm_wr_en`, `pm_wr_stage`, `pm_wr_row`, `pm_wr_data` | 1, ⌈log2(Q_max/Q_S)⌉, ⌈log2 Q_S⌉, N | Writes one pattern row. Schedule position `q = stage·Q_S + row`. Stage 0 is decoder stage 1. |
| `out_valid`, `out_yhat`, `out_yhat_vld` | 1, N, 1 | The result, L cycles after the input. |

### Loading a code

The decoder decodes any binary linear code with length `n ≤ N` whose
parity-check matrix has at most `M` rows.

1. Write H row by row.
2. Set the columns `n…N−1` and the unused rows to zero.
3. Feed the received LLRs in positions `0…n−1`.
4. Give the unused positions magnitude `2^(B−1)−1` and sign 0. The sorter
   then leaves them at the reliable end.

The memories have no reset. Program H and all `Q_max` pattern rows before
sending frames, and do not reprogram them while frames are in flight.

### Configurations

All of these are parameter overrides of the same RTL:

| Build | `M` | `Q_S` | Stages T | Latency |
|---|---|---|---|---|
| Any rate ≥ 1/128 (default) | 127 | 512 | 18 | 25 |
| R_min = 0.656 (e.g. BCH(127,113)) | 44 | 512 | 18 | 25 |
| R_min = 0.75 (e.g. 5G polar (128,105)+CRC11) | 32 | 512 | 18 | 25 |
| Smaller stages | 44 or 32 | 256 | 34 | 41 |

## Where this RTL goes beyond the architecture description

These choices are not fixed by the architecture description. They are
documented again in each file's header:

- **Ports and tags.** The exact programming ports (enable, row address,
  stage select) and the `valid` tag are this design's own. The architecture
  assumes one frame per clock, with no bubbles and no tag.
- **LLR layout.** The sign is the top bit.
- **Stage-0 timing.** The two-cycle split of the stage-0 check (syndrome,
  then NOR) is chosen so that `yhat_vld` is ready in time to stop the last
  log2(N)−2 sorter banks.
- **Stale-data rule.** `z_vld` is gated by the incoming flags, as explained
  above.
- **Output register.** Stage T-1 has an output register, which makes the
  latency match the formula.
- **Tie rule.** The sorter keeps equal magnitudes in their original order.
- **Reset.** Only flags are reset. Data registers start unknown and are
  marked unused by the flags.
- **Syndrome structure.** The per-stage syndrome circuits are written as
  AND/XOR-reduce loops, and the selected candidate is rebuilt as
  `phd XOR e_sel` rather than multiplexed out of the full Z matrix. Both
  give the same function and leave the gate structure to synthesis.

## Size

The default build is large:

- Each pattern stage evaluates 512 × 127 syndrome bits, each over 128
  inputs, every cycle. The 16 stages together make about 130 million AND
  inputs.
- The pattern memories hold 1 Mbit of registers.
- The H matrix is 16 kbit, and its permuted copy travels through every
  pipeline register.

Lint and elaboration are quick. Coarse synthesis of the full top takes a
long time. Verilator simulates the full-size decoder at roughly 4 ms per
cycle: programming the 8192 patterns and decoding 60 frames takes about
40 s, plus about a minute of C++ build.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against
values computed independently in the testbench, and each has a cycle
watchdog.

| Testbench | What it checks |
|---|---|
| `tb_bitonic_sorter` | Pruned and full sorters against an insertion sort. Latency, sign tracking, and that holding the banks freezes the outputs. |
| `tb_h_memory`, `tb_pattern_memory` | Row writes against a shadow copy. |
| `tb_hd_syndrome`, `tb_syndrome_matrix` | Syndromes recomputed bit by bit. Includes codewords and single failing checks. |
| `tb_h_permute`, `tb_inv_permute` | The permutations themselves. |
| `tb_priority_select` | The lowest set flag wins, and `z = phd XOR e_sel`. |
| `tb_stage0` | Codeword detection, sort order, pi(H), latency log2 N + 1, and that the enables leave registers untouched for codewords. |
| `tb_grand_stage` | A cycle model of both stage variants, including every load enable. |
| `tb_last_stage` | The output selection. |
| `tb_orbgrand_decoder` | The whole decoder at N=16, Q_max=64, Q_S=8 on BCH(15,7). |
| `tb_orbgrand_full` | The whole decoder at the default parameters on BCH(127,113). |

The two decoder tests work like this:

- **Setup.** They program H of a cyclic code (`H[i][j]` = coefficient i of
  `x^j mod g(x)`) and an iLWO schedule built in `orb_tb_pkg`. The schedule
  uses patterns of weight 1–3, with the pruning restriction above.
- **Traffic.** They stream frames back to back, with random bubbles.
- **Reference.** Every output is compared with a serial ORBGRAND decoder:
  HD(y) first, then the schedule in order. Both `out_yhat_vld` and
  `out_yhat` are checked, and the latency must be exactly L for every frame.
- **Coverage.** Frames are built to make each mechanism happen: exit at
  stage 0, hits in stage 1, in a middle stage and in the last pattern stage,
  several hits in one stage, no codeword found, and bubbles. A mechanism
  that never occurs counts as a failure.

To run a testbench with Verilator, from the folder holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -j 8 --top-module tb_orbgrand_full \
    rtl/orbgrand_pkg.sv tb/orb_tb_pkg.sv tb/tb_orbgrand_full.sv -y rtl -y tb
./obj_dir/Vtb_orbgrand_full
```

Each run ends with a line `TB_RESULT checks=<n> failures=<n>`.

Not covered:

- The empirical LUT patterns. They are not available, so an iLWO schedule
  stands in for them.
- A polar-code parity-check matrix.
- Error-rate curves and power or area figures. The RTL only reproduces the
  decoding function, the sizes and the cycle timing.
