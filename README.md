# Index-ordered survivor selection for SCL polar decoders

A successive-cancellation list (SCL) decoder keeps L candidate bit sequences
("paths") alive. At every information bit each path splits into two
candidates, one per bit value, and once there are L paths only the L best of
the 2L candidates survive. A survivor continues the decoding in one of the L
sets of per-path hardware. So after every decision each path's registers
(decoded bits, partial sums, LLR-memory pointers) must be loaded from the path
the survivor came from. In a conventional decoder any path can inherit from
any path, so every register bit of every path needs an L-input multiplexer.
These "crossbars" are among the largest parts of the decoder: the decoded-bit
register alone is N bits wide.

This RTL puts the L survivors out of the sorter **in ascending order of their
candidate index**. The metric sort that decides who survives is unchanged, so
error rate and latency are unchanged too. Only the order in which survivors
are handed to the per-path hardware changes. With that order, path k can
inherit only from L/2+1 different parents, so every copy multiplexer shrinks
from L inputs to L/2+1.

## Why L/2+1 sources are enough

Number paths and candidates from 0. Existing path l produces candidate 2l
(bit 0) and candidate 2l+1 (bit 1). Let the survivors be i_0 < i_1 < ... <
i_{L-1}, taken from the 2L candidates 0..2L-1. Since k survivors lie below i_k
and L-1-k lie above it,

    k  <=  i_k  <=  L + k.

The parent of survivor k is floor(i_k / 2), so

    floor(k/2)  <=  parent(k)  <=  floor((L+k)/2),

a window of exactly L/2+1 paths for even L. In `reduced_crossbar` every
output k is a multiplexer over that window. Its select is the offset of the
parent inside the window, `sel[k] = floor(i_k/2) - floor(k/2)`, a number
from 0 to L/2. For L = 8 this is a 5-input multiplexer where a conventional
design needs 8 inputs. The window bounds live in `scl_pkg` (`xbar_lo`,
`xbar_hi`). `tb_reduced_crossbar` checks the bound on random survivor sets
for L = 2 to 32.

The survivors must really be index-ordered, or the window is violated. In
`list_mgmt_unit`, an assertion checks `i_out[k-1] < i_out[k]` on every prune
step.

## The two-stage sorter (`path_sorter`)

The sorter takes the metrics `m_in` and indexes `i_in` of the 2L candidates
and returns the metrics `m_out` and indexes `i_out` of the L survivors:

1. **Metric stage, 2L inputs.** Finds the L candidates with the smallest
   path metrics. Their order among themselves does not matter.
2. **Index stage, L inputs.** Sorts those L survivors by candidate index and
   carries each metric along.

Three pairings trade area against delay. The `DESIGN` parameter selects one:

| DESIGN | metric stage | index stage | character |
|---|---|---|---|
| 1 | maximum values filter (`mvf_sorter`) | bitonic network (`bitonic_sorter`) | smallest, slowest |
| 2 | maximum values filter | all-pairs sorter (`radix_sorter`, L inputs) | in between |
| 3 (default) | all-pairs sorter (`radix_sorter`, 2L inputs) | all-pairs sorter (L inputs) | largest, fastest |

- **`radix_sorter`** compares every pair of entries at once. It counts for
  each entry how many others precede it, and uses that rank to route the
  entry to its output slot. Only the first NOUT ranks are built, so with
  2L inputs and L outputs it yields the L smallest in order.
- **`mvf_sorter`** is a bitonic sorting network that is cut short. It sorts
  the lower half of its inputs ascending and the upper half descending. One
  layer of compare-and-swap elements between positions i and i+L then leaves
  the L smallest in the lower half, unsorted. It omits the log2(2L)-1 layers
  that would sort them.
- **`bitonic_sorter`** is the complete Batcher network.

Equal metrics are broken towards the smaller candidate index in all three
designs. The survivor set is then unique, and all designs give bit-identical
results. `tb_path_sorter` and `tb_list_mgmt_unit` run Designs 1 and 3 side by
side on the same inputs to check this.

All sorters are combinational. The whole survivor decision (candidate
metrics, both sort stages, crossbar selects) lies between the path-metric
registers and the next clock edge. This is the decoder's critical path, and
choosing among the three designs is how it is traded against area.

## What happens at each bit (`list_mgmt_unit`, `scl_ctrl`)

`scl_ctrl` walks the bit index i from 0 to N-1, taking one step in each cycle
in which the SC side presents decision LLRs (`llr_valid`). Each step is one
of three kinds:

| step | when | path k afterwards | registers |
|---|---|---|---|
| `STEP_FROZEN` | `frozen_mask[i] = 1` | itself, bit i = `frozen_val` | no copy |
| `STEP_EXPAND` | information bit, fewer than L paths | candidate k: parent floor(k/2), bit k mod 2 | copy (select 0) |
| `STEP_PRUNE` | information bit, L paths | survivor i_k: parent floor(i_k/2), bit i_k mod 2 | copy through the window |

A codeword starts with one path. After log2 L information bits there are L
paths, and every later information bit is a prune. Expansion is the special
case where survivor k is candidate k, so it uses the same crossbars with
select 0.

Path metrics are LLR-based and smaller is better. The candidate whose bit
agrees with the hard decision of the LLR keeps the path's metric. The other
candidate adds |LLR| (`pm_calc`). On a frozen bit, each path takes the
candidate of the known value. At the end of the codeword, `best` is the
active path with the smallest metric, and `u_hat` is its decoded-bit
register.

## Top level (`scl_core`)

`scl_core` instantiates:

- `scl_ctrl`: control.
- `list_mgmt_unit`: path metrics, `pm_calc` and `path_sorter`.
- `path_memory`: N decoded bits per path.
- Two `path_reg_bank`s: the partial-sum registers (P + N/2 = 2080 bits per
  path) and the LLR-memory pointer registers ((log2 N - 1)·log2 L = 33 bits
  per path).

Each of the three register sets has its own (L/2+1)-input crossbar, driven by
the same selects.

The SC processing elements, the LLR RAM and the partial-sum network are
**not part of this RTL**. `scl_core` is the part of the decoder that deals
with the list. The missing parts connect through these ports:

- `llr_valid`, `llr[L]`: the decision LLR of bit `bit_idx` for each path,
  in sign-magnitude form. One step is taken per cycle while `llr_valid` is
  high.
- `step_type`, `step_copy`, `step_sel[L]`, `step_surv[L]`, `step_bit[L]`:
  the outcome of the current step, valid in the cycle of the step. The
  partial-sum network needs the new bits; an LLR memory controller needs the
  parents.
- `ps_wr_en/ps_wr_data/ps_q` and `ptr_wr_en/ptr_wr_data/ptr_q`: the owners
  of the partial sums and pointers read and write them here. A write must
  not coincide with an expand or prune step, and an assertion checks this.
  In such a step the banks copy from the parents; frozen steps copy nothing.
- `paths[L]`: all L decoded sequences. `pm[L]`, `best` and `u_hat` are
  results.

Timing: a `start` pulse begins a codeword. After that, bit i is decided in
the i-th cycle with `llr_valid` high, and `done` pulses in the cycle after
bit N-1. The list management therefore adds exactly N cycles to a codeword,
one per bit. With a semi-parallel SC schedule of 2N + (N/P)·log2(N/(4P))
cycles, the total for N = 4096 and P = 32 is 8832 + 4096 = 12928 cycles. The
index ordering adds no cycles. All registers have an asynchronous,
active-low reset. The frozen set is an input, so the code rate can change
from one codeword to the next.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `L` | 8 | list size (even; powers of two assumed by the bitonic/MVF sorters) |
| `N` | 4096 | code length |
| `P` | 32 | processing elements of the SC module (sets the partial-sum width P + N/2) |
| `Q` | 10 | path metric width, saturating |
| `LLR_W` | 6 | sign-magnitude LLR width (1 sign + 5 magnitude) |
| `DESIGN` | 3 | sorter pairing, see above |

L, N, P and DESIGN = 3 are the sizes of the reference decoder configuration.
Q and LLR_W are this design's own choices. Nothing fixes them, so change
them to match the SC datapath.

## Where this RTL makes its own choices

- Paths and candidates are numbered from 0. Candidate 2l carries bit 0 and
  candidate 2l+1 carries bit 1.
- Equal metrics go to the smaller candidate index.
- Path metrics saturate at 2^Q − 1. No normalisation is done. A long run of
  disagreeing LLRs will saturate the metrics and make the ordering among
  saturated paths arbitrary but deterministic.
- The sorter is a single combinational stage with no pipeline registers.
- The crossbar select is the parent's offset inside its window. The
  multiplexers are written behaviourally. On an FPGA a mapping for
  multiplexers with a non-power-of-two number of inputs is worth using.
- The decoded-bit register holds bit i at position i. The new bit is written
  at the same clock edge as the copy.
- The partial-sum and pointer registers are plain registers with a write
  port. How the partial-sum network updates them, and how an LLR memory
  controller sets the pointers, is left to those blocks.
- `scl_ctrl` has no back-pressure. A new codeword may be started at any
  time, and doing so abandons the current one.

## Verification

Every module has a self-checking testbench in `tb/` that compares it with an
independent model written in plain procedural code:

| testbench | what it checks |
|---|---|
| `tb_radix_sorter` | 16→8 and 8→8 against an insertion sort, with many ties |
| `tb_bitonic_sorter` | 8 and 4 inputs against an insertion sort |
| `tb_mvf_sorter` | 16→8 and 8→4 as sets against the sorted reference |
| `tb_path_sorter` | Designs 1, 2, 3 (L = 8) and 1, 3 (L = 4) against a select-then-order model; the index window |
| `tb_path_sorter_large` | Designs 1, 2, 3 at L = 16 and L = 32 against the same model |
| `tb_pm_calc` | metric formulas, both frozen values, saturation |
| `tb_reduced_crossbar` | selection for L = 8 and 4; the window bound for L = 2..32 |
| `tb_path_memory`, `tb_path_reg_bank` | copy, write and hold against a model copying by parent index |
| `tb_scl_ctrl` | step types, bit index, path count, `done` timing, restart |
| `tb_list_mgmt_unit` | survivors, selects, bits, metrics and best path, Designs 3 and 1 |
| `tb_scl_core` | a whole N = 4096, L = 8 codeword at default parameters |
| `tb_scl_core_l4` | the same for L = 4, N = 4096 |

`tb_scl_core` runs the core against a conventional list decoder model. The
model copies by full L-way indexing, with no windowed crossbar. The
testbench plays the SC side (random decision LLRs) and the partial-sum and
pointer owners (random writes in idle cycles). After every cycle it compares
all metrics, all L decoded-bit registers, and all partial-sum and pointer
registers. It checks that `done` comes exactly after N steps. It also counts
how often each mechanism occurred: frozen, expand and prune steps, paths
taken over from another path, killed and duplicated paths, selects at the top
of the window, and register writes. A mechanism that never occurred is a
failure. The LLRs are random and not the output of a real SC decoder, so
this test covers the list bookkeeping, not error-rate performance.

Limits:

- No error-rate simulation is included, because that needs the SC datapath.
- The rate-1/2 speed-ups that skip rate-0 and repetition sub-codes (which
  shorten a 4096-bit codeword from 12928 to 7297 cycles) act on the SC
  schedule. They are outside this RTL, and `scl_ctrl`
  steps through every bit, frozen or not, one per cycle.
- At L = 16 and 32 only the sorters and the crossbar window bound were
  simulated, not the whole core.
- Area and frequency were not measured.

## Running it

With Verilator 5, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -y rtl rtl/scl_pkg.sv tb/tb_scl_core.sv \
              --top-module tb_scl_core -o sim && ./obj_dir/sim

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. The
full-size `tb_scl_core` takes about two minutes, most of it compilation.
Any other testbench can be run the same way by naming it instead. To try
another list size or sorter, override the parameters of `scl_core`, for
example `#(.L(4), .DESIGN(1))`. `tb_scl_core` takes its sizes from the
defaults in `scl_pkg`, so changing those defaults resizes the end-to-end test
as well.
