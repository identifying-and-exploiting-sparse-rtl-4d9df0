# SLBIU: a sparse linear branch inference unit

Most conditional branches that a TAGE- or perceptron-style predictor struggles to
keep in a small budget do not depend on their whole history. They depend on a
handful of specific earlier outcomes, and the bits between those outcomes are
noise. A tabular predictor cannot tell the noise apart, so it spends one entry on
every pattern the noise produces. If that handful of positions is found offline,
by l1-regularised (Lasso) logistic regression over a profiled trace, the branch
can be predicted by a tiny linear model:

    taken  <=>  b + sum_k  w_k * x[ind_k]  >= 0,     x[i] in {+1 (taken), -1 (not-taken)}

Here `ind_k` are the few history positions that matter (at most `nnz` of them),
`w_k` their quantised weights and `b` an intercept. This repository holds
synthesizable SystemVerilog for the hardware that evaluates such models at run
time. It is the **Sparse Linear Branch Inference Unit (SLBIU)**, together with the
small amount of branch-prediction-unit glue that places it beside a primary
predictor. The primary predictor is not included. It keeps predicting every other
branch, but no longer trains on the few branches handed ("offloaded") to the
SLBIU.

The default configuration is the 2 KB long-history design:

| knob | meaning | default |
|---|---|---|
| `LH` | local history length per offloaded branch | 512 |
| `GH` | global history length used by the SLBIU | 512 |
| `N` | number of offloaded branches (hint entries) | 13 |
| `NNZ` | maximum non-zero weights per hint | 36 |
| `Q` | weight and intercept width (Q3.4 fixed point) | 8 |
| `P` | branch PC width | 64 (own choice, see below) |
| `GHR_LEN` | length of the GHR shared with the primary predictor | 1000 |

## The prediction function in hardware terms

**History vector.** For a given branch the SLBIU forms the vector
`hist = {LHR, GHR}` of `L = LH + GH` = 1024 bits. History index `i < GH` names
GHR bit `i`. Index `GH + j` names bit `j` of that branch's own LHR. In both
registers bit 0 is the newest outcome. A stored 1 means taken and is read as +1.
A stored 0 means not-taken and is read as -1. Indices are `ceil(log2 L)` = 10
bits wide.

**Multiplication by ±1** costs nothing but a negation. The weight of a taken bit
passes through, and the weight of a not-taken bit is negated. Weights are
sign-extended by one bit before negation, so that the most negative weight
(-128) negates to +128 without overflow.

**Sum and decision.** The `NNZ` products and the intercept are added, which is
37 operands at the default size. The inverted sign bit of the total is the
prediction, so a total of exactly zero predicts taken. Weights and intercept share
one fixed-point format (Q3.4 at `Q` = 8), so the binary point plays no part in the
sign test.

**Unused slots.** A hint with fewer than `NNZ` non-zero weights is zero-padded,
and a zero weight adds nothing whatever bit it selects.

## Hint storage

Each of the `N` entries of `slbiu_cam` holds one hint in coordinate form, plus
the local history of its branch:

    valid | PC (P) | intercept (Q) | w[NNZ-1..0] (NNZ*Q) | ind[NNZ-1..0] (NNZ*10) | LHR (LH)

The storage this takes is `N*(P + Q + NNZ*Q + NNZ*ceil(log2(LH+GH)) + LH)` bits.
At the defaults that is 13 × (64 + 8 + 288 + 360 + 512) = 16 016 bits, inside
2 KB (16 384 bits). Any PC width up to 92 bits fits the same budget. The source
does not give a PC width, so 64 is this design's choice.

The array is a plain register file. It has three ways in and out:

* **Search outputs.** Every entry's PC and valid bit go to the associative
  matchers.
* **One entry-wide read port.** It is combinational and addressed by the entry
  number found in pipeline stage 1.
* **One single-bit LHR write port.** When a branch resolves, its outcome is
  shifted into bit 0 of its entry's LHR.

Expect the storage to dominate the area after synthesis. Dynamic power goes
mostly to the 36 × 1024:1 history multiplexers and, after them, to the storage.

## The three-stage pipeline (`slbiu`)

One request is accepted every cycle. The answer comes exactly three cycles
later:

| cycle | stage | work | registered at the end |
|---|---|---|---|
| t | 1 | `pc_i` compared with all `N` entry PCs at once (`slbiu_lookup`) | valid, hit, entry number, the `ghr_i` of cycle t |
| t+1 | 2 | entry read, `{LHR, GHR}` formed, History-Select (36 × 1024:1 muxes), Sign-Flip | 36 signed products, intercept |
| t+2 | 3 | adder tree (a balanced binary tree over 64 zero-padded leaves), sign test | `pred_valid_o`, `pred_hit_o`, `pred_taken_o` |
| t+3 | — | outputs valid | |

The bare lookup result is also available early, as `lookup_hit_o` in cycle t+1
(`slbiu_hit_early_o` at the top). A primary predictor can use it to learn ahead
of the prediction that a branch is offloaded.

On a miss only the valid and hit bits travel down the pipe. The data registers of
stages 1 and 2 load only on a hit. This is the register-level counterpart of
gating the clock of the selection and arithmetic logic with the hit signal. A
physical implementation would turn these enables into clock-gating cells, and
would retime logic across the three stages to balance them. At the default size
the history selection is the longest stage. With 16-bit weights and short
histories, the adder tree is.

**Which history a prediction sees.** The GHR is captured together with the
request in cycle t. The LHR is read from the CAM in cycle t+1. So an outcome of
the same branch that resolves in cycle t, and is written at the end of cycle t,
is already visible to the prediction made in cycle t. The testbenches pin this
behaviour down. Move the capture point if your front end needs a different
ordering.

## Histories and resolution

`bpu_ghr` is the one global history register of the prediction unit. It is
shared by the primary predictor (all `GHR_LEN` = 1000 bits, exposed on `ghr_o`)
and the SLBIU (its lowest 512 bits). It shifts in every resolved outcome.

LHRs exist only inside the SLBIU, one per offloaded branch. `slbiu_lhr_update`
runs a second associative match on the resolving PC, so that updates never
compete with prediction lookups, and enables the shift of the matching entry.
The same match produces `resolve_hit_o`. The top turns it into
`primary_update_en_o = resolve_valid & ~hit`, which stops the primary predictor
from allocating or training for offloaded branches.

Both histories in this model are updated non-speculatively, from resolved
outcomes. A real front end that updates the GHR speculatively at prediction time
and repairs it on a misprediction can drive `ghr_i` of `slbiu` directly. The
SLBIU itself does not care where its GHR comes from.

## Coupling to the primary predictor (`bpu_slbiu`)

* The PC goes to the SLBIU and, outside this module, to the primary predictor
  in the same cycle t.
* The primary predictor returns its guess on `primary_taken_i` in cycle t+3.
* A multiplexer steered by the SLBIU hit produces the final taken/not-taken
  answer (`final_taken_o`), and `final_from_slbiu_o` reports which side
  answered.
* If your primary predictor has a different latency, delay one side to match.

## Loading hints

Hints are produced offline for each program phase. The offline flow is
regression, quantisation to Q3.4, removal of duplicated history features, and a
score-based choice of at most `N` branches of at most `NNZ` weights each. That
flow is software and is not part of this RTL. The hints are written through a
one-command-per-cycle port (`slbiu_pkg::load_op_e`):

| command | effect |
|---|---|
| `LD_INVAL_ALL` | clear every valid bit (context switch or new phase) |
| `LD_HEADER` entry, pc, intercept | write PC and intercept, set valid, zero the LHR and all weight/index pairs |
| `LD_PAIR` entry, slot, weight, index | write one (weight, index) pair |

A full reload therefore takes `1 + N + (non-zero pairs)` cycles. That is at most
482 cycles at the defaults, which is negligible against phases of hundreds of
millions of instructions. Loads are meant to happen between phases and are not
interlocked with predictions in flight. A PC must be loaded into at most one
entry, and the lookup asserts this in simulation.

## Where this RTL follows its source and where it chooses

Taken from the published description:

* the function and the sign rule;
* the `{±1}` reading of history with sign flipping on not-taken bits;
* the entry contents and the storage formula;
* the CAM's single-bit write port and entry-wide read port;
* the split of the work into three stages and what each stage does;
* hit-based gating;
* the offload/halt relation with the primary predictor;
* the shared GHR;
* all default sizes except `P`.

Chosen here, where the description is silent:

* the PC width;
* the order of the bits inside the history vector and each register;
* the load command set;
* the valid bit and reset (valid bits only);
* shift-register LHRs;
* the second matcher for updates;
* the node widths and shape of the adder tree;
* the 9-bit products;
* capturing the GHR at request time;
* the fixed three-cycle alignment with the primary predictor;
* non-speculative history update;
* priority for duplicated PCs.

Points to be aware of:

* The description reads "taken/not-taken events with {−1,+1} values,
  respectively" but also says that weights paired with *not-taken* bits are
  negated. These two statements conflict. This design follows the negation rule,
  so taken = +1.
* Two storage formulas appear in the description. One counts the LHR once per
  entry. The other puts it inside the per-weight term. The RTL stores one LHR per
  entry.
* By the once-per-entry formula, the 8 KB configuration evaluated alongside this
  one (53 hints × 42 weights) needs more than 8 KB even with a zero-width PC. It
  is reachable through the parameters, but it does not fit the named budget as a
  fixed-width CAM.
* Floating-point (FP32) hint configurations, used only to bound the achievable
  benefit, are not built. The datapath is fixed point only.

Other evaluated sizes need only parameters:

| configuration | parameters |
|---|---|
| short-history 2 KB | `LH=GH=64, N=20, NNZ=29, Q=16` |
| Q3.12 | `Q=16` |
| 8 KB, Q3.4 | `N=53, NNZ=42` |

## Files

| file | contents |
|---|---|
| `rtl/slbiu_pkg.sv` | default sizes, load command type, storage formula |
| `rtl/slbiu_cam.sv` | hint and LHR register file with load, shift and read ports |
| `rtl/slbiu_lookup.sv` | fully associative PC match |
| `rtl/slbiu_lhr_update.sv` | resolution-time match and LHR shift enable |
| `rtl/slbiu_history_select.sv` | `NNZ` × `L`:1 history multiplexers |
| `rtl/slbiu_sign_flip.sv` | ±weight |
| `rtl/slbiu_adder_tree.sv` | balanced adder tree and sign test |
| `rtl/slbiu.sv` | the three-stage unit |
| `rtl/bpu_ghr.sv` | shared global history register |
| `rtl/bpu_slbiu.sv` | top: GHR + SLBIU + final multiplexer + update halt |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog. For example, the
end-to-end test at the full default size:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
        -Irtl -y rtl rtl/slbiu_pkg.sv tb/tb_bpu_slbiu.sv --top-module tb_bpu_slbiu
    ./obj_dir/Vtb_bpu_slbiu

Replace the testbench name to run any other test. Lint with
`verilator --lint-only -Wall -Irtl -y rtl rtl/slbiu_pkg.sv rtl/<module>.sv`.
All tests run at the default sizes in well under a second.

What the tests establish:

* **Leaf modules** (`tb_slbiu_lookup`, `tb_slbiu_history_select`,
  `tb_slbiu_sign_flip`, `tb_slbiu_adder_tree`, `tb_slbiu_lhr_update`,
  `tb_bpu_ghr`) are compared with integer reference computations on random and
  corner inputs. The corner inputs include index 0 and 1023, weight −128, and
  sums of exactly 0 and −1.
* **`tb_slbiu_cam`** runs random load, shift and invalidate streams, including a
  load and a shift hitting one entry in the same cycle. After every edge it
  compares every entry in full with a model.
* **`tb_slbiu`** loads 13 random hints and issues random requests and
  resolutions. It checks every answer, and that it arrives exactly three cycles
  after its request. Midway it changes program phase. It also counts hits,
  misses, taken and not-taken answers, back-to-back hits, and same-cycle
  LHR updates.
* **`tb_bpu_slbiu`** runs a synthetic two-phase program. It has 40 static
  branches, 13 of them offloaded, one fetch per cycle, a branch frequency of 75%,
  and resolution six cycles after prediction. It uses the default parameters and
  checks the final prediction, its source, the primary-update enable and the
  1000-bit GHR every cycle. It requires each mechanism to have occurred:
  * header and pair loads;
  * a phase change;
  * SLBIU hits and misses;
  * SLBIU taken and not-taken answers;
  * answers from the primary predictor;
  * halted and allowed primary updates;
  * LHR updates;
  * back-to-back hits;
  * an LHR update of an entry in the cycle it is read.
* **`tb_slbiu_scenarios`** replays synthetic scenarios of the kind used to
  characterise the unit's power. It sweeps branch frequency (10, 50 and 100% of
  fetched instructions) against offloaded-branch ratio (0, 25, 50 and 100% of
  static branches). Each scenario is a 10,000-instruction trace with the whole
  CAM filled. The test checks every prediction. It requires no hits at 0% and
  only hits at 100%. It reports in how many cycles the hit-gated datapath
  registers load.

The tests check that the RTL computes the linear model exactly and with the
stated timing. They do not measure prediction accuracy on real programs. Doing
that needs real traces, an offline hint generator and a primary predictor, none
of which are part of this RTL.
