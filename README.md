# A CNN training accelerator for gradient-pruned sign-symmetric feedback alignment

Training a convolutional network on a phone-class device is limited mostly by
DRAM traffic. Standard back propagation makes it worse: the backward phase
needs the transposed (180°-rotated) weights, so every weight is fetched a second
time in a different order, and it computes many error gradients that are so
small they hardly matter.

The training scheme this accelerator implements attacks both costs:

* **Sign-symmetric feedback alignment.** In the backward phase the error is
  propagated through `sign(W) ⊙ |B|` instead of `Wᵀ`. Here `B` is a fixed
  random matrix, and only the *sign* is borrowed from the weight:

      δ_l = sign(W_{l+1}) ⊙ |B_{l+1}| * δ_{l+1} ⊙ σ'(a_l)

  Both `W` and `|B|` are small and can stay inside the processing element
  that already holds `W` for the forward phase. The backward phase then
  re-uses the on-chip weights and fetches nothing transposed.
* **Stochastic gradient pruning.** Each error gradient `d` is compared with a
  threshold `τ`. A fresh uniform random number `r ∈ [0,1)` is drawn for every
  gradient:

      |d| >  τ          → d
      r·τ ≤ |d| ≤ τ     → τ·sign(d)
      otherwise         → 0

  A small gradient becomes `±τ` with probability `|d|/τ`, so its expected value
  is unchanged, but most small gradients become exact zeros. The hardware
  skips those zeros. The threshold follows the spread of the gradients,
  `τ = Φ⁻¹((1+P)/2)·σ`, where `P` is the wanted pruning rate and `Φ` is the
  standard normal CDF.

The RTL here is a row-stationary array in the style of Eyeriss v2, extended
so that every PE can run all three phases of a training step:

| phase | computation | reuse operand kept in the PE | streamed operand |
|---|---|---|---|
| 1 forward | `a_out = W * a_in` | weight row | activation row |
| 2 backward | `δ_in = (sign(W)⊙\|B\|) *ᵀ δ_out` | weight row + `\|B\|` row | error-gradient row |
| 3 weight gradient | `ΔW = a * δ` | error-gradient row | activation row |

σ', batch normalisation, the SGD update and the sequencing of layers are not
part of this RTL. A host does them; see *What is not here*.

## Organisation

```
eg_top                      2 x 3 processing clusters (PCs), three router meshes
└─ processing_cluster       one PC
   ├─ glb_bank  x3          GLB cluster: activations | reuse rows | results
   ├─ router    x3          router cluster, one router per data channel
   ├─ pe_cluster            3 x 4 PEs
   │  └─ pe  x12
   │     ├─ stream_fifo x5          port FIFOs
   │     ├─ sparsity_utilizer x2    zero skipping (streamed operand, reuse load)
   │     ├─ reuse_spad              N x 4 bit reuse scratchpad (W and |B|)
   │     ├─ ssfa_feedback           W or sign(W)|B|
   │     ├─ psum_spad               N x 16 bit partial-sum scratchpad
   │     └─ data_merger             0 / PSum-Input mux + merge
   ├─ grad_pruner           stochastic pruning of phase-2 results
   └─ tau_unit              σ estimate and τ = Φ⁻¹((1+P)/2)·σ
eg_pkg                      widths, phase enum, flit and configuration types
```

There are 72 PEs in all. Each does one multiply-accumulate (MAC) per cycle.

Every operand moves as a **flit** (`eg_pkg::flit_t`, 29 bits):
`{last, tag[3:0], off[7:0], data[15:0]}`.

* `data` is the value, sign-extended.
* `off` is the element's position in its row.
* `tag` routes the flit inside a PC: PE row, anti-diagonal or column.
* `last` marks the end of a row.

A reuse-load flit packs the weight in `data[3:0]` and `|B|` in `data[7:4]`.

## How a pass maps onto the 3 x 4 PE cluster

This is the core of the design. Once it is clear, the rest follows.

PE(i,j) sits in PE row `i` (0..2) and PE column `j` (0..3). A pass has three
kinds of row traffic:

* **Reuse rows are shared along PE rows.** A load flit with tag `i` goes to
  all four PEs of row `i`.
* **Streamed rows are shared along anti-diagonals.** A flit with tag `d` goes
  to every PE with `i + j = d`, so there are six diagonals, 0..5.
* **Partial sums flow up the columns.** PE(2,j) starts from 0. PE(1,j) adds
  its own sums to those of PE(2,j), and PE(0,j) adds its own to those of
  PE(1,j) and emits column `j`'s result row.

Column `j` therefore computes `Σ_i reuse_row(i) ⊛ stream_row(i+j)`. Each PE
does a 1-D correlation or a 1-D transposed convolution, depending on the
phase (next section). One array computes all three phases; only what the host
loads differs:

* **Phase 1.** Filter row `r` goes to PE row `r`, and input row `y` goes on
  diagonal `y`. Column `j` gives output row `j`:
  `O[j][e] = Σ_r Σ_s W[r][s]·A[j+r][e+s]`.
* **Phase 2.** Filter row `r` goes to PE row `2−r` (reversed), and error row
  `y` goes on diagonal `y+2` (diagonals 0 and 1 get an empty row). The PEs
  use the transposed addressing, and column `j` gives input-gradient row `j`
  of the full convolution:
  `G[j][x] = Σ_r Σ_s sign(W[r][s])·|B[r][s]|·D[j−r][x−s]`.
* **Phase 3.** Error-gradient row `r` is the reuse row of PE row `r`, and
  activation row `y` goes on diagonal `y`. Column `j` gives weight-gradient
  row `j`: `dW[j][c] = Σ_r Σ_s D[r][s]·A[r+j][c+s]`.

A broadcast is accepted only when every target PE can take it. A slow PE
therefore stalls its whole diagonal or row; nothing is dropped. Every diagonal
must see a row ending in `last`, even an empty one (a single zero flit with
`last`). When all PEs of the cluster have finished, the columns drain in the
order 0, 1, 2, 3. Each result flit carries `tag = column` and `off = element`,
and `last` is set on the final element of column 3.

## Inside a PE

The datapath has a multiplier, a pipeline register, and an adder that
accumulates into the partial-sum scratchpad. The operands arrive like this:

* **Reuse row load.** Flits arrive with `off = s`. The weight sparsity
  utilizer drops zero weights. The remaining `(W, |B|, s)` entries are
  appended to the reuse scratchpad as a compressed list. Since
  `sign(0) = 0`, a zero weight also gives zero feedback, so the same list
  serves phase 2. In phase 3 the stored "weights" are error gradients; after
  pruning most of them are zero, and they are skipped the same way. A loaded
  row stays until the next load, across any number of streamed rows.
* **Streamed row.** Values arrive on the activation port and their positions
  on the offset-vector port, pairwise. The activation sparsity utilizer
  consumes zero values without spending a MAC cycle on them.
* **MAC loop.** Each non-zero streamed element `x` at offset `o` is multiplied
  by every stored entry `k`, one per cycle. The result goes to
  `psum[o − s_k]` in phases 1 and 3, and to `psum[o + s_k]` in phase 2. The
  operand is `W` in phases 1 and 3 and `sign(W)·|B|` in phase 2
  (`ssfa_feedback`). Addresses outside `[0, psum_len)` are discarded. This
  range check is this design's version of the offset-vector utilizer.
* **Drain.** After the element marked `last`, the PE waits for the last
  accumulation to land. It then emits `psum[0..psum_len−1]`, each value merged
  with the PSum Input stream (or with 0 for the bottom PE), and clears each
  entry as it leaves.

Timing:

* A streamed element with `K` stored non-zero entries occupies the MAC for
  `K` cycles, and the next element is taken in the cycle the last MAC issues.
* A zero element costs no MAC cycle.
* From a product to its scratchpad entry takes 2 cycles. The accumulate is a
  single-cycle read-modify-write, so no forwarding is needed.
* The drain emits one partial sum per cycle.
* The `pe` testbench checks that a row finishes within
  `nnz(stream)·nnz(reuse) + L + psum_len + 8` cycles.

## Pruning and the threshold

`grad_pruner` sits on each PC's result path and is active only in phase 2
with `cfg.prune_en` set. The random `r` comes from a 16-bit maximal-length
LFSR (`x¹⁶+x¹⁴+x¹³+x¹¹+1`) and is read as `lfsr/2¹⁶`. The test `r·τ ≤ |d|` is
done exactly, as `lfsr·τ ≤ |d|·2¹⁶`. The LFSR seed differs per PC.

`tau_unit` watches the same phase-2 results before pruning:

1. It treats the gradients as zero-mean normal and accumulates `d²` over
   `2^TAU_LOG_N` samples (1024 by default).
2. It takes the mean, then the integer square root bit by bit (16 cycles),
   to get `σ`.
3. It multiplies `σ` by `K[p_sel] = round(4096·Φ⁻¹(0.5 + p_sel/20))`. This
   gives `P = p_sel/10` in steps of 0.1 (0.0 … 0.9).

`tau_start` restarts the estimate. With `cfg.use_auto_tau` the pruner uses the
estimate once `tau_done` is high; until then it uses `cfg.tau`.

## Moving data: GLB banks and routers

Each PC has one GLB bank and one router for each of three channels:

| channel | bank → router → … | router local output → |
|---|---|---|
| `CH_ACT` (0) | bank → router | PE cluster streamed-operand port |
| `CH_LD` (1) | bank → router | PE cluster reuse-load port |
| `CH_PS` (2) | PE results → pruner → router | bank |

The routers are circuit-switched. For each output (LOCAL, N, E, S, W),
`cfg.rsel[channel][output]` names the input that drives it. Selecting one
input from several outputs multicasts it. An input that no output selects is
held, not dropped. A 2-entry FIFO on every router output registers the mesh
links. The three routers of a channel in neighbouring PCs form a 2 x 3 mesh.
Edge links are tied off.

This lets a PC run on activations held in a neighbour's GLB, or store its
results in a neighbour's GLB. The top-level test sends PC0's activations east
into PC1 and PC1's results south into PC4.

A GLB bank (512 flits) has two sides:

* **DRAM side:** random access (`ext.we/waddr/wdata`, and `ext_rdata` one
  cycle after `ext.raddr`).
* **Array side:** `glb_ctrl.rd_start/rd_base/rd_len` starts a stream out, and
  `glb_ctrl.wr_start/wr_base` starts capturing a stream in. `wr_count`
  reports how much has arrived.

## Running a pass (host view)

1. Write the reuse-load flits into bank `CH_LD` and the streamed flits into
   bank `CH_ACT` through `ext[p]`.
2. Set `cfg[p]`: phase, `psum_len` (output row length), router selections,
   pruning.
3. Pulse `glb_ctrl[p][CH_PS].wr_start`, then `glb_ctrl[p][CH_LD].rd_start`.
   Wait until `glb_rd_busy[p][CH_LD]` is low, so the reuse rows are in place.
   Then pulse `glb_ctrl[p][CH_ACT].rd_start`.
4. Wait until `glb_wr_count[p][CH_PS]` reaches `4·psum_len`. Read the
   results back through `ext[p]`/`ext_rdata[p]`.

Step 3 must keep this order: a PE takes a load flit in preference to a
streamed one only while it is idle. The task `local_job` in
`tb/tb_eg_top.sv` shows the whole sequence, and `tb/eg_tb_pkg.sv` builds the
flit streams for a 2-D job.

## Parameters

| parameter | default | origin |
|---|---|---|
| `PC_ROWS x PC_COLS` | 2 x 3 | six PCs drawn as 2 x 3 in the architecture figure |
| `ROWS x COLS` (PEs per PC) | 3 x 4 | "3x4 PE cluster", 12 PEs per PC |
| `RW` (reuse width) | 4 | "N x 4b" reuse scratchpad |
| `PSUM_W` | 16 | "N x 16b" partial-sum scratchpad |
| `ACT_W` (streamed width) | 8 | assumed |
| `REUSE_DEPTH`, `PSUM_DEPTH` | 64, 64 | assumed (the source prints only "N") |
| `GLB_DEPTH` | 512 flits per bank | assumed |
| `TAU_LOG_N` | 10 | assumed |
| `OFF_W`, `TAG_W` | 8, 4 | assumed |

## Departures from the source description, and choices made here

Taken from the source: six PCs of 12 PEs, the 3 x 4 arrangement, weight rows
shared along PE rows and activation rows along anti-diagonals, a GLB cluster
and a router cluster per PC, and the PE's block list. The PE blocks are
three sparsity utilizers, the reuse and partial-sum scratchpads with their
4-bit and 16-bit widths, a multiplier, a pipeline register, an adder, a
0/PSum-Input multiplexer and a data merger. Also from the source: weight and
fixed feedback kept in the reuse scratchpad, the feedback formula, the
pruning rule and the τ formula.

Chosen here, because the source does not say:

* The inside of the sparsity utilizers (zero skipping) and of the data merger
  (addition).
* The scatter-form MAC loop and the phase 2/3 address generation.
* The compressed reuse list and the PE state machine.
* All scratchpad and GLB depths, and the 8-bit activation width.
* The flit format and valid/ready handshakes, and the active-low
  asynchronous reset.
* The router's switching scheme, and which channel each of the three routers
  and banks serves.
* The LFSR, the in-hardware σ estimate with its zero-mean assumption and its
  0.1 steps of P, and where the pruner and τ unit sit.

Known differences:

* **Peak rate.** Dense peak is 72 MAC/cycle, i.e. 72 GOP/s at 500 MHz. The
  source quotes 121 GOP/s at that clock, which this array reaches only on
  sparse data.
* **No stride.** The PE has no stride. Stride-2 layers run at stride 1, and
  the host subsamples.
* **No accumulation across input channels.** Partial sums leave the PC after
  every pass, and the host adds them.
* **Reuse operand is 4 bits.** In phase 3 the reuse operand is an error
  gradient, so error gradients must be quantised to 4 bits there.
* **Stalls between PEs.** The source describes activation rows passing
  through the array systolically without stalls. Here a broadcast waits
  until every target PE is ready. PEs on one diagonal can hold different
  numbers of non-zero weights, so with zero skipping the diagonal moves at
  the pace of its slowest PE.
* **Wrapping partial sums.** Partial sums wrap on overflow; they do not
  saturate.

## What is not here

These parts are left to the host:

* The DRAM.
* The host/controller that sequences layers and passes.
* σ' (ReLU derivative) and batch normalisation.
* The SGD/momentum weight update.

The source gives none of these as hardware. Their interfaces are the
top-level ports: the DRAM side of every GLB bank, per-PC configuration and
stream control. The memories are written as synthesizable arrays, not as
process-specific macros.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The references are computed independently in
the testbench; for the array-level benches this is a direct 2-D convolution
in `tb/eg_tb_pkg.sv`.

* `tb_pe`: random rows in all three phases, with and without PSum Input and
  with output back-pressure. It checks every value, the MAC count and the
  cycle bound.
* `tb_pe_cluster`: 2-D jobs for all three phases through the 12-PE array.
* `tb_processing_cluster`: host-driven jobs through the GLBs and routers. It
  covers pruning with an external τ and with the computed τ, checks the τ
  estimate, and runs a job fed from the west mesh link with results leaving
  east.
* `tb_eg_top`: the full default-size design.
  * Six concurrent phase-1 jobs.
  * A PC0 → PC1 → PC4 job across the mesh.
  * Pruned phase 2 with a 1024-sample τ estimate, phase 3 and unpruned
    phase 2.
  * It checks that each mechanism occurs: activation and weight zero skipping,
    stream stalls, mesh transfers, each phase, and each pruning outcome.
  * It runs in about 30 s.
* `tb_resnet_layer`: one full 32 x 32 plane of a ResNet-18 / CIFAR-10
  3 x 3 layer, for one input/output channel pair, on the default-size
  design.
  * It runs the forward pass, the input gradient (34 x 34) and the 3 x 3
    weight gradient, cut into 4-row tiles or 3-row groups spread over the
    six PCs.
  * Every element is checked against a direct 2-D computation over the whole
    plane, and every PC's MAC count against the number of non-zero operand
    pairs.
  * It prints the cycles per phase. These include the testbench's own
    one-flit-per-cycle GLB loading, which dominates at this size.
* `tb_resnet_fc`: the ResNet-18 classifier layer (512 → 10) in all three
  phases.
  * Phase 1: dot products cut into 64-element segments, three per pass.
  * Phase 2: one PE per column, with the errors streamed in reverse.
  * Phase 3: an outer product, four 64-element segments per pass.
  * The file's opening comment explains the mapping.
* Leaf benches: `tb_sparsity_utilizer`, `tb_reuse_spad`, `tb_psum_spad`,
  `tb_ssfa_feedback`, `tb_data_merger`, `tb_router`, `tb_glb_bank`,
  `tb_grad_pruner`, `tb_tau_unit`.

Simulating one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/eg_pkg.sv tb/eg_tb_pkg.sv tb/tb_eg_top.sv --top-module tb_eg_top -o sim
./obj_dir/sim
```

`eg_tb_pkg.sv` is only needed by `tb_processing_cluster`, `tb_eg_top` and
`tb_resnet_layer`; the other benches can leave it out.
Lint with `verilator --lint-only -Wall -Irtl -y rtl rtl/eg_pkg.sv rtl/eg_top.sv`.
