# Split-tree nonbinary SCL polar decoder

A polar code over GF(q) carries a q-ary symbol on each input position, not a bit. Its list
decoder (nonbinary successive-cancellation list, NBSCL) works on LLR *vectors* (LLRVs) of q entries. It runs
a trellis whose nodes combine two LLRVs. After every decided symbol it grows each of L survivor
paths into q candidates and keeps the best L. A direct implementation is slow for two reasons.
Symbols are decoded strictly one after another through a trellis of 2N-2 node operations. And every
free symbol needs a sort of qL = 1024 metrics (for q = 256, L = 4).

This decoder attacks both problems:

* **Split tree.** The length-N code is treated as M sub-codes of N/M symbols, joined by one layer of
  the polar kernel. M small SC sub-decoders run in parallel, each on a trellis of 2N/M-2 node
  operations. After every level i (symbol i of every sub-code) a reconciliation step joins their
  candidates into L global list paths.
* **Sub-path skimming.** Reconciliation does not combine all (qL)^M candidate pairs. Each
  sub-decoder keeps only its best Ls sub-paths (Ls = 16). Only Ls^M = 256 global paths are then
  assembled and sorted.

The RTL is parameterized. The defaults are the prototype configuration:

- a (128,64) code over GF(256);
- M = 2 sub-decoders of 64 symbols;
- list size L = 4 and skimming factor Ls = 16;
- 8-bit LLRV entries and 16-bit path metrics.

## The code and the numbers inside the datapath

The kernel is F = [[1,0],[alpha,beta]] over GF(2^r), with alpha = 2 and beta = 3.

- These two values are this design's choice: any non-zero pair works, and both are parameters.
- The field uses the usual primitive polynomial for each r (0x11D for GF(256)).
- All field tables (log, exp, inverses and the Kronecker powers of the kernel) come from constant
  functions in `nb_pkg`. No table file is read.

An LLRV is stored as q unsigned 8-bit *likelihoods*: entry x is proportional to the probability
that the symbol is x, so larger means more likely. In this domain the two trellis functions are
products and convolutions. Both finish by rescaling: the vector is shifted so that the leading one
of the OR of all entries sits at bit 7. This power-of-two scaling is how the scaling factors s1 and
s2 are realised. The ratios between entries are what matter; their absolute size does not.

A path metric (PM) is 16 bits, and **larger is better**. Extending a path by symbol x adds

    inc(x) = max(0, 255 + 32*log2( L[x] / sum_y L[y] ))

where log2 is a piecewise-linear (leading one plus fraction bits) approximation. A certain symbol
adds 255, and each halving of its conditional probability takes 32 off. Normalising by the sum is
essential. Normalising by the largest entry, for example, gives every path a best symbol worth 255.
Then a path that has gone wrong cannot be told from the right one.

## Processing element and trellis functions

Each trellis node is a PE (`nb_pe`). It holds an F unit, a G unit, a likelihood register and the
GF adders used for partial sums. Both functions deliver their result into the likelihood
register exactly `2*log2(q)+3` cycles (19 for q = 256) after the PE is started, so stage timing
does not depend on the function used.

**F** (`f_unit`) combines the two inputs under an unknown partner symbol:
`F[t] = sum_x L1[t + (beta/alpha) x] * L2[x]`, an XOR convolution. It is computed through the
Walsh-Hadamard transform:

- L2 is permuted by `x -> (beta/alpha) x` (`llrv_perm`, 2 cycles);
- both vectors are transformed (`hadamard_engine`, log2 q cycles);
- the transforms are multiplied element by element (1 cycle);
- the product is transformed again (log2 q - 1 registered layers; the last layer stays
  combinational);
- the result is divided by q and rescaled.

The PE register is the final stage. That gives 2 + 8 + 1 + 7 + 1 = 19 cycles for q = 256.

The Hadamard engine (`hadamard_engine`) is log2 q identical butterfly layers: output p = x[2p] +
x[2p+1], and output q/2+p = x[2p] - x[2p+1]. This is the "two half-size engines after an input
permutation" recursion unrolled, with one register per layer and one bit of growth per layer.

**G** (`g_unit`) uses the known partial sum mu of the left branch:
`G[x] = L1[alpha x + mu] * L2[beta x]`. Both inputs are permuted (`llrv_perm` with constants alpha
and beta). L1 is then XOR-shifted by mu/alpha, multiplied, and rescaled, which takes 4 cycles. The
result waits in a hold register until the F-path latency has passed.

**LLRV permutation** (`llrv_perm`), `out[x] = in[c x]`, takes two registered steps. The first
reorders the entries into exponent order (entry k holds in[g^k]). The second is a cyclic shift by
log_g(c), read out in natural order.

**GF adders.** The PE also computes `ua + alpha*ub` and `beta*ub`. This is one kernel butterfly
for the partial sums, with constant multipliers and XORs.

## SC sub-decoder and its list paths

`sc_subdecoder` decodes one sub-code of NSUB = N/M symbols, for all L paths at once.

**Layout.**
- Stage s (0 = channel side) has 2^(log2 NSUB - 1 - s) PEs.
- Each path owns a complete PE array, so its likelihood registers live inside its PEs.
- State registers `psl` hold, per stage and path, the partial sums of the finished left subtree
  that G needs.
- The channel LLRVs of the sub-code sit in a small memory shared by all paths.

**Computing leaf i.** Stage s runs G if bit (log2 NSUB - 1 - s) of i is set, and F otherwise. Only
the stages whose inputs changed are run: leaf 0 runs all of them, and leaf i > 0 starts at stage
log2 NSUB - 1 - ctz(i). Each stage starts in the cycle its predecessor delivers.

A whole sub-code therefore costs exactly `(2*NSUB - 2) * 19` cycles of trellis work. For NSUB = 64
that is 2394 cycles.

**Updating after reconciliation.** Path l takes its parent's state: all likelihood registers and
partial sums are copied in one cycle. It then appends its decided symbol. The new partial sum
travels towards the channel one stage per cycle, through the PEs' GF adders:

- where the leaf is a right child, the adders combine it with the stored left half;
- at the first stage where it is a left child, it is stored and propagation stops.

The update always takes log2 NSUB cycles (6 at the defaults).

Copying the whole likelihood state of a path is this design's reading of list decoding. It is
simple and exact, but it is also why the default build is large: 2 x 4 x 63 PEs, each with three
256-point transforms.

## How the split works: which symbols a sub-decoder sees

This is the least obvious part of the design. One kernel layer is split off:

    w_j = sum_j' u_j' * Fm[j'][j],   Fm = F^(x)log2(M)

Here u_j' is symbol i of original block j', and w_j is symbol i of sub-code j. Sub-code j is an
ordinary N/M polar code in the symbols w_j, and it sees channel symbols j*N/M .. (j+1)*N/M - 1. So
sub-decoder j decides *w_j*, not u_j.

The original symbols come back through the inverse: `u = w * Finv`, with
Finv = [[1,0],[alpha/beta, 1/beta]]^(x)log2(M). For M = 2 that gives u0 = w0 + (alpha/beta) w1 and
u1 = w1/beta.

Frozen information must be translated accordingly:

* **Locally frozen.** w_j is a known constant only if every u_j' it depends on is frozen. Those are
  the u_j' with (j' AND j) = j. Only then does the sub-path filter keep just the value 0.
* **Globally valid.** A combination of sub-paths is a valid global path only if all its sub-paths
  extend the same parent path. Also, every frozen u_j', computed through Finv, must equal the frozen
  value. This check is how the constraint that links the sub-codes is enforced.

Frozen symbols take the value 0.

## Reconciliation

`recon_processor` runs four stages, one after another, after each level's leaf LLRVs are ready.
First, `subpath_pm_calc` (one per sub-decoder) adds inc(x) to each parent metric. This takes
1 cycle and gives qL sub-path metrics per sub-decoder.

1. **Sub-path filter** (`subpath_filter`, one per sub-decoder):
   - marks each of the qL sub-paths valid or invalid (invalid parent path, or a locally frozen
     symbol with x != 0);
   - packs each entry as `{valid, pm, tag}`;
   - sorts them with a length-qL 2D sorter and keeps the best Ls (skimming).
2. **Global path calculator** (`global_path_calc`) forms all Ls^M combinations in one cycle and
   checks each for global validity. A combination's metric is
   `pm_0 + sum_{j>=1} (pm_j - pm_parent)`, because every sub-path metric already contains the
   parent's metric.
3. **Global sorter**: a 2D sorter of length Ls^M keeps the best L.
4. **PM updater** (`pm_updater`) takes the best L global paths apart:
   - sets the new metrics and valid flags;
   - sends each sub-decoder a parent index and a symbol w_j per path;
   - keeps the decision history of every path.

   At the end of the frame, `dec_u` holds the history of the best valid path, mapped back to the
   original symbols u through Finv.

**Bypass.** When all M symbols of a level are frozen, stages 1-3 are skipped. Every path keeps its
place and appends 0, and its metric takes the increments of symbol 0. This takes 2 cycles.

### 2D sorter

`sorter_2d` places its inputs in a W x W register file. W is the smallest power of two with
W*W >= entries and W >= 2*keep. That gives W = 32 for the 1024 sub-paths and W = 16 for the 256
global paths. The register file feeds W copies of a W-input *bi-mode* bitonic network
(`bitonic_sorter`), pipelined into log2 W stages. The two modes are:

- **sort**: all stages work, on any input order;
- **merge**: only the last stage works, on a bitonic input.

The phases are:

- **phase 0**: every row is sorted;
- **phase p = 1 .. log2 W**: row r (a multiple of 2^p) takes its own best W/2 entries followed by
  the best W/2 of row r + 2^(p-1) in reverse. That vector is bitonic, so a merge pass sorts it.

After log2 W + 1 phases, row 0 holds the best W/2 entries overall, in order. Each phase issues all
rows in one cycle and writes back log2 W cycles later. The whole sort therefore takes
(1 + log2 W)(1 + log2 W) + 1 cycles: 37 for W = 32 and 26 for W = 16.

Entries are compared on `{valid, pm}` only, so invalid entries sink to the bottom. Equal keys keep
their order within a network.

## Frame schedule and latency

The controller of the top level (`snbscl_decoder`) runs levels i = 0 .. N/M - 1. The steps of one
level, at the default sizes, are:

| step | cycles (defaults) |
|---|---|
| leaf LLRVs, all sub-decoders in parallel | 19 per trellis stage run, + 1 |
| sub-path metrics | 1 |
| reconciliation: filter (1 + 37), global paths (1), global sort (26), PM update (1) | 66 + handshakes |
| or bypass | 2 |
| sub-decoder update | 6 |

Trellis work per frame is the same (2N/M - 2) * 19 = 2394 cycles as in the original design. The
original spends about 383 cycles per reconciled level: 222 for the sub-path sort, 34 for loading
and validation, 1 for the global paths, 120 for the global sort and 6 for the update. This design
spends far less, because its 2D sort needs fewer phases (see below). At the reduced size used in
the end-to-end test (GF(8), N = 16, M = 2, L = 4, Ls = 4), a frame takes 444 cycles. The testbench
checks the exact trellis cycle count of every frame.

## Where this design departs from the original description

- **2D sorter phase plan.** The original sorts in 6 phases of W + log2 W cycles: 222 cycles for the
  sub-path sort and 120 for the global sort. Its phase plan comes from a published scheme that is
  not spelled out there. The row-sort then row-merge plan above is this design's own. It is exact
  for the best W/2 entries and much shorter (37 and 26 cycles).
- **Loading and validation** of the sub-path sorter take 1 cycle here. The original budgets
  34 cycles for them.
- **G function latency.** The original gives 5 cycles; here it is 4. Either way the PE presents G
  results at the F latency of 2 log2 q + 3.
- **What a sub-decoder decodes.** Sub-decoder j is described as computing the LLRV of symbol
  u_{jN/M+i}. Here it decides the split-code symbol w_j, and the reconciliation maps between w and
  u (see above).
- **Interfaces** are this design's own: channel loading, the frozen-set input, and the `dec_u`
  output. So are the metric formula, the scaling rule, alpha and beta, the frozen value 0, the
  same-parent rule for global paths, per-path copies of the PE arrays, and the absence of overlap
  between levels.
- **Frozen set.** The frozen set of the (128,64) code is an input port, because the original
  construction is not given. The same holds for which levels bypass reconciliation (19 of 64 in
  the original).
- **Not included**: the comparison decoders (the direct-mapped NBSCL baseline, binary SCL), and the
  physical-implementation figures (28 nm synthesis, area, power).

## Files

| module | role |
|---|---|
| `nb_pkg` | field arithmetic, tables, Kronecker entries, metric function, default constants |
| `hadamard_engine` | pipelined q-point Walsh-Hadamard transform |
| `llrv_perm` | LLRV index permutation by a GF constant |
| `f_unit`, `g_unit` | trellis functions |
| `nb_pe` | processing element |
| `sc_subdecoder` | SC sub-decoder for L paths |
| `subpath_pm_calc` | sub-path metrics |
| `bitonic_sorter`, `sorter_2d` | bi-mode bitonic network, 2D sorter |
| `subpath_filter`, `global_path_calc`, `pm_updater` | reconciliation stages |
| `recon_processor` | reconciliation processor |
| `snbscl_decoder` | top level |

**Using the top level.**
1. Write the N channel LLRVs (entry x = likelihood of value x) through `ch_we`/`ch_addr`/`ch_data`.
2. Hold `frozen[a] = 1` for each frozen position.
3. Pulse `start`. `busy` stays high until `done` pulses. `dec_u` then holds the decoded input
   symbols.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each compares against a reference
model written independently inside the testbench (field arithmetic, transforms, sorting and SC
decoding are recomputed there) and checks the latencies stated above. Each testbench prints one
`TB_RESULT checks=... failures=...` line.

The testbenches use small parameters so they run in seconds:

- GF(8) for the datapath;
- a GF(8), N = 16, M = 2, L = 4, Ls = 4 decoder for the end-to-end test.

The end-to-end test decodes 12 random frames and compares the result with the transmitted symbols. In each frame's channel LLRVs the transmitted value is the most likely one, and the other values get random likelihoods. It
also checks the trellis cycle count of each frame. It counts reconciliations, bypasses, skimming
(sub-paths dropped by the filters), path replacements and globally invalid combinations, and
fails if any of these never occurs.

The default configuration (GF(256), N = 128) elaborates and lints cleanly, but it has not been
simulated: at that size the model of the per-path PE arrays is too large to simulate in minutes.
The largest size simulated end to end is the GF(8), N = 16 decoder above.

To run a testbench with Verilator:

    verilator --binary --timing --assert -Irtl rtl/nb_pkg.sv tb/tb_snbscl_decoder.sv -y rtl \
              --top-module tb_snbscl_decoder -Mdir obj -o sim && obj/sim
