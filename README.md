# A high-throughput list decoder for polar codes

A polar code of length N = 2^n can be drawn as a binary tree. The channel
LLRs enter at the root. The N leaves are the bits u_i, and some of them are
frozen to zero. Successive-cancellation list (SCL) decoding walks this tree
depth first and keeps the L most likely partial decisions ("paths"). When a
leaf is decided, each path splits in two and the list is pruned back to L.
Done one bit at a time, this costs roughly 2N steps per codeword.

This design follows the reduced-latency list decoding idea. It prunes the
tree so that whole sub-trees are decided in one step:

| node type | what it contains | how it is decided | path metric |
|---|---|---|---|
| rate-0 | only frozen bits | all zeros | unchanged |
| rate-1, I_v > X_th | only information bits | hard decision of each LLR | unchanged |
| rate-1, I_v ≤ X_th | only information bits | CG: each path offers two candidates | + 0, or + min\|LLR\| |
| FP node | ≤ 8 information bits, size ≤ 16 | MBS: all 2^I_v codewords scored, best kept | + distance |

Notes on the table:

- I_v is the number of information bits under the node.
- CG (candidate generation): the two candidates are the hard decision, and the hard decision with its least reliable bit flipped.
- FP node (from "few information bits and few positions"): all 2^I_v codewords are scored with their exact ML distance. A two-stage sort then keeps the best ones.

The decoder therefore visits a few hundred nodes instead of 2N − 1. At its
default size (N = 8192, L = 4, T = 128 processing units per path), a
rate-1/2 code decodes in about 1600 clock cycles.

## Datapath

```
            +------+    +---------+    +------+     +-----+     +------+
 channel -> | CMEM | -> | L x PUA | -> | IMEM | ... | PPU | --> | Hyb- | --> IEnc --> CRCC
   LLRs     +------+    +---------+    |  +SN |     +-----+     | PSU  |      (x->u)   (CRC-32)
                             ^         +------+                 +------+
                             +------- partial sums (PS) ------------+
```

- **cmem**: the channel LLRs, 5 bits each. One read returns 2T LLRs.
- **pua**: one array per path of T processing units. Each unit computes
  `f(a,b) = sign(a)sign(b)min(|a|,|b|)` or `g(a,b,s) = (1-2s)a + b` on the
  pair (a[2i], a[2i+1]). The result saturates to the width of the layer it
  is written to.
- **imem**: the internal LLRs, L paths × n layers. Widths follow a
  mixed-quantisation rule:
  - layers 1..t1 hold 5 bits;
  - layers up to t2 hold 6 bits;
  - higher layers hold 7 bits.

  For N = 2^13, (t1, t2) = (3, 4). Reads go through a switch network. For
  each path it selects which physical copy of a layer to read, so that
  copying a path never moves LLRs.
- **ppu**: the path pruning unit. See below.
- **hyb_psu**: the partial-sum unit. See below.
- **ienc, crcc**: the decoder produces codewords x, not data words u.
  - `ienc` applies the polar transform again. The transform is its own inverse, so this gives u.
  - `crcc` runs CRC-32 over the information positions of u. The generator polynomial is 0x04C11DB7.
  - The L paths are tried in metric order, and the first one that passes is output.

## How the node program drives the datapath

The tree shape depends only on the frozen set, so it is computed once per
code. It is loaded into an instruction RAM: one `instr_t` per visited node,
in depth-first order. Each instruction gives:

- the node's layer;
- whether it is a right child;
- its kind (internal, rate-0, rate-1 hard, rate-1 CG or FP);
- for FP nodes, its information mask;
- t_e, the layer where the partial sums of a leaf land.

For a leaf whose last bit index is e, t_e = n − (position of the lowest zero
bit of e). It is 0 for the last leaf.

The controller runs each instruction as follows:

- **Internal node or leaf with LLRs.** It spends `ceil(2^(n−t)/T)` cycles
  computing the node's LLRs. A left child uses f. A right child uses g, with
  the partial sums streamed from the Hyb-PSU.
- **Rate-0 leaf.** It takes one cycle and needs no LLRs.
- **Other leaves.** After the LLRs, the PPU takes N_P further cycles:
  - 2 for a CG node of at most T bits, and 4 for a larger one;
  - 2 or 3 for a hard-decision node;
  - for an FP node, the pipeline depth listed per L and I_v.

  In the second-to-last of these cycles the survivors are committed. In the
  last, the Hyb-PSU loads the returned codewords and copies path references.
- **Output phase.** Per candidate tried, it spends 2N/T + 1 cycles:
  - N/T cycles to feed the codeword to the re-encoder;
  - N/T cycles of CRC on the data words streaming out;
  - 1 cycle for the decision.

The testbenches predict the total cycle count from the program with exactly
these rules, and compare it with the `cycles` output.

## Path pruning unit (ppu, ng1, ng2, ms_sort)

Each path has two node-metric generators:

- **NG-I (ng1)** handles rate-1 nodes. It takes one T-LLR word per cycle. It
  produces the hard decisions and the smallest magnitude with its index.
  - For nodes larger than T, the minimum is kept in running registers (mLR, mIR).
  - The hard decisions are collected in two buffers (HCM0/HCM1).
  - CG then offers `{h, metric + 0}` and `{h with bit k flipped, metric + min|α|}`.
- **NG-II (ng2)** handles FP nodes of up to 16 bits and 8 information bits.
  It builds all 2^I_v candidate codewords. Each information leaf takes one
  bit of the candidate index, and the polar transform is applied.
  - Per bit pair it forms four pair costs θ[r] with two 2-to-1 multiplexers. The candidate's metric is the sum of its pair costs.
  - The costs are non-negative penalties: |LLR| where the code bit disagrees with the LLR sign. Metrics are therefore comparable across paths.
  - A first sorting stage keeps q(I_v, L) candidates, with q from the paper's table. It takes the minimum two of each group of 2^I_v / q, then a 2L-to-L sorter.

The L candidate lists (2 per path for CG, q ≤ L per path for FP) go through
a tree of 2L-to-L bitonic sorters (`ms_sort`). The winners give the new path
metrics, the list indices a_l (which old path each survivor came from) and
the returned codewords.

The path metric registers start at 0 for path 0 and at their maximum for
the others. Without this, the first split would fill the list with copies
of one path.

## Partial sums without copying them (hyb_psu)

A path copy in a conventional SCL decoder moves every partial sum of the
path. This unit instead keeps, per path l and layer z, only C0_{l,z}: the
codeword last returned by a left child at layer z. It also keeps an index
reference p_l[z] saying which physical path's C0 is valid for path l.

- **On a path copy** only the references move:
  `p_l[z] ← p_{a_l}[z]` for z ≤ t.
- **For a right child**, the partial sums are the combination of the fresh
  leaf codeword with the stored left siblings between layers t and t_e. For
  every output bit, the unit walks up from the leaf:
  - an even position at layer z XORs in `C0_{p_l[z+1], z+1}[j]`;
  - an odd position passes through.

  This gives (c[2j], c[2j+1]) = (left[j] ⊕ right[j], right[j]). The result
  streams out T bits per cycle. It feeds the g computation of the next right
  sibling, and is stored as the new C0 of layer t_e, with p_l[t_e] ← l.
- **Layers t_e ≥ m (m = 3)** are register stages: the whole layer is stored
  in the first cycle. Lower layers are memory stages that take one T-bit
  word per cycle.
- **The last leaf has t_e = 0.** Its stream is the complete codeword of each
  path, which goes to the re-encoder.

The LLR switch network uses the same idea. When a layer is written, every
path points at its own copy. On a split, the pointers of the layers above
the leaf are copied along with the partial-sum references.

## Where this differs from the paper, and what is missing

- **Controller.** The text gives the node order and the cycle formula, but
  not the controller or the host interface. Here they are an instruction
  RAM, a frozen-mask RAM and an output buffer, all loaded by the host.
- **PPU timing.** The PPU's 3/4/6 pipeline stages are not placed as
  registers. The sort is combinational between the capture registers and
  the commit, and the controller waits the same number of cycles. The cycle
  counts therefore match the paper's formula. Reaching the paper's clock
  rate would need retiming or explicit pipeline registers.
- **Unbuilt buffers.** LBuf0, LBuf1 and a c2 bypass appear in the top-level
  figure but are not described in the text. They are not built. Returned
  codewords are held in the PPU (`beta_q`).
- **Memories.** CMEM and IMEM are plain register arrays with asynchronous
  reads, not RF/SRAM macros. The IMEM packing scheme of the earlier work the
  paper builds on is not reproduced.
- **Re-encoder.** IEnc buffers a frame and applies a fully parallel
  transform. The paper uses a cited partial-parallel encoder. Both keep the
  N/T word rate.
- **CRC convention.** The CRC polynomial, its bit order and the position of
  the CRC bits are this design's choice. The paper says only "CRC-32".
- **Rate-0 right children.** A rate-0 node that is a right child of a
  parent with information bits is not supported. Reliability-ordered
  constructions never produce one.
- **Cycle count.** At N = 8192, L = 4, with this design's Bhattacharyya
  construction (design parameter 0.5) and every rate-1 node through CG, one
  frame takes 1575 cycles. The paper's table lists 6492 decoding cycles for
  its (8192, 4096) L = 4 decoder, and a latency of 5.94 µs at 398 MHz
  (about 2360 cycles). Its frozen set is not given, so the two numbers
  cannot be compared directly.
- **Fixed build size.** n, L, T and the memory widths are parameters fixed
  at build time. The 1024-bit and 32768-bit codes of the paper need a
  rebuild with N_LOG = 10 or 15. The 32768-bit code also needs (t1, t2) =
  (4, 5) and m = 5.

## Files

| file | content |
|---|---|
| `rtl/polar_pkg.sv` | widths, `instr_t`, `cand_t`, the q and N_P tables, MEQ widths, 16-bit polar transform |
| `rtl/polar_list_decoder.sv` | top: memories, controller, all blocks wired |
| `rtl/cmem.sv`, `rtl/imem.sv` | channel and internal LLR memories (with switch network) |
| `rtl/pua.sv` | f/g processing unit array |
| `rtl/ng1.sv`, `rtl/ng2.sv`, `rtl/ms_sort.sv`, `rtl/ppu.sv` | path pruning |
| `rtl/hyb_psu.sv` | index-based partial-sum unit |
| `rtl/ienc.sv`, `rtl/crcc.sv` | re-encoder and CRC check |
| `tb/polar_tb_pkg.sv` | code construction, node-program generator, reference encoder, CRC, cycle model |
| `tb/tb_<block>.sv` | one self-checking test per block |
| `tb/tb_polar_list_decoder.sv` | end-to-end test at N = 256, L = 4, T = 8 |
| `tb/tb_polar_full.sv` | end-to-end test at the default size |

## Simulating

Every test prints `TB_RESULT checks=<n> failures=<n>`. For example:

```
verilator --binary --timing -Wno-fatal rtl/polar_pkg.sv tb/polar_tb_pkg.sv \
    rtl/cmem.sv rtl/imem.sv rtl/pua.sv rtl/ng1.sv rtl/ng2.sv rtl/ms_sort.sv \
    rtl/ppu.sv rtl/hyb_psu.sv rtl/ienc.sv rtl/crcc.sv rtl/polar_list_decoder.sv \
    tb/tb_polar_list_decoder.sv --top-module tb_polar_list_decoder -Mdir obj
./obj/Vtb_polar_list_decoder
```

### End-to-end test (N = 256)

It decodes 60 frames of a (256, 128) code over a Gaussian channel. It
checks three things:

- the cycle count of each frame;
- that a CRC pass implies the right data word;
- that every candidate is a codeword.

It also counts each mechanism and fails if one never happens:

- f and g steps;
- rate-0 leaves;
- hard-decision leaves;
- CG on one word and on several words;
- FP with q = 2 and with q = 4;
- path copies;
- register-stage and memory-stage stores;
- CRC retries;
- a frame rescued by a path other than the first.

### Full-size test

`tb_polar_full` decodes two (8192, 4096) frames at the default parameters
in a few seconds.

### Generating a node program

To decode a different code, load its frozen mask and its node program. The
function `make_program` in `tb/polar_tb_pkg.sv` shows how the program
follows from the frozen set.
