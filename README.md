# An unrolled, fully pipelined polar successive-cancellation decoder

This is a polar-code decoder that accepts a complete 1024-bit codeword every
clock cycle. Successive cancellation (SC) decoding is sequential: bit *i* is
decided from the channel values and from all decisions before it. The design
does not run that sequence on shared hardware. It lays the whole decoding tree
out in silicon, one piece of logic for every step of the algorithm, and puts
pipeline registers between the steps. Codeword *t* is then in one stage while
codeword *t+1* is in the stage before it. At a 1.2 GHz clock this gives
1024 × 1.2 GHz ≈ 1.23 Tb/s of coded throughput. The latency is a fixed 60
cycles.

Three ideas keep this affordable:

* **Shortcuts.** Constituent codes that are easy to decode are decoded in
  one step, not split further. These are Rate-0, Rate-1, single-parity-check
  and repetition codes.
* **Adaptive quantization.** LLRs get fewer bits deeper in the tree, where
  they are already well polarized.
* **Register reduction/balancing.** Small sub-trees are merged into a single
  clock cycle. The pipeline stays short, so the delay-line buffers, which make
  up most of the flip-flops, stay small.

The default configuration is the (1024, 854) systematic polar code (rate
5/6) with 5-bit channel LLRs, shortcuts up to 32 bits, and the published
adaptive quantization tree.

## The decoding tree

A polar code of length *M* is made of two codes of length *M/2*. Decoding a
node of length *M* that receives LLRs `l[0..M-1]` takes four steps:

1. **F stage:** `a[j] = F(l[2j], l[2j+1])` for `j < M/2`, with
   `F(x,y) = sgn(x)·sgn(y)·min(|x|,|y|)` (min-sum).
2. **Left child:** decode `a` as a code of length *M/2*. The result is its
   codeword estimate `z`.
3. **G stage:** `b[j] = G(l[2j], l[2j+1], z[j])`, with `G(x,y,z) = (1−2z)·x + y`.
4. **Right child:** decode `b`. The result is `x`.

The node then returns its own codeword estimate through the partial-sum update
logic (PSUL):

    beta[2j] = z[j] XOR x[j]        beta[2j+1] = x[j]

Each node returns a **codeword estimate**, not the decisions on the input
bits. That is the only thing its parent needs.

F and G pair neighbouring LLRs (`2j`, `2j+1`), not LLRs *M/2* apart. As a
result, the decoder's codeword order is the **bit-reversal** of the usual polar
codeword order: decoder position *i* carries standard codeword bit
`bitrev(i)`. The order of the *decisions* (the leaves of the tree) is the
standard order: leaf *i* is input bit *u_i*, and bit *i* of the frozen mask
refers to it.

The left child of a node covers leaves `[POS, POS+M/2)` and the right child
covers `[POS+M/2, POS+M)`. This splitting is done at elaboration time by one
recursive module, `opsc_node`, which instantiates two copies of itself with
half the length. The recursion stops at a shortcut. Every length-1 node is a
Rate-0 or Rate-1 shortcut, so the recursion always ends.

### Shortcuts

A node whose frozen pattern has one of four shapes is decoded by
`hd_shortcut` in a single step:

| class | frozen pattern | decision |
|---|---|---|
| Rate-0 | all frozen | all bits 0 |
| Rate-1 | none frozen | each bit = sign of its LLR (1 if negative) |
| SPC | only the first leaf frozen, M ≤ 32 | signs; if their parity is odd, flip the bit with the smallest \|LLR\| (Wagner decoding) |
| REP | only the last leaf free, M ≤ 32 | every bit = sign of the sum of all M LLRs (ML decoding of a repetition code) |

SPC and REP are limited to 32 bits (`N_LIM`), so that their comparator tree
and adder tree stay short. Ties are settled as follows:

* In the Wagner search, the lowest index wins among equal magnitudes.
* A REP sum of exactly 0 decides 0.

With the default code, the tree has
1 Rate-0, 7 Rate-1 and 3 SPC shortcut nodes at the registered levels. The
largest is the whole Rate-1 (256,256) quarter. Inside the merged 32-bit
sub-trees there are many more shortcuts, of all four classes.

### User data

The code is systematic, so the data bits appear unchanged in the codeword:
data bit *k* sits at the *k*-th non-frozen leaf index *i*. Because of the
bit-reversed order, `user_data_extract` reads it from decoder position
`bitrev(i)`. The index map is computed at elaboration. This block adds the
last pipeline register.

## Number format and arithmetic

LLRs are **sign-magnitude** numbers:

* bit Q−1 is the sign; 1 means negative, so bit value 1 is more likely;
* the remaining bits hold the magnitude;
* a 1-bit LLR is a sign alone.

Sign-magnitude is the format in which the LLRs are stored, and it makes F
trivial.

* **`f2`**: the output sign is the XOR of the two signs, and a
  compare-and-select keeps the smaller magnitude. The output has the same
  width as the inputs.
* **`g2`**: `s2c` converts both inputs to two's complement. An adder forms
  `l1+l2` and a subtractor forms `l2−l1`, both at the same time. The
  feedback bit `z` only drives the final multiplexer (`z=1` selects the
  difference), because `z` arrives late through the chain of PSUL XORs.
  `c2s` converts the result back. The output is one bit wider than the
  inputs, so nothing overflows.
* **`aq`**: after every F and G stage, the adaptive quantizer reduces the
  LLRs to the width of the child that receives them. It keeps the sign and
  saturates the magnitude.

The widths follow the published quantization tree for the nodes of length
128 to 1024 of the (1024, 854) code. Nodes below 128 keep their parent's
width.

| node (first leaf) | left child gets | right child gets |
|---|---|---|
| 1024 (0) | 5 | 4 |
| 512 (0) | 5 | 4 |
| 512 (512) | 4 | 3 |
| 256 (0) | 5 | 4 |
| 256 (256), 256 (512) | 4 | 3 |
| 256 (768) | 3 | 1 |

The tree is keyed on node position and applies only when `N = 1024`. With the
default frozen set, the (256, 768) node is a Rate-1 shortcut, so its 1-bit
entry is never used. Setting `AQ_EN = 0` keeps every node at the full `Q`
bits.

## Pipelining, buffers and latency

This is the part of the design that takes the most care to follow.

**Register placement.** Inside a node, the G stage cannot start until the
left child has finished, and the PSUL cannot finish until the right child
has. In a pipeline that accepts a new codeword every cycle, the operands that
must wait are carried along in delay lines (`delay_buffer`, a shift register
of flip-flops). Registers are placed by one rule:

* A node that is a shortcut, or that has at most `COMB_M = 32` bits, is
  computed in **one cycle**. All of its F, G, shortcut and PSUL logic forms
  one combinational path with a single register at the end. Its children are
  instantiated with `INSIDE_COMB = 1` and contain no registers.
* Any larger node registers the output of its F stage (after the quantizer)
  and the output of its G stage. Its latency is therefore
  `L(node) = 2 + L(left) + L(right)`.
* The PSUL of a larger node is combinational. Its XORs chain through the
  levels above the merged sub-trees into the output register of
  `user_data_extract`.

**Buffer depths.** In a node with children of latency `L1` and `L2`:

* the *LLR buffer* delays the node's M input LLRs by `1 + L1` cycles, so they
  meet `z` at the G stage;
* the *partial-sum buffer* delays `z` by `1 + L2` cycles, so it meets `x` at
  the PSUL.

`opsc_pkg::node_lat` computes every latency at elaboration with a
non-recursive walk of the frozen mask. Each node sizes its own buffers from
it.

With the defaults, the decoder core has 59 stages. `user_data_extract` adds
one, so `LATENCY = 60`. The buffer depths come out as:

| node length (first leaf) | LLR buffer depth | partial-sum buffer depth |
|---|---|---|
| 1024 | 42 | 17 |
| 512 (0) / 512 (512) | 21 / 14 | 20 / 2 |
| 256 (0) / (256) / (512) | 9 / 11 / 11 | 11 / 8 / 2 |
| 128 (0) / (128, 256, 512) / (384) | 3 / 5 / 5 | 5 / 5 / 2 |
| 64 (0) | none (Rate-0 left child) | none |
| 64 (eight other nodes) | 2 | 2 |

The flip-flops add up as follows:

* LLR buffers: 347,136 bits;
* partial-sum buffers: 18,944 bits;
* F/G stage registers: 16,416 bits;
* shortcut and merged-sub-tree output registers: 992 bits;
* data output register: 854 bits;
* valid pipeline: 60 bits.

That is about 384,400 flip-flops. The published implementation reports:

* 361 Kb of LLR buffer and 19 Kb of partial-sum buffer;
* a root LLR buffer 41 deep;
* about 397,000 flip-flops after synthesis;
* 60 pipeline stages.

This design's register placement is therefore close to the published one,
but not the same. The published stages were placed from gate-level timing
results that were never published. Merging 32-bit sub-trees into one cycle
gives a long combinational path, up to the whole SC schedule of a 32-bit code.
Closing timing at 1.2 GHz would probably require moving registers into those
sub-trees. Retiming during synthesis (which the published flow used) does part
of that. `COMB_M` sets where the merging stops. For example, `COMB_M = 16`
gives an 87-stage core with shorter paths and larger buffers.

## Interface and timing

`opsc_decoder` (top) has these ports:

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | asynchronous active-low reset of the valid pipeline only |
| `in_valid` | in | 1 | `llr_i` holds a codeword this cycle |
| `llr_i` | in | N × Q | `llr_i[i]` = sign-magnitude LLR of standard codeword bit `bitrev(i)` |
| `out_valid` | out | 1 | `data_o` holds a decoded codeword |
| `data_o` | out | K | decoded data, bit *k* = *k*-th data bit in increasing leaf index |

How it behaves:

* There is no handshake and no back-pressure. A codeword sampled with
  `in_valid` at clock edge *t* appears on `data_o`, with `out_valid`, right
  after edge `t + LATENCY − 1`; in other words, `LATENCY` edges after it was
  sampled.
* Any pattern of valid and idle cycles is allowed. The datapath registers are
  not reset.

The parameters, with their defaults:

* `N = 1024`, `K = 854`, `Q = 5`;
* `N_LIM = 32` (largest SPC/REP);
* `COMB_M = 32` (largest merged sub-tree);
* `AQ_EN = 1`;
* `FROZEN`, the frozen mask, bit *i* = 1 when leaf *i* is frozen. The default
  is `opsc_pkg::pw_frozen(N, K)`.

An assertion checks that `FROZEN` has exactly `N − K` ones.

### The frozen set

The published code was built by density evolution at 6.5 dB Es/No, but its
frozen set was never published. The default set here uses the
polarization-weight rule instead:

* index *i* gets the weight Σ_j b_j(i)·2^(j/4), where b_j(i) are the bits of
  *i*;
* the K heaviest indices carry data;
* ties go to the higher index;
* the weights are integers in units of 1/1000.

The sub-code rates this gives are close to the published tree. For example,
the halves are (512, 358) and (512, 496), against a published (512, 361) and
(512, 493). Error-rate performance will differ slightly from the published
curves. To use another code, pass your own mask as `FROZEN`. The buffer
depths, shortcuts and latency all follow from the mask.

## Files

| file | content |
|---|---|
| `rtl/opsc_pkg.sv` | LLR conventions, shortcut classes, frozen-set construction, latency and quantization-tree functions |
| `rtl/opsc_decoder.sv` | top: root node, data extraction, valid pipeline |
| `rtl/opsc_node.sv` | recursive sub-decoder (F → AQ → left child, buffers, G → AQ → right child, PSUL) |
| `rtl/f2.sv`, `rtl/g2.sv`, `rtl/s2c.sv`, `rtl/c2s.sv` | F and G functions and the converters inside G |
| `rtl/aq.sv` | saturating requantizer |
| `rtl/hd_shortcut.sv` | Rate-0 / Rate-1 / SPC (Wagner) / REP (sum) decisions |
| `rtl/psul.sv` | partial-sum update |
| `rtl/delay_buffer.sv` | flip-flop delay line (buffers and pipeline registers) |
| `rtl/user_data_extract.sv` | systematic data selection and output register |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_opsc_decoder` is the end-to-end test |

## Verification

Every testbench computes its expected values independently, ends with a
`TB_RESULT checks=… failures=…` line, and has a watchdog. The small blocks are
tested exhaustively (`s2c`, `c2s`, `f2`, `g2`) or with random vectors (`aq`,
`psul`, `hd_shortcut`, `delay_buffer`).

* **`tb_opsc_node`** streams one codeword per cycle through a length-64 node
  with 32 frozen bits, `COMB_M = 8` and `N_LIM = 8`. This tree contains all
  four shortcut classes, registered stages and merged sub-trees. The test
  checks the decoded codewords and the 20-cycle latency.
* **`tb_user_data_extract`** decodes nothing. It checks that systematic
  encoding followed by extraction returns the data.
* **`tb_opsc_decoder`** runs the full-size decoder at its default parameters.
  It streams 240 codewords with random idle gaps:
  * a quarter are noiseless, and must decode to the transmitted data;
  * the rest pass through BPSK and Gaussian noise at Eb/N0 = 3, 4 and 5 dB,
    and must match a bit-exact software model of the decoder, written in the
    testbench as an iterative traversal of the tree.

  The testbench also checks:
  * the systematic property of its encoder;
  * the latency against the model's count;
  * that every mechanism occurred: all four shortcut classes, a Wagner
    correction, a negative REP decision, quantizer saturation, back-to-back
    and idle input cycles, and channel errors that were corrected.

To simulate with Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/opsc_pkg.sv tb/tb_opsc_decoder.sv \
              --top-module tb_opsc_decoder -j 8
    ./obj_dir/Vtb_opsc_decoder

The full-size model builds in about 2.5 minutes on a desktop machine, and
simulates 240 codewords in well under a second. Any other testbench runs the
same way with its own name.

## How this relates to the published design

The following follow the published description:

* the tree structure with F/G stages, quantizers, buffer memories and PSUL;
* the F2 and G2 circuits: XOR with compare-and-select; S2C, parallel add and
  subtract with a late select, C2S;
* the four shortcut classes and their limit of 32;
* the quantization widths of the 128–1024 nodes;
* the code parameters;
* sign-magnitude LLRs of 5 bits;
* register-based buffers and one codeword per clock.

The following are this design's own choices:

* the frozen set (the published one is not available);
* the register placement rule. It reaches the published 60 cycles, but with
  different buffer depths;
* saturation as the quantization rule;
* tie rules in the Wagner and REP decoders;
* bit-reversed codeword order at the ports, and the data bit order;
* the valid/reset scheme.

The published physical and verification environment is not described by any
RTL here:

* clock gating inserted during synthesis;
* floorplan and pins;
* the FPGA test platform, made of the LFSR data source, systematic encoder,
  BPSK mapper, Gaussian noise generator, LLR demapper and error counter. The
  end-to-end testbench models the encoder and the channel behaviourally.

The FPGA version of the decoder is not reproduced either. It uses a 158-stage
pipeline and block RAM for the received LLRs.
