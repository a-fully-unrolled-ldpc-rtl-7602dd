# A fully unrolled LDPC decoder with look-up-table variable nodes

This is synthesizable SystemVerilog for a fully unrolled, fully parallel LDPC decoder. It
decodes the (6,32)-regular code of length N = 2048 used by 10GBASE-T. Messages are 3-bit
labels instead of numbers, and channel LLRs are 4-bit labels.

Two ideas make this decoder different from an ordinary min-sum decoder:

* **Unrolling.** Each of the I = 5 decoding iterations has its own check nodes and variable
  nodes. A codeword travels through a pipeline of 2I = 10 register stages. A new codeword
  enters on every clock cycle and a decoded codeword leaves on every clock cycle. The only
  control is the clock and the reset.
* **Finite-alphabet variable nodes.** A variable node does not add numbers. Each output is
  computed by a small tree of look-up tables (LUTs). Each LUT maps two or three labels to a
  new label. The tables are designed offline, separately for every iteration, so a label can
  stand for a larger reliability in later iterations without extra bits. Messages therefore
  need only 3 bits where an adder-based decoder with the same error rate needs 5.

The check nodes still run plain min-sum. This works because the label alphabets are
symmetric: a label in sign-magnitude form gives the sign of its message directly, and the
magnitude index orders labels by reliability. So min-sum can run on the labels themselves.

## Pipeline

```
llr_in ─► LLR→message map ─► VN-CN routing ─► CN stage 1 ─► CN-VN routing ─► VN stage 1 ─►
          VN-CN routing ─► CN stage 2 ─► … ─► CN stage 5 ─► CN-VN routing ─► DN stage ─► codeword
```

| stage    | count (I = 5) | logic                       | registers                               |
|----------|---------------|-----------------------------|-----------------------------------------|
| CN stage | 5             | M = 384 check nodes         | M·32 × 3-bit messages, N × 4-bit LLRs    |
| VN stage | 4             | N = 2048 LUT variable nodes | N·6 × 3-bit messages, N × 4-bit LLRs     |
| DN stage | 1             | N LUT decision nodes        | N-bit codeword                          |

Every stage registers its outputs, so the latency is exactly 2I = 10 cycles. Each CN and VN
stage also forwards the channel LLRs of the codeword it holds. Later variable nodes need
them, and other codewords are in flight at the same time. The decision stage forwards
nothing. The register count is (2I−1)·N·(6·3+4) + N = 407,552 bits.

Interface of `ldpc_unrolled_decoder`:

| port       | dir | type              | meaning                                          |
|------------|-----|-------------------|--------------------------------------------------|
| `clk`      | in  | 1                 | every rising edge accepts one frame              |
| `rst_n`    | in  | 1                 | asynchronous, active low; clears every register  |
| `llr_in`   | in  | `logic [3:0] [N]` | channel LLR label of code bit n                  |
| `codeword` | out | `logic [N-1:0]`   | decoded bits of the frame given 2I edges earlier |

There is no valid signal. The user keeps `llr_in` valid every cycle and counts the latency.
For 2I−1 cycles after reset, `codeword` carries whatever the pipeline's reset state decodes
to, which is all zeros with the default tables.

## Labels

A Q-bit label is `{sign, magnitude index}`. Sign 1 means that bit value 1 is more likely,
i.e. a negative LLR. The magnitude index runs from 0 (least reliable) to 2^(Q−1)−1.
Messages use Q_msg = 3 and channel LLRs use Q_ch = 4. No arithmetic is ever done on a
label. The check node only compares magnitude indices and XORs signs, and every other
operation is a table look-up.

## Check node

`check_node` finds the smallest and second-smallest magnitude of its 32 inputs with a tree of
15 four-input compare-and-select units (`cs4`):

* 8 units on the raw inputs, taken four at a time;
* then 4, 2 and 1 units, each merging two (min1, min2) pairs.

Output k gets min2 if input k's magnitude equals min1, and min1 otherwise. This needs no
argmin index: when two inputs share the minimum, min2 equals min1 anyway. The sign of output
k is the XOR of all 32 input signs with input k's own sign.

## Variable node LUT trees

Each of the six outputs of a degree-6 variable node uses the five other check messages and
the LLR, in this four-level tree:

```
out_k = LUT4( LUT3( LUT2( LUT1(a,b), LUT1(c,d) ), e ), L )
```

A naive node would need 6 × 4 = 24 LUTs. Nodes that occur in several trees are shared:

* three LUT1 on the input pairs (0,1), (2,3) and (4,5);
* three LUT2 on the pairs of those: (01,23), (01,45) and (23,45);
* six LUT3 and six LUT4.

For output k, the LUT2 is the one that does not contain k's pair, and `e` is k's partner,
input k^1. That makes 18 LUTs in total. LUT1 to LUT3 have 6-bit addresses, and LUT4 has a
7-bit address ({3-bit label, 4-bit LLR}). All intermediate labels are 3 bits wide.

The decision node is a single tree: `c = LUTR( LUTA(m0,m1,m2), LUTA(m3,m4,m5), L )`. LUTA has
a 9-bit address and a 3-bit output. LUTR has a 10-bit address and a 1-bit output.

In every LUT the first-named input forms the high address bits. The contents are module
parameters, given as packed bit vectors with entry `a` at bits `[a*W +: W]`. The top takes
one set per VN stage (`VN_T1[k]` … `VN_T4[k]`), plus `DN_TA`, `DN_TR` and `INIT_T`.
Synthesis turns each table into random logic. So VN stages of different iterations end up
with different areas even though their structure is the same.

### The default tables are stand-ins

The tables this method needs come from an offline design procedure. For each iteration,
that procedure tracks the message distributions and picks the label mapping that maximises
the mutual information with the code bit, at a design SNR of 4.5 dB. Those tables are not
published, so they are not reproduced here.

The defaults in `ldpc_pkg` are generated by a simple rule instead:

* a label stands for the odd integer s·(2·mag+1);
* a LUT adds the integers of its inputs and re-quantises the sum to mag = min(max, |sum| div 2);
* the decision root outputs 1 when the sum is negative;
* the LLR-to-message map saturates the 4-bit magnitude index at 3.

The defaults are identical for every iteration, so they behave like a coarse saturating
min-sum decoder. They make the decoder work and testable. They do **not** give the error
rate of the real design. To get that, generate the real tables (one set per iteration) and
pass them in as parameters. The hardware does not change.

## Code and routing

The routing networks are plain wires that implement the parity-check matrix:
`vn_cn_router` goes from bit order to check order and `cn_vn_router` goes back. The matrix is
a 6 × 32 array of 64 × 64 permutation blocks, the shape of the 10GBASE-T code. The actual
permutations of that standard are not reproduced. Block (i, j) here is the identity
cyclically shifted by (i·j) mod Z:

* check i·Z+r, edge j, connects to bit j·Z + (r + i·j) mod Z;
* bit j·Z+c, edge i, connects to check i·Z + (c − i·j) mod Z.

This matrix has a few 4-cycles. To use the real code, change `ldpc_pkg::circ_shift` or, for
non-circulant blocks, the two router modules.

## LLR-to-message map

The first check stage needs 3-bit messages, but the channel gives 4-bit labels. So
`llr_msg_map` maps every LLR label through a 16-entry table and sends the result on all six
edges of the bit. This plays the role of the initial message distribution in the table
design. The block itself is an addition of this implementation.

## Files

| file                                         | content                                                          |
|----------------------------------------------|------------------------------------------------------------------|
| `rtl/ldpc_pkg.sv`                            | sizes, label helpers, parity-check shift, default table generators |
| `rtl/cs4.sv`                                 | 4-input compare-and-select                                       |
| `rtl/check_node.sv`                          | min-sum check node (CS tree + output unit)                       |
| `rtl/cn_stage.sv`                            | M check nodes + message and LLR registers                        |
| `rtl/variable_node.sv`                       | 18-LUT shared-tree variable node                                 |
| `rtl/vn_stage.sv`                            | N variable nodes + message and LLR registers                     |
| `rtl/decision_node.sv`                       | decision LUT tree                                                |
| `rtl/dn_stage.sv`                            | N decision nodes + codeword register                             |
| `rtl/vn_cn_router.sv`, `rtl/cn_vn_router.sv` | Tanner-graph wiring                                              |
| `rtl/llr_msg_map.sv`                         | channel label to first message                                   |
| `rtl/ldpc_unrolled_decoder.sv`               | top level                                                        |
| `tb/ldpc_ref_pkg.sv`                         | integer reference model of the whole decoder                     |
| `tb/tb_*.sv`                                 | one self-checking testbench per module                           |

Sizes are parameters: `Z` (block size, N = 32·Z, M = 6·Z), `DC` (check degree; must be 4
times a power of two) and `ITER` (at least 2). Q_msg, Q_ch and DV = 6 are package constants.
The LUT trees are written for DV = 6, and the table types depend on Q_msg and Q_ch.

## Simulation

Each testbench prints `TB_RESULT checks=N failures=F` and calls `$finish`. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl rtl/ldpc_pkg.sv tb/ldpc_ref_pkg.sv \
          tb/tb_ldpc_unrolled_decoder.sv --top-module tb_ldpc_unrolled_decoder -o sim
obj_dir/sim
```

The testbenches compare against values computed independently, with integer arithmetic in
`ldpc_ref_pkg` rather than table look-ups:

* The leaf blocks are checked exhaustively (`cs4`, the LLR map) or with tens of thousands of
  random vectors, including forced ties of the minimum in the check node.
* The stage testbenches apply new random data every cycle and check the one-cycle latency,
  the forwarded LLRs and the reset.
* `tb_ldpc_unrolled_decoder` runs the complete decoder at Z = 2 (N = 64, M = 12, five
  iterations; all widths and degrees as designed). It streams 90 frames back to back and
  compares every decoded frame bit for bit with the reference decoder. It also checks that
  the first frame appears after exactly 10 cycles, that a reset in the middle of the stream
  empties the pipeline, and that frames with channel errors were corrected.

Size limits of the simulation: Verilator writes a separate C++ statement for every element
of an unpacked message array passed through a port. So the generated model grows with
N·6·2I, and already at N = 128 it takes minutes to build. The full-size decoder (N = 2048)
passes Verilator lint and slang elaboration but has not been simulated. The largest size
simulated end to end is N = 128 (Z = 4); the regular end-to-end test runs at N = 64.

## Where this departs from the published design

* The LUT contents are stand-ins (see above). Consequently, no error-rate claim carries over.
* The parity-check permutations are circulants chosen here, not the 10GBASE-T matrix.
* This implementation's own choices:
  * the LLR-to-message map;
  * the reset style (asynchronous, active low, to zero);
  * which input pairs the LUT trees share;
  * the 3-bit intermediate LUT outputs;
  * the check node's min1-equality test in place of an argmin index.
* Synthesis figures (area and clock frequency in a 90 nm library) are not reproduced. With
  the real tables, the area depends strongly on the table contents.
