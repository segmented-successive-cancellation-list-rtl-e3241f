# Segmented SCL polar decoder with tailored CRCs (TCA-SCL) — RTL

CRC-aided successive-cancellation list (CA-SCL) decoding of polar codes puts
one CRC at the end of the frame. Every list path is carried to the last bit,
even when all of them went wrong early. A *segmented* decoder cuts the frame
into P pieces and gives each piece its own CRC. At the end of a segment the
list is checked and only the best path that passes survives. If none passes,
the frame is abandoned right there (early termination).

The "tailored" part is how the m CRC bits are shared out. Segments of equal
code length hold very different numbers of information bits, and those bits
differ in reliability. The CRC bits are therefore split in proportion to a
*virtual length*, which weights each information position by how unreliable
its bit-channel is compared with the average. For the (1024,512) code with 32
CRC bits in four segments, the segments hold 20, 123, 156 and 245
information+CRC positions. Their virtual lengths are 3.54 : 9.84 : 10.91 : 7.70,
and the allocation is CRC-3, CRC-10, CRC-11 and CRC-8. The allocation is worked
out offline. The hardware only needs the result, which appears as parameters.

This repository holds synthesizable SystemVerilog for the **full-module,
single-frame** version of such a decoder. The design follows the
architecture published by Zhou, Liang, Li, Zhang, You and Zhang ("Segmented
Successive Cancellation List Polar Decoding with Tailored CRC"). It adds a
controller and several details of its own, which are listed below.

## Default configuration

| quantity | value |
|---|---|
| code length N | 1024 |
| data bits K, CRC bits m | 512, 32 (K+m = 544 information positions) |
| segments P | 4 equal code-bit segments of 256 positions |
| list size L | 2 |
| LLR width q | 8 bits: sign, 6 integer, 1 fraction (LSB = 0.5) |
| segment CRCs | CRC-3 `0x5`, CRC-10 `0x327`, CRC-11 `0x583`, CRC-8 `0xA6` |
| mixed nodes | N − L + (L−1)N/P = 1278 |
| LLR register bits | 1278 × 8 = 10224 |

CRC polynomials use Koopman notation. The hex value holds the coefficients
of x^W down to x^1, and the +1 term is implicit. So `0x9` is x⁴+x+1, and the
full generator is `{POLY, 1'b1}`.

The information set (which positions carry information or CRC bits) is
**not** fixed in hardware. It is the input `info_mask`. The testbenches
build it from the binary-erasure-channel construction with erasure
probability 0.5: I(2i−1) = I(i)², I(2i) = 2I(i) − I(i)², keeping the K+m
largest. That construction gives the segment counts 20/123/156/245 quoted
above. Inside segment j, the last `CRC_LEN[j]` information positions carry
the CRC of that segment's data bits, most significant remainder bit first.

## How a frame is decoded

The decoder is a tree successive-cancellation decoder with a list of L
paths. Stage d of the tree (d = 1..n, n = log2 N) holds N/2^d LLRs. It is
computed from stage d−1 by N/2^d mixed nodes in parallel. The schedule runs
**one stage per clock**:

* Leaf 0 needs stages 1..n (n cycles).
* Leaf i > 0 needs stages n − tz(i) .. n, where tz is the number of trailing
  zeros. Its node at stage n − tz(i) is a right child, so it uses the g
  update. The stages below it are left children and use f.
* The leaf is decided in the same cycle as its stage-n LLR. In total the
  LLR work of a frame takes 2N − 2 cycles.

At each leaf:

* **Frozen position:** every path takes bit 0. Its metric grows by |LLR| if
  the LLR is negative.
* **Information position (not the last of its segment):** each path is
  extended with 0 and with 1, giving 2L candidates. The list core keeps the
  L with the smallest penalty.

  The penalty is the path metric written with the opposite sign: a bit that
  disagrees with its LLR's hard decision adds |LLR|. "Largest likelihood
  metric" and "smallest penalty" are the same ordering.

  The winners are written into the per-path state: LLR registers, partial
  sums and decided bits. This goes through input 0 of the update
  multiplexer.
* **Last position of a segment:** the list is not pruned. All 2L extensions
  go to the CRC stage.

  Lane l of the segment's CRC detector checks the two extensions of path l,
  one after the other, one bit per clock. Each check covers the segment's
  K_j information and CRC bits.

  The comparator then picks the passing candidate with the smallest penalty.
  It is written back as the **single** path that the next segment starts
  from, through input 1 of the update multiplexer. If no candidate passes,
  the frame ends with `out_ok = 0`, and `out_seg` tells how many segments
  had passed.

Because every segment starts from one path, any tree node that spans whole
segments (stages 1..log2 P) only ever needs one copy. Only stages
log2 P + 1 .. n are built once per path. That is where the node count
N − L + (L−1)N/P comes from.

### Latency and overlap

A segment boundary j < P costs 2·K_j + 3 cycles:

* K_j shift cycles for each of the two candidates per lane (2·K_j in all);
* one sample cycle after each candidate's check (2 in all);
* one result cycle.

The last segment is handled differently. The CRC stage keeps its own copy of
the candidates' decided bits, so the next frame can start as soon as the
last leaf is reached. Its segment-1 decoding then runs while the previous
frame's last CRC is still being checked. If the CRC stage is still busy when
the new frame reaches a segment end, the controller stalls until it is free.

From the edge that accepts `start` to the edge at which `out_valid` is
sampled, an isolated frame takes

    2N − 2  +  Σ_{j<P} (2·K_j + 3)  +  2·K_P + 5

cycles. With the defaults and the BEC construction this is
2046 + 43 + 249 + 315 + 495 = **3148 cycles**. Of these, 2·(20+123+156) =
598 cycles are CRC checking of segments 1–3. That is exactly the gap
between the published FPGA latencies of the segmented decoder (3253) and
of the plain CA-SCL decoder (2655). Having each lane check its path's two
candidates serially is what reproduces that figure.

## Blocks

| file | block | what it does |
|---|---|---|
| `rtl/tca_pkg.sv` | package | default sizes, CRC lengths and polynomials, metric width |
| `rtl/mn.sv` | mixed node | one f or g LLR update |
| `rtl/mn_array.sv` | stages 1..n | all mixed nodes and their LLR registers; stages 1..log2 P shared by all paths |
| `rtl/usum.sv` | partial sums (U_SUM) | re-encoded left-sibling bits per stage and path, updated by an XOR chain in one cycle |
| `rtl/path_memory.sv` | decided bits ("Memory") | K+m bits per path, copied from the parent path on each update |
| `rtl/list_core.sv` | list core (LC) | L best of 2L candidates |
| `rtl/crc_detector.sv` | CRC_j | serial LFSR, pass when the remainder is zero |
| `rtl/cand_comparator.sv` | comparator C | best passing candidate |
| `rtl/crc_bank.sv` | CRC stage | candidate copy, demultiplexer, CRC_1..CRC_P × L lanes, multiplexer, comparator |
| `rtl/tca_scl_decoder.sv` | top | controller, candidate metrics, update multiplexer |

### Mixed node arithmetic

The node works on LLRs:

    f(a,b) = max*(a+b, 0) − max*(a, b)
    g(a,b,u) = b + (1−2u)·a

Here max*(x,y) = max(x,y) + ln(1 + e^−|x−y|) (the Jacobi logarithm). This
is the log-likelihood-pair update of the source design, rewritten for the
difference of the pair. On the 0.5-LSB grid the correction term rounds to
1 LSB when |x−y| ≤ 2 LSB and to 0 otherwise. Results saturate to 8 bits.
The testbench checks f against the exact real-valued box-plus to within
0.75 (1.5 LSB).

### Tree order

The tree is in natural order. Node j of stage d combines entries j and
j + N/2^d of its parent. This corresponds to the encoder x = u·F^{⊗n}
without the bit-reversal permutation. The bit-reversed form of the code
only permutes the channel LLRs before they reach `ch_llr`.

### Partial sums

When a node completes, its re-encoded bits are {left ⊕ right, right}, upper
half first. For each stage, `usum` keeps the last completed left node, which
is the operand of the g updates of its right sibling. It is stored at the
same addresses (N/2^d + j) as the LLRs.

## Top-level interface (`tca_scl_decoder`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset of the control state |
| `start` | in | 1 | begin a frame; accepted when `ready` |
| `ch_llr` | in | N × Q | channel LLRs, signed, LSB = 0.5; hold until the frame's last leaf |
| `info_mask` | in | N | 1 where the position carries an information or CRC bit; hold likewise |
| `ready` | out | 1 | idle, can accept `start` |
| `out_valid` | out | 1 | one-cycle result strobe |
| `out_ok` | out | 1 | every segment CRC passed |
| `out_seg` | out | log2 P + 1 | number of segments that passed |
| `out_bits` | out | K+m | information and CRC bits in decoding order (for a failed frame: path 0's bits so far) |

Parameters: `N, K, M, L, P, Q` and the arrays `CRC_LEN[P]`, `CRC_POLY[P]`.
Any power-of-two N and P with N/P ≥ 2 and L ≥ 2 elaborate. Every segment
must hold at least one information position, and at least as many as its
CRC length. If P changes, both CRC arrays must be overridden as well.

## Departures from the source design and open points

Where the source is silent, this design makes its own choices:

* The controller and its schedule (one stage per cycle, decision in the
  stage-n cycle). The CRC stage's sample and result cycles.
* The correction term of max* and the saturation.
* Path duplication by whole-register copy.
* Tie-breaking toward the lower candidate index.
* The position of the CRC bits inside a segment.
* The information set supplied as an input.

The source employs a *distributed sorter* from earlier work as its list
core, without describing it. Here the list core is a plain rank selection
((2L)² comparators, combinational).

At the last bit of a segment, the source says the bit "is directly chosen
as 0 or 1 for each path without decoding". Here both values are kept as
above, but the bit's LLR is still computed so that the comparator has a
complete metric.

The CRC stage's private copy of the candidate bits adds L·(K+m) =
1088 register bits that the source's memory count does not include. The
copy is what lets the last segment's check overlap the next frame, as the
single-frame schedule requires.

Two formulas in the source do not agree with their own results, and the
RTL follows the results:

* The shared-stage node count is written as Σ N/2^(i−1), but its stated
  result N − N/P needs N/2^i.
* The single-frame latency increase is written as 2L·ΣT_i. With T_i the
  segment's information length this is twice the published FPGA figure;
  L lanes of two serial checks each match that figure.

The latency here (3148 cycles) is lower than the published FPGA figure
(3253) because the stage-n computation and the decision share one cycle.

Not built:

* The **folded** variant, which time-multiplexes a √N-sized sub-tree.
* The **double-frame** schedule, which interleaves two frames so that one
  decodes while the other is checked.
* **HARQ** retransmission with MRC combining of a failed segment. The
  source does not define which transmitted symbols make up a retransmitted
  segment, because segments are defined on u, not on the codeword.
* The transmitter (CRC insertion and polar encoding). A behavioural version
  lives in the testbench include.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=… failures=…` and has a cycle watchdog.

| testbench | checks |
|---|---|
| `tb_mn` | f/g against an independent min-sum-plus-correction formulation and the exact box-plus |
| `tb_mn_array` | N=16, two paths with random copying: every leaf LLR against a recursive SC reference |
| `tb_usum` | stored partial sums against the polar transform of the decided bits |
| `tb_path_memory`, `tb_list_core`, `tb_cand_comparator` | against reference arrays / sorting |
| `tb_crc_detector` | CRC-8 words from polynomial long division pass; single bit flips fail |
| `tb_crc_bank` | survivor choice and the 2·K_j + 3 cycle count |
| `tb_tca_scl_decoder` | (64,36) code, m=8, P=2 (CRC-5 `0x12`, CRC-3 `0x5`), 48 frames: exact decoding and latency of clean frames, back-to-back frames, random-LLR frames, noisy frames at 1.5 dB |
| `tb_tca_full` | the default (1024,512) decoder, no parameter overrides: 8 frames |

The two end-to-end tests count each mechanism and fail if any of them never
occurs:

* early termination;
* a segment survivor written back;
* the last segment's check overlapping a new frame;
* a stall on a busy CRC stage, forced by an information set that fills the
  last segment;
* list pruning;
* frozen-bit decisions.

The shared transmitter model is in `tb/tca_tb_common.svh`.

Running a testbench with plain Verilator (from the repository root):

    verilator --binary --timing -Wno-fatal --top-module tb_tca_full \
        -y rtl -Irtl -Itb rtl/tca_pkg.sv tb/tb_tca_full.sv
    ./obj_dir/Vtb_tca_full

The full-size model takes a little over a minute to build and about two
seconds to run.

The testbenches check behaviour and cycle counts. They are not a
frame-error-rate study. At 1.5 dB the (64,36) test usually sees a few frames
whose short CRC-3 accepted a wrong path; this is reported but not counted as
a failure.
