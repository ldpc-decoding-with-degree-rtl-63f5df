# Weighted RCQ layered LDPC decoder

A low-bit-width LDPC decoder does well with non-uniform quantization. Messages
from the check nodes travel as a few bits, for example 4 bits. Each variable
node turns them back into wider numbers (*reconstruction*, R), does the sums at
full width (*computation*), and quantizes the result for the check nodes
(*quantization*, Q). This is the reconstruction-computation-quantization (RCQ)
idea. A plain RCQ decoder uses a different Q/R pair for every layer and
iteration, and storing and distributing all those tables costs hardware.

The *weighted* RCQ (W-RCQ) decoder keeps only a few Q/R pairs, for example one
to three, each used for several iterations. The adaptation the many tables
used to provide now comes from scalar weights. After reconstruction, every
check-to-variable (C2V) message is adjusted by a weight β. The weight depends
on the iteration and on the degrees of the two nodes the edge joins, so edges
with the same (check degree, variable degree) share one weight. The weights
are trained offline by a neural network; the hardware only stores them. With
offset weights this is a W-OMS-RCQ decoder; with multiplicative weights it is a
W-NMS-RCQ decoder.

This RTL implements such a decoder for quasi-cyclic (QC) LDPC codes with a
layered schedule. The default configuration is the 4-bit W-OMS-RCQ decoder with
(b_c, b_v) = (4, 8). It decodes a rate-8/9 code of length 9472 with 8192
information bits. All variable nodes of that code have degree 4, and its check
nodes have degree 29 or 30. The decoder runs at most 10 iterations and uses one
Q/R pair.

## Messages and widths

| symbol | width (default) | meaning |
|---|---|---|
| `b_v` (`B_V`) | 8 | posterior `l_v` and variable-to-check (V2C) messages, two's complement |
| `b_c` (`B_C`) | 4 | C2V messages and quantized V2C messages: `[sign, magnitude index]` |
| β | `b_v` | weight per (iteration set, check-degree class, variable-degree class) |
| τ_j | `b_v − 1` | thresholds of a Q/R pair, j = 0 … 2^(b_c−1)−1, τ_0 = 0 |

Sums saturate symmetrically to ±(2^(b_v−1) − 1).

## What one layer does

A layer is one block row of the QC base matrix. Each non-zero block of the
matrix is a Z×Z *circulant*: the identity rotated by a shift s. Check j of the
block row meets variable (j + s) mod Z of the block column. The datapath has Z
lanes, and each lane holds one variable-node (VN) unit and one check-node (CN)
unit. It works on one circulant per clock cycle. For layer m, at iteration t,
with circulants k = 0 … deg(m)−1:

**Phase VC** (deg(m) cycles). The posterior block of circulant k's column is
read and rotated left by s, which puts each value on the lane of the check that
uses it. Each lane then computes:

    v2c = sat( l − R'_{t−1}(u_old) )      u_old = stored C2V of this edge, 0 in iteration 0
    q   = Q_t(v2c)                        b_c bits, sent to the CN lane
    V2C buffer[k] ← v2c

The CN lane keeps a running record over the layer's edges. It holds the
smallest magnitude index (min1), the second smallest (min2), the edge that gave
min1 (pos1), and the XOR of all signs.

**Phase VN update, "CV"** (deg(m) cycles). For each circulant k, the V2C buffer
word is read back and each lane computes:

    u_new = [ sign_xor ^ sign(v2c_k) , (k == pos1) ? min2 : min1 ]
    C2V memory[m,k] ← u_new               b_c bits per edge
    l     = sat( v2c + R'_t(u_new) )

The new posteriors are rotated back by Z − s and written to the posterior
memory.

One drain cycle follows, so that the next layer reads the posteriors this
layer has just written.

The subtraction has one subtle point. In a layered decoder the term subtracted
from the posterior must equal the term added one iteration earlier. That term
was reconstructed with the *previous* iteration's Q/R pair and weighted with the
previous iteration's weight. The VN unit therefore takes two threshold tables
(`tau_prev`, `tau_cur`) and two weights (`beta_prev`, `beta_cur`). The
configuration memory supplies them for iteration t−1 and iteration t. Because
the C2V memory keeps only b_c bits per edge, this recomputation is exact.

Taking the minimum on the 4-bit indices rather than on the wide values is
valid because Q is monotone. The smallest index belongs to the smallest
magnitude.

## Quantizer and reconstruction

A Q/R pair is defined by its thresholds. In the power-function form

    τ_j = C · ( j / 2^(b_c−1) )^γ ,   j = 0 … 2^(b_c−1) − 1

C sets the largest magnitude and γ the non-uniformity (γ = 1 is uniform). Q
maps a magnitude |x| to the index j with τ_j ≤ |x| < τ_(j+1), or to the top
index when |x| ≥ τ_max. The sign bit is 1 for x < 0. R maps index d back to
τ_d with the sign restored. Q and R therefore share one table per pair.

The hardware does not compute powers. Thresholds are loaded as integers on
whatever LLR grid the channel LLRs use. The testbenches use 2 fractional bits
(LSB = 0.25) and round τ_j·4:

| pair | thresholds τ_0 … τ_max (LSB = 0.25) |
|---|---|
| 4-bit, C = 10, γ = 1.7 (default decoder) | 0 1 4 8 12 18 25 32 |
| 3-bit, C = 3, γ = 1.3 | 0 2 5 8 |
| 3-bit, C = 5, γ = 1.3 | 0 3 8 14 |
| 3-bit, C = 7, γ = 1.3 | 0 5 11 19 |

Q counts how many of τ_1 … τ_max the magnitude reaches. This equals the
interval rule for any non-decreasing table.

## Weights

After reconstruction to magnitude r = τ_d, the weight is applied:

* offset mode (W-OMS-RCQ, `nms_mode = 0`): r' = max(0, r − β). β is an
  unsigned offset on the LLR grid.
* multiplicative mode (W-NMS-RCQ, `nms_mode = 1`): r' = min(2^(b_v−1)−1,
  round(r·β / 2^(b_v−1))). β is unsigned Q1.(b_v−1), so 128 means 1.0 at
  b_v = 8.

The weight table is indexed by weight set s, check-degree class rc and
variable-degree class cc. A *class* is an index assigned when loading. In the
default code, layers with degree 29 and 30 are classes 0 and 1, and all
columns are class 0. This is the (check degree, variable degree) sharing. The
other node-degree sharings fit the same table:

* a check-degree-only weight is one value repeated over cc;
* a variable-degree-only weight is one value repeated over rc;
* a β_dc + α_dv pair is one offset entry;
* a β_dc · α_dv pair is one multiplicative entry.

Iteration t uses weight set min(t, `share_from`). With `share_from` below the
iteration limit, the later iterations share one set. This is the "hybrid"
arrangement: distinct weights for the first iterations and a single set after
them.

## Stopping

After the last layer of each iteration, a check pass reads every circulant
again. It rotates the hard decisions (posterior sign bits) onto the check lanes
and XORs them per layer. Decoding stops when no parity fails, or when the
iteration limit `max_iter` (at most `IT_MAX`) is reached. `converged` tells
which of the two happened.

## Choosing a rate

A rate-compatible protograph code is built so that the matrix of each higher
rate is the top-left part of one base matrix: lowering the rate appends rows
(and the new parity columns they introduce). The layer count in `CFG_CTRL`
makes the decoder process, and check, only the first L block rows. Columns that
no used row touches keep their channel LLR. Loading the tables of one base
matrix once and changing L therefore switches between rates; the weights and
degree classes can be reloaded per rate as well. A value of 0, or one above
`MB`, selects all layers.

## Timing

One clock per circulant in each of the three passes:

    cycles(start → done) = 1 + iterations × ( Σ_m (3·deg(m) + 1) + 2 )

where the sum runs over the layers in use.

For the default code, Σ deg = 148 (2×29 + 3×30). That gives 451 cycles per
iteration and 4511 cycles for 10 iterations. Loading takes NB = 37 cycles for
the LLRs, and reading back takes 37 cycles plus 1 cycle of latency.

## Interface of `wrcq_decoder`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `cfg_we`, `cfg_addr`, `cfg_wdata[31:0]` | in | table write, one word per cycle (map below) |
| `llr_we`, `llr_col`, `llr_data[Z][B_V]` | in | write channel LLRs of one block column (idle only) |
| `start` | in | one-cycle pulse starts decoding |
| `busy`, `done`, `converged`, `iters_used` | out | status; `done` pulses for one cycle |
| `hd_re`, `hd_col` | in | read one block column (idle only) |
| `hd_data[Z]`, `post_data[Z][B_V]` | out | hard decisions (1 = negative LLR) and posteriors, one cycle after `hd_re` |

`cfg_addr` is the struct `{cfg_table_e tbl; logic [12:0] index}` from
`wrcq_pkg`:

| `tbl` | index | data |
|---|---|---|
| `CFG_LAYER_DEG` | m | circulants in layer m (≥ 2) |
| `CFG_EDGE` | m·DC_MAX + k | `[31:16]` block column, `[15:0]` shift (< Z) |
| `CFG_ROW_CLASS` | m | check-degree class of layer m |
| `CFG_COL_CLASS` | n | variable-degree class of block column n |
| `CFG_WEIGHT` | (s·NRC + rc)·NCC + cc | β |
| `CFG_THRESH` | q·2^(b_c−1) + j | τ_j of pair q (j = 0 is ignored) |
| `CFG_QSEL` | t | pair used in iteration t |
| `CFG_CTRL` | – | `[0]` multiplicative mode, `[15:8]` max iterations, `[23:16]` `share_from`, `[31:24]` layers in use (0 = all) |

After reset, every table is zero, the iteration limit is `IT_MAX`,
`share_from` = `IT_MAX` and all `MB` layers are in use.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `Z` | 256 | circulant size |
| `MB`, `NB` | 5, 37 | block rows (layers) and block columns |
| `DC_MAX` | 30 | largest number of circulants in a layer |
| `IT_MAX` | 10 | largest iteration limit, weight sets, pair-selection entries |
| `B_V`, `B_C` | 8, 4 | b_v and b_c |
| `NQ` | 3 | Q/R pairs held |
| `NRC`, `NCC` | 2, 1 | check- and variable-degree classes |

The code dimensions follow from the published code: 9472 = 37·256 and
1280 = 5·256. Its degree profile gives two block rows of 29 circulants and three
of 30. The parity-check matrix itself is loaded at run time.

## Files

| file | content |
|---|---|
| `rtl/wrcq_pkg.sv` | defaults, configuration map, phase enum |
| `rtl/wrcq_decoder.sv` | top: lanes, memories, rotators, wiring |
| `rtl/wrcq_ctrl.sv` | layer/phase/iteration sequencer and stop decision |
| `rtl/wrcq_cfg_mem.sv` | weights, thresholds, pair selection, code tables, control |
| `rtl/vn_unit.sv` | one VN lane (R, subtract, Q; R, weight, add) |
| `rtl/rcq_quantizer.sv`, `rtl/rcq_reconstruct.sv` | Q and R with weighting |
| `rtl/cn_min_unit.sv` | one CN lane (min1/min2/pos1/sign) |
| `rtl/cyclic_shifter.sv` | Z-lane rotator for any Z |
| `rtl/msg_ram.sv` | synchronous RAM for posteriors, C2V messages, V2C buffer |
| `rtl/parity_check.sv` | per-layer parity of hard decisions |
| `tb/wrcq_ref_pkg.sv` | bit-exact reference model, test-code and channel helpers |
| `tb/tb_*.sv` | self-checking testbenches |

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops. A watchdog
ends a testbench that hangs. For example:

    verilator --binary --timing --assert -Irtl -Itb -y rtl \
      rtl/wrcq_pkg.sv tb/wrcq_ref_pkg.sv tb/tb_wrcq_decoder.sv \
      --top-module tb_wrcq_decoder -Mdir obj && ./obj/Vtb_wrcq_decoder

Unit testbenches need only `rtl/wrcq_pkg.sv` and their own file, with `-y rtl`.

* `tb_wrcq_decoder` is the end-to-end test at reduced size: Z = 16, 4 layers,
  12 columns. It compares every posterior, the iteration count, the converged
  flag and the cycle count with the reference model, over frames in offset
  mode, multiplicative mode with a pair switch and shared weights, and offset
  mode with large offsets and a lower iteration limit. It counts early stops,
  limit stops, saturation, the ReLU floor, the top quantizer index, pair
  switches and shared-weight iterations, and fails if any of them never
  happens.
* `tb_wrcq_decoder_full` runs the same comparison with every parameter at its
  default, on two frames of a code with the default degree profile.
* `tb_wrcq_3bit` runs the 3-bit decoder: `B_C = 3`, three pairs (C = 3, 5, 7,
  γ = 1.3) used in iterations 1–6, 7–8 and 9–10, then the two-pair variant
  (C = 3 in iterations 1–7, C = 5 in iterations 8–10).
* `tb_wrcq_rate_compatible` runs the size of the k = 1032 rate-compatible
  code below (`Z = 129`, 16 × 24 blocks, `B_V = 10`, 8 × 7 degree classes)
  in multiplicative mode with two pairs (C = 7, γ = 1.7 in iterations 1–7;
  C = 10, γ = 2.3 in iterations 8–10). It decodes frames at rates 8/9, 2/3, 1/2
  and 1/3 by using 1, 4, 8 and 16 layers of one base matrix.
* The unit testbenches compare each block against arithmetic written
  independently in the testbench. Quantizer and reconstruction are checked
  exhaustively; the rotator is checked at every shift for Z = 256 and Z = 129.

The test codes use random shifts with the right degree profile, because the
published parity-check matrix is not reproduced here. The tests therefore
establish that the decoder computes exactly the W-RCQ recursion, not
error-rate figures for a particular code.

## Where this design makes its own choices

* **Architecture.** Circulant-serial processing with Z lanes, the VC/CV
  phases, the drain cycles, the separate parity pass and the memory layout are
  choices of this RTL. They are not a reproduction of any published FPGA
  implementation, so resource use will differ.
* **Old-message subtraction.** It uses the previous iteration's pair *and*
  weight (see above). A block diagram drawn with the weight on the add path
  only would leave the posterior with a residue of the weight.
* **Offset.** It is applied as a ReLU on the reconstructed magnitude, so an
  offset never flips a sign.
* **R*(d).** It is taken as τ_d with τ_j = C·(j/2^(b_c−1))^γ. A variant
  with denominator 2^(b_c) − 1 also appears in the literature; here both Q and
  R use the same table, as the shared-table description requires.
* **Number formats.** The LLR grid, the Q1.(b_v−1) multiplicative weight,
  round-half-up and symmetric saturation are all choices of this design.
* **Rate selection.** Picking a rate by the number of leading block rows
  assumes the higher-rate matrices are the top rows of the base matrix, as in
  protograph-raptor-like codes, whose extension rows are appended below.
* **Tables.** The code, weights and thresholds are loaded at run time rather
  than fixed. One netlist therefore covers any code of the configured size,
  and both the 1-pair and 3-pair decoders of a given b_c.

## Other codes

* The 3-bit decoder needs `B_C = 3`.
* A rate-compatible protograph-raptor-like code with k = 1032 was used with a
  4-bit W-NMS-RCQ decoder with b_v = 10. Its full matrix has 16 × 24
  circulants of size 129, check degrees from 3 to 19, and 8 check-degree and 7
  variable-degree classes. It needs `Z = 129, MB = 16, NB = 24, DC_MAX = 19,
  B_V = 10, NRC = 8, NCC = 7`, and the layer count selects the rate. Those
  circulant counts are inferred from k = 1032 and the rate range, not taken
  from a published matrix. Weights here are shared by node degree and can be
  reloaded per rate. A single weight set for all rates with one weight per
  base-matrix position, the other option studied for this code, would need a
  weight table indexed by edge; it is not built.
* Flooding-schedule decoders, such as the floating-point neural decoders used
  to study weight sharing, are outside this layered design.
