# A hybrid Spatial/Winograd CNN accelerator in SystemVerilog

Convolution layers can be computed in two ways. Direct ("Spatial")
convolution multiplies every kernel tap with every input pixel. It works for
any kernel size and stride. Winograd's minimal filtering F(m x m, 3 x 3)
produces an m x m output tile from a (m+2) x (m+2) input tile with
(m+2)^2 multiplications instead of 9 m^2. For m = 4 that is 36 instead of
144, a 4x saving, but it only applies to stride-1 3 x 3 kernels (or kernels
cut into 3 x 3 pieces).

This design puts both methods on one array of multipliers. A PE made of
PT x PT small GEMM cores runs in one of two modes:

* **Winograd mode.** Each core takes one element of a transformed
  PT x PT input tile (PT = m + 2).
* **Spatial mode.** Each core row takes one output-channel vector and each
  core column one input-channel vector.

Only the small adder networks in front of and behind the PE differ between
the modes. These are the *load manager* (input transform or broadcast) and
the *save manager* (output transform or row sum). The mode is chosen per
layer by one instruction bit.

Each layer's output is written to memory in the layout the *next* layer
wants. So a network can switch between modes from layer to layer at no extra
cost.

The accelerator is instruction driven and folded: one instance runs every
layer in turn. Four functional modules run concurrently and pass ping-pong
buffer halves to each other through token FIFOs:

| Module   | Moves                                    |
|----------|------------------------------------------|
| LOAD_INP | input feature maps into the input buffer |
| LOAD_WGT | weights into the weight buffer           |
| COMP     | the hybrid PE                            |
| SAVE     | results back to memory                   |

The default configuration is PI = PO = 4, PT = 6, which is F(4x4, 3x3). The
top level holds NI = 6 independent instances.

## Block structure

```
 hybriddnn_top ── NI x hdnn_accel
   hdnn_accel
     ctrl ─────────── fetch 128-bit instructions, 4 dispatch queues (sync_fifo)
     load_inp ─────── memory -> in_buffer   (PT*PT banks of PI bytes, sdp_ram)
     load_wgt ─────── memory -> wgt_buffer  (PT*PT banks of PI*PO bytes)
     comp
       load_manager ─ B^T d B (Winograd) or channel broadcast (Spatial)
       pe ─────────── PT*PT gemm_core (PI x PO MACs each) + accumulators
       save_manager ─ A^T R A (Winograd) or row sum (Spatial)
       accumulation buffer, bias buffer, quantiser -> out_buffer
     save ─────────── out_buffer -> memory, 4 layout transforms, 2x2 max pool
     6 x sync_fifo ── tokens: inp ready/free, wgt ready/free, out ready/free
```

Each file in `rtl/` holds one module or package. The file's opening comment
describes its interface and timing. `hdnn_pkg` holds the following:

* sizes (`PI_DEF`, `PO_DEF`, `PT_DEF`, 8-bit data, 12-bit PE features, 32-bit
  accumulators);
* opcodes;
* the three instruction layouts, as packed structs;
* the dependency-flag bit numbers;
* the Winograd matrices B^T and A^T, for PT = 6 and PT = 4.

## The PE and its two modes

`gemm_core` is a PI x PO multiply array:
`psum[o] = sum_p feat[p] * wgt[o][p]`. Features are 12-bit and weights
8-bit. `pe` holds PT x PT such cores. Each core has PO 32-bit accumulators.
The accumulators are cleared by the first beat of a run and advance by one
beat per cycle.

### Winograd mode

The load manager receives a PT x PT tile of input words. Each word holds PI
channels. It computes V = B^T d B for every channel and saturates V to 12
bits. Core (i, j) gets V[i][j].

The weight buffer holds U = G g G^T. U is transformed off-line, so its banks
hold pre-transformed weights. Core (i, j) therefore forms the element-wise
product U (.) V, summed over its PI input channels. Its accumulator also
sums over all input-channel groups.

The save manager then computes Y = A^T R A per output channel. This gives
an m x m output tile of PO channels per cycle.

### Spatial mode

The load manager broadcasts PT input-channel vectors of one pixel. Column j
of the core array gets vector j, and every core row gets the same
broadcast. Core (i, j) holds the weights from input vector j to output
vector i. The save manager sums each core row, giving PT output-channel
vectors of one pixel per cycle.

The saturation of V to 12 bits follows the 12-bit PE width. With 8-bit
inputs B^T d B can reach about 13 bits for PT = 6, so very large inputs are
clipped. The reference model in the testbenches clips the same way.

## Input buffer: one bank layout that serves both modes

This is the least obvious part of the design. The input buffer has PT x PT
banks, one read port each. In Winograd mode COMP must read any PT x PT
window whose origin is a multiple of m (not of PT), with no bank conflict.
In Spatial mode it must read PT channel vectors of one pixel.

Let NWC = ceil(Wp / PT), where Wp is the padded width. CV is the number of
PI-channel vectors and CVG = ceil(CV / PT).

| Mode     | Element                            | Bank               | Word                                   |
|----------|------------------------------------|--------------------|----------------------------------------|
| Winograd | padded row r, column w, vector cv  | (r mod PT, w mod PT) | ((r div PT) * NWC + w div PT) * CV + cv |
| Spatial  | row r, column w, vector g*PT + t   | (t, w mod PT)      | (r * NWC + w div PT) * CVG + g           |

* **Winograd window.** Any PT consecutive rows and columns hit every bank
  exactly once. COMP computes a per-bank address and the load manager
  rotates the banks back into tile order. The rotation is
  (row origin mod PT, column origin mod PT).
* **Winograd edges.** Columns at or beyond the stored width are masked to
  zero.
* **Spatial read.** For output pixel y and tap (u, v), the input column is
  w = y * stride + v. The read takes bank column w mod PT, at the same word,
  from all PT bank rows.

LOAD_INP writes a whole memory beat (PT consecutive columns, or PT
consecutive vectors) to PT banks in one cycle. It inserts zeros for the
padding.

## Memory layouts and the four SAVE transforms

Feature maps in external memory are vectors of PI (PO) channels, in one of
two orders. Addresses are in bytes, KV is the number of channel vectors, and
Wo is the width.

* **WINO order** `((row * KV + kv) * Wo + col) * PO`: columns fastest. One
  beat is PT neighbouring columns, which is what a Winograd tile needs.
* **SPAT order** `((row * Wo + col) * KV + kv) * PO`: channels fastest. One
  beat is PT channel vectors of a pixel.

LOAD handles WINO-to-WINO and SPAT-to-SPAT. SAVE handles all four
transforms between the output buffer and memory:

| Transform | Output-buffer entry                         | Beats per entry                              |
|-----------|---------------------------------------------|----------------------------------------------|
| W2W       | m x m tile of one channel vector            | one beat (m columns) per tile row             |
| W2S       | same                                        | one single-vector beat per pixel             |
| S2S       | PT channel vectors of one pixel             | one beat                                     |
| S2W       | same                                        | one single-vector beat per vector            |

Lanes beyond Wo or KV are masked. With POOL = 2 and a Winograd source, each
m x m tile is reduced by 2 x 2 max pooling to (m/2) x (m/2) before it is
written. Because the transforms sit in SAVE, a layer's output is already in
the layout the next layer's mode needs.

## Instructions

All instructions are 128 bits, little-endian in memory, with the opcode in
bits [2:0]. Opcodes:

| Value | Instruction |
|-------|-------------|
| 0     | LOAD_INP    |
| 1     | LOAD_WGT    |
| 2     | LOAD_BIAS   |
| 3     | COMP        |
| 4     | SAVE        |

CTRL queues LOAD_BIAS with COMP, so biases change in program order with
the computations. Undefined opcodes are counted in `bad_opcodes` and
dropped.

| Layout | Fields, MSB to LSB |
|--------|--------------------|
| LOAD (INP/WGT/BIAS) | SAVE_FENCE[127:115], IW_BLK_NUMBER (rows)[114:105], WINO_OFFSET (first padded row)[104:95], WINO_FLAG[94], PADS[93:90], SIZE[89:60] (INP: {CV, W, H}; WGT/BIAS: entries / vectors), DRAM_BASE[59:28], BUFF_BASE[27:12], BUFF_ID[11:9], DEPT_FLAG[8:3], OPCODE |
| COMP | ACC_LAST[103], ACC_FIRST[102], SHIFT[101:97], RELU[96], OFF_C[95:92], OFF_R[91:88], WINO_FLAG[87], STRIDE[86:84], OC_NUM[83:76], IC_NUM[75:68], OW_NUM[67:58], IW_NUM[57:48], WGT_BASE[47:37], OUT_BASE[36:26], INP_BASE[25:12], BUFF_ID {out, wgt, inp}[11:9], DEPT_FLAG, OPCODE |
| SAVE | OW_BLK[115:106], OC_BLK[105:96], DST_WINO[95], SRC_WINO[94], POOL[93:90], SIZE {KV, Wo}[89:60], DRAM_BASE, BUFF_BASE, BUFF_ID, DEPT_FLAG, OPCODE |

The field names follow the instruction formats this architecture was
published with. The bit positions and widths, the split of fields into
sub-fields, and SAVE_FENCE are this design's own.

One COMP instruction covers one kernel tap (Spatial) or one 3 x 3 kernel
piece (Winograd). OFF_R and OFF_C are the tap or piece offset. COMP loops
over output-channel groups k (OC_NUM), output columns or tiles y (OW_NUM)
and input-channel groups c (IC_NUM), with c innermost. It issues one
(k, y, c) step per cycle through a three-stage pipeline: buffer read, load
manager and PE, save manager.

Partial sums from the different taps or pieces of one output go into a
32-bit accumulation buffer at entry k * OW_NUM + y. ACC_FIRST starts a new
sum and ACC_LAST sends the sum to the output buffer. On the way, the
quantiser computes `relu(sat8((acc >>> SHIFT) + bias))`.

This gives the *kernel decomposition* of large kernels:

* a 5 x 5 kernel becomes four 3 x 3 Winograd pieces, with U zero-padded
  off-line;
* a 7 x 7 kernel becomes nine pieces;
* in Spatial mode any R x R kernel is R^2 taps.

## Synchronisation: tokens, dependency flags and the layer fence

CTRL dispatches in program order into four queues, so each module runs its
own instructions in order. Between modules, six 1-bit token FIFOs carry
"half ready" and "half free" signals:

* LOAD_INP -> COMP and back;
* LOAD_WGT -> COMP and back;
* COMP -> SAVE and back.

DEPT_FLAG says which tokens an instruction waits for before it starts and
which it emits when done.

| Instruction | DEPT_FLAG bits |
|-------------|----------------|
| LOAD_INP, LOAD_WGT, SAVE | [0] wait, [1] emit |
| COMP | [0]/[1] input ready/free, [2]/[3] weight ready/free, [4]/[5] output free/ready |

The instruction generator in the testbenches uses this rule:

* A load waits for a free token only from its third use of a buffer half
  onward, since both halves start free.
* The first COMP on a freshly loaded half waits for its ready token. The
  last COMP on it returns the free token.
* SAVE waits for out-ready and returns out-free.

Every wait then points to an instruction earlier in program order. In-order
dispatch into the queues therefore cannot deadlock.

The token FIFOs order the modules inside a layer. Across layers there is one
more dependency: layer n+1 reads from memory what layer n's SAVE wrote. A
counter of finished SAVE instructions, reset by `start`, forms a *layer
fence*: a LOAD_INP waits until the counter reaches its SAVE_FENCE field.
This fence is this design's own addition. Without it the testbenches
observe wrong results in the second layer.

## Scheduling a layer

For one layer the instruction generator (`tb/tb_hdnn_pkg.sv`, the stand-in
for an off-line compiler) first splits the work into groups:

* **Row groups.** A Winograd group is m output rows, loaded as
  (pieces - 1) * 3 + PT padded rows. A Spatial group is one output row,
  loaded as R input rows.
* **Weight groups.** There are G_K groups of the output channels.

It then emits the instructions in one of two orders:

* **IS (input stationary).** For each row group: LOAD_INP, then for each
  weight group: LOAD_WGT, LOAD_BIAS, the COMPs of all taps or pieces, and
  SAVE.
* **WS (weight stationary).** For each weight group: LOAD_WGT, LOAD_BIAS,
  then for each row group: LOAD_INP, the COMPs, and SAVE.

Halves alternate with a global count of loads and outputs. SAVE's
DRAM_BASE points at the start of the group, so all addresses inside an
instruction are offsets from it.

## Sizes and what fits

All sizes are per instance, at the defaults:

| Buffer | Size |
|--------|------|
| Input buffer | 36 banks x 2048 words (1024 per half) of PI bytes |
| Weight buffer | 36 banks x 1024 entries (512 per half) of PI*PO bytes |
| Output buffer | 2048 entries (1024 per half) of 16 vectors |
| Accumulation buffer | 1024 entries |
| Bias buffer | 512 vectors (256 per half) |

The paper gives the bank counts but not these depths; the depths are this
design's choice.

The limits that matter are:

* input words per bank for one row group: Winograd
  ceil(rows / PT) * ceil(Wp / PT) * CV; Spatial R * ceil(Wp / PT) * CVG;
* weight entries per group: taps * Fk_group * IC_NUM <= 512;
* accumulator entries: Fk_group * OW_NUM <= 1024;
* IC_NUM and OC_NUM <= 255.

With these limits every VGG16 convolution layer fits in Winograd mode with
G_K between 1 and 32. For example, conv1_2 at 224 x 224 x 64 needs
38 x 16 = 608 of 1024 input words. Kernel sizes up to 7 x 7 fit in both
modes.

Fully connected layers run as Spatial layers with a kernel as large as the
input. VGG16's fc6 (7 x 7 x 512 -> 4096) needs 1078 weight entries per
output group. It therefore runs only if its taps are split over several
weight loads that accumulate through ACC_FIRST and ACC_LAST. The
instructions allow this, but the generator does not produce it. An input of
4096 channels (fc7) does not fit, because it needs 1024 vectors and the
10-bit CV field holds at most 1023.

## Verification

Every block has a self-checking testbench in `tb/`. Each one ends by
printing `TB_RESULT checks=N failures=M`. Three support files are shared:

* `ext_mem.sv` is a behavioural external memory with fixed read latency and
  random back-pressure on every port;
* `tb_hdnn_pkg.sv` holds the instruction builders, the generator and an
  independent reference model;
* `tb_comp.sv` and the end-to-end benches use them.

The reference model is a direct convolution for Spatial layers. For
Winograd layers it is A^T [sum U (.) sat12(B^T d B)] A, computed with
random U in the transformed domain, so every result is an exact integer.

The main checks are these:

* **Winograd transforms.** `tb_save_manager` checks the Winograd identity
  against a direct 4 x 4 correlation, with the matrices written out
  independently. `tb_load_manager` checks B^T d B with rotation, masking and
  saturation.
* **Five-layer network.** `tb_hdnn_accel` runs a five-layer network in one
  program. It covers both modes, all four SAVE transforms, IS and WS, 2 x 2
  pooling, 5 x 5 decomposition, padding, stride 2, memory stalls, token
  waits and fence waits. It compares every output byte of every layer. It
  also counts each of these mechanisms and fails if one never occurs.
* **Full configuration.** `tb_hybriddnn_top` runs the default six-instance
  top, with Winograd and Spatial layers on alternate instances.

To run one testbench, for example:

```
verilator --binary --timing -Irtl -Itb rtl/hdnn_pkg.sv tb/tb_hdnn_pkg.sv \
          tb/tb_hdnn_accel.sv --top tb_hdnn_accel -o sim && obj_dir/sim
```

The other modules are found through `-I` by file name.

## Departures and limitations

* **Pooling.** Pooling is implemented only for Winograd-mode outputs, inside
  an m x m tile. A Spatial output-buffer entry holds a single pixel, so a
  2 x 2 window would span several SAVE instructions. That is not supported.
* **Rows past the end.** The last Winograd row group of a layer whose output
  height is not a multiple of m still writes all m rows. These land just
  past the end of the output tensor, so memory there must be spare.
* **Stride.** Stride is supported in Spatial mode only. Winograd is
  stride 1.
* **Channel counts.** Spatial layers assume the input-channel count is a
  multiple of PI * PT and the output-channel count a multiple of PO * PT.
  Shorter groups are zero-filled on load. The testbenches use only full
  groups.
* **Weight transform.** Weights are transformed off-line (U = G g G^T) and
  stored in buffer order. No hardware transforms weights.
* **Memory ports.** Each instance has five separate memory ports:
  valid/ready requests and in-order responses. How the instances share DDR
  and the host interface are outside this RTL.
* **Layer fence.** The fence and the exact bit layout of the instructions
  are this design's own. The published instruction formats give field names
  and order but no widths.
