# A mixed-precision, sparsity-aware matrix engine for LLM inference on an HBM FPGA

Decoding one token of a large language model is dominated by matrix-vector
products whose weight matrices are far too large for on-chip memory. Every
weight is used once per token, so speed is set by how fast weights can
stream from DRAM, not by arithmetic. This design is built around that fact.

Weights are stored as 4-bit integers with FP16 scales, optionally pruned with
a log-scale structured sparsity pattern. They stream from 32 HBM ports into
32 vector processing elements (PEs). Each PE consumes exactly what its port
delivers:

- Each port delivers 256 bits per HBM cycle at 280 MHz.
- The compute side runs at half that clock (140 MHz).
- So each PE takes 512 bits per compute cycle: 128 INT4 weights, or 32 FP16
  values when it multiplies the query by cached keys.

The PEs therefore do 4096 FP16×INT4, or 1024 FP16×FP16, multiply-accumulates
per cycle. Sparse matrices carry a small mask and fewer weight beats, so the
same port bandwidth covers more input channels per cycle.

The RTL follows the accelerator of *EdgeLLM: A Highly Efficient CPU-FPGA
Heterogeneous Edge Accelerator for Large Language Models*. It covers the
matrix engine and its memory paths. It does not cover the nonlinear operators
(normalisation, softmax, activation, rotary embedding). Where the RTL departs
from that architecture, or fills in what it leaves open, this document says
so.

```
             AXI-Lite                                  clk (140 MHz)  |  clk_h (280 MHz)
 host ───────────► reg_array ──► operation sequencer (edgellm_top)    |
                                                                      |
 DDR ──axi_rd_dma──► feat_buf ──► vmm_ctrl ◄── wbuf_fifo[p] ◄────────┼── axi_rd_dma[p] ◄── HBM port p
                                    │      (dual-clock, 1 or 2 pops)  |        (p = 0..31)
                                    ▼                                 |
                          sparse_sel[p]  (one per PE)                 |
                                    ▼                                 |
                          gvsa_array: 32 × mp_vec_pe in 2 groups      |
                                    ▼                                 |
 DDR ◄──axi_wr_dma── out_acc (FP16 accumulation, output FIFO)         |
                                                                      |
 DDR ──axi_rd_dma──► dual-clock FIFO ──► 512→256 split ──────────────┼──► axi_wr_dma ──► HBM port KV_PORT
```

## The mixed-precision vector PE (`mp_vec_pe`)

Each PE computes one dot product of length 128 per cycle and multiplies it by
an FP16 scale. It has two modes:

| mode | data lanes | weights | use |
|---|---|---|---|
| 1: FP16×INT4 | 128 FP16 activations | 128 signed INT4 | projection and FFN weights |
| 0: FP16×FP16 | 32 FP16 query values, one per group of four lanes | 32 FP16 keys | attention against the K/V cache |

The key idea is that one 11×4-bit unsigned multiplier per lane serves both
modes.

**MODE 1 (FP16×INT4).** Each lane multiplies the 11-bit mantissa (with hidden
bit) of its activation by the magnitude of its INT4 weight. The lane's
exponent is the activation exponent plus 3.

**MODE 0 (FP16×FP16).** The 11-bit key mantissa is cut into three 4-bit
slices, WT[10:7], WT[6:3] and {WT[2:0],0}. These feed three adjacent lanes
with exponent offsets +8, +4 and +0; the fourth lane of each group carries
zero. The three partial products, once aligned, add up to the full 11×11
product, so MODE 0 uses the same tree as MODE 1.

**Pipeline.** The result is ready 4 cycles after the inputs.

1. Input register.
2. Find the largest lane exponent. Shift every 15-bit product right by its
   distance from that maximum, keeping 3 guard bits. Negate by the XOR of the
   two signs.
3. Sum the 128 signed values in a 19-bit adder tree. Each leaf is first
   shifted right by log2(128) = 7 bits, so the tree cannot overflow. Small
   products lose precision to this; the error is bounded and covered by the
   testbench.
4. Count leading zeros, normalise, multiply by the FP16 scale, and pack an
   FP16 result.

**Rounding and special values.**

- Every shift and the final pack truncate.
- Subnormal inputs count as zero.
- A result beyond FP16 range saturates to infinity.
- Rounding is not specified by the architecture; these rules are this
  design's. The testbench reference model follows the same rules and checks
  the PE bit for bit.

**Mode labels.** The architecture's drawing labels MODE 0 "FFN" and MODE 1
"MHA". The description calls the FFN FP16×INT4 and says MODE 0 splits each
FP16 K/V value over four INT4 lanes. The RTL follows the description: MODE 0
is FP16×FP16.

**Product width.** The drawing prints the product bus as 14 bits per lane. An
11×4 product needs 15 bits, and 15 are kept.

## Log-scale structured sparsity and the weight package

**Sparsity pattern.** Input channels form groups of 8. At sparsity ratio R
(1, 2, 4 or 8), each group keeps exactly 8/R non-zero weights. That gives 0%,
50%, 75% or 87.5% sparsity.

**Packages.** Each output channel's weights are stored as packages, one per
2048 input channels. A package holds, in order:

- one 256-bit **scale** beat with 16 FP16 scales; scale *s* applies to the
  *s*-th run of 128 stored weights,
- the **mask** beats, in one of two encodings:
  - **one-hot:** one bit per input channel, 2048 bits;
  - **address-in-block:** a 3-bit offset inside its group of 8 for each stored
    weight,
- the **weight** beats: 128 INT4 per pair of beats.

| sparsity | R | encoding used in tests | beats: scale + mask + weights | input channels per PE cycle |
|---|---|---|---|---|
| dense | 1 | none | 1 + 0 + 32 = 33 | 128 |
| 50% | 2 | one-hot | 1 + 8 + 16 = 25 | 256 |
| 75% | 4 | address (or one-hot) | 1 + 6 + 8 = 15 (1 + 8 + 8) | 512 |
| 87.5% | 8 | one-hot (or address) | 1 + 8 + 4 = 13 (1 + 3 + 4) | 1024 |

Both encodings work at every R > 1. The CFG register selects the encoding per
operation, so the host can pick whichever package is smaller.

**Departure at 87.5%.** The architecture quotes 1024 mask bits for 87.5%
sparsity with address encoding. Three bits for each of 256 stored weights is
768 bits. This RTL stores 768 bits (3 beats).

**Port assignment.** Output channel *c* lives on HBM port *c* mod 32, so each
PE reads only its own port. A matrix of N outputs is computed as N/32
*output blocks*. Within one port, the packages of a block follow each other,
then the next block's.

**Selection (`sparse_sel`).** The sparse selector takes the activation window
from the feature buffer. That window holds 128·R consecutive channels. For
each stored weight *j* it picks the matching activation:

- group g = j / (8/R), rank k = j mod (8/R);
- with a one-hot mask, it takes the k-th set bit of group g;
- with address encoding, it takes the channel whose 3-bit offset is stored.

The selector is combinational.

## Feature buffer windows (`feat_buf`)

The feature buffer holds one token's activations: 128 rows of 128 FP16 values,
16384 channels. That is enough for the widest FFN input of a 6B model
(13696). DDR writes it 512 bits at a time.

A sparse step at ratio R needs R consecutive rows in one cycle. The rows are
therefore spread over 8 banks by their low three address bits. One read
returns the 8 rows starting at any row, rotated into order, one cycle after
the address. Row addresses wrap modulo 128.

## The grouped vector array (`gvsa_array`)

The 32 PEs form two groups of 16. Operands reach the second group one register
stage after the first, so input wiring only spans one group. This is the
row-by-row movement of a grouped vector systolic array, as opposed to
broadcasting to all PEs. The results of the first group are delayed by one
cycle to line up with the second. The array's latency is 5 cycles.

## Sequencing a product (`vmm_ctrl`)

For each output block, and each package within it, the controller works
through a fixed sequence:

1. Pop the scale beat.
2. Pop the mask beats, if any.
3. Issue 16/R steps, each popping two weight beats from every port FIFO.

Within a package, step *s* reads feature rows FEAT_ROW + 16·package + R·s.

**Stalls.** A step is issued only when every port's FIFO holds the beats it
needs. Otherwise the controller stalls and counts the cycle.

**Output back-pressure.** A new output block is not started while the output
FIFO has 8 or fewer free rows.

**FP16×FP16 mode.** Each port streams two beats per step, holding 32 FP16
values of one cached key. Each step uses 32 query values from a quarter of a
feature row. A query of head size 128 therefore takes 4 steps, and a block
covers 32 keys.

## Two clock domains (`wbuf_fifo`, `edgellm_top`)

- The HBM read engines and the K/V write engine run on `clk_h`.
- The PEs, buffers and DDR engines run on `clk`.
- `clk_h` is twice `clk` in the reference system; the RTL only needs the two
  clocks to be asynchronous.

Each port has a 128-entry Gray-pointer dual-clock FIFO. It is written one beat
per `clk_h` and read up to two beats per `clk`.

Operation starts cross into `clk_h` as toggles through two-flop synchronisers.
The K/V copy's completion returns the same way. The configuration registers
they use hold still during an operation.

## Output accumulation and data layout (`out_acc`, DMAs)

Each PE result is a partial sum for one output channel. `out_acc` adds a
block's partial sums in FP16, with the same truncating adder as the PE.
After the block's last step it writes a row of 32 FP16 values (512 bits) into
a 32-deep FIFO.

The DDR write engine stores these rows in order. An output of N channels for
one token therefore lands as N/32 consecutive 512-bit words. This is the
[channels/32, token, 32] layout the architecture uses for every activation
tensor.

Both DMA engines (`axi_rd_dma`, `axi_wr_dma`) move linear regions:

- AXI4 INCR bursts of up to 16 beats;
- reads keep up to 4 bursts in flight; writes keep one.

## Programming

The host uses an AXI-Lite register file (`reg_array`):

| index | name | meaning |
|---|---|---|
| 0 | CTRL | bit 0 start; bits 3:1 operation |
| 1 | STATUS | bit 0 busy; bit 1 done (sticky) |
| 2 | CFG | bit 0 mode (1 = FP16×INT4); bits 2:1 log2 R; bit 3 encoding (1 = address) |
| 3 | NSTEP | packages of 2048 channels per block, or 32-channel steps in FP16×FP16 mode |
| 4 | NOBLK | output blocks of 32 channels |
| 5 | SCALE | FP16 scale for FP16×FP16 mode |
| 6 | DDR_SRC | DDR source byte address |
| 7 | DDR_DST | DDR result byte address |
| 8 | NBEATS | beats to load or copy |
| 9 | HBM_SRC | HBM byte address of each port's stream |
| 10 | KV_PORT | HBM port for a K/V copy |
| 11 | HBM_DST | HBM byte address for a K/V copy |
| 12 | FEAT_ROW | first feature-buffer row |
| 13 | CYCLES | `clk` cycles of the last operation |

There are three operations:

- **1, load features:** NBEATS 512-bit DDR words go into the feature buffer
  from FEAT_ROW on.
- **2, product:** NOBLK blocks are computed and written to DDR_DST.
- **3, K/V copy:** NBEATS DDR words are split into 256-bit beats and written
  to HBM port KV_PORT at HBM_DST.

Each port streams NOBLK · NSTEP · (package beats) beats from HBM_SRC. In
FP16×FP16 mode it streams NOBLK · NSTEP · 2.

The register map and operation codes are this design's own. The architecture
only says the host writes addresses and operator counts into registers.

## Sizes and what they can run

Everything below is at the default parameters, which are also the simulated
ones:

- TIN = 128 lanes, 32 ports and PEs, 2 groups;
- a 128-row feature buffer;
- a 128-deep weight FIFO per port;
- 33-bit HBM addresses (8 GB).

**6B model.** The FP16×INT4 projections of a 6B model fit:

- Q/O are 4096×4096 and the FFN is 4096↔13696.
- An input of 13696 channels is padded with zero weights to 7 packages of
  2048.
- At 87.5% sparsity a dense-equivalent 4096×4096 matrix streams in about a
  quarter of the dense time.
- The dense weights of 28 blocks total about 2.8 GB, within 8 GB of HBM.

**7B model.** A 7B model with an 11008-wide FFN also fits.

**Attention.** The query × key product runs in FP16×FP16 mode. The K/V cache
is written to HBM by operation 3.

**Not covered.** Softmax, normalisation, activation and rotary embedding have
no RTL here. A complete decoder layer therefore needs those steps done
elsewhere.

**Prefill.** Prompt processing (more than one token) repeats the product per
token, because the feature buffer holds one token.

## Where this RTL departs from or extends the architecture

- MODE 0/1 follow the textual description (see above), not the drawing's
  labels.
- The lane product is 15 bits wide, not 14.
- The 87.5% address mask is 768 bits, not 1024.
- Rounding is truncation throughout; subnormals are zero; overflow saturates.
  Each adder-tree leaf is pre-shifted by 7 bits.
- The architecture does not specify the following; each is this design's
  choice:
  - the number of groups (2);
  - the FIFO, buffer and output depths;
  - T_out = 32;
  - the scale-to-weight assignment (16 scales per package);
  - the port-per-output-channel mapping;
  - the register map;
  - AXI burst lengths.
- Not built:
  - the nonlinear operator unit;
  - the input-data buffer that feeds it;
  - a separate K/V-cache buffer, since K/V data streams through the per-port
    weight FIFOs instead.
- The accelerator's instruction-level features (instruction pipelining,
  dynamic token lengths) belong to host software and are not modelled.

## Verification

Every testbench is self-checking, has a watchdog and ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_mp_vec_pe` | both modes at 128 lanes against a bit-exact reference model and against real arithmetic (accuracy bound); latency of 4 cycles |
| `tb_sparse_sel` | every R and both encodings with random masks and windows |
| `tb_wbuf_fifo` | ordering and no loss across unrelated 3.5 ns / 7.1 ns clocks, single and double pops, full and empty |
| `tb_axi_rd_dma`, `tb_axi_wr_dma` | burst splitting, addresses and data against a memory model with random ready gaps |
| `tb_feat_buf` | every 8-row window start, including wrap-around, and the one-cycle read latency |
| `tb_edgellm_top` | the whole design at default size (see below) |

`tb_edgellm_top` uses behavioural AXI memories (`axi_mem_model`) for DDR and
the 32 HBM ports. It runs these operations:

1. A feature load.
2. Four FP16×INT4 products of 64 outputs × 4096 inputs: dense, 50% one-hot,
   75% address and 87.5% one-hot.
3. A query × 32 keys FP16×FP16 product.
4. A 40-block FP16×FP16 product against a DDR that is deliberately slowed.
5. A K/V copy.

Results are compared with real-valued products, with a tolerance for
truncation.

The test counts weight-FIFO stalls, double pops, each sparsity ratio and
encoding, mode switches, output back-pressure and K/V writes. It fails if any
of these never happened.

The test also measures operation length. A dense product of two blocks of
two packages each (132 beats per port) takes about 105 cycles; at full rate
it would take 66 cycles plus pipeline latency.

It runs in about a second.

To simulate with Verilator (5.x), for example the top:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_edgellm_top \
  rtl/edgellm_pkg.sv rtl/*.sv tb/axi_mem_model.sv tb/tb_edgellm_top.sv -o sim
./obj_dir/sim +verilator+rand+reset+2
```

The other testbenches need the package, their module and, for the DMAs,
`tb/axi_mem_model.sv`.

## Files

- `rtl/edgellm_pkg.sv`: shared constants, mode and encoding enums, FP16 adder.
- `rtl/mp_vec_pe.sv`: mixed-precision vector PE.
- `rtl/gvsa_array.sv`: the grouped array of PEs.
- `rtl/sparse_sel.sv`: sparse activation selector.
- `rtl/feat_buf.sv`: banked feature buffer.
- `rtl/wbuf_fifo.sv`: per-port dual-clock weight FIFO.
- `rtl/vmm_ctrl.sv`: product sequencer.
- `rtl/out_acc.sv`: output accumulation and FIFO.
- `rtl/axi_rd_dma.sv`, `rtl/axi_wr_dma.sv`: AXI4 DMA engines.
- `rtl/reg_array.sv`: AXI-Lite registers.
- `rtl/edgellm_top.sv`: top level and operation sequencer.
- `tb/`: the testbenches above and the AXI memory model.
