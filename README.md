# Approximate, compressed-storage DNN training accelerator

This is synthesizable SystemVerilog for a small DNN accelerator that can train
a network on the device itself, for example a client in federated learning.
The design saves energy in two ways, and both can be switched off:

* **Compressed storage.** Activations and weights sit in on-chip SRAM as
  *bfloatX*: 1 sign bit, 8 exponent bits and X−9 mantissa bits. The bits
  that do not fit are simply cut off.
* **Approximate multiplication.** The MAC units multiply the short mantissas
  with a logarithmic approximate multiplier, the *minimally biased
  multiplier* (MBM). Sign and exponent are still handled exactly.
  Accumulation is always exact FP32.

The compute fabric has two parts:

* **A 16×16 weight-stationary systolic array.** It is fed from two compressed
  buffers (IBuf for inputs, WBuf for weights). It writes FP32 results to an
  output buffer, OBuf.
* **A 1-D array of 16 FP32 SIMD cores.** These run the layers that are not
  convolutions and the gradient arithmetic. Instructions come from an
  instruction memory (InMem) and data from a vector memory (VMem).

Each buffer is 64 KB. Each one has its own link to an off-chip DRAM, which is
not part of this RTL.

```
             DRAM side (write port, read port, buffer selector)
     |            |             |              |            |
   WBuf         IBuf          OBuf           InMem        VMem
 (compressed) (compressed)   (FP32)          (64-bit)     (FP32)
     | 16 cols     | 16 rows    ^               |            ^ |
     v             v            | +acc          v            | v
   +-------------------------+  |          +----------------------+
   | 16x16 systolic array    |--+          | SIMD array, 16 lanes |
   | bfloatX x bfloatX (MBM) |             | FP32 ALU per lane    |
   | + FP32 accumulate       |             +----------------------+
   +-------------------------+
        ^ sa_controller (tile commands)
```

## Configurations

Three parameters of `fl_accel_top` select the arithmetic:

* `MANT_W`: the mantissa bits stored in IBuf and WBuf and multiplied in the
  PEs.
* `APPROX`: 1 for the MBM multiplier, 0 for an exact one.
* `BUS_W`: the SRAM word width.

Five configurations are defined. The defaults are C5.

| Config | Storage / multiply format | MANT_W | APPROX | BUS_W | Values per SRAM word |
|--------|---------------------------|--------|--------|-------|----------------------|
| C1 | FP32, exact | 23 | 0 | 64 | 2 |
| C2 | bfloat16, exact | 7 | 0 | 64 | 4 |
| C3 | bfloat16, MBM | 7 | 1 | 64 | 4 |
| C4 | bfloat12, MBM | 3 | 1 | 60 | 5 |
| C5 | bfloat10, MBM (default) | 1 | 1 | 60 | 6 |

The SRAM word width is set per format so that a whole number of compressed
values fits in one word with little or no waste. Capacity does not depend on
the format; it is always 64 KB. At C5 each of IBuf and WBuf holds
16 banks × 546 words × 6 = 52,416 values. At C3 each holds 32,768 values.

## Number formats and compression (`compressed_buffer`)

A value is written into IBuf or WBuf as FP32 and compressed on the way in. The
buffer keeps bits `[31 -: 9+MANT_W]`, which are the sign, the exponent and the
top `MANT_W` mantissa bits. The lower bits are dropped without rounding.

The buffer has 16 banks: one per array row for IBuf, one per array column for
WBuf. Each bank word of `BUS_W` bits packs `ELEMS = BUS_W/(9+MANT_W)` values.
Element 0 is in the low bits.

To feed the array, a stream is started with a word address and a count. It
then delivers one value per bank per cycle, in the order element 0, 1, ...
of word `st_word`, then word `st_word+1`, and so on. The SRAM is read only
when a new word is first needed. `st_rd_strobe` marks each such read. At C5 a
stream of 60 vectors therefore costs 10 SRAM reads per bank rather than 60.
Compressed storage saves access energy this way as well as capacity.

The first value appears 2 cycles after `st_start`.

## The MBM approximate multiplier (`mbm_mant_mult`, `fp_mult`)

This is the least conventional part of the design.

**How MBM works.** Write each operand as a = 2^k1·(1+x1) and b = 2^k2·(1+x2).
Here k is the position of the leading one and x, in [0,1), is the fraction
below it. Mitchell's method uses log2(1+x) ≈ x, which turns the product into
a sum. MBM adds a correction term c to remove most of the bias of that
approximation:

```
P ≈ 2^(k1+k2)   · (1 + x1 + x2 + c)     if x1 + x2 < 1
P ≈ 2^(k1+k2+1) · (x1 + x2 + c/2)       otherwise
```

**The hardware.** `mbm_mant_mult` implements this directly:

1. Two leading-one detectors find k1 and k2.
2. Two left shifters normalise the operands, which gives x1 and x2.
3. One adder forms x1+x2. Its carry selects the case.
4. A second adder adds c or c/2.
5. A final shift by k1+k2 (+1) takes the antilogarithm.

There is no partial-product array. The result is a fixed-point number with
`FW = max(N−1, CFRAC+1)` fraction bits. This keeps c from being lost when the
operands are only 2 bits wide, as they are at C5.

**The value of c.** The correction is c = `C_CORR/2^CFRAC` = 21/256 ≈ 0.082.
This is this design's own choice. It is close to 1/12, the mean Mitchell error
x1·x2 over the region x1+x2 < 1. c is a parameter. Changing it changes only
the constant added in step 4.

**Inside the FP multiplier.** `fp_mult` wraps `mbm_mant_mult` to make a
floating-point multiplier:

* The operands are `1.m` with N = `MANT_W+1` bits, so k1 = k2 = N−1 always.
* The sign is an XOR.
* The exponents are added exactly, with bias 127.
* The approximate mantissa product, which lies in [1,4), is normalised and
  then rounded to nearest-even into an FP32 result.
* With `APPROX=0` the mantissa product is an exact integer multiply.

**Special cases.** `fp_mult` handles them as follows:

* A zero exponent field (zero or subnormal) reads as zero.
* Underflow gives a signed zero.
* Overflow gives infinity.
* NaN is not handled.

**Accuracy at C5.** The mantissa is 1 bit plus the hidden bit, so there are
only four mantissa pairs:

* 1.0×1.0 gives 1+c.
* 1.0×1.5 gives 1.5+c.
* 1.5×1.5 gives 2·(1+c/2) = 2+c, against the exact 2.25.

## Systolic array and PE (`mac_pe`, `systolic_array`)

Each PE holds three registers: a stationary weight, an input, and a partial
sum. Every cycle it computes

```
psum_out <= psum_in + a_in × w      (FP32 adder, product from fp_mult)
a_out    <= a_in
```

Inputs move one PE to the right per cycle. Partial sums move one PE down per
cycle. The weight register loads only while `w_load` is high.

**Weight load.** With `w_load` high for ROWS cycles, the values at `w_top[j]`
shift down column j. The value entered first ends up in the bottom row.
Column j must therefore be fed W[ROWS−1][j] first and W[0][j] last.
`sa_controller` does this by reading WBuf bank j as one stream.

**Streaming.** `in_row[r]` is input element r of one vector per cycle. The
array skews it internally: row r is delayed r cycles. It then de-skews the
output: column j is delayed COLS−1−j cycles. So `out_row[j] = Σ_r in[r]·W[r][j]`
for a whole vector comes out together.

* Latency is ROWS+COLS−1 = 31 cycles from `in_valid` to `out_valid`.
* Throughput is one vector per cycle.
* The sum runs in row order 0..15, starting from +0. The testbenches rely on
  this order to reproduce results bit for bit.

**How training maps onto the array.** All three training steps run as
weight-stationary tiles:

* The forward pass.
* The input-gradient pass, which needs the weights rotated inside each channel
  and transposed across channels.
* The weight-gradient pass.

Any re-ordering of weights is done by the order in which the DRAM side writes
a tile into WBuf. There is no on-chip transpose unit.

## Output accumulation (`output_buffer`)

OBuf has 16 FP32 banks (one per array column) × 1024 words.

* `row_acc = 0`: an output vector is written as it is.
* `row_acc = 1`: the vector is added, with the exact FP32 adder, to what that
  address already holds.

This is how a reduction longer than 16 inputs is split into 16-input tiles
whose partial results build up in OBuf.

The add path is two stages long: read, then add and write. A row may add onto
the row written in the cycle just before it. The new sum is then forwarded
past the SRAM, so one row per cycle is sustained in every case.

The DRAM-side port does single-word reads and writes. The array side wins a
collision, so the DRAM side should stay off OBuf while a tile runs.

## Tile commands (`sa_controller`)

A tile is started with `sa_cmd_valid` while `sa_cmd_ready` is high. The
command is `accel_pkg::sa_cmd_t`, 66 bits, packed MSB first:

| Field | Bits | Meaning |
|-------|------|---------|
| `load_w` | 1 | shift in a new weight tile from WBuf word `w_word` first |
| `w_word` | 16 | WBuf word address of the weight tile (bank j = column j, bottom row first) |
| `i_word` | 16 | IBuf word address of the first input vector |
| `rows` | 16 | number M of input vectors |
| `o_addr` | 16 | OBuf row for output vector 0; vector k goes to `o_addr+k` |
| `acc` | 1 | accumulate onto OBuf instead of overwriting |

**What the controller does.** It streams the weights if `load_w` is set. It
then streams M vectors from IBuf and counts outputs as they leave the array.
`sa_done` pulses 3 cycles after the last output row enters OBuf. The weight
tile stays in the PEs, so later commands with `load_w = 0` reuse it.

**Timing.** A tile of M vectors that reuses the loaded weights takes about
M + 36 cycles. Loading weights adds ROWS + 3 cycles.

## SIMD array (`simd_array`, `simd_alu`, `sram_mem`, `vector_mem`)

Every lane runs the same instruction on its own VMem lane. VMem is 16 lanes ×
1024 FP32 words. The instruction word is `accel_pkg::simd_instr_t`, 64 bits:

```
[63:60] op   [59:50] dst   [49:40] src_a   [39:30] src_b   [29:0] reserved
vmem[dst] <= op(vmem[src_a], vmem[src_b])      in all 16 lanes
```

The operations are:

| Code | Operation | Result |
|------|-----------|--------|
| 0 | NOP | |
| 1 | ADD | a+b |
| 2 | SUB | a−b |
| 3 | MUL | a·b |
| 4 | MAX | larger of a, b |
| 5 | MIN | smaller of a, b |
| 6 | RELU | max(a, 0) |
| 7 | MOV | a |
| 15 | HALT | end of program |

ADD and SUB use the exact FP32 adder. MUL uses the exact FP32 multiplier.

**Programs.** A program is loaded into InMem (8192 × 64-bit words) from the
DRAM side. It is started with `simd_start` and `simd_pc`, and runs until HALT,
when `simd_done` pulses.

**Timing.** The sequencer has no pipeline: fetch, decode, read second operand,
execute and write. An arithmetic instruction takes 4 cycles. A NOP or HALT
takes 2 cycles.

**DRAM access to VMem.** VMem also has a single-word port for the DRAM side.
When the SIMD array uses the same kind of access (read or write) in a cycle,
it has priority. `dram_wr_ready`/`dram_rd_ready` then drop and the DRAM side
must hold its request.

**What is not covered.** This operation set covers element-wise layers, ReLU,
pooling by MAX, and the SGD update w − lr·g, which takes two instructions.
Division and square root, as BatchNorm would need, are not provided.

## Top level and DRAM-side ports (`fl_accel_top`)

**Write port.** One write port reaches every buffer:

* `dram_wr_sel` picks the buffer: 0 IBuf, 1 WBuf, 2 OBuf, 3 InMem, 4 VMem.
* `dram_wr_bank` is the bank or lane.
* `dram_wr_addr` is the word address.
* `dram_wr_elem` is the element within a compressed word.
* `dram_wr_data` carries FP32 in bits [31:0]. For InMem it carries the 64-bit
  instruction.
* A write is taken when `dram_wr_ready` is high. Only VMem ever refuses one.

**Read port.** The read port reaches OBuf and VMem only. Data and
`dram_rd_valid` come one cycle after the read is taken. The DRAM controller
and whatever schedules transfers are outside the design.

**Access-count strobes.** `ibuf_word_rd`/`wbuf_word_rd` pulse once per
compressed SRAM word read. An energy model can count SRAM accesses from
these.

## Simulating

All files are in `rtl/` (design) and `tb/` (testbenches). Compile the package
files first. For example, for the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fl_accel_top \
  rtl/accel_pkg.sv tb/tb_fp_ref_pkg.sv $(ls rtl/*.sv | grep -v accel_pkg) \
  tb/tb_fl_accel_top.sv
./obj_dir/Vtb_fl_accel_top
```

The package files come first, followed by the other design files.

**How the testbenches check results.** Every block has a self-checking
testbench `tb/tb_<module>.sv`. Each prints `TB_RESULT checks=N failures=M`.
The reference model is `tb/tb_fp_ref_pkg.sv`. It works in `real`: it rounds
to FP32 with round-to-nearest-even and flush-to-zero, and it implements the
MBM formula independently of the RTL. Results are compared bit for bit.

**The end-to-end test.** `tb_fl_accel_top` runs at the default parameters
(C5, 16×16, 64 KB buffers). It plays the DRAM side through these steps:

1. Two reduction tiles, the second accumulated onto the first in OBuf.
2. Two tiles that reuse the loaded weights. These check the rate of one
   vector per cycle: 80 and 40 vectors differ by exactly 40 cycles.
3. A move of results into VMem.
4. A SIMD program that uses every operation, while DRAM writes to VMem are
   forced to stall.

It counts each mechanism: weight load, weight reuse, accumulation, truncation,
both MBM cases, and the VMem stall. A failure is counted for any that never
occurred. The run takes well under a minute.

**A full layer.** `tb_workload_conv` runs one training step of a ResNet20
first-stage convolution layer at the default parameters: 16 to 16 channels,
3×3 kernel, 32×32 feature map, one image. The testbench acts as the host that
tiles the layer.

* The forward pass and the input-gradient pass each use nine accumulated
  tiles, one per kernel position, of 1024 input vectors each. In the
  input-gradient pass the kernel is rotated and transposed purely by the order
  in which the tiles are written.
* The weight gradient of one kernel tap is a 1024-long reduction. It runs as
  64 accumulated 16-pixel tiles. The output gradients of 16 pixels form the
  stationary tile, and the input activations are streamed.
* The SGD update runs on the SIMD array.

Every result is compared bit for bit. Each 1024-vector tile takes exactly
1024 + 55 cycles, including the weight load.

**Other configurations.** To simulate another configuration, override
`MANT_W`, `APPROX` and `BUS_W` on `fl_accel_top`. The end-to-end testbench
itself is written for C5. `tb_fp_mult` covers all five multipliers.
`tb_compressed_buffer` covers the C3 and C5 packings.

## Departures from the paper and design choices

**Naming conflict.** The source names the approximate multipliers "MBM-X"
and describes X as the number of truncated mantissa bits. Its configuration
table, however, pairs bfloat16 with MBM-7, bfloat12 with MBM-3 and bfloat10
with MBM-1, where X is the number of mantissa bits kept. This design follows
the table: the multiplier works on exactly the stored `MANT_W` bits.

**Choices where the source is silent.** The following are this design's own
choices:

* The value of c.
* Rounding modes (truncation on compression, nearest-even elsewhere) and
  subnormal flushing.
* The banking of all buffers.
* The input and output skew registers, and loading weights by shifting them
  down the columns.
* The accumulate-on-write OBuf.
* The tile command, the SIMD instruction format and its operation set.
* The DRAM-side port protocol.

**Not included.** These are left out:

* The DRAM and the host that moves data and issues commands.
* On-chip weight rotation and transposition, which is done by write order.
* Division and square root in the SIMD ALU.
* A direct path from OBuf to WBuf. Finished weight gradients leave OBuf
  through the DRAM read port and return through the DRAM write port. The
  block diagram the design follows shows only each buffer's DRAM link.
* Any overlap of weight loading with streaming (no double-buffered weights).
* Energy estimation. Only the SRAM word-read strobes are provided for it.

**Workload sizing.** A ResNet20 or ResNet8 layer fits one layer at a time. The
largest 3×3 convolution has 64×64×9 = 36,864 weights, within the 52,416-value
WBuf at C5. Batches of activations larger than IBuf must be tiled through
DRAM. This tiling is the DRAM side's job.
