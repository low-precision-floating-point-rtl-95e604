# An 8-bit floating-point CNN processor in SystemVerilog

Convolution and fully-connected layers are mostly multiply-accumulates.
This processor runs them with 8-bit floating-point operands. The format,
called M4E3 here, has 1 sign bit, 4 mantissa bits and 3 exponent bits. Two
things make it fast on an FPGA:

* A 4-bit mantissa product is small. One DSP48E1-style multiply-add
  (`P = A*B + C`, with 25 × 18-bit inputs) can therefore form **four** M4E3
  products per cycle instead of one.
* Products are widened into fixed point without losing a bit and summed
  exactly. The 8-bit format loses precision only once, when a layer's
  final output is converted back to M4E3.

The default configuration has 96 multipliers in each of 32 processing
elements (PEs). That is 3072 multipliers in 768 DSP slices, which gives
1228.8 GOPS peak at 200 MHz. Around the PEs sit three ping-pong buffers, a
DMA engine and a small controller that runs block-level instructions.

Everything described below is synthesizable SystemVerilog-2017 in `rtl/`.
Self-checking testbenches are in `tb/`.

## 1. The M4E3 number

A code is `{S, M[3:0], E[2:0]}`, packed in that bit order. The exponent bias
is 3.

| E | value |
|---|-------|
| 0 (subnormal) | (-1)^S · 0.M · 2^(1-3) |
| 1…7 (normal) | (-1)^S · 1.M · 2^(E-3) |

There are no infinities and no NaNs. Anything too large saturates to
±31.0 (E = 7, M = 15). The smallest step is 2^-6.

The RTL, the testbenches and this text use one view throughout: every M4E3
value is an integer number of 2^-6 units.

* E = 0 gives M units.
* E ≥ 1 gives (16 + M) << (E − 1) units.

A product of two M4E3 numbers is then an integer in 2^-12 units. A sum of
products is an integer as well. This is why the datapath can be exact up to
the final conversion.

## 2. Four multiplications in one DSP (`lpfp_quad_mul`)

A PE needs the products of two activations `a`, `b` (two output pixels) and
two weights `c`, `d` (two output channels): ac, ad, bc, bd. A product
splits into three parts:

* the sign is an XOR;
* the exponent is an addition of the effective exponents, where E = 0
  counts as 1 and the bias is *not* removed;
* the mantissa is a multiplication.

With hidden bits `h`:

    h_x.M_x × h_y.M_y = 0.M_x × 0.M_y  +  (h_x·h_y + h_y·0.M_x + h_x·0.M_y)

The first term is four 4 × 4-bit products. They come out of one wide
multiplication when the mantissas are packed with enough zeros between
them:

    A[23:20] = M_a          A[3:0] = M_b      (other A bits 0)
    B[13:10] = M_c          B[3:0] = M_d      (other B bits 0)
    P = A*B + C,  10-bit fields:  [39:30] ac  [29:20] ad  [19:10] bc  [9:0] bd

The second term (the "extra term") is computed with a few LUTs for each of
the four pairs. It enters through `C`, in the same four fields. Counted in
2^-8 units, the largest field value is 225 + 256 + 240 + 240 = 961. That is
below 1024, so the fields never carry into each other.

The published scheme writes the extra term for two normal numbers. Here each
part of it is gated by the hidden bits, so subnormal inputs also give the
exact product. The module's testbench checks all 65,536 operand pairs in
every field position.

The result of each pair is an M10E4 product: sign, 10-bit mantissa in
2^-8 units and 4-bit exponent sum. The module registers the four products,
so its latency is 1 cycle.

## 3. From products to an output activation

The chain below runs for each of the four outputs of a PE. Widths are in
bits.

    product M10E4 (15)
      → AM: align to fixed point (23, LSB 2^-12)
      → adder tree over 24 inputs (28)
      → PPM: accumulate (32) → max-pool → ReLU → DC: convert to M4E3 (8)
                └─ or, before the final round: round to a 16-bit partial result

* **Alignment module (`align_module`).** It shifts the 10-bit mantissa
  product left by `E_sum − 2` (or 0) and applies the sign. Nothing is
  dropped, and the largest product, 961 << 12, fits in 23 bits. Latency is
  1 cycle.
* **Adder tree (`adder_tree`).** A binary tree with one register per level,
  padded with zeros to a power of two. It sums the N_m/4 = 24 aligned
  products of one output, so latency is ⌈log2 24⌉ = 5 cycles. The output is
  23 + 5 = 28 bits wide. The original design quotes 27, which can overflow
  when all 24 products are at full size, so this implementation uses 28.
* **Post-process module (`ppm`).** Its job is accumulation, then pooling,
  then activation. This is the main place where the RTL had to add detail.
  * The 32-bit accumulator starts each block in one of two ways:
    * from zero; or
    * from a 16-bit value read from the OFMB (a bias, or a partial result
      of an earlier round), shifted left by `psum_shift`.
  * It then adds one tree sum per cycle, with saturation.
  * When the block ends, there are two cases:
    * **Not final.** The accumulator is shifted right by `psum_shift` with
      rounding, saturated to 16 bits and written to the OFMB as a partial
      result. Storing partial results as 16 bits keeps the OFMB at 64 bits
      per PE. It is the one place, besides the final conversion, where
      precision can be lost. Choose `psum_shift` so that the dropped bits
      are below the output's precision.
    * **Final.** The accumulator goes through max pooling, then ReLU (if
      enabled), then the data converter. Max pooling works across
      successive compute blocks. `pool_first` starts a window and
      `pool_last` closes it. Only the closing block writes a result, as
      M4E3 in the low byte of the 16-bit slot.
  * The result is registered 2 cycles after the block's last beat.
* **Data converter (`data_converter`).** It converts the 32-bit fixed-point
  value to M4E3. `out_frac` gives the number of fraction bits. It is a
  power-of-two form of the per-layer scale factor that the offline
  quantiser chooses.
  * Rounding is to nearest, with ties away from zero.
  * Values beyond ±31.0 saturate.
  * Zero is always +0.

## 4. Processing element and FPFU

A **PE (`pe`)** has 96 multipliers in 24 `lpfp_quad_mul` units, 96
alignment modules, 4 adder trees and 4 PPMs. Each cycle it takes two
vectors:

* `act`: 48 activations. These are 24 input channels of pixel *a*, then
  the same 24 channels of pixel *b*.
* `wt`: 48 weights. These are the same 24 input channels for output
  channel *c*, then for output channel *d*.

Its four outputs are Σac, Σbc, Σad and Σbd, in OFMB slots 0–3. A layer with
more than 24 input channels, or with a kernel larger than 1 × 1, takes
several cycles. A longer layer takes several blocks. From operands to tree
sum takes `pe_latency(96) = 7` cycles.

The **FPFU (`fpfu`)** is N_p = 32 PEs, arranged as P_IFM = 4 groups of
P_OFM = 8:

* PE `g*P_OFM + o` takes activation slice `g` of the IFMB row and weight
  slice `o` of the WB row;
* the 8 PEs of a group share activations and work on 16 different output
  channels;
* the 4 groups share the weights and work on 8 different pixels.

The original design fixes only the product P_IFM × P_OFM = N_p. The 4 × 8
split is this implementation's choice, and an elaboration check rejects any
split whose product is not N_p. Row widths follow from the split:

| buffer | row width | default |
|---|---|---|
| IFMB | N_m/2 · P_IFM · 8 | 1536 bits |
| WB | N_m/2 · P_OFM · 8 | 3072 bits |
| OFMB | 64 · N_p (4 × 16 bits per PE) | 2048 bits |

## 5. Compute blocks and their timing (`fpfu_ctrl`)

A compute block streams `len` consecutive IFMB rows and WB rows, one pair
per cycle, into all PEs. It accumulates them into one OFMB row. Typically
one block covers the kernel positions × input-channel rounds of one group of
outputs.

The sequencer passes a tag down a shift register alongside the datapath.
The tag holds valid, first, last, the PPM controls and the OFMB addresses.
Counting from the cycle a buffer read is issued:

| cycle | event |
|---|---|
| t | IFMB/WB row read issued |
| t + 7 | OFMB bias/partial row read (first beat only) |
| t + 8 | beat's tree sum and tag reach the PPMs |
| t + 10 | OFMB result row written (last beat only) |

A new block is accepted in the last issue cycle of the one before, so
blocks run back to back with no bubble.

There is one hazard. A block that reads an OFMB row written by the
previous block must be separated from it by a `WAIT` on compute, because
the write trails the reads. The program (its compiler) is responsible for
this.

## 6. Memory system (`memory_system`, `pingpong_buffer`, `dma`)

IFMB, WB and OFMB are each a two-bank **ping-pong buffer**. Every bank
choice is explicit in the instructions: the DMA fills one bank while the
FPFU reads the other, and the program swaps them.

* The buffer has a DMA-side port pair and a compute-side port pair. Each
  port has its own bank select and a registered read with 1-cycle latency.
* The OFMB is read and written from both sides. On a same-row write clash
  the compute write wins.
* Assertions flag two cases: both sides writing the same bank, and one
  side reading a bank the other side is writing.

Default depths are:

* IFMB: 1024 rows;
* WB: 64 rows;
* OFMB: 1024 rows.

This is about 7.8 Mbit in total, which is roughly 212 36-Kbit block RAMs.
That is close to what the original implementation used.

The **DMA** moves whole rows between external memory and a buffer.

* **The memory port.** External memory is a 512-bit port:
  * requests use valid/ready, carry read or write and a beat address, and
    can be pipelined;
  * read responses come back in order, with `rsp_valid`.
* **Row layout.** A row occupies ⌈width/512⌉ consecutive beats, with beat
  `b` holding row bits `[512b +: 512]`. That is 3 beats for an IFMB row, 6
  for a WB row and 4 for an OFMB row.
* **Loads** can target any buffer. The OFMB takes biases, or partial
  results parked off-chip.
* **Stores** come only from the OFMB.

## 7. Control: instructions and the CCM (`ccm`, `instr_ram`)

The host writes 128-bit instructions into the instruction RAM (1024 words)
and pulses `start`. The CCM works in three steps:

1. It fetches an instruction.
2. It hands the instruction to the DMA or the sequencer with valid/ready.
3. It moves on as soon as the unit accepts, so transfers and computation
   overlap.

Each instruction is `{opcode[3:0], body[123:0]}`. The body holds one of the
packed structs of `lpfp_pkg` in its low bits:

| opcode | name | body |
|---|---|---|
| 0 | NOP | – |
| 1 | LOAD_IFM | `dma_cmd_t`: target, store, bank, ext_addr (beats), buf_addr, rows |
| 2 | LOAD_W | `dma_cmd_t` |
| 3 | LOAD_OFM | `dma_cmd_t` (biases / partial results) |
| 4 | STORE_OFM | `dma_cmd_t` with store = 1 |
| 5 | COMPUTE | `comp_cmd_t`: ifm/w/ofm rows and banks, len, init_psum, final_out, relu, pool_en/first/last, psum_shift, out_frac |
| 6 | WAIT | `wait_cmd_t`: wait_dma, wait_comp — stall until those units are idle |
| 7 | HALT | wait for both units to go idle, pulse `done` |

The CCM keeps these status counters:

* `pc`;
* `instr_count`;
* `stall_cycles`: cycles spent in WAIT or HALT, or waiting for a busy unit.

The instruction set is this design's own. The original design only says
that a compiler produces block-level instructions that the controller
decodes.

A typical layer schedule looks like this:

1. Load biases into OFMB. Load the first IFMB and WB tiles into bank 0.
2. WAIT on DMA.
3. Start loading the next tiles into bank 1.
4. Run the compute blocks on bank 0. The first round starts from the bias
   and leaves partial results. A WAIT on compute sits before any block that
   reads those partial results. The last round converts, pools and
   activates.
5. WAIT on DMA. Swap banks.
6. Store finished OFMB rows while the next blocks compute into the other
   OFMB bank.

## 8. Top level (`lpfp_processor`)

The top wires four units together:

* the CCM with its IR (`u_ccm`);
* the memory system (`u_ms`);
* the compute sequencer (`u_seq`);
* the FPFU (`u_fpfu`).

Its ports are the ones a host and a memory controller need:

* IR write (`ir_we`, `ir_waddr`, `ir_wdata`);
* `start`, `busy` and `done`;
* the 512-bit external memory port;
* status: `pc`, `stall_cycles`, `instr_count`, `dma_busy` and `comp_busy`.

The DRAM and its controller are outside the design.

Parameters, with defaults:

| parameter | default | meaning |
|---|---|---|
| NM | 96 | multipliers per PE (from the original design) |
| NP | 32 | PEs (from the original design) |
| P_IFM, P_OFM | 4, 8 | PE grouping, product must be NP (chosen here) |
| IFM_DEPTH, W_DEPTH, OFM_DEPTH | 1024, 64, 1024 | buffer rows per bank (chosen here) |
| IR_DEPTH | 1024 | instruction words (chosen here) |

The quantisation of a trained network is not part of the hardware. The
software must:

* choose M4E3 codes and per-layer power-of-two scales;
* turn biases into 16-bit fixed point;
* lay out activations and weights as buffer rows in external memory;
* generate the program.

## 9. Where this departs from the original design

* **Adder-tree width:** 28 bits instead of 27. 28 bits is exact for 24
  inputs.
* **Partial results:** stored in 16 bits with a programmable right shift.
  The original describes both a 16-bit OFMB and truncation only at the
  final conversion. The two cannot both hold for deep input-channel loops,
  and this design follows the 16-bit buffer.
* **Subnormal products:** exact, through the gated extra term. The
  published DSP packing covers normal numbers.
* **Unspecified choices:** the P_IFM/P_OFM split, buffer depths, memory
  port, instruction set, pooling mechanism and rounding mode were not
  specified and were chosen as described above.
* **Missing operations:** the PPM implements ReLU and max pooling only.
  These are absent:
  * leaky ReLU (needed by tiny-YOLO);
  * per-channel scale and shift before the activation (needed by
    DenseNet's pre-activation layout);
  * average pooling.

  Residual additions can be run as an extra input round with identity
  weights, and average pooling can be folded into the next linear layer.
  Neither has dedicated hardware.
* **Not checked:** timing closure at 200 MHz and the FPGA mapping (for
  example that the multiply-add lands in one DSP48E1).

## 10. Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. A testbench
prints `TB_RESULT checks=N failures=M` and stops itself through a watchdog.
Reference values come from `tb/lpfp_ref_pkg.sv`. It works with the integer
view of section 1 and finds the nearest M4E3 code by exhaustive search, so
it shares no arithmetic with the RTL.

| testbench | what it checks |
|---|---|
| `tb_lpfp_quad_mul` | all 65,536 operand pairs in each of the four fields, latency 1 |
| `tb_align_module` | products of every pair of M4E3 codes, latency 1 |
| `tb_adder_tree` | random and extreme sums, latency ⌈log2 N⌉ |
| `tb_data_converter` | ties, subnormal boundaries, saturation, random values and scales |
| `tb_ppm` | bias and partial starts, 16-bit partials, pooling windows, ReLU, timing |
| `tb_pe` | full 96-multiplier PE against the reference over random blocks |
| `tb_fpfu` | small FPFU (8 × 4), PE-to-slice mapping |
| `tb_fpfu_ctrl` | 139 back-to-back blocks: read/write addresses, tag timing, hazard-free streaming |
| `tb_pingpong_buffer` | bank isolation, both sides, bank swaps |
| `tb_memory_system` | DMA loads and stores of every buffer at full row widths, with memory back-pressure |
| `tb_ccm` | random programs: dispatch order, WAIT stalls, HALT |
| `tb_lpfp_processor` | whole processor at default size (see below) |

`tb_lpfp_processor` runs the full-size processor with a behavioural
external memory (`tb/ext_mem_model.sv`: fixed latency, random back-pressure)
through a 19-instruction program:

* bias loads;
* two input-channel rounds through a 16-bit partial result;
* a pooling window across two blocks, with ReLU;
* a block with a small output scale, so that results saturate;
* loads into bank 1 while bank 0 computes;
* an OFMB store overlapping a compute block;
* WAITs, then HALT.

An instruction-level model in the testbench runs the same program, and
every stored beat is compared with it. The test also counts each mechanism
(bias start, partial start, partial write, pooling, ReLU clamps,
saturations, DMA/compute overlap cycles, WAIT stalls, bank-1 use, memory
stalls). It fails if any of them never occurred.

`tb_conv_layer` runs one real layer on the full-size processor. The
layer is a 3 × 3 convolution with zero padding, 48 input channels and 16
output channels on a 4 × 8 input, followed by bias, ReLU and 2 × 2 max
pooling. It works like this:

* The testbench acts as the layer compiler. It lays the tensors out as
  buffer rows, with the padding taps set to zero.
* It schedules four first-round blocks that leave partial results, and
  four second-round blocks that pool over the four positions of each
  window.
* It computes the expected outputs directly from the tensors, not from
  buffer rows.

The layer takes 516 cycles, most of them in loading the data. That shows
how much the ping-pong overlap matters at real layer sizes.

`tb_residual_block` shows how a ResNet shortcut runs without a dedicated
adder. It uses a 1 × 1 convolution from 48 to 16 channels on 8 pixels.
The shortcut tensor is fed as a third input round with an identity kernel.
Weight 1.0 is exact in M4E3, so the shortcut is added exactly inside the
accumulator, before ReLU and conversion.

To run a testbench with Verilator:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_lpfp_processor \
        rtl/lpfp_pkg.sv tb/lpfp_ref_pkg.sv rtl/*.sv tb/ext_mem_model.sv tb/tb_lpfp_processor.sv
    ./obj_dir/Vtb_lpfp_processor

Building the full-size top takes about two minutes and the simulation takes
under a second. Other testbenches need only `rtl/lpfp_pkg.sv`,
`tb/lpfp_ref_pkg.sv`, the module files they instantiate and the testbench
itself.
