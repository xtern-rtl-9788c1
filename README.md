# xTern execution unit: ternary neural-network instructions for a RISC-V core

Ternary neural networks (TNNs) restrict weights and activations to {-1, 0, +1}. A trit
carries log2(3) = 1.585 bits of information, so storing each trit in two bits wastes a
fifth of every data word. Packing five trits into one byte (3^5 = 243 <= 256) brings the
cost down to 1.6 bits per trit, and a 32-bit register then holds 20 trits instead of the
16 two-bit values of a 2-bit network. xTern is a small extension of the RISC-V
instruction set, described by Rutishauser, Mihali, Scherer and Benini ("xTern:
Energy-Efficient Ternary Neural Network Inference on RISC-V-Based Edge Systems", IEEE ASAP
2024), that lets a core compute directly on these packed words: a 20-way ternary dot
product, an element-wise ternary min/max, and a single instruction that thresholds an
integer pre-activation and appends the resulting trit to a packed output byte.

This repository holds synthesizable SystemVerilog for the xTern execution unit of one
core: the instruction decoder, the compressed multiply-accumulate unit, the comparison
unit and the threshold-and-compress unit, with self-checking testbenches. The host core
(an RV32IMC core with the XpulpV2/XpulpNN extensions), its NN register file and the
eight-core cluster around it are existing designs and are not included; the unit's ports
are the points where they connect.

## Instructions

| instruction   | funct7    | [24:20] | funct3 | opcode    | result written to rd                          |
|---------------|-----------|---------|--------|-----------|-----------------------------------------------|
| `smlsdotsp.t` | `1111100` | IMM     | `100`  | `1110111` | rd + dot(NN-RF operand A, NN-RF operand B)    |
| `sdotsp.t`    | `1011101` | rs2     | `100`  | `1010111` | rd + dot(rs1, rs2)                            |
| `dotsp.t`     | `1001101` | rs2     | `100`  | `1010111` | dot(rs1, rs2)                                 |
| `min.t`       | `0010001` | rs2     | `100`  | `1010111` | element-wise minimum of rs1 and rs2, packed   |
| `max.t`       | `0011001` | rs2     | `100`  | `1010111` | element-wise maximum of rs1 and rs2, packed   |
| `thrc`        | `0000100` | rs2     | `110`  | `0110011` | updated threshold-and-compress status word    |

rs1 is in [19:15] and rd in [11:7] for all six. `dot` is the sum of the 20 products of
corresponding trits, a signed 32-bit integer. `smlsdotsp.t` is the MAC-and-load form: its
operands come from the separate NN register file that XpulpNN adds to the core, and its
5-bit immediate tells the core's existing MAC-and-load logic which NN-RF entries to use
and which to reload from memory. This unit only forwards that immediate (`nnrf_imm_o`);
the loads and pointer updates stay in the core.

## Data formats

**Uncompressed trit.** Two bits, two's complement: `01` = +1, `00` = 0, `11` = -1. The
pattern `10` never occurs and is read as 0. Zero has to be `00` because the
threshold-and-compress unit inserts trits into a cleared vector with a bitwise OR. Five
trits form a 10-bit group, trit i in bits [2i+1:2i].

**Compressed byte.** Five trits t0..t4 are stored as the base-3 number

    code = (t0+1) + 3(t1+1) + 9(t2+1) + 27(t3+1) + 81(t4+1),   0 <= code <= 242.

Equivalently, code = 121 + sum t_i * 3^i, so five zeros encode as 121. Codes 243..255 are
never produced; the decompressor maps them to five zeros.

**Compressed word.** Four bytes, byte k holding trits 5k..5k+4, so 20 trits per 32-bit
register. Kernels therefore need channel counts that are multiples of 5. They run fastest
when the channels of a pixel fill whole words, i.e. multiples of 20.

The xTern authors use a ternary compression code from earlier work, chosen for cheap
logic, and do not reproduce its bit mapping. The base-3 code above is this
implementation's own stand-in. It has the same density and the same interfaces, but
packed data are **not** bit-compatible with software built for the original encoding.
Only `tern_compress` and `tern_decompress` would change to adopt the original mapping.

## Compressed multiply-accumulate (`xtern_dotp`)

Each operand word passes through a decompression array (`tern_decompr_array`): four byte
decompressors in parallel give 20 two-bit trits. Twenty ternary multipliers follow. A
product of two trits is again a trit: it is zero if either input is zero, otherwise its
sign is the XOR of the two signs. The products go to an adder tree together with a
third operand, which a mux sets to 0 for `dotsp.t` (multiply-add) or to the old value of
rd for `sdotsp.t` and `smlsdotsp.t` (multiply-accumulate). The 32-bit sum wraps on
overflow. One instruction thus does 20 MACs, where a 2-bit SIMD dot product does 16.

## Threshold-and-compress (`xtern_thrc`)

This is the least obvious part of the extension. An activation layer turns each integer
pre-activation z of output channel i into a trit:

    y = -1 if z < t_lo(i),   0 if t_lo(i) <= z < t_hi(i),   +1 if z >= t_hi(i).

One instruction produces one trit, but the output format packs five trits into a byte.
`thrc` therefore carries its own state in its destination register, which is read as
well as written:

    rd:  [31:29] counter c   [28:26] 0   [25:16] uncompressed trits   [15:8] 0   [7:0] compressed byte
    rs1: [31:16] t_lo (signed 16 bit)    [15:0] t_hi (signed 16 bit)
    rs2: pre-activation z (signed 32 bit)

One instruction does the following:

1. Compare z with the sign-extended thresholds to get the 2-bit trit y.
2. Shift y left by 2c, so that it lands in slot c of the 10-bit vector, and OR it into
   the old uncompressed vector.
3. Compress the merged vector. The byte is always written back, so [7:0] always holds
   the trits seen so far, with zeros in the empty slots.
4. If c < 4, keep the merged vector and write c + 1. If c = 4, the fifth trit has just
   been packed: clear the vector and write c = 0, so the next call starts a new byte.
   Counter values 5..7 are never produced and are treated like 4.

A kernel sets the status register to 0, issues `thrc` once for each of five consecutive
output channels, with that channel's thresholds in rs1, and after the fifth call stores
byte [7:0] to the output feature map. The same register then goes on to the next five
channels with no reset. This single instruction replaces the whole requantisation step:
batch normalisation and activation are folded into the two thresholds, and the bit
packing is done in hardware.

## Element-wise comparison (`xtern_cmp`)

`min.t` and `max.t` decompress both words and compare the 20 trit pairs as signed
numbers. They keep the smaller or the larger trit of each pair and compress the result
with four byte compressors (`tern_compr_array`). `max.t` on two neighbouring pixels is
one step of ternary max pooling. Thresholding is monotonic, so pooling after `thrc` gives
the same result as pooling the integer pre-activations first.

## The execution unit (`xtern_unit`)

`xtern_unit` is the top. Each cycle the core can present one instruction (`valid_i`,
`instr_i`) with the GP-RF read data of rs1, rs2 and rd (`rs1_i`, `rs2_i`, `rd_i`) and the
two NN-RF read ports (`nnrf_a_i`, `nnrf_b_i`). `xtern_decoder` recognises the six
encodings. `accepted_o` goes high in the same cycle if the word is an xTern instruction.
Any other word is ignored and produces no write-back. The three datapaths are purely
combinational. The selected result is registered and appears on `wb_valid_o`,
`wb_addr_o` and `wb_data_o` exactly one cycle after issue. The unit takes one
instruction per cycle and never stalls. An assertion checks the one-cycle
issue-to-write-back rule. Reset (`rst_ni`) is asynchronous and active low, and clears
only the write-back register.

| port | dir | width | meaning |
|---|---|---|---|
| `clk_i`, `rst_ni` | in | 1 | clock, asynchronous active-low reset |
| `valid_i` | in | 1 | an instruction is issued this cycle |
| `instr_i` | in | 32 | the instruction word |
| `rs1_i`, `rs2_i`, `rd_i` | in | 32 | GP-RF values of rs1, rs2 and rd |
| `nnrf_a_i`, `nnrf_b_i` | in | 32 | NN-RF operands for `smlsdotsp.t` |
| `accepted_o` | out | 1 | the issued word is an xTern instruction |
| `nnrf_imm_o` | out | 5 | IMM of `smlsdotsp.t` (0 otherwise) |
| `wb_valid_o`, `wb_addr_o`, `wb_data_o` | out | 1, 5, 32 | write-back to rd, one cycle after issue |

Synthesised, the unit is about 800 word-level cells and 38 flip-flops. The design has no
parameters: the word width (32 bits), group size (5 trits) and trits per word (20) are
fixed by the instruction set.

In the published system, this unit sits in each of the eight cores of a PULP cluster.
The cluster has 128 KiB of L1 scratchpad in 16 banks behind a single-cycle logarithmic
interconnect, a shared 4 KiB instruction cache, and an AXI port to a 1 MiB L2. At eight
cores and 20 MACs per instruction, the peak is 160 ternary MACs per cycle.

## Where this implementation departs from or adds to the published description

- **Compression code:** the base-3 code above, not the original mapping (see *Data
  formats*).
- **2-bit trit format:** two's complement. The publication only says "2-bit trits".
- **Register roles of `thrc`:** the prose of the publication puts the pre-activation in
  rs1 and the thresholds in rs2. Its datapath drawing and its register-layout figure put
  the thresholds in rs1. This implementation follows the figures.
- **`dotsp.t` encoding:** the published encoding table labels bits [24:20] "rs1". Here
  they are decoded as rs2, as the instruction's definition requires.
- **Counter wrap and threshold signedness of `thrc`:** the counter returning to 0 after
  the fifth trit, and the thresholds being signed, are inferred from the description
  rather than stated in it.
- **Timing:** the publication says xTern does not lengthen the core's critical path.
  Single-cycle combinational datapaths with a one-cycle write-back register are this
  implementation's choice. The port list is its own too.
- **Not included:** the core pipeline, the GP-RF and the NN-RF with its MAC-and-load
  sequencing, and everything at cluster and SoC level.

## Testbenches

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`. The
reference models in `tb/tb_tern_ref_pkg.sv` are written differently from the RTL. They
encode in balanced ternary, decode by searching all 243 trit vectors, and model
instructions on integer arrays.

| testbench | what it checks |
|---|---|
| `tb_tern_compress` | all 1024 inputs of the byte compressor |
| `tb_tern_decompress` | all 256 codes, plus the compress/decompress round trip |
| `tb_tern_decompr_array` | 500 random words, trit by trit |
| `tb_tern_compr_array` | 1000 random 20-trit groups, byte by byte |
| `tb_xtern_dotp` | 2000 random dot products in MADD and MAC modes; the extreme cases +20 and -20 |
| `tb_xtern_cmp` | 2000 random `min.t` / `max.t` operations |
| `tb_xtern_thrc` | 5000 chained `thrc` calls: boundary values, 1000 group wraps, every status word |
| `tb_xtern_decoder` | every encoding with random registers, and single-bit near misses |
| `tb_xtern_unit` | a 20-output, 80-channel layer slice as an instruction stream, with back-to-back issue and forwarding, pooling, a foreign instruction, and write-back timing |
| `tb_tnn_layers` | two complete layers, bit-exact. One is a CIFAR-10 VGG layer (40 channels, 16x16, 3x3 same-padded convolution, `thrc`, 2x2 `max.t` pooling to 8x8). The other is a DVS-gesture TCN layer (80 channels, kernel 2, dilation 2, 5 time steps). About 183k instructions in total. |

To run one with Verilator 5, from the repository root:

    verilator --binary --timing --assert -Irtl -Itb rtl/xtern_pkg.sv tb/tb_tern_ref_pkg.sv \
        tb/tb_xtern_unit.sv --top-module tb_xtern_unit -o sim
    ./obj_dir/sim

Replace `tb_xtern_unit` with any name from the table. Each run takes well under a second.

## Files

- `rtl/xtern_pkg.sv`: trit encoding, instruction field constants, operation enum, decoded-instruction struct.
- `rtl/tern_compress.sv`, `rtl/tern_decompress.sv`: one byte to and from five trits.
- `rtl/tern_compr_array.sv`, `rtl/tern_decompr_array.sv`: the same for a 32-bit word.
- `rtl/xtern_dotp.sv`, `rtl/xtern_cmp.sv`, `rtl/xtern_thrc.sv`: the three datapaths.
- `rtl/xtern_decoder.sv`: the instruction decoder.
- `rtl/xtern_unit.sv`: the top.
