# xDecimate: a gather-and-pack load unit for N:M sparse kernels on a RISC-V MCU core

N:M pruning keeps exactly N non-zero weights in every group of M consecutive weights. This
design handles the 1:M case with M = 4, 8 or 16. A weight row is then stored as its non-zero
values plus one small index per group, the position of the non-zero weight inside its M-block.
That index takes 2 bits for M = 4 and 4 bits for M = 8 and 16.

On a small multicore MCU with 8-bit SIMD dot products (4 lanes per 32-bit register), the costly
part of a sparse layer is not the multiply. The cost is *decimation*: collecting, from an
im2col buffer, the activations that sit opposite the non-zero weights and packing four of them
into a 32-bit register for the dot-product instruction. Done in plain software, each activation
byte costs an index-unpack (shift and mask), an address add and a byte load.

This repository holds the RTL of a small functional unit that does that whole sequence in one
instruction:

    xdecimate rd, rs1, rs2        rs1 = im2col buffer base, rs2 = 32 bits of packed indices

Each execution loads **one byte** and inserts it into **one byte lane of rd**. A hidden 16-bit
counter, called `csr` below, says which index field of `rs2` to use, which M-block of the
buffer to address and which lane of `rd` to fill. The counter then advances by one. A second
instruction, `xdecimate.clear`, sets the counter back to zero.

With this unit, the inner loop of a sparse convolution is:
- one weight load;
- one index-word load;
- eight `xdecimate`s;
- two SIMD dot products.

That is 12 instructions for 8 multiply-accumulates, against about 22 without the unit.

The unit is an RTL rendering of the xDecimate extension described by F. Daghero et al.,
"Lightweight Software Kernels and Hardware Extensions for Efficient Sparse Deep Neural Networks
on Microcontrollers" (MLSys 2025). "Published" below refers to that description. What it does
not fix is chosen here and marked as such.

The unit sits inside a RI5CY/CV32E40P-class core and uses three of its pipeline stages (ID, EX,
WB). The core itself is not included: the register file, the load/store path and the data
memory are ports of the top module `xdec_xfu`.

## 1. The counter is the whole trick

For 1:8 and 1:16, the address of execution number `c` (the current `csr` value) is:

    o    = rs2[4*c[2:0] +: 4]               -- eight 4-bit index fields per word
    addr = rs1 + M * c[15:1] + o            -- block number is c/2
    rd[8*c[2:1] +: 8] = MEM[addr]           -- lane is (c/2) mod 4
    c    = c + 1

For 1:4, the word holds sixteen 2-bit fields, so the field is `rs2[2*c[3:0] +: 2]`. The block
address and the lane are computed the same way, with M = 4.

The block number and the lane use `c/2`, while the index field uses `c`. So **two consecutive
executions address the same M-block and fill the same lane, but each takes its own index
field**. The kernels use this pairing in two ways.

**Convolution: two buffers, one weight row.** The kernel produces two neighbouring output
pixels at once, from two im2col buffers B1 and B2, with the same weight row. The executions
alternate between `(vB1, B1)` and `(vB2, B2)`. Both members of a pair need the same index, so
each index is stored twice in the index array.

Example at 1:8. The non-zero positions of four consecutive blocks are 5, 2, 7 and 0, so `rs2`
holds the nibbles 5,5,2,2,7,7,0,0 from the LSB up, which is `rs2 = 0x00772255`:

| csr | instruction            | field | block | address   | writes   |
|-----|------------------------|-------|-------|-----------|----------|
| 0   | xdecimate vB1, B1, rs2 | 5     | 0     | B1 + 5    | vB1[7:0] |
| 1   | xdecimate vB2, B2, rs2 | 5     | 0     | B2 + 5    | vB2[7:0] |
| 2   | xdecimate vB1, B1, rs2 | 2     | 1     | B1 + 10   | vB1[15:8] |
| 3   | xdecimate vB2, B2, rs2 | 2     | 1     | B2 + 10   | vB2[15:8] |
| 4,5 | ...                    | 7     | 2     | B + 23    | lane 2   |
| 6,7 | ...                    | 0     | 3     | B + 24    | lane 3   |

After eight executions, vB1 and vB2 each hold the four activations that match the four
non-zero weights in `vA`, and `dotp(vA, vB1)` and `dotp(vA, vB2)` follow.

The software never advances B1 or B2. The counter keeps rising (csr = 8..15 addresses blocks
4..7 and wraps back to field 0 of the next index word), so the block offset `M*csr[15:1]` walks
through the buffer. The counter must therefore be cleared once per output channel, before the
next weight row starts at block 0.

**Fully connected: one buffer, two output channels.** A fully-connected layer has a single
input vector, but two output channels k and k+1 need different activations. The index array is
interleaved offline: k's index for block j, then k+1's index for block j, and so on. The
executions all use the same buffer and alternate between destinations vB1 and vB2.

For channel indices (5,2,7,0) and (1,6,3,4), the nibbles are 5,1,2,6,7,3,0,4, which is
`rs2 = 0x40376215`. Execution 1 reads `B + 0*8 + 1` into vB2 lane 0. Execution 2 reads
`B + 8 + 2` into vB1 lane 1. After eight executions, vB1 pairs with channel k's weights and vB2
with channel k+1's. The same instruction thus serves both layer types, at the price of the
duplicated (convolution) or interleaved (FC) index layout. The counter is cleared once per
channel pair.

**1:4** packs sixteen 2-bit indices per word, so one index word serves sixteen executions (two
inner-loop groups).

**Padding.** Each group handles four non-zero weights. A weight row whose C·FX·FY/M is not a
multiple of four must be padded with zero weights. An example is C = 32 with 3×3 filters at
1:16: 288/16 = 18.

## 2. Instruction encoding

The encoding is this design's own; no published one exists. Everything is R-type:

| field  | value | meaning |
|--------|-------|---------|
| opcode | `7'h77` | unused by RV32IMC and the PULP Xpulpv2 extensions |
| funct7 | `0` | |
| funct3 | `000` / `001` / `010` | `xdecimate` 1:4 / 1:8 / 1:16 |
| funct3 | `111` | `xdecimate.clear` (register fields ignored) |

The constants and `enc_xdec()` / `enc_clear()` helpers are in `rtl/xdec_pkg.sv`; change them there.

## 3. Microarchitecture

```
      ID                       |          EX                         |        WB
 insn --> xdec_decoder --kind,rd-->|ID/EX|-> xdec_addr_gen -- addr --> data_req/addr
 rs1, rs2, rd (3 RF ports) ------->|     |      ^  (bit-select,        |EX/WB| <-- data_rdata
                                   |     |      |   shift mux, adder)  |     |-> xdec_rd_update --> rf_wdata
                                            xdec_csr_counter ---csr[2:1]--->|     |
                         xdec_controller: stage enables, handshake, csr incr/clear, forwarding
```

| file | block | what it does |
|------|-------|--------------|
| `xdec_pkg.sv` | | encoding, `kind_e` (1:4/1:8/1:16), decoded-instruction struct |
| `xdec_decoder.sv` | ID decode | recognises the two instructions and the flavour, splits out rd/rs1/rs2 |
| `xdec_csr_counter.sv` | csr | 16-bit counter, +1 per xDecimate, 0 on clear |
| `xdec_addr_gen.sv` | EX address | index field select (2- or 4-bit), `csr>>1` shifted by log2 M, three-input add |
| `xdec_rd_update.sv` | WB | picks the byte out of the response word by `addr[1:0]`, inserts it at lane `csr[2:1]` |
| `xdec_controller.sv` | control | pipe-stage valids and enables, memory handshake, counter control, RF write, forwarding |
| `xdec_xfu.sv` | top | the ID/EX and EX/WB pipe registers and the wiring of all of the above |

The ID/EX register holds the decoded instruction and the three register values. The EX/WB
register holds:
- the rd number;
- the rd value;
- the lane, `csr[2:1]`;
- the address LSBs.

After generic synthesis, the unit is 77 word-level cells and 163 flip-flop bits. Most of the
flip-flops are the three 32-bit operands in ID/EX and rd in EX/WB.

## 4. Pipeline timing, stalls and forwarding

All of this section is this design's own choice. The published description fixes the
datapath, but not the handshake or the stall rules.

**Memory port.** The unit uses a request/grant/response protocol of the kind the RI5CY data
port uses:
- `data_req_o` and `data_addr_o` stay stable until `data_gnt_i`;
- `data_rvalid_i` and `data_rdata_i` (a full 32-bit word) arrive in a later cycle;
- `data_be_o` marks the addressed byte.

At most one access is in flight. EX raises a request only when WB is empty or is receiving
its response in that cycle, so responses always match the instruction in WB.

**Throughput.** With a memory that grants at once and answers the next cycle, one xDecimate
enters EX every cycle, and each instruction writes back in the cycle after EX, two cycles after
ID:

```
cycle      1    2    3    4    5
xdec #0    ID   EX   WB
xdec #1         ID   EX   WB
xdec #2              ID   EX   WB          (#2 and #0 share rd: forwarded in cycle 3)
```

**Stalls.**
- If the grant is withheld, the instruction waits in EX with its request held, and the ID stage
  is not ready (`id_ready_o = 0`). The core must keep the instruction in ID.
- If the response is late, the instruction waits in WB, and EX does not request.
- `xdecimate.clear` spends one cycle in EX. It resets the counter there, in program order with
  the xDecimates around it, and never goes to memory or WB.

**When the counter advances.** The counter advances when an xDecimate *leaves EX*, on its
grant, not in WB. The lane the instruction needs in WB travels with it in the EX/WB register.
Each instruction therefore sees exactly the counter value the definition in section 1 gives it,
and the next xDecimate, already in EX, sees the incremented value without a bubble.

**Forwarding.** The kernels write the same register four times in a row (through eight
alternating instructions), so every xDecimate depends on an earlier one through `rd`. Whenever
WB writes register r, the unit also hands the new value to:
- an xDecimate entering EX with rd = r (`fwd_id`), which read a stale value from the register
  file in that same cycle;
- an xDecimate waiting in EX with rd = r (`fwd_ex`).

x0 is never forwarded.

**Core interface.** The core provides:
- the instruction word, with `insn_valid_i`;
- three register-file read values, addressed by `rs1_addr_o`, `rs2_addr_o` and `rd_addr_o`,
  which the core re-reads every cycle the instruction sits in ID;
- a register-file write port fed by `rf_we_o`, `rf_waddr_o` and `rf_wdata_o`.

`xdec_insn_o` tells the core the word is the unit's. `busy_o` is high while an xDecimate is in
flight; the core should hold back any of its own instructions that read an `rd` not yet written
back, such as the dot product after the eighth xDecimate.

Three assertions check the rules:
- the address stays stable while a request waits for its grant;
- responses arrive only for an access in flight;
- a write-back happens only from a valid WB stage.

## 5. Where this RTL departs from, or adds to, the published description

- **Width of the block offset.** The published block diagram labels the shifted block offset
  `csr_offs` as 7 bits, while the published address equation uses all of `csr[15:1]`. Seven
  bits would cover only 128 bytes of im2col buffer. The evaluated layers need up to 2304
  bytes, so this RTL follows the equation: 19 bits at the default width of 16.
- **Flavour into the counter.** In the block diagram, the flavour signal also enters the counter
  block, but no function is given for it. Here the counter does not depend on the flavour.
- **Counter increment point.** The increment happens on leaving EX rather than in WB. The values
  seen by the instructions are the same (section 4).
- **Response handling.** The memory returns a 32-bit word and the unit selects the byte itself
  with `addr[1:0]`. The published text only says the byte is taken from the response.
- **Own choices.** The encoding, the handshake, the stall rules, the forwarding paths, `busy_o`
  and the ID-side ports are this design's own.
- **Not included.** The core, its register file and load/store unit, and the L1 memory are not
  part of this RTL. The published area figure (5 % of the core, 22 nm, 200 MHz) has not been
  reproduced.

## 6. Parameters and sizes

The only parameter is `CSR_W` (default 16), the counter width. It bounds the number of
xDecimates between two clears to 65536 and the block offset to `M*(2^15-1)`. The evaluated
layers stay far below both:

| layer | xDecimates per clear (max, 1:4) | block offset (max) |
|-------|-------------------------------|--------------------|
| 3×3 conv, C = 32…256, K = 256 | 2·C·9/4 = 144 … 1152 | < 2304 B |
| FC, C = 256…2048, K = 256 | 2·C/4 = 128 … 1024 | < 2048 B |
| ResNet18, largest 3×3 conv (C = 512) | 2304 | < 4608 B |
| ViT-Small FFN (C ≤ 1536) | 768 | < 1536 B |

The unit stores no layer data. Whether a layer fits is a question for the L1 memory and the
tiling software, not for this RTL.

## 7. Testbenches

Every testbench prints `TB_RESULT checks=N failures=M`, and each has a cycle watchdog.

| testbench | checks |
|-----------|--------|
| `tb_xdec_decoder` | all encodings with random register fields; foreign opcodes, reserved funct3, wrong funct7 |
| `tb_xdec_csr_counter` | random increment/clear against a software count; a full 16-bit wrap |
| `tb_xdec_addr_gen` | 20 000 random cases for all flavours, against a model using division and modulo |
| `tb_xdec_rd_update` | random byte insertion against an arithmetic model |
| `tb_xdec_controller` | one instruction per cycle and write-back 2 cycles after ID; held request and stalled ID without grant; clear timing; both forwarding paths; no forwarding for x0; random traffic with an in-order write-back scoreboard |
| `tb_xdec_xfu` | end to end, see below |
| `tb_xdec_layers` | the benchmark layer geometries at full size, see below |

`tb_xdec_xfu` contains:
- a small core model: a program of xDecimate, load-immediate, dot-product and check steps,
  and a 3-read-port register file;
- a memory model with random grant stalls and 0–2 cycles of extra response latency.

It runs the convolution and FC inner loops of section 1 for all three flavours, with ideal
and with stalling memory. After every group of eight it compares the packed registers with
activations picked directly from the buffers. At the end of every channel it compares the
accumulated dot products with the dense product of the zero-filled weight row and the buffer.
It also times eight back-to-back xDecimates with an ideal memory. Finally, it counts grant
stalls, late responses, both forwarding paths, clears, back-to-back write-backs and each
flavour, and fails if any of them never occurred.

`tb_xdec_layers` runs, with an ideal memory:
- 3×3 convolutions with K = 256 and C = 32, 64, 128, 256: the whole output-channel loop for
  one pair of output pixels;
- fully-connected layers with K = 256 and C = 256 … 2048: complete.

Each runs at 1:4, 1:8 and 1:16: about 1.4 million xDecimates with 359 000 checks. The run also
verifies that the unit never stalls the core when the memory does not.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/xdec_pkg.sv tb/tb_xdec_xfu.sv \
          --top-module tb_xdec_xfu -o sim && ./obj_dir/sim
```

Replace `tb_xdec_xfu` with any testbench name. Each takes a few seconds, most of it compile
time.
