# Status-based mixed-precision SIMD for a RISC-V core (MPIC datapath)

Quantized neural networks store weights and activations in 8, 4 or 2 bits,
and often with different widths for the two tensors ("w4a8": 4-bit weights,
8-bit activations). A processor with SIMD only for 16- and 8-bit lanes has
to unpack sub-byte data before every multiply, which can cost more time than
the multiply. Adding a dot-product instruction for every pair of widths
would need hundreds of new opcodes.

This RTL implements the alternative described for the MPIC core (Mixed
Precision Inference Core, an extension of the RI5CY RISC-V core): **virtual
SIMD instructions**. An instruction such as `pv.sdotsp rd, rs1, rs2` names
only the operation. The width of the lanes of both operands comes from a
status register, `SIMD_FMT`. Software sets it once per layer, and the same
instruction word then runs as 16-, 8-, 4- or 2-bit SIMD, or as one of six
mixed formats. For the mixed formats, a small controller works out which
part of the packed narrow operand each instruction uses, so the inner loop
of a mixed-precision matrix multiplication has no unpacking code at all.

The repository contains the decode and execute stages of that datapath:

- the decoder for the virtual SIMD and CSR instructions;
- a three-read, two-write register file with operand forwarding;
- the status registers;
- the mixed-precision controller;
- the SIMD ALU for 16/8/4/2-bit lanes;
- the extended dot-product unit.

The rest of the RI5CY pipeline is not included. That covers fetch, the
pipeline controller, hardware loops, the load-store unit, the scalar ALU and
multiplier, and debug. Its connections are ports of the top module,
`mpic_top`.

## SIMD_FMT: the precision register

Operand A (`rs1`) always holds the larger elements, and operand B (`rs2`)
holds the smaller ones. Software must place its tensors that way.

| SIMD_FMT | format   | A bits | B bits | B sub-groups |
|----------|----------|--------|--------|--------------|
| 0001     | INT16    | 16     | 16     | 1            |
| 0010     | INT8     | 8      | 8      | 1            |
| 0100     | INT4     | 4      | 4      | 1            |
| 0101     | INT2     | 2      | 2      | 1            |
| 0110     | MIX 16x8 | 16     | 8      | 2            |
| 0111     | MIX 16x4 | 16     | 4      | 4            |
| 1000     | MIX 16x2 | 16     | 2      | 8            |
| 1001     | MIX 8x4  | 8      | 4      | 2            |
| 1010     | MIX 8x2  | 8      | 2      | 4            |
| 1011     | MIX 4x2  | 4      | 2      | 2            |

The encodings are the published ones. The three status registers sit in the
custom user CSR range; these addresses are this implementation's choice:

| address | name     | reset | meaning |
|---------|----------|-------|---------|
| 0x800   | SIMD_FMT | 0010  | format above. A write of an undefined encoding is ignored. |
| 0x801   | MPC_CNT  | 0     | current sub-group of operand B (3 bits). Read and write. |
| 0x802   | MPC_MACS | 1     | MACs per sub-group before the controller moves on (8 bits; 0 acts as 1). |

Writing SIMD_FMT or MPC_MACS restarts the controller at sub-group 0. Writing
MPC_CNT selects a sub-group by hand and restarts the MAC count.

## Mixed precision: sub-groups, the slicer and the controller

This is the part that is easiest to get wrong when using the design.

Take MIX 8x2. Register A holds four 8-bit activations. Register B holds
sixteen 2-bit weights. One `pv.sdotsp` can use only four of the weights, one
per activation. B therefore splits into four **sub-groups** of four weights.
Sub-group *k* is bits `[8k+7 : 8k]`, and group 0 is the least significant.
The **slicer and router** in the dot-product unit does three things:

- takes sub-group `MPC_CNT` of B;
- extends each 2-bit weight to 8 bits (sign extension; zero extension for the
  unsigned-B variants `pv.dotup` and `pv.sdotup`);
- feeds the result to the 8-bit dot-product unit.

The unit is always chosen by the size of A. So a mixed instruction runs at
the MAC rate of its wider operand: 4 MACs per cycle for 8x2.

The **mixed-precision controller** (`mpic_mpc`) holds `MPC_CNT`. It also
holds a second counter of MACs issued in the current sub-group. Both counters
move only in a cycle where all three of these hold:

- the decode stage really issues an instruction (a stalled one does not
  count);
- the instruction is a dot product;
- SIMD_FMT is a mixed format.

After `MPC_MACS` dot products, the sub-group advances. After the last
sub-group it returns to 0. An instruction uses the value that `MPC_CNT` had
while it was decoded.

Two kernels show the two settings of `MPC_MACS`:

```
SIMD_FMT = MIX 8x2, MPC_MACS = 1            SIMD_FMT = MIX 4x2, MPC_MACS = 8
  lw   x5..x8  <- 4 activation words          per B word (2 sub-groups):
  lw   x9      <- 16 weights                    lw  2 activation words, 4 weight words (once)
  sdotsp x15, x5, x9   ; group 0                8 x sdotsp (4 filters x 2 pixels) ; group 0
  sdotsp x15, x6, x9   ; group 1                lw  2 new activation words
  sdotsp x15, x7, x9   ; group 2                8 x sdotsp                          ; group 1
  sdotsp x15, x8, x9   ; group 3 -> wraps to 0
```

In the second kernel, each sub-group is reused by the 8 MACs of a 4x2 block
of the matrix multiplication. That is why the MAC counter exists.

The counter is architectural state that changes with every dot product.
Code must therefore issue the dot products in exactly the order the counter
assumes. A compiler must not unroll or reorder them across a sub-group
boundary, and an interrupt handler that uses mixed-precision dot products
must save and restore `MPC_CNT`.

## The extended dot-product unit

`mpic_dotp_unit` contains four dot-product units, one per lane width:

| unit    | products per cycle |
|---------|--------------------|
| DOTP-16 | 2                  |
| DOTP-8  | 4                  |
| DOTP-4  | 8                  |
| DOTP-2  | 16                 |

Each unit is a row of multipliers and an adder tree, and adds the
accumulator C for the `sdot*` forms. Each unit has its own input registers
for A and B, and one C register is shared. These registers are also the
ID/EX pipeline registers of the dot-product operands. An instruction loads
only the registers of the unit it uses (`dotp_gate_en_o`), so the other three
units see no input change. The original design clock-gates these registers.
Here they are written as registers with an enable, which a synthesis flow
maps onto clock-gating cells.

The multipliers work on (W+1)-bit signed values, so one multiplier serves
all three signedness variants:

- `dotup`: unsigned x unsigned;
- `dotusp`: unsigned A x signed B;
- `dotsp`: signed x signed.

Sums wrap modulo 2^32.

## Pipeline of `mpic_top`

The top has two stages.

**ID stage:**

- Decode the instruction.
- Read `rs1`, `rs2` and `rd` (rd is the accumulator of `sdot*`).
- Forward each operand. The order is the EX result being written this cycle,
  then the load data being written this cycle, then the register file.
- Form operand B: register, or the lowest element of `rs2` or of the 6-bit
  immediate replicated at the lane width.
- Let the MPC count.

**EX stage:**

- SIMD ALU, dot-product unit, or CSR access.
- The result goes to register write port A at the end of the cycle.

Load data from the load-store unit enters on write port B (`lsu_*`). If both
ports write the same register in one cycle, port A (the younger instruction)
wins.

**Timing:**

- One instruction per cycle.
- The result is written one cycle after issue (`wb_*` shows it), and a
  dependent instruction can issue right behind it.
- The decode stage holds its instruction while `stall_i` is high.
- The decode stage also holds for one cycle after issuing a CSR instruction.
  A dot product thus never decodes with a SIMD_FMT or MPC_CNT that the CSR
  instruction is still about to change.
- The fetch side must keep `instr_i` stable while `instr_valid_i` is high and
  `instr_ready_o` is low. An assertion in `mpic_top` checks this.
- A word that is not a virtual SIMD or CSR instruction raises `illegal_o` and
  passes as a bubble; in a complete core it belongs to the base decoder.
- A CSR address other than the three above is not written back; it belongs to
  the base core.

## Instructions and encoding

| class      | instructions |
|------------|--------------|
| ALU        | `pv.add`, `pv.sub`, `pv.avg`, `pv.avgu` |
| comparison | `pv.max(u)`, `pv.min(u)` |
| shift      | `pv.srl`, `pv.sra`, `pv.sll` (shift by the low log2(W) bits of each B lane) |
| abs        | `pv.abs` |
| dot product | `pv.dotup`, `pv.dotusp`, `pv.dotsp` |
| sum of dot products | `pv.sdotup`, `pv.sdotusp`, `pv.sdotsp` |

All except `pv.abs` come in three forms: vector, `.sc` (scalar `rs2`) and
`.sci` (6-bit immediate). `pv.avg` keeps the carry: it uses a W+1-bit sum,
then shifts arithmetically (logically for `avgu`). Under a mixed format, ALU
instructions use the lane width of A.

The decoder uses the packed-SIMD encoding of the base core:

- opcode `1010111`;
- `instr[31:26]` selects the operation:

  | op     | bits   | op     | bits   | op       | bits   |
  |--------|--------|--------|--------|----------|--------|
  | add    | 000000 | max    | 001100 | abs      | 011100 |
  | sub    | 000010 | maxu   | 001110 | dotup    | 100000 |
  | avg    | 000100 | min    | 001000 | dotusp   | 100010 |
  | avgu   | 000110 | minu   | 001010 | dotsp    | 100110 |
  | srl    | 010000 | sra    | 010010 | sdotup   | 101000 |
  | sll    | 010100 |        |        | sdotusp  | 101010 |
  |        |        |        |        | sdotsp   | 101110 |

- `instr[14:13]` selects the form: `00` vector, `10` .sc, `11` .sci;
- the immediate is `{instr[24:20], instr[25]}`, sign-extended.

The old half/byte bit `instr[12]` is ignored: that one spare bit is exactly
what made explicit precision encodings impossible. CSR instructions are the
standard `csrrw/csrrs/csrrc` and their immediate forms.

## Files

`rtl/`:

| module | role |
|--------|------|
| `mpic_pkg` | formats, operation enums, decoded-instruction struct, CSR addresses |
| `mpic_top` | the two-stage datapath |
| `mpic_decoder` | virtual SIMD and CSR decoding |
| `mpic_gpr` | 32 x 32 register file, 3 read and 2 write ports |
| `mpic_csr` | SIMD_FMT, MPC_MACS, access to MPC_CNT |
| `mpic_mpc` | mixed-precision controller |
| `mpic_simd_alu`, `mpic_alu_lanes` | SIMD ALU and its per-width lane arrays |
| `mpic_dotp_unit` | gated input registers, slicer, four DOTP units, output mux |
| `mpic_slicer_router` | sub-group selection and widening of operand B |
| `mpic_dotp_lane` | one DOTP-W unit (multipliers and adder tree) |

`tb/` has one self-checking testbench per module, named `tb_<module>`. The
reference model, `mpic_ref_pkg`, computes every result element by element
with integer arithmetic. Two testbenches cover the whole design:

- `tb_mpic_top` runs the whole datapath. It starts with the 8x2 kernel above
  and checks its sub-groups, its rate (4 instructions in 4 cycles) and its
  latency, plus 2-bit mode at 16 MACs per instruction. Then it runs 30,000
  random instructions with random stalls, loads, CSR writes and illegal
  words against an architectural model. It counts each mechanism (stalls,
  CSR hold, both forwarding paths, write-port collision, sub-group advance,
  wrap and reuse, software sub-group write, every format, every ALU
  operation, every unit's clock enable) and fails if one never occurred.
- `tb_mpic_qnn_layer` runs a whole convolution layer (input 16x16x32,
  64 filters of 3x3x32, stride 1, zero padding 1) in all nine
  weight/activation precisions. The testbench does the im2col step; the
  datapath runs the matrix multiplication as 2048 blocks of 4 output
  channels x 2 pixels (K = 288). It checks all 16x16x64 sums against a
  reference convolution, and checks that each block takes exactly one cycle
  per load or instruction slot. It takes about a minute.

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/mpic_pkg.sv tb/mpic_ref_pkg.sv tb/tb_mpic_top.sv --top-module tb_mpic_top
./obj_dir/Vtb_mpic_top
```

Each testbench ends with `TB_RESULT checks=N failures=M`.

## Inner-loop throughput

`tb_mpic_qnn_layer` issues one load or instruction per cycle and models no
memory latency. It measures these rates for the matrix-multiplication part
of the layer. The cycles column is per 4x2 block of 2304 MACs; the whole
layer is 2048 such blocks (4,718,592 MACs):

| config | format   | cycles | MAC/cycle |
|--------|----------|--------|-----------|
| w8a8   | INT8     | 1008   | 2.28      |
| w4a4   | INT4     | 504    | 4.57      |
| w2a2   | INT2     | 252    | 9.14      |
| w4a8   | MIX 8x4  | 864    | 2.66      |
| w2a8   | MIX 8x2  | 792    | 2.90      |
| w2a4   | MIX 4x2  | 432    | 5.33      |
| w8a4   | MIX 8x4  | 936    | 2.46      |
| w8a2   | MIX 8x2  | 900    | 2.56      |
| w4a2   | MIX 4x2  | 468    | 4.92      |

The published whole-layer rates include the im2col and requantization
phases, so they are lower: about 2.1 MAC/cycle for w8a8 and 6.5 for w2a2.
They show the same ordering: mixed formats run at about the rate of their
wider operand, and slightly above it.

## What follows the published design and what does not

These parts follow the published design:

- the format encodings;
- the instruction list;
- the four per-width dot-product units with gated input registers, the
  slicer and router, and the output multiplexer;
- selection of the unit by operand A;
- the controller's counting conditions and wrap points, its programmable MAC
  counter and the writable sub-group;
- the stage split of decode and execute, the three-port register file and
  its forwarding muxes.

The following are choices of this implementation. The published description
does not settle them:

- **Addresses and resets.** The CSR addresses and reset values, and ignoring
  undefined SIMD_FMT writes.
- **Counter restarts.** Restarting the counters on format or MPC_MACS writes.
- **Sub-group order.** Group 0 is the least significant group.
- **Unsigned B.** Zero extension for an unsigned B.
- **Lane details.** The W+1-bit average and the shift-amount width.
- **ALU under mixed formats.** ALU instructions use the width of A.
- **Structure.** Separate ALU lane arrays per width, and enables in place of
  explicit clock-gate cells.
- **CSR hold.** The one-cycle hold after a CSR instruction.
- **Collisions.** Port A winning a double write.
- **Encoding.** The encoding taken from the base core.

Not included, because they are the unchanged base core or SoC:

- instruction fetch and prefetch, the pipeline controller, hardware loops;
- the load-store unit and memory interconnect;
- the scalar ALU, multiplier and 32-bit MAC;
- the base ISA decoder and machine CSRs, and debug;
- the SoC with its 512 kB SRAM.

The datapath therefore cannot fetch or load by itself. Testbenches play the
role of fetch and of the load-store unit.
