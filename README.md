# A MIPS datapath with a CPLD functional unit

This design adds a reprogrammable functional unit, built from the logic
blocks of a CoolRunner XPLA2 CPLD, to the execute stage of a MIPS-II
processor. The unit sits next to the ALU and shifter and reads the same two
register operands. One new register-type instruction uses it:

    cpld rd, rs, rt

The unit's circuit is loaded as a configuration image. Short straight-line
code sequences with at most two register inputs and one result can then be
replaced by a single `cpld` instruction. The intended flow is this: a compiler
finds such a sequence, turns it into a CPLD netlist, and links the netlist
into the program as the unit's configuration. Three sequences from real code
are used throughout as examples:

| sequence | original code | what it computes |
|---|---|---|
| graphics, segment 1 | `and $8,$9,1; li $10,1; subu $11,$10,$8; sll $12,$11,1` | result bit 1 = NOT rs bit 0, all other bits 0 |
| graphics, segment 2 | 9 instructions of shifts, masks and adds | byte swap (endian conversion), pure rewiring |
| linker arithmetic | `addu $14,$5,-1; and $15,$14,255; sra $24,$15,3; addu $25,$24,1` | `((rs - 1) mod 256) / 8 + 1` |

The published figures for the real device are these. The first two sequences
run in 11.5 ns, so one cycle at clock rates up to 85 MHz. The third uses 38
macrocells and takes 25 ns.

## Structure

```
hybrid_cpu                    execute datapath (top)
 |- register_file             32 x 32 bit, 2 read / 1 write, $0 = 0
 |- std_fu                    ALU + shifter (ADDU SUBU AND OR SLL SRL SRA, ADDIU ANDI ORI LUI)
 `- cpld_fu  x N_CPLD_FU      reprogrammable unit
     |- configuration registers
     |- xpla2_gzia            one per Fast Module: routes pins/macrocells to block inputs
     |- xpla2_fast_module     x N_FM, four logic blocks each
     |   `- xpla2_logic_block x 4
     `- xpla2_gzia            result-pin routing
hybrid_pkg                    geometry, configuration layout, opcodes
```

The processor parts around the execute stage are not modelled: fetch and PC
logic, the address adder, multiply/divide with HI/LO, and the memory stage.
Instructions enter `hybrid_cpu` on a port and results leave on the `wb_*`
port.

## The XPLA2 fabric

### Logic block

A logic block (`xpla2_logic_block`) has 36 inputs and 20 macrocell outputs.
Each input enters an AND array in both polarities. Product terms come in two
kinds:

* **PAL terms**: four per macrocell. Each macrocell owns its four.
* **PLA terms**: 32 per block. A programmable OR array lets any macrocell add
  any subset of them.

A macrocell output is the OR of its PAL terms and its selected PLA terms.
Here the macrocell is purely combinational. The real macrocell also has a
register, polarity control and eight per-block control terms. Their function
is not specified, so they are left out. All of the example circuits are
combinational anyway.

The configuration of one block is the packed struct `hybrid_pkg::lb_cfg_t`
(8704 bits, 272 words):

* `pal_and[m][t]` and `pla_and[p]` are 72-bit connection masks. Bit `2i`
  connects input `i`; bit `2i+1` connects its complement.
* A term with no connection is 1.
* A term that connects both polarities of one input is 0. This is the erased
  state.
* `pla_or[m][p]` adds PLA term `p` into macrocell `m`.

### Fast Modules and the interconnect

Four logic blocks make a Fast Module (`xpla2_fast_module`). Every block input
comes from the global interconnect (`xpla2_gzia`). The interconnect is a full
crossbar: each destination picks one source by number.

Source numbering, used in all configuration data:

| source | meaning |
|---|---|
| 0 .. 31 | `rs` bits (input pins) |
| 32 .. 63 | `rt` bits (input pins) |
| 64 + 20*b + m | macrocell `m` of logic block `b` (blocks numbered across Fast Modules, 4 per module) |

**Levelling rule (this design's own restriction).** A block in Fast Module
`f` can only see the input pins and the macrocells of Fast Modules `0..f-1`.
Selecting anything else reads 0. As a result, no configuration can create a
combinational loop, and the RTL is loop-free for every lint and synthesis
tool. Multi-level logic must put each level in a higher Fast Module. The
linker example does this: the decrement and shift go in module 0, and the
increment goes in module 1. The real device has no such rule.

The 32 result pins are routed through a second crossbar that can reach every
macrocell and pin. A result pin whose enable bit is clear reads 0.

### Configuration port

The configuration is written one 32-bit word at a time on
`cfg_we / cfg_addr / cfg_wdata`, with `cfg_addr = {region[1:0], lb[7:0], word[8:0]}`:

| region | `lb` | `word` | data |
|---|---|---|---|
| 0 `CFG_ARRAY` | logic block | 0 .. 271 | word `word` of that block's `lb_cfg_t`, bit 0 = struct LSB |
| 1 `CFG_GZIA` | logic block | input 0 .. 35 | source number of that block input |
| 2 `CFG_OUT` | ignored | result pin 0 .. 31 | bit 31 = drive, low bits = source number |

Reset erases everything: all terms are 0, all selects are 0, and no result
pin is driven. The unit can be rewritten at any time. A `cpld` instruction
issued in the cycle after a write already sees the new circuit.

### Size

`N_FM = 12` Fast Modules by default, which gives 48 logic blocks and 960
macrocells. That is the size of the PZ3960 part, inferred from its name.
Only 96 pins are used inside the processor: 64 operand inputs and 32 result
outputs. The stand-alone part has 384 I/O pins. Per logic block, the
configuration holds 8704 array bits plus 36 ten-bit input selects. The whole
unit holds about 435 kbit of configuration, all in flip-flops.

## The processor datapath

`hybrid_cpu` decodes the instruction and reads `rs` and `rt`. Both operands go
to `std_fu` and to every CPLD-FU at the same time. The opcode picks which
result is written back. The write happens at the next rising edge, so the next
instruction reads the new value without forwarding.

* Standard MIPS-II encodings are used for `ADDU SUBU AND OR SLL SRL SRA`
  (SPECIAL) and for `ADDIU ANDI ORI LUI`. `li` is `ADDIU` or `LUI`+`ORI`.
* `cpld rd, rs, rt` is encoded as opcode `0x1C` with R-type fields. The
  `shamt` field picks the CPLD-FU when `N_CPLD_FU > 1`. Both the opcode and
  the use of `shamt` are choices of this design.
* Any other instruction, or a `cpld` that names a unit that does not exist,
  raises `illegal` and writes nothing.
* Register `$0` reads as zero and ignores writes. `cpld rd, rs, $0` therefore
  feeds a null second operand to a one-input circuit.

Timing: every instruction takes one cycle from issue to write-back, including
`cpld`. The unit's delay is not modelled. On the real part, the clock period
must cover the circuit's pin-to-pin delay: 7.5 ns through the PAL array,
+1.5 ns if PLA terms are used, and +4.0 ns through the interconnect.

Ports of `hybrid_cpu`: `clk`, `rst_n` (asynchronous, active low),
`instr_valid`, `instr[31:0]`, `illegal`, `cfg_we`, `cfg_fu`, `cfg_addr`,
`cfg_wdata`, `wb_valid`, `wb_rd[4:0]` and `wb_data[31:0]`. The `wb_*` outputs
are registered copies of the write-back.

## Mapping the examples

The testbench package `tb/tb_fabric_pkg.sv` holds the three example circuits
as sum-of-products descriptions. It also has a small placer, `place_lb`, that
fits them into logic blocks.

* **Segment 1**: one macrocell with one PAL term, `NOT rs[0]`, routed to
  result pin 1.
* **Segment 2**: 32 macrocells in blocks 0 and 1. Each one copies a single
  `rs` bit, and result pin `8k+i` reads `rs[8(3-k)+i]`.
* **Linker arithmetic**: only `rs[7:0]` matters. Fast Module 0 forms
  `d = rs[7:0] - 1` for bits 3..7 as `d_i = x_i XOR (x[i-1:0] == 0)`. That is
  `i+1` product terms for bit `i`: four fit in the PAL terms and the rest use
  PLA terms. Fast Module 1 forms `t + 1` on those five bits as
  `r_j = t_j XOR (t[j-1:0] all ones)`, plus a carry bit. The total is 11
  macrocells. The vendor tools used 38 for the same function, because they
  did a different decomposition.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_xpla2_logic_block` | random sparse configurations against an independent SOP model; PAL-only and PLA-only configurations; erased state |
| `tb_xpla2_fast_module` | four different block configurations, each block wired to its own inputs |
| `tb_xpla2_gzia` | random selects, including out-of-range selects |
| `tb_register_file` | random traffic against a shadow array, `$0`, read during write |
| `tb_std_fu` | every operation against bit-level reference code, shift corner cases |
| `tb_cpld_fu` | 2 Fast Modules: erased state, all three example circuits loaded through the port, the levelling rule |
| `tb_hybrid_cpu` | default size: each example runs as the original MIPS sequence on the standard units and as one `cpld`; results must match the software evaluation and each other; `cpld` must take 1 cycle and the sequences 4 and 9; `$0` writes and illegal instructions are also tested |

`tb_hybrid_cpu` counts each mechanism it exercises (cpld execution, standard
execution, reprogramming, illegal instruction, `$0` write). A mechanism that
never happens counts as a failure.

Running one testbench with Verilator:

```
verilator --binary --timing --assert rtl/hybrid_pkg.sv tb/tb_fabric_pkg.sv \
    rtl/xpla2_logic_block.sv rtl/xpla2_fast_module.sv rtl/xpla2_gzia.sv \
    rtl/cpld_fu.sv rtl/register_file.sv rtl/std_fu.sv rtl/hybrid_cpu.sv \
    tb/tb_hybrid_cpu.sv --top-module tb_hybrid_cpu
./obj_dir/Vtb_hybrid_cpu
```

At the default size, about 13,000 configuration registers are generated, so
the Verilator build of `tb_hybrid_cpu` takes a few minutes. The simulation
itself takes about a second. For faster turnaround, set `N_FM` on
`hybrid_cpu` (at least 2 for the linker example).

## Where this departs from the CPLD and processor it describes

* Macrocells have no register, polarity control or control terms.
* The interconnect is levelled (see above) and has no internal structure or
  delay. No timing of any kind is modelled.
* The Fast Module count of 12 comes from the part name. Only the 96 pins the
  functional unit needs are present.
* The configuration is a word-addressed register file, not the device's own
  configuration format.
* The processor is reduced to an execute stage with a one-cycle write-back.
  It has no pipeline registers, hazards, memory operations, branches or
  multiply/divide. Its ALU supports only the operations listed above.
* The `cpld` opcode, and the use of `shamt` to select a unit, are this
  design's own.
