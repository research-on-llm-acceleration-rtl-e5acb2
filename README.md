# VDOT: an int8 dot-product instruction for a 64-bit RISC-V core

Most of the arithmetic in transformer inference — fully connected layers,
attention scores `Q·Kᵀ`, similarity measures — is dot products. On a plain
RV64 core an int8 dot product costs a load, a sign extension, a multiply and
an add per element. The VDOT extension packs eight int8 elements into one
64-bit general-purpose register and lets a single instruction multiply two
such registers element by element and add up the eight products:

```
vdot rd, rs1, rs2      rd = sum_{i=0..7} int8(rs1[8i+7:8i]) * int8(rs2[8i+7:8i])
```

The unit is tightly coupled to the core rather than attached as a
coprocessor: it sits in the execute stage next to the ALU and the load/store
unit, takes its operands from the ordinary integer register file and writes
its result back through the ordinary writeback path. No new registers, no new
memory path and no change to the bus width are needed. Software keeps doing
the loads and the outer accumulation; the instruction replaces the inner
eight multiply-adds.

This repository gives RTL for the parts of that extension that are new: the
instruction decoder, the dot-product unit (VDOTU) and a small pipeline slice
that connects them to a host core's register file and writeback. The host
core itself (fetch, rename, caches, load/store unit, register file) is not
included; where it would connect, the top module has ports.

## Instruction encoding

VDOT is an R-type instruction in the `custom-0` major opcode, which the
RISC-V specification reserves for vendor extensions, so it can never collide
with a standard instruction.

| bits  | 31:25   | 24:20 | 19:15 | 14:12 | 11:7 | 6:0     |
|-------|---------|-------|-------|-------|------|---------|
| field | funct7  | rs2   | rs1   | funct3| rd   | opcode  |
| value | 0000000 | rs2   | rs1   | 000   | rd   | 0001011 |

All three fixed fields are compared; any other `custom-0` word is treated as
"not VDOT" and handed on unchanged. `vdot_pkg::vdot_encode(rd, rs1, rs2)`
builds the word.

Element `i` of a register is byte `i` (bits `8i+7:8i`), which is what a
little-endian 64-bit load of an `int8_t[8]` array produces. The elements are
signed. Because the result is a sum, the element order only has to agree
between the two operands.

## The dot-product unit (`vdotu`)

```
 in_src1 ─┬─ byte0 ─┐                                       
 in_src2 ─┼─ byte0 ─┴─ × ─┐                                  
          │  ...          ├─ + ─┐                            
          │  byte7 ─── × ─┘     ├─ + ─┐                      
          │                 ... ┘     ├─ + ─► sign-extend ─► [out reg] ─► out_data
          │                       ... ┘                      
```

* Eight 8×8 signed multipliers produce 16-bit products.
* Seven adders in three levels (4, 2, 1) add them. Each level widens by one
  bit, so the root is 19 bits wide. `|sum| ≤ 8·128·128 = 131072` cannot
  overflow.
* The 19-bit sum is sign-extended to 64 bits, the register width.

The multipliers and the tree are combinational and one register stage holds
the result, so the unit has a latency of one cycle and accepts one operation
per cycle. Both sides use valid/ready handshakes. If the writeback side is not
ready, the unit keeps its result unchanged and drops `in_ready`. A new
operation may enter in the same cycle that the held result leaves. An
assertion checks that a held result does not change.

`ELEM_W` (default 8) sets the element width, and `LANES = 64 / ELEM_W`. The
adder tree is generic for any power-of-two lane count. The default 8-bit
configuration is tested everywhere; the 16-bit configuration (four lanes)
is tested by a second instance in the unit testbench.

## The pipeline slice (`nanhu_vdot_exu`)

The top module shows how the unit fits into a core pipeline. It is an
in-order stand-in for the host's rename/dispatch logic:

| cycle | stage     | what happens                                                      |
|-------|-----------|-------------------------------------------------------------------|
| 0     | decode    | `vdot_decoder` raises `is_vdot`; a VDOT goes into the dispatch register, any other word goes out on `base_*` |
| 1     | dispatch  | `rf_raddr1/2 = rs1/rs2`, data comes back the same cycle; operands enter `vdotu` |
| 2     | writeback | `wb_valid`, `wb_rd`, `wb_data` are offered to the core's writeback |

With the writeback port always ready, a VDOT accepted at clock edge *k* is
written back at edge *k+2*, and one VDOT can be accepted every cycle.

**Stall.** If `wb_ready` stays low, the unit holds its result. The dispatch
register then fills, and `dec_ready` falls for VDOT instructions. Other
instructions only see `base_ready`.

**Bypass.** In the dispatch stage, a VDOT may read the `rd` of the previous
VDOT before the register file has been written. So the dispatch stage
compares `rs1`/`rs2` with the `rd` held in the unit's output register and
takes the value from there. `x0` is never bypassed. The register file is
assumed to perform the write on the same clock edge as the `wb` handshake;
after that edge the held value is gone and the file has it.

**Ordering.** VDOT instructions stay in order among themselves. Ordering
against the instructions handed out on `base_*` is left to the host core,
which (in an out-of-order core) renames registers anyway.

`ev_vdot_issue`, `ev_bypass` and `ev_stall` pulse once per event, for
performance counters.

### Ports of the top

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `dec_valid`, `dec_ready`, `dec_inst` | in/out/in | 1/1/32 | instruction from fetch |
| `base_valid`, `base_ready`, `base_inst` | out/in/out | 1/1/32 | non-VDOT instruction to the host decoder |
| `rf_raddr1`, `rf_raddr2` | out | 5 | register file read addresses |
| `rf_rdata1`, `rf_rdata2` | in | 64 | register file read data, same cycle |
| `wb_valid`, `wb_ready`, `wb_rd`, `wb_data` | out/in/out/out | 1/1/5/64 | result to writeback |
| `ev_vdot_issue`, `ev_bypass`, `ev_stall` | out | 1 | event pulses |

## Software flow

An int8 dot product of length `n` (a multiple of 32) is computed in blocks of
32 elements. For each block:

1. load 32 elements of X into four registers, 8 per register;
2. load the matching 32 elements of Y into four more registers;
3. issue four VDOTs, one per register pair (for example
   `vdot x10, x1, x5` … `vdot x13, x4, x8`);
4. add the four results to a 64-bit accumulator in software.

Then convert the accumulator to the type the model needs. A row of a GPT-2
fully connected layer takes `n_embd / 8` VDOTs: 96, 128 and 160 for the
small (768), medium (1024) and large (1280) models. The sums stay below
`1280 · 16384 ≈ 2.1·10⁷` and fit easily. Weights stay in main memory; the
design adds no storage.

Reported results for this extension on an FPGA prototype of a larger core
(not reproduced by this RTL):
* the dot-product loop runs about 4× faster than the scalar code;
* GPT-2 inference is about 28–31 % faster;
* area grows by about 2.8 % LUTs and 0.9 % flip-flops;
* power grows by about 0.5 %.

## Where this RTL goes beyond the published description

The published design gives the unit's structure (eight 8-bit multipliers and
seven adders in a tree, 64-bit result), the instruction format, and its
place in the execute stage. The following are choices made here:

* signed int8 elements, byte *i* = element *i*, exact sum, no saturation;
* one output register (latency 1, throughput 1/cycle) and valid/ready
  handshakes;
* funct3 is compared as well as funct7 and the opcode;
* the in-order decode/dispatch/writeback slice, the combinational register
  file read, the bypass and the asynchronous reset. In the original design
  these jobs fall to the host core's existing rename, dispatch and
  writeback logic.

## Files

| file | contents |
|------|----------|
| `rtl/vdot_pkg.sv` | constants (opcode, funct fields, XLEN), `vdot_uop_t`, `vdot_encode()` |
| `rtl/vdot_decoder.sv` | combinational VDOT recogniser |
| `rtl/vdotu.sv` | the dot-product unit |
| `rtl/nanhu_vdot_exu.sv` | top: decode → dispatch → VDOTU → writeback |
| `tb/tb_vdot_decoder.sv` | decoder: swept VDOT words, single-field mutations, ordinary instructions |
| `tb/tb_vdotu.sv` | unit: corner values, random values, latency, throughput, back-pressure, a 16-bit-element instance |
| `tb/tb_nanhu_vdot_exu.sv` | end to end: latency, issue rate, dot products of length 32/768/1024/1280, random dependent programs with back-pressure; counts selections, hand-overs, bypasses and stalls |
| `tb/rv_regfile_model.sv` | behavioural 32×64 register file used by the end-to-end test |

Every testbench checks itself. Each one prints
`TB_RESULT checks=N failures=M` at the end and has a watchdog.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/vdot_pkg.sv rtl/vdot_decoder.sv rtl/vdotu.sv rtl/nanhu_vdot_exu.sv \
    tb/rv_regfile_model.sv tb/tb_nanhu_vdot_exu.sv \
    --top-module tb_nanhu_vdot_exu -o sim
./obj_dir/sim
```

To run the unit tests, replace the last testbench and the top module with
`tb_vdotu` (needs `vdot_pkg.sv` and `vdotu.sv`) or `tb_vdot_decoder` (needs
`vdot_pkg.sv` and `vdot_decoder.sv`). Every test finishes in well under a
second at the default parameters, which are the published sizes.
