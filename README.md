# A bespoke RISC-V core with a SIMD MAC unit for printed ML inference

Printed electronics (EGFET and similar processes) are cheap and flexible, but they are
slow (Hz to kHz clocks) and a general-purpose 32-bit core printed in them is large and
power-hungry. This design takes a two-stage RV32IM core and cuts it down to
what a small set of printed machine-learning programs needs:

- the program counter is 10 bits and data addresses are 8 bits;
- only 12 registers are kept;
- unused instructions are removed;
- there is no debug, interrupt or compressed-instruction logic.

The freed area pays for a **SIMD multiply-accumulate (MAC) unit**. It splits each 32-bit
register into 32/n lanes of n bits and, in one cycle, multiplies and accumulates all lanes
at once. The default is n = 16: two 16-bit MACs per cycle, which matches models whose
weights and inputs are 16-bit fixed point.

The RTL is SystemVerilog (IEEE 1800-2017). It is synthesizable, apart from the
testbenches, and has no vendor primitives.

## 1. The SIMD MAC unit (`simd_mac`)

This is the part that carries the design's speed-up, and the one to understand first.

```
 a[31:0]  = | lane L-1 | ... | lane 1 | lane 0 |     lane i = bits [(i+1)n-1 : i*n]
 b[31:0]  = | lane L-1 | ... | lane 1 | lane 0 |     L = 32/n lanes

 per lane:  acc_i <= (clr ? 0 : acc_i) + a_i * b_i          (when en)
 total:     out   <= sum over i of the new acc_i           (binary adder tree)
```

- **Lanes.** `PREC` (n) may be 32, 16, 8 or 4, giving 1, 2, 4 or 8 lanes. Lane values are
  signed two's complement. Lane 0 is the least significant n bits, so packing two 16-bit
  values as `{hi, lo}` in a word puts `lo` in lane 0.
- **Accumulators.** Each lane keeps its own 32-bit accumulator (`ACC_W`). The 2n-bit
  product is sign-extended to 32 bits; at n = 32 it is cut to its low 32 bits. Overflow wraps.
- **Output.** A binary adder tree sums the lane accumulators. The result is loaded into
  the 32-bit `out` register at the **same clock edge** as the accumulators. A MAC step
  therefore takes one cycle, and the running total is readable in the next cycle.
- **What the lanes mean.** Only the sum of the lanes leaves the unit. So a multi-lane unit
  works on one dot product at a time: lane 0 handles the even-numbered terms and lane 1 the
  odd ones (at n = 16). A neuron with 12 inputs takes 6 MAC steps rather than 12
  multiplies and 12 adds.

The core reaches the unit through three custom instructions on the RISC-V *custom-0*
opcode (`0001011`, R-type, funct7 = 0):

| mnemonic | funct3 | effect |
|---|---|---|
| `MAC rs1, rs2`  | `000` | acc_i += rs1_i × rs2_i for every lane |
| `MACZ rs1, rs2` | `001` | acc_i = rs1_i × rs2_i (starts a new sum) |
| `MACRD rd`      | `010` | rd = out (sum of the lane accumulators) |

A typical neuron loop: `lw` a pair of inputs, `lw` a pair of weights, `MACZ` for the first
pair, then `MAC` for each further pair, `MACRD` at the end, then add the bias. The MAC
never stalls, and `MACRD` may follow a `MAC` directly.

## 2. The trimmed instruction set

| kept | removed (decoded as illegal) |
|---|---|
| LUI, AUIPC, JAL, JALR | FENCE, ECALL, EBREAK, all CSR instructions |
| BEQ, BNE, BLT, BGE, BLTU, BGEU | SLT, SLTI |
| LB, LH, LW, LBU, LHU, SB, SH, SW | MULH, MULHSU, MULHU |
| ADD(I), SUB, AND(I), OR(I), XOR(I), SLL(I), SRL(I), SRA(I), SLTU, SLTIU | any use of x12..x31 |
| MUL, DIV, DIVU, REM, REMU | compressed (16-bit) instructions |
| MAC, MACZ, MACRD | |

- **Illegal instructions.** There are no traps: interrupts and CSRs are gone. An illegal
  instruction raises `illegal` and `halted` and stops the core.
- **End of program.** A jump to itself (`jal x0, 0`) is the end-of-program convention. It
  raises `halted`.
- **Address widths.** Addresses are cut to the kept widths: the PC to 10 bits (1 KiB,
  256 instructions) and data addresses to 8 bits (256 bytes). Loads and stores must be
  naturally aligned. AUIPC and the link value of JAL/JALR return the 10-bit PC
  zero-extended.

## 3. Pipeline and timing (`bespoke_core`)

There are two stages.

- **IF** reads the program ROM at `pc` (combinational read) and registers the instruction.
- **EX** does everything else in one cycle: decode, register read, ALU or MAC, data-memory
  access (combinational read, write at the clock edge) and write-back.

| event | cost |
|---|---|
| ALU, load, store, MAC, MACZ, MACRD, not-taken branch | 1 cycle |
| taken branch, JAL, JALR | 1 cycle + 1 bubble (the fetched instruction is flushed) |
| MUL | 3 cycles (2 stall cycles): one 16×16 multiplier used three times |
| DIV, DIVU, REM, REMU | 34 cycles (33 stall cycles): restoring divider, 1 bit per cycle |

The mul/div unit (`multdiv`) uses a simple handshake:

- The core holds `req` high while the instruction sits in EX.
- The unit raises `done` for one cycle, with `result` valid in that cycle.
- The instruction retires at that clock edge.

Division by zero and the signed overflow case return the RISC-V results.

Four status outputs report each cycle:

- `retire`: an instruction completes;
- `stall`: EX is waiting on the mul/div unit;
- `flush`: the fetched instruction is discarded;
- `mac_step`: a MAC or MACZ executes.

## 4. System (`bespoke_soc`)

`bespoke_soc` is the top level. It connects the core to:

- **`prog_rom`.** 256 × 32-bit words. In a printed chip this would be a ROM fixed at print
  time. Here it is an array with a load port (`prog_we/prog_addr/prog_wdata`) that fills it
  while the core is held in reset.
- **`data_ram`.** 256 bytes, organised as words with byte enables. Port A belongs to the
  core. Port B is a host port (`host_*`) for placing inputs and weights and reading results.
  If both ports write the same byte in one cycle, port A wins.

Typical use:

1. Hold `rst_n` low.
2. Load the program and the data.
3. Release `rst_n`.
4. Wait for `halted`.
5. Read the results through `host_*`.

Reset is asynchronous and active low. It clears the PC, the pipeline, the registers and the
MAC accumulators. Memory contents are not reset.

## 5. Measured behaviour

Measured in simulation at the default parameters:

| program | instructions | cycles |
|---|---|---|
| MLP 11-5-3, ReLU, argmax, 16-bit, with SIMD MAC | 73 | 432 |
| same MLP with MUL/ADD only | 67 | 1010 |
| linear SVM one-vs-one, 21 features, 3 classes (MAC) | 82 | 296 |
| linear SVM regression, 11 features (MAC) | 20 | 53 |
| decision tree, depth 2 | 21 | 15 |
| 8 × (MUL, DIV, REM) | 15 | 644 |
| insertion sort, 16 words | 15 | 673 |

A dot product of 24 values runs in 196, 100, 52 and 28 cycles at `MAC_PREC` = 32, 16, 8
and 4 (24, 12, 6 and 3 MAC steps).

On this core the MAC version of the MLP needs 57 % fewer cycles. The MAC program is
slightly longer here only because its loop has a separate first step (`MACZ`).

**Fixed-point convention used by the tests.**

- Inputs are Q0.15 values in [0, 1).
- Weights are signed 16-bit.
- Biases are 32-bit, in the scale of the products.
- A hidden value is min(max(sum, 0) >> 15, 32767).

**What fits in memory.** The 8-bit data address limits a model to 256 bytes of inputs,
weights and results:

- an 11-input MLP with 5 hidden neurons fits (about 196 bytes);
- a 3-class one-vs-one SVM on 21 features fits (204 bytes);
- a 21-input MLP fits with up to 3 hidden neurons but not with 5.

## 6. Relation to the published design

**Taken from the published design:**

- the two-stage RV32 base core;
- the removed units and instructions (debug, interrupts, compressed decoder, SLT, most
  CSRs, system calls, MULH);
- 12 registers, a 10-bit PC and 8-bit base addresses;
- a multi-cycle multiplier;
- the SIMD MAC organisation: lane split, one multiplier and accumulator per lane, adder
  tree and 32-bit output;
- the 32/16/8/4-bit precision options with 1/2/4/8 lanes;
- single-cycle MAC;
- 16-bit precision as the main configuration.

**This design's own choices:**

- the core's microarchitecture, which is a fresh, simple core and not the original
  Zero-Riscy RTL;
- which 12 registers are kept (x0..x11);
- that SLTU/SLTIU stay;
- all CSRs and FENCE removed;
- the custom instruction encodings, including the separate `MACZ` and `MACRD`;
- signed lanes and 32-bit lane accumulators (the block diagram labels the lane registers
  n bits, which would overflow a 16 × 16 product);
- the mul/div algorithms and cycle counts;
- the halt convention;
- combinational memory reads, the memory host ports and the ROM load port.

**Not modelled:**

- the printed process: EGFET cells, ROM cell area and power;
- the synthesis and measurement flow that chooses which logic to remove;
- the trained models behind the accuracy figures;
- the TP-ISA variants, which are a different core used for comparison.

**Open points:**

- The published text says the unit computes "32/n neurons" per cycle, but its block diagram
  gives only the summed output. This RTL follows the diagram, so the lanes split one dot
  product.
- Where model weights are stored (data memory or program code) is not stated. The tests
  keep them in data memory.

## 7. Files

| file | contents |
|---|---|
| `rtl/bespoke_pkg.sv` | widths, opcodes, ALU and mul/div operation enums, MAC funct3 codes |
| `rtl/simd_mac.sv` | SIMD MAC unit |
| `rtl/regfile.sv` | 12-entry register file |
| `rtl/alu.sv` | ALU and branch compare flags |
| `rtl/multdiv.sv` | multi-cycle MUL / DIV / REM |
| `rtl/bespoke_core.sv` | two-stage core, decoder, branch unit, load/store alignment |
| `rtl/prog_rom.sv` | program memory |
| `rtl/data_ram.sv` | data memory |
| `rtl/bespoke_soc.sv` | top level |
| `tb/rv_asm_pkg.sv` | two-pass assembler used to write test programs in SystemVerilog |
| `tb/tb_<block>.sv` | self-checking testbench of each block |
| `tb/tb_bespoke_soc.sv` | end-to-end MLP test, MAC against MUL/ADD, default parameters |
| `tb/tb_workloads.sv` | SVM, decision tree, mul/div and sort programs on the top level |
| `tb/tb_precision_sweep.sv` | the top level built at all four MAC precisions, running one dot-product program |

Every testbench ends by printing `TB_RESULT checks=N failures=M`.

## 8. Simulating and changing it

Run from the folder that holds `rtl/` and `tb/`, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
  --top-module tb_bespoke_soc rtl/bespoke_pkg.sv tb/tb_bespoke_soc.sv
./obj_dir/Vtb_bespoke_soc
```

Replace `tb_bespoke_soc` with any other testbench name. `verilator --lint-only -Wall
-Irtl -y rtl +libext+.sv rtl/bespoke_pkg.sv rtl/bespoke_soc.sv` lints the design.

Parameters of `bespoke_soc`:

| parameter | default | meaning |
|---|---|---|
| `PC_W` | 10 | program counter width; the ROM has 2^(PC_W-2) words |
| `DADDR_W` | 8 | data address width; the RAM has 2^DADDR_W bytes |
| `NREGS` | 12 | registers x0..x(NREGS-1); at most 32 |
| `MAC_PREC` | 16 | lane width of the MAC unit: 32, 16, 8 or 4 |

Software must pack data to match `MAC_PREC`. At 8 bits, for example, four values go in each
word and lane 0 is the lowest byte.

To write new test programs, call the functions in `rv_asm_pkg` (`addi`, `lw`, `mac`,
`label`, `bne`, …) inside a task. Run the task once with `start(0)` and once with
`start(1)`, then copy `code[]` into the ROM. See `tb_bespoke_soc` for a complete example.
