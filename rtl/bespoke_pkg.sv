// Shared constants and types of the bespoke RISC-V core with its SIMD MAC unit.
//
// The core is a trimmed RV32IM: a 10-bit program counter, an 8-bit data
// address, 12 architectural registers (x0..x11), no SLT/SLTI, no CSR or system
// instructions, no MULH*, no compressed instructions. Three custom
// instructions on the RISC-V custom-0 opcode drive the SIMD MAC unit. The PC,
// data-address and register-count reductions and the removed instructions
// follow the paper; the custom encodings and the names here are this design's
// own choice.
package bespoke_pkg;

  // Trimmed architectural widths
  localparam int unsigned XLEN    = 32;
  localparam int unsigned PC_W    = 10;  // program counter width (byte address)
  localparam int unsigned DADDR_W = 8;   // data address width (base address registers)
  localparam int unsigned NREGS   = 12;  // x0..x11, x0 reads as zero
  localparam int unsigned MAC_PREC = 16; // main configuration: 16-bit lanes, 2 lanes

  // RV32 major opcodes kept by the core
  typedef enum logic [6:0] {
    OPC_LOAD   = 7'b0000011,
    OPC_CUST0  = 7'b0001011,
    OPC_OPIMM  = 7'b0010011,
    OPC_AUIPC  = 7'b0010111,
    OPC_STORE  = 7'b0100011,
    OPC_OP     = 7'b0110011,
    OPC_LUI    = 7'b0110111,
    OPC_BRANCH = 7'b1100011,
    OPC_JALR   = 7'b1100111,
    OPC_JAL    = 7'b1101111
  } opcode_e;

  // funct3 of the custom-0 MAC instructions (funct7 = 0)
  localparam logic [2:0] F3_MAC   = 3'b000;  // acc_i += a_i * b_i
  localparam logic [2:0] F3_MACZ  = 3'b001;  // acc_i  = a_i * b_i
  localparam logic [2:0] F3_MACRD = 3'b010;  // rd = sum of acc_i

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLTU, ALU_XOR,
    ALU_SRL, ALU_SRA, ALU_OR, ALU_AND
  } alu_op_e;

  typedef enum logic [2:0] {
    MD_MUL, MD_DIV, MD_DIVU, MD_REM, MD_REMU
  } md_op_e;

endpackage
