// Bespoke 2-stage RISC-V core with a SIMD MAC unit.
//
// Stage 1 (IF) reads the instruction at pc_q from the program memory
// (combinational read) and registers it. Stage 2 (EX) decodes, reads the
// register file, executes in the ALU, the multi-cycle multiplier/divider or
// the SIMD MAC unit, accesses data memory (combinational read, write at the
// clock edge) and writes back, all in one cycle except MUL/DIV/REM, which
// stall both stages until the multiplier/divider signals done. A taken branch
// or a jump resolved in EX redirects pc_q and discards the instruction in IF
// (one bubble). retire, stall, flush and mac_step report, for the current
// cycle, a completing instruction, a multiplier/divider wait, a discarded
// fetch and a SIMD MAC step.
//
// Instruction set: RV32I without SLT/SLTI, FENCE and SYSTEM (ECALL, EBREAK,
// CSR*); M without MULH/MULHSU/MULHU; registers x0..x11 only; and the custom
// MAC instructions on opcode custom-0 (0001011), R-type with funct7 = 0:
//   funct3 000  MAC   rs1, rs2 : acc_i += rs1_i * rs2_i  (all lanes)
//   funct3 001  MACZ  rs1, rs2 : acc_i  = rs1_i * rs2_i  (start a new sum)
//   funct3 010  MACRD rd       : rd = sum over lanes of acc_i
// Anything else sets illegal and halts the core. A jump to itself (JAL with
// offset 0, the usual end-of-program loop) sets halted and stops fetching.
//
// Addresses: the PC is PC_W = 10 bits (byte address, 1 KiB of program) and
// data addresses are DADDR_W = 8 bits (256 bytes); address bits above these
// are dropped. Loads and stores must be naturally aligned.
//
// Follows the paper: 2-stage pipeline, no debug unit, no interrupt
// controller, no compressed decoder, SLT/CSR/system/MULH removed, 12
// registers, 10-bit PC, 8-bit base address, a SIMD MAC unit of precision
// MAC_PREC added to the ISA with single-cycle MAC. This design's own choices:
// the pipeline details, the custom encodings, the halt convention, the
// combinational memory ports and the reset values.
module bespoke_core #(
  parameter int unsigned PC_W     = bespoke_pkg::PC_W,
  parameter int unsigned DADDR_W  = bespoke_pkg::DADDR_W,
  parameter int unsigned NREGS    = bespoke_pkg::NREGS,
  parameter int unsigned MAC_PREC = bespoke_pkg::MAC_PREC
) (
  input  logic               clk,
  input  logic               rst_n,
  // program memory
  output logic [PC_W-1:0]    imem_addr,
  input  logic [31:0]        imem_rdata,
  // data memory
  output logic [DADDR_W-1:0] dmem_addr,   // byte address, word aligned access
  output logic               dmem_we,
  output logic [3:0]         dmem_be,
  output logic [31:0]        dmem_wdata,
  input  logic [31:0]        dmem_rdata,  // whole word at dmem_addr[DADDR_W-1:2]
  // status
  output logic               halted,
  output logic               illegal,
  output logic               retire,      // an instruction completes this cycle
  output logic               stall,       // EX waits for the multiplier/divider
  output logic               flush,       // IF instruction is discarded
  output logic               mac_step     // a MAC/MACZ updates the accumulators
);

  import bespoke_pkg::*;

  // ---------------------------------------------------------------- IF stage
  logic [PC_W-1:0] pc_q;
  logic            id_valid_q;
  logic [PC_W-1:0] id_pc_q;
  logic [31:0]     id_instr_q;

  assign imem_addr = pc_q;

  // ---------------------------------------------------------------- decode
  logic [31:0] ins;
  logic [6:0]  opcode, funct7;
  logic [2:0]  funct3;
  logic [4:0]  rs1, rs2, rd;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;
  assign ins    = id_instr_q;
  assign opcode = ins[6:0];
  assign rd     = ins[11:7];
  assign funct3 = ins[14:12];
  assign rs1    = ins[19:15];
  assign rs2    = ins[24:20];
  assign funct7 = ins[31:25];
  assign imm_i  = {{20{ins[31]}}, ins[31:20]};
  assign imm_s  = {{20{ins[31]}}, ins[31:25], ins[11:7]};
  assign imm_b  = {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
  assign imm_u  = {ins[31:12], 12'b0};
  assign imm_j  = {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};

  logic    valid_ex;
  logic    dec_ok, uses_rs1, uses_rs2, writes_rd;
  logic    is_load, is_store, is_branch, is_jal, is_jalr, is_md, is_mac, is_macrd;
  logic    alu_b_imm;
  alu_op_e alu_op;
  md_op_e  md_op;

  assign valid_ex = id_valid_q && !halted;

  always_comb begin
    dec_ok    = 1'b0;
    uses_rs1  = 1'b0;
    uses_rs2  = 1'b0;
    writes_rd = 1'b0;
    is_load   = 1'b0;
    is_store  = 1'b0;
    is_branch = 1'b0;
    is_jal    = 1'b0;
    is_jalr   = 1'b0;
    is_md     = 1'b0;
    is_mac    = 1'b0;
    is_macrd  = 1'b0;
    alu_b_imm = 1'b0;
    alu_op    = ALU_ADD;
    md_op     = MD_MUL;
    unique case (opcode)
      OPC_LUI, OPC_AUIPC: begin dec_ok = 1'b1; writes_rd = 1'b1; end
      OPC_JAL:  begin dec_ok = 1'b1; writes_rd = 1'b1; is_jal = 1'b1; end
      OPC_JALR: begin
        dec_ok = (funct3 == 3'b000); writes_rd = 1'b1; uses_rs1 = 1'b1; is_jalr = 1'b1;
      end
      OPC_BRANCH: begin
        dec_ok = (funct3 != 3'b010) && (funct3 != 3'b011);
        uses_rs1 = 1'b1; uses_rs2 = 1'b1; is_branch = 1'b1;
      end
      OPC_LOAD: begin
        dec_ok = (funct3 inside {3'b000, 3'b001, 3'b010, 3'b100, 3'b101});
        uses_rs1 = 1'b1; writes_rd = 1'b1; is_load = 1'b1;
      end
      OPC_STORE: begin
        dec_ok = (funct3 inside {3'b000, 3'b001, 3'b010});
        uses_rs1 = 1'b1; uses_rs2 = 1'b1; is_store = 1'b1;
      end
      OPC_OPIMM: begin
        uses_rs1 = 1'b1; writes_rd = 1'b1; alu_b_imm = 1'b1;
        dec_ok = 1'b1;
        unique case (funct3)
          3'b000: alu_op = ALU_ADD;
          3'b010: dec_ok = 1'b0;                 // SLTI removed
          3'b011: alu_op = ALU_SLTU;
          3'b100: alu_op = ALU_XOR;
          3'b110: alu_op = ALU_OR;
          3'b111: alu_op = ALU_AND;
          3'b001: begin alu_op = ALU_SLL; dec_ok = (funct7 == 7'b0); end
          3'b101: begin
            alu_op = funct7[5] ? ALU_SRA : ALU_SRL;
            dec_ok = (funct7 == 7'b0) || (funct7 == 7'b0100000);
          end
          default: dec_ok = 1'b0;
        endcase
      end
      OPC_OP: begin
        uses_rs1 = 1'b1; uses_rs2 = 1'b1; writes_rd = 1'b1;
        dec_ok = 1'b1;
        if (funct7 == 7'b0000001) begin
          is_md = 1'b1;
          unique case (funct3)
            3'b000: md_op = MD_MUL;
            3'b100: md_op = MD_DIV;
            3'b101: md_op = MD_DIVU;
            3'b110: md_op = MD_REM;
            3'b111: md_op = MD_REMU;
            default: dec_ok = 1'b0;              // MULH, MULHSU, MULHU removed
          endcase
        end else if (funct7 == 7'b0000000) begin
          unique case (funct3)
            3'b000: alu_op = ALU_ADD;
            3'b001: alu_op = ALU_SLL;
            3'b010: dec_ok = 1'b0;               // SLT removed
            3'b011: alu_op = ALU_SLTU;
            3'b100: alu_op = ALU_XOR;
            3'b101: alu_op = ALU_SRL;
            3'b110: alu_op = ALU_OR;
            3'b111: alu_op = ALU_AND;
            default: dec_ok = 1'b0;
          endcase
        end else if (funct7 == 7'b0100000 && (funct3 == 3'b000 || funct3 == 3'b101)) begin
          alu_op = (funct3 == 3'b000) ? ALU_SUB : ALU_SRA;
        end else begin
          dec_ok = 1'b0;
        end
      end
      OPC_CUST0: begin
        dec_ok = (funct7 == 7'b0);
        unique case (funct3)
          F3_MAC, F3_MACZ: begin is_mac = 1'b1; uses_rs1 = 1'b1; uses_rs2 = 1'b1; end
          F3_MACRD:        begin is_macrd = 1'b1; writes_rd = 1'b1; end
          default:         dec_ok = 1'b0;
        endcase
      end
      default: dec_ok = 1'b0;
    endcase
    // only x0..x(NREGS-1) exist
    if (uses_rs1 && 32'(rs1) >= NREGS) dec_ok = 1'b0;
    if (uses_rs2 && 32'(rs2) >= NREGS) dec_ok = 1'b0;
    if (writes_rd && 32'(rd) >= NREGS) dec_ok = 1'b0;
  end

  // ---------------------------------------------------------------- register file
  logic [31:0] rs1_val, rs2_val, wb_data;
  logic        rf_we;

  regfile #(.NREGS(NREGS), .XLEN(32)) u_rf (
    .clk, .rst_n,
    .raddr_a(rs1), .rdata_a(rs1_val),
    .raddr_b(rs2), .rdata_b(rs2_val),
    .we(rf_we), .waddr(rd), .wdata(wb_data)
  );

  // ---------------------------------------------------------------- execute
  logic [31:0] alu_y;
  logic        cmp_eq, cmp_lt, cmp_ltu;

  alu u_alu (
    .op(alu_op), .a(rs1_val), .b(alu_b_imm ? imm_i : rs2_val),
    .y(alu_y), .eq(cmp_eq), .lt(cmp_lt), .ltu(cmp_ltu)
  );

  logic        md_done;
  logic [31:0] md_result;
  logic        md_req;
  assign md_req = valid_ex && dec_ok && is_md;

  multdiv u_md (
    .clk, .rst_n,
    .req(md_req), .op(md_op), .a(rs1_val), .b(rs2_val),
    .done(md_done), .result(md_result)
  );

  logic [31:0] mac_out;
  logic        mac_en;
  assign mac_en   = valid_ex && dec_ok && is_mac;
  assign mac_step = mac_en;

  simd_mac #(.PREC(MAC_PREC), .ACC_W(32)) u_mac (
    .clk, .rst_n,
    .en(mac_en), .clr(funct3 == F3_MACZ), .a(rs1_val), .b(rs2_val),
    .out(mac_out)
  );

  // branch decision
  logic take;
  always_comb begin
    unique case (funct3)
      3'b000:  take = cmp_eq;
      3'b001:  take = !cmp_eq;
      3'b100:  take = cmp_lt;
      3'b101:  take = !cmp_lt;
      3'b110:  take = cmp_ltu;
      3'b111:  take = !cmp_ltu;
      default: take = 1'b0;
    endcase
  end

  logic [31:0] pc_ext, pc_plus4;
  logic [PC_W-1:0] target;
  logic redirect;
  assign pc_ext   = 32'(id_pc_q);
  assign pc_plus4 = pc_ext + 32'd4;
  always_comb begin
    target = PC_W'(pc_ext + imm_b);
    if (is_jal)  target = PC_W'(pc_ext + imm_j);
    if (is_jalr) target = PC_W'((rs1_val + imm_i) & ~32'd1);
  end

  // ---------------------------------------------------------------- memory
  logic [31:0] eff_addr;
  logic [1:0]  boff;
  assign eff_addr   = rs1_val + (is_store ? imm_s : imm_i);
  assign boff       = eff_addr[1:0];
  assign dmem_addr  = DADDR_W'(eff_addr);
  assign dmem_we    = valid_ex && dec_ok && is_store;
  assign dmem_wdata = rs2_val << (8 * boff);
  always_comb begin
    unique case (funct3[1:0])
      2'b00:   dmem_be = 4'b0001 << boff;
      2'b01:   dmem_be = 4'b0011 << boff;
      default: dmem_be = 4'b1111;
    endcase
  end

  logic [31:0] ld_shift, ld_val;
  assign ld_shift = dmem_rdata >> (8 * boff);
  always_comb begin
    unique case (funct3)
      3'b000:  ld_val = {{24{ld_shift[7]}}, ld_shift[7:0]};
      3'b001:  ld_val = {{16{ld_shift[15]}}, ld_shift[15:0]};
      3'b100:  ld_val = {24'b0, ld_shift[7:0]};
      3'b101:  ld_val = {16'b0, ld_shift[15:0]};
      default: ld_val = dmem_rdata;
    endcase
  end

  // ---------------------------------------------------------------- writeback
  always_comb begin
    wb_data = alu_y;
    if (opcode == OPC_LUI)   wb_data = imm_u;
    if (opcode == OPC_AUIPC) wb_data = pc_ext + imm_u;
    if (is_jal || is_jalr)   wb_data = pc_plus4;
    if (is_load)             wb_data = ld_val;
    if (is_md)               wb_data = md_result;
    if (is_macrd)            wb_data = mac_out;
  end

  logic self_loop;
  assign self_loop = is_jal && (imm_j == 32'd0);

  assign stall    = valid_ex && dec_ok && is_md && !md_done;
  assign retire   = valid_ex && dec_ok && !stall;
  assign rf_we    = retire && writes_rd;
  assign redirect = retire && (is_jal || is_jalr || (is_branch && take));
  assign flush    = redirect && id_valid_q;

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_q       <= '0;
      id_valid_q <= 1'b0;
      id_pc_q    <= '0;
      id_instr_q <= 32'h0000_0013;   // addi x0, x0, 0
      halted     <= 1'b0;
      illegal    <= 1'b0;
    end else if (!halted) begin
      if (valid_ex && !dec_ok) begin
        illegal <= 1'b1;
        halted  <= 1'b1;
      end else if (retire && self_loop) begin
        halted  <= 1'b1;
      end else if (!stall) begin
        if (redirect) begin
          pc_q       <= target;
          id_valid_q <= 1'b0;
        end else begin
          pc_q       <= pc_q + PC_W'(4);
          id_valid_q <= 1'b1;
          id_pc_q    <= pc_q;
          id_instr_q <= imem_rdata;
        end
      end
    end
  end

  // a stalled instruction must stay put until the multiplier/divider is done
  assert property (@(posedge clk) disable iff (!rst_n)
                   stall |=> (id_instr_q == $past(id_instr_q)));

endmodule
