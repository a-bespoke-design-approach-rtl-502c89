// Minimal two-pass assembler used by the processor testbenches.
//
// A program is written as a task that calls the emit functions below. It is
// run twice: the first pass (resolve = 0) records label addresses, the
// second emits the final code with branch and jump offsets filled in. Only
// the instructions the bespoke core implements are provided, plus the three
// custom SIMD MAC instructions (opcode 0001011, funct3 000/001/010).
package rv_asm_pkg;

  logic [31:0] code [$];
  int          labels [string];
  bit          resolve;

  function automatic void start(bit second_pass);
    code.delete();
    resolve = second_pass;
    if (!second_pass) labels.delete();
  endfunction

  function automatic int here();
    return 4 * code.size();
  endfunction

  function automatic void label(string name);
    labels[name] = here();
  endfunction

  function automatic int off(string name);
    if (!resolve) return 0;
    if (!labels.exists(name)) $fatal(1, "undefined label %s", name);
    return labels[name] - here();
  endfunction

  function automatic void emit(logic [31:0] w);
    code.push_back(w);
  endfunction

  function automatic void r_type(logic [6:0] f7, int rs2, int rs1, logic [2:0] f3, int rd, logic [6:0] opc);
    emit({f7, 5'(rs2), 5'(rs1), f3, 5'(rd), opc});
  endfunction
  function automatic void i_type(int imm, int rs1, logic [2:0] f3, int rd, logic [6:0] opc);
    emit({12'(imm), 5'(rs1), f3, 5'(rd), opc});
  endfunction
  function automatic void s_type(int imm, int rs2, int rs1, logic [2:0] f3);
    logic [11:0] i = 12'(imm);
    emit({i[11:5], 5'(rs2), 5'(rs1), f3, i[4:0], 7'b0100011});
  endfunction
  function automatic void b_type(string target, int rs1, int rs2, logic [2:0] f3);
    logic [12:0] i = 13'(off(target));
    emit({i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], 7'b1100011});
  endfunction

  // RV32I subset
  function automatic void lui(int rd, int imm20);  emit({20'(imm20), 5'(rd), 7'b0110111}); endfunction
  function automatic void auipc(int rd, int imm20); emit({20'(imm20), 5'(rd), 7'b0010111}); endfunction
  function automatic void jal(int rd, string target);
    logic [20:0] i = 21'(off(target));
    emit({i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111});
  endfunction
  function automatic void halt(); emit({20'b0, 5'd0, 7'b1101111}); endfunction  // jal x0, .
  function automatic void jalr(int rd, int rs1, int imm); i_type(imm, rs1, 3'b000, rd, 7'b1100111); endfunction
  function automatic void beq (int a, int b, string t); b_type(t, a, b, 3'b000); endfunction
  function automatic void bne (int a, int b, string t); b_type(t, a, b, 3'b001); endfunction
  function automatic void blt (int a, int b, string t); b_type(t, a, b, 3'b100); endfunction
  function automatic void bge (int a, int b, string t); b_type(t, a, b, 3'b101); endfunction
  function automatic void bltu(int a, int b, string t); b_type(t, a, b, 3'b110); endfunction
  function automatic void bgeu(int a, int b, string t); b_type(t, a, b, 3'b111); endfunction
  function automatic void lb (int rd, int imm, int rs1); i_type(imm, rs1, 3'b000, rd, 7'b0000011); endfunction
  function automatic void lh (int rd, int imm, int rs1); i_type(imm, rs1, 3'b001, rd, 7'b0000011); endfunction
  function automatic void lw (int rd, int imm, int rs1); i_type(imm, rs1, 3'b010, rd, 7'b0000011); endfunction
  function automatic void lbu(int rd, int imm, int rs1); i_type(imm, rs1, 3'b100, rd, 7'b0000011); endfunction
  function automatic void lhu(int rd, int imm, int rs1); i_type(imm, rs1, 3'b101, rd, 7'b0000011); endfunction
  function automatic void sb (int rs2, int imm, int rs1); s_type(imm, rs2, rs1, 3'b000); endfunction
  function automatic void sh (int rs2, int imm, int rs1); s_type(imm, rs2, rs1, 3'b001); endfunction
  function automatic void sw (int rs2, int imm, int rs1); s_type(imm, rs2, rs1, 3'b010); endfunction
  function automatic void addi (int rd, int rs1, int imm); i_type(imm, rs1, 3'b000, rd, 7'b0010011); endfunction
  function automatic void sltiu(int rd, int rs1, int imm); i_type(imm, rs1, 3'b011, rd, 7'b0010011); endfunction
  function automatic void xori (int rd, int rs1, int imm); i_type(imm, rs1, 3'b100, rd, 7'b0010011); endfunction
  function automatic void ori  (int rd, int rs1, int imm); i_type(imm, rs1, 3'b110, rd, 7'b0010011); endfunction
  function automatic void andi (int rd, int rs1, int imm); i_type(imm, rs1, 3'b111, rd, 7'b0010011); endfunction
  function automatic void slli (int rd, int rs1, int sh); i_type(sh, rs1, 3'b001, rd, 7'b0010011); endfunction
  function automatic void srli (int rd, int rs1, int sh); i_type(sh, rs1, 3'b101, rd, 7'b0010011); endfunction
  function automatic void srai (int rd, int rs1, int sh); i_type(sh | 32'h400, rs1, 3'b101, rd, 7'b0010011); endfunction
  function automatic void add (int rd, int a, int b); r_type(7'h00, b, a, 3'b000, rd, 7'b0110011); endfunction
  function automatic void sub (int rd, int a, int b); r_type(7'h20, b, a, 3'b000, rd, 7'b0110011); endfunction
  function automatic void sll (int rd, int a, int b); r_type(7'h00, b, a, 3'b001, rd, 7'b0110011); endfunction
  function automatic void slt (int rd, int a, int b); r_type(7'h00, b, a, 3'b010, rd, 7'b0110011); endfunction
  function automatic void sltu(int rd, int a, int b); r_type(7'h00, b, a, 3'b011, rd, 7'b0110011); endfunction
  function automatic void xor_(int rd, int a, int b); r_type(7'h00, b, a, 3'b100, rd, 7'b0110011); endfunction
  function automatic void srl (int rd, int a, int b); r_type(7'h00, b, a, 3'b101, rd, 7'b0110011); endfunction
  function automatic void sra (int rd, int a, int b); r_type(7'h20, b, a, 3'b101, rd, 7'b0110011); endfunction
  function automatic void or_ (int rd, int a, int b); r_type(7'h00, b, a, 3'b110, rd, 7'b0110011); endfunction
  function automatic void and_(int rd, int a, int b); r_type(7'h00, b, a, 3'b111, rd, 7'b0110011); endfunction
  // M subset
  function automatic void mul (int rd, int a, int b); r_type(7'h01, b, a, 3'b000, rd, 7'b0110011); endfunction
  function automatic void mulh(int rd, int a, int b); r_type(7'h01, b, a, 3'b001, rd, 7'b0110011); endfunction
  function automatic void div (int rd, int a, int b); r_type(7'h01, b, a, 3'b100, rd, 7'b0110011); endfunction
  function automatic void divu(int rd, int a, int b); r_type(7'h01, b, a, 3'b101, rd, 7'b0110011); endfunction
  function automatic void rem (int rd, int a, int b); r_type(7'h01, b, a, 3'b110, rd, 7'b0110011); endfunction
  function automatic void remu(int rd, int a, int b); r_type(7'h01, b, a, 3'b111, rd, 7'b0110011); endfunction
  // SIMD MAC
  function automatic void mac  (int a, int b); r_type(7'h00, b, a, 3'b000, 0, 7'b0001011); endfunction
  function automatic void macz (int a, int b); r_type(7'h00, b, a, 3'b001, 0, 7'b0001011); endfunction
  function automatic void macrd(int rd);       r_type(7'h00, 0, 0, 3'b010, rd, 7'b0001011); endfunction
  // load a 32-bit constant
  function automatic void li(int rd, int value);
    int lo = int'(12'(value));
    if (lo >= 2048) lo -= 4096;
    lui(rd, (value - lo) >>> 12);
    addi(rd, rd, lo);
  endfunction

endpackage
