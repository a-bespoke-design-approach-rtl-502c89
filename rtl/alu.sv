// Integer ALU of the bespoke core (execution unit).
//
// Computes the RV32I register and immediate operations that the bespoke core
// keeps: ADD, SUB, SLL, SLTU, XOR, SRL, SRA, OR, AND. It also produces the
// three comparison flags used by the branch unit (equal, signed less-than,
// unsigned less-than). Purely combinational.
//
// Follows the paper: the SLT/SLTI instructions are removed, so the ALU has no
// signed set-less-than result. This design's own choice: SLTU is kept, and the
// signed comparison survives only as a branch flag (BLT/BGE).
module alu
  import bespoke_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y,
  output logic        eq,
  output logic        lt,
  output logic        ltu
);
  assign eq  = (a == b);
  assign lt  = ($signed(a) < $signed(b));
  assign ltu = (a < b);

  always_comb begin
    unique case (op)
      ALU_ADD:  y = a + b;
      ALU_SUB:  y = a - b;
      ALU_SLL:  y = a << b[4:0];
      ALU_SLTU: y = {31'b0, ltu};
      ALU_XOR:  y = a ^ b;
      ALU_SRL:  y = a >> b[4:0];
      ALU_SRA:  y = 32'($signed(a) >>> b[4:0]);
      ALU_OR:   y = a | b;
      ALU_AND:  y = a & b;
      default:  y = '0;
    endcase
  end

endmodule
