// Self-checking testbench of alu.
//
// Every operation is driven with random operands and with edge values
// (0, 1, -1, most negative, most positive) and compared with a reference
// written with 64-bit integer arithmetic in the testbench. The three branch
// flags are checked on every vector.
module tb_alu;
  import bespoke_pkg::*;
  alu_op_e op;
  logic [31:0] a, b, y;
  logic eq, lt, ltu;
  int checks = 0, failures = 0;

  alu dut (.op, .a, .b, .y, .eq, .lt, .ltu);

  function automatic logic [31:0] model(alu_op_e o, logic [31:0] x, logic [31:0] z);
    longint sx = longint'($signed(x));
    int unsigned sh = z % 32;
    case (o)
      ALU_ADD:  return 32'(longint'(x) + longint'(z));
      ALU_SUB:  return 32'(longint'(x) - longint'(z));
      ALU_SLL:  return 32'(longint'(x) * (longint'(1) << sh));
      ALU_SLTU: return (longint'(x) < longint'(z)) ? 32'd1 : 32'd0;
      ALU_XOR:  return x ^ z;
      ALU_SRL:  return 32'(longint'(x) / (longint'(1) << sh));
      ALU_SRA:  return 32'(sx >>> sh);
      ALU_OR:   return x | z;
      ALU_AND:  return x & z;
      default:  return '0;
    endcase
  endfunction

  task automatic check(string name, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (a=%h b=%h)", name, got, exp, a, b);
    end
  endtask

  logic [31:0] edges [5] = '{32'h0, 32'h1, 32'hFFFF_FFFF, 32'h8000_0000, 32'h7FFF_FFFF};

  initial begin
    for (int t = 0; t < 2000; t++) begin
      op = alu_op_e'($urandom % 9);
      a = $urandom; b = $urandom;
      if (t % 4 == 0) a = edges[$urandom % 5];
      if (t % 3 == 0) b = edges[$urandom % 5];
      if (t % 11 == 0) b = a;
      #1;
      check(op.name(), y, model(op, a, b));
      check("eq",  {31'b0, eq},  {31'b0, a == b});
      check("lt",  {31'b0, lt},  {31'b0, longint'($signed(a)) < longint'($signed(b))});
      check("ltu", {31'b0, ltu}, {31'b0, longint'(a) < longint'(b)});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
