// Self-checking testbench of multdiv.
//
// Issues MUL, DIV, DIVU, REM and REMU with random and corner operands
// (zero divisor, most negative / -1, +-1) and holds req high until done, as
// the core does. Results are compared with a reference in 64-bit integer
// arithmetic that applies the RISC-V rules for division by zero and
// overflow. The number of cycles from the first req cycle to done inclusive
// is checked: 3 for MUL and 34 for the divide operations. Gaps with req low
// check that the unit stays idle.
module tb_multdiv;
  import bespoke_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic req, done;
  md_op_e op;
  logic [31:0] a, b, result;
  int checks = 0, failures = 0;

  multdiv dut (.clk, .rst_n, .req, .op, .a, .b, .done, .result);

  always #5 clk = ~clk;

  function automatic logic [31:0] model(md_op_e o, logic [31:0] x, logic [31:0] z);
    longint sx = longint'($signed(x)), sz = longint'($signed(z));
    longint ux = longint'(x), uz = longint'(z);
    case (o)
      MD_MUL:  return 32'(ux * uz);
      MD_DIVU: return (z == 0) ? 32'hFFFF_FFFF : 32'(ux / uz);
      MD_REMU: return (z == 0) ? x : 32'(ux % uz);
      MD_DIV:  return (z == 0) ? 32'hFFFF_FFFF : 32'(sx / sz);
      MD_REM:  return (z == 0) ? x : 32'(sx % sz);
      default: return '0;
    endcase
  endfunction

  task automatic check(string name, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (a=%h b=%h)", name, got, exp, a, b);
    end
  endtask

  logic [31:0] edges [6] = '{32'h0, 32'h1, 32'hFFFF_FFFF, 32'h8000_0000, 32'h7FFF_FFFF, 32'd7};

  initial begin
    int cyc;
    req = 0; op = MD_MUL; a = 0; b = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      op = md_op_e'($urandom % 5);
      a = $urandom; b = $urandom;
      if (t % 3 == 0) b = edges[$urandom % 6];
      if (t % 5 == 0) a = edges[$urandom % 6];
      if (t % 4 == 1) b = b >> ($urandom % 32);
      req = 1;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      check(op.name(), result, model(op, a, b));
      check("latency", 32'(cyc), (op == MD_MUL) ? 32'd3 : 32'd34);
      @(posedge clk);
      if (t % 2 == 0) begin
        #1 req = 0;
        repeat (2) begin
          @(negedge clk);
          check("idle", {31'b0, done}, 32'd0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
