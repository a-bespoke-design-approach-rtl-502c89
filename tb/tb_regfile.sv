// Self-checking testbench of regfile.
//
// Random writes and reads against a shadow array kept by the testbench. It
// checks that x0 stays zero, that indices NREGS..31 read as zero and drop
// writes, that a write is visible from the next cycle on both read ports, and
// that a disabled write changes nothing.
module tb_regfile;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [4:0] ra, rb, wa;
  logic [31:0] da, db, wd;
  logic we;
  int checks = 0, failures = 0;
  logic [31:0] shadow [32];

  regfile dut (.clk, .rst_n, .raddr_a(ra), .rdata_a(da), .raddr_b(rb), .rdata_b(db),
               .we, .waddr(wa), .wdata(wd));

  always #5 clk = ~clk;

  task automatic check(string name, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", name, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 32; i++) shadow[i] = '0;
    we = 0; wa = 0; wd = 0; ra = 0; rb = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      we = ($urandom % 3) != 0;
      wa = 5'($urandom);
      if (t < 32) begin we = 1; wa = 5'(t); end
      wd = $urandom;
      if (we && wa != 0 && wa < 12) shadow[wa] = wd;
      @(posedge clk); #1;
      we = 0;
      ra = 5'($urandom); rb = 5'($urandom);
      if (t % 7 == 0) ra = wa;
      #1;
      check($sformatf("read a x%0d", ra), da, shadow[ra]);
      check($sformatf("read b x%0d", rb), db, shadow[rb]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
