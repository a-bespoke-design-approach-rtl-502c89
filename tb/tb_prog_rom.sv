// Self-checking testbench of prog_rom.
//
// Fills all 256 words through the load port with a value derived from the
// word index, then reads every word back at random byte addresses (the two
// low address bits must be ignored) and compares with the same formula.
// Rewrites a few words and checks that only those change.
module tb_prog_rom;
  logic clk = 1'b0;
  logic [9:0] addr;
  logic [31:0] rdata, load_data;
  logic load_we;
  logic [7:0] load_addr;
  int checks = 0, failures = 0;

  prog_rom dut (.clk, .addr, .rdata, .load_we, .load_addr, .load_data);

  always #5 clk = ~clk;

  function automatic logic [31:0] pattern(int i, int salt);
    return 32'(i * 32'h9E37_79B9 + salt);
  endfunction

  task automatic check(string name, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", name, got, exp);
    end
  endtask

  initial begin
    load_we = 0; load_addr = 0; load_data = 0; addr = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      load_we = 1; load_addr = 8'(i); load_data = pattern(i, 0);
    end
    @(negedge clk) load_we = 0;
    for (int i = 0; i < 256; i++) begin
      addr = {8'(i), 2'($urandom)};
      #1 check($sformatf("word %0d", i), rdata, pattern(i, 0));
    end
    for (int i = 0; i < 256; i += 37) begin
      @(negedge clk);
      load_we = 1; load_addr = 8'(i); load_data = pattern(i, 1);
    end
    @(negedge clk) load_we = 0;
    for (int i = 0; i < 256; i++) begin
      addr = {8'(i), 2'b00};
      #1 check($sformatf("word %0d after rewrite", i), rdata, pattern(i, (i % 37 == 0) ? 1 : 0));
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
