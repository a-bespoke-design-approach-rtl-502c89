// Self-checking testbench of data_ram.
//
// Random byte-enabled writes on both ports, including writes by both ports
// to the same word in the same cycle (port A's bytes must win), checked
// against a byte-array model after every cycle through both read ports.
module tb_data_ram;
  logic clk = 1'b0;
  logic [7:0]  a_addr, b_addr;
  logic        a_we, b_we;
  logic [3:0]  a_be, b_be;
  logic [31:0] a_wdata, b_wdata, a_rdata, b_rdata;
  int checks = 0, failures = 0;
  logic [7:0] model [256];

  data_ram dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] word(logic [7:0] addr);
    logic [7:0] base = {addr[7:2], 2'b00};
    return {model[base + 3], model[base + 2], model[base + 1], model[base]};
  endfunction

  task automatic check(string name, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", name, got, exp);
    end
  endtask

  initial begin
    a_we = 0; b_we = 0; a_be = 0; b_be = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    // initialise through port B
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      b_we = 1; b_be = 4'hF; b_addr = 8'(4 * i); b_wdata = 32'(i);
      for (int k = 0; k < 4; k++) model[4 * i + k] = (k == 0) ? 8'(i) : 8'h00;
    end
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      a_we = 1'($urandom); b_we = 1'($urandom);
      a_be = 4'($urandom); b_be = 4'($urandom);
      a_addr = 8'($urandom); b_addr = 8'($urandom);
      if (t % 5 == 0) b_addr = a_addr ^ 8'($urandom % 4);   // same word
      a_wdata = $urandom; b_wdata = $urandom;
      for (int k = 0; k < 4; k++) begin
        if (b_we && b_be[k]) model[{b_addr[7:2], 2'(k)}] = b_wdata[8*k +: 8];
      end
      for (int k = 0; k < 4; k++) begin
        if (a_we && a_be[k]) model[{a_addr[7:2], 2'(k)}] = a_wdata[8*k +: 8];
      end
      @(posedge clk); #1;
      a_we = 0; b_we = 0;
      a_addr = 8'($urandom); b_addr = 8'($urandom);
      #1;
      check("port A read", a_rdata, word(a_addr));
      check("port B read", b_rdata, word(b_addr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
