// Precision sweep of bespoke_soc: MAC_PREC = 32, 16, 8 and 4.
//
// Four copies of the system, one per precision option of the SIMD MAC unit
// (1, 2, 4 and 8 lanes), run the same program: a dot product of two vectors
// of 24 signed values packed 32/MAC_PREC to a word, with the word count read
// from data word 63 so one program serves all four. Each copy gets values
// drawn from its own lane range, and the testbench checks the stored sum
// against its own integer model (32-bit wrap, products of 32-bit lanes cut to
// their low 32 bits). It also checks that the cycle count drops as the lanes
// grow: 24, 12, 6 and 3 MAC steps.
module tb_precision_sweep;
  import rv_asm_pkg::*;
  localparam int NV = 24;
  localparam int PRECS [4] = '{32, 16, 8, 4};

  logic clk = 1'b0, rst_n = 1'b0;
  logic        prog_we;
  logic [7:0]  prog_addr;
  logic [31:0] prog_wdata;
  logic [7:0]  host_addr;
  logic        host_we [4];
  logic [31:0] host_wdata;
  logic [31:0] host_rdata [4];
  logic        halted [4], illegal [4], retire [4], stall [4], flush [4], mac_step [4];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < 4; g++) begin : g_soc
    bespoke_soc #(.MAC_PREC(PRECS[g])) u_soc (
      .clk, .rst_n,
      .prog_we, .prog_addr, .prog_wdata,
      .host_addr, .host_we(host_we[g]), .host_be(4'hF), .host_wdata, .host_rdata(host_rdata[g]),
      .halted(halted[g]), .illegal(illegal[g]), .retire(retire[g]), .stall(stall[g]),
      .flush(flush[g]), .mac_step(mac_step[g])
    );
  end

  always #5 clk = ~clk;

  task automatic check(string name, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", name, got, exp);
    end
  endtask

  // vector a at byte 0, b at byte 96, word count at 252, result at 200
  task automatic prog_dot();
    lw(3, 252, 0); addi(7, 0, 0); addi(9, 0, 96);
    lw(5, 0, 7); lw(6, 0, 9); macz(5, 6); addi(7, 7, 4); addi(9, 9, 4); addi(3, 3, -1);
    beq(3, 0, "done");
    label("loop");
    lw(5, 0, 7); lw(6, 0, 9); mac(5, 6); addi(7, 7, 4); addi(9, 9, 4);
    addi(3, 3, -1); bne(3, 0, "loop");
    label("done");
    macrd(5); sw(5, 200, 0);
    halt();
  endtask

  task automatic host_write(int inst, int addr, logic [31:0] v);
    @(negedge clk);
    host_we[inst] = 1'b1; host_addr = 8'(addr); host_wdata = v;
    @(negedge clk) host_we[inst] = 1'b0;
  endtask

  int cycles [4];
  int steps [4];
  always @(posedge clk) if (rst_n) for (int g = 0; g < 4; g++) if (mac_step[g]) steps[g]++;

  initial begin
    logic [31:0] expect_sum [4];
    prog_we = 0; prog_addr = 0; prog_wdata = 0; host_addr = 0; host_wdata = 0;
    for (int g = 0; g < 4; g++) begin host_we[g] = 0; steps[g] = 0; cycles[g] = 0; end
    for (int pass = 0; pass < 2; pass++) begin start(pass == 1); prog_dot(); end
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      prog_we = 1'b1; prog_addr = 8'(i);
      prog_wdata = (i < code.size()) ? code[i] : 32'h0000_0013;
    end
    @(negedge clk) prog_we = 1'b0;
    for (int g = 0; g < 4; g++) begin
      automatic int p = PRECS[g], per = 32 / PRECS[g], words = NV / (32 / PRECS[g]);
      automatic longint sum = 0;
      for (int w = 0; w < words; w++) begin
        automatic logic [31:0] wa = '0, wb = '0;
        for (int l = 0; l < per; l++) begin
          longint va, vb, lim;
          lim = longint'(1) << (p - 1);
          va = longint'($urandom) % (2 * lim) - lim;
          vb = longint'($urandom) % (2 * lim) - lim;
          if (w == 0 && l == 0) begin va = -lim; vb = -lim; end   // most negative lane values
          for (int k = 0; k < p; k++) begin
            wa[l * p + k] = va[k];
            wb[l * p + k] = vb[k];
          end
          sum += longint'($signed(32'(va * vb)));
        end
        host_write(g, 4 * w, wa);
        host_write(g, 96 + 4 * w, wb);
      end
      host_write(g, 252, 32'(words));
      expect_sum[g] = sum[31:0];
    end
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 2000; c++) begin
      @(posedge clk); #1;
      for (int g = 0; g < 4; g++) if (!halted[g]) cycles[g]++;
    end
    for (int g = 0; g < 4; g++) begin
      check($sformatf("P%0d halted", PRECS[g]), {31'b0, halted[g]}, 32'd1);
      check($sformatf("P%0d legal", PRECS[g]), {31'b0, illegal[g]}, 32'd0);
      host_addr = 8'd200;
      #1 check($sformatf("P%0d dot product", PRECS[g]), host_rdata[g], expect_sum[g]);
      check($sformatf("P%0d MAC steps", PRECS[g]), 32'(steps[g]), 32'(NV * PRECS[g] / 32));
      $display("P%0d: %0d lanes, %0d MAC steps, %0d cycles", PRECS[g], 32 / PRECS[g], steps[g], cycles[g]);
      if (g > 0) begin
        checks++;
        if (!(cycles[g] < cycles[g - 1])) begin
          failures++;
          $display("FAIL P%0d not faster than P%0d", PRECS[g], PRECS[g - 1]);
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
