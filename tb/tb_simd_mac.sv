// Self-checking testbench of simd_mac.
//
// Four instances with PREC = 32, 16, 8 and 4 (1, 2, 4 and 8 lanes) receive the
// same random operand stream, with en and clr toggled at random. A reference
// model in plain integer arithmetic (lane extraction by shift and mask, sign
// by subtracting 2^n) tracks every lane accumulator and the wrapped total.
// Each out value is checked one cycle after the step that produced it,
// which also checks the single-cycle MAC latency; idle cycles must leave out
// unchanged.
module tb_simd_mac;
  logic clk = 1'b0, rst_n = 1'b0;
  logic en, clr;
  logic [31:0] a, b;
  logic [31:0] out32, out16, out8, out4;
  int checks = 0, failures = 0;

  simd_mac #(.PREC(32)) u32 (.clk, .rst_n, .en, .clr, .a, .b, .out(out32));
  simd_mac              u16 (.clk, .rst_n, .en, .clr, .a, .b, .out(out16));
  simd_mac #(.PREC(8))  u8  (.clk, .rst_n, .en, .clr, .a, .b, .out(out8));
  simd_mac #(.PREC(4))  u4  (.clk, .rst_n, .en, .clr, .a, .b, .out(out4));

  always #5 clk = ~clk;

  // reference lane accumulators: [precision index][lane]
  longint ref_acc [4][8];
  int unsigned precs [4] = '{32, 16, 8, 4};

  function automatic longint lane_val(logic [31:0] x, int unsigned n, int unsigned i);
    longint v = (longint'(x) >> (i * n)) & ((longint'(1) << n) - 1);
    if (v >= (longint'(1) << (n - 1))) v -= (longint'(1) << n);
    return v;
  endfunction

  function automatic logic [31:0] ref_total(int p);
    longint s = 0;
    for (int i = 0; i < 32 / precs[p]; i++) s += ref_acc[p][i];
    return s[31:0];
  endfunction

  task automatic check(string name, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", name, got, exp);
    end
  endtask

  initial begin
    for (int p = 0; p < 4; p++) for (int i = 0; i < 8; i++) ref_acc[p][i] = 0;
    en = 0; clr = 0; a = 0; b = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      en  = ($urandom % 4) != 0;
      clr = ($urandom % 6) == 0;
      a   = $urandom;
      b   = $urandom;
      if (t % 50 == 0) begin a = 32'h8000_8000; b = 32'h8000_8000; end  // most negative lanes
      if (en) begin
        for (int p = 0; p < 4; p++)
          for (int i = 0; i < 32 / precs[p]; i++) begin
            automatic longint pr = lane_val(a, precs[p], i) * lane_val(b, precs[p], i);
            automatic longint base = clr ? 0 : ref_acc[p][i];
            automatic longint s = base + longint'($signed(pr[31:0]));
            ref_acc[p][i] = longint'($signed(s[31:0]));
          end
      end
      @(posedge clk);
      #1;
      check("P32", out32, ref_total(0));
      check("P16", out16, ref_total(1));
      check("P8",  out8,  ref_total(2));
      check("P4",  out4,  ref_total(3));
    end
    // known vector: P16, acc = 3*5 + (-2)*7 = 1 after a clearing step
    @(negedge clk);
    en = 1; clr = 1; a = {16'hFFFE, 16'd3}; b = {16'd7, 16'd5};
    @(posedge clk); #1;
    check("P16 known", out16, 32'd1);
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
