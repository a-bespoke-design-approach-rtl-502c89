// Self-checking testbench of bespoke_core.
//
// The testbench supplies the program memory and the data memory as plain
// arrays. A directed program exercises every instruction the core keeps
// (ALU register and immediate forms, LUI/AUIPC, all loads and stores with
// byte offsets, all branches taken and not taken, JAL/JALR, MUL/DIV/REM and
// the three SIMD MAC instructions); each result is stored to its own data
// word and compared with a value the testbench computes with its own integer
// arithmetic. It also checks cycle behaviour: MUL stalls for 2 cycles and
// each divide for 33 and nothing else stalls (the MAC is single-cycle), and every taken branch
// or jump flushes one fetched instruction. Three more programs check that
// SLT, MULH and a register above x11 are rejected as illegal.
module tb_bespoke_core;
  import rv_asm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [9:0]  imem_addr;
  logic [31:0] imem_rdata;
  logic [7:0]  dmem_addr;
  logic        dmem_we;
  logic [3:0]  dmem_be;
  logic [31:0] dmem_wdata, dmem_rdata;
  logic halted, illegal, retire, stall, flush, mac_step;
  int mac_steps = 0;
  int checks = 0, failures = 0;

  logic [31:0] imem [256];
  logic [31:0] dmem [64];
  logic [31:0] expv [$];

  bespoke_core dut (.*);

  assign imem_rdata = imem[imem_addr[9:2]];
  assign dmem_rdata = dmem[dmem_addr[7:2]];
  always_ff @(posedge clk)
    if (dmem_we)
      for (int k = 0; k < 4; k++)
        if (dmem_be[k]) dmem[dmem_addr[7:2]][8*k +: 8] <= dmem_wdata[8*k +: 8];

  always #5 clk = ~clk;

  task automatic check(string name, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", name, got, exp);
    end
  endtask

  // result slot k is data word k; expected value pushed at the same time
  int slot, store_pc;
  function automatic void store(int rs, logic [31:0] e);
    sw(rs, 4 * slot, 0);
    slot++;
    expv.push_back(e);
  endfunction

  localparam logic [31:0] A = 32'h9234_5678, B = 32'hFFFF_FFF9;  // B = -7

  task automatic prog_main();
    slot = 0;
    expv.delete();
    li(1, A);
    li(2, B);
    add(3, 1, 2);   store(3, A + B);
    sub(3, 1, 2);   store(3, A - B);
    xor_(3, 1, 2);  store(3, A ^ B);
    or_(3, 1, 2);   store(3, A | B);
    and_(3, 1, 2);  store(3, A & B);
    sll(3, 1, 2);   store(3, A << 25);
    srl(3, 1, 2);   store(3, A >> 25);
    sra(3, 1, 2);   store(3, 32'hFFFF_FFC9);            // 0x92345678 >>> 25
    sltu(3, 1, 2);  store(3, 32'd1);
    sltu(3, 2, 1);  store(3, 32'd0);
    addi(3, 1, -100); store(3, A - 100);
    xori(3, 1, 'h7FF); store(3, A ^ 32'h7FF);
    ori(3, 1, -16);  store(3, A | 32'hFFFF_FFF0);
    andi(3, 1, 255); store(3, A & 32'hFF);
    slli(3, 1, 4);   store(3, A << 4);
    srli(3, 1, 4);   store(3, A >> 4);
    srai(3, 1, 4);   store(3, 32'hF923_4567);
    sltiu(3, 2, 5);  store(3, 32'd0);
    lui(3, 'hABCDE); store(3, 32'hABCD_E000);
    store_pc = here();
    auipc(3, 1);     store(3, 32'(store_pc) + 32'h1000);
    // multiply / divide
    mul(3, 1, 2);   store(3, A * B);
    div(3, 1, 2);   store(3, 32'($signed(A) / $signed(B)));
    divu(3, 1, 2);  store(3, A / B);
    rem(3, 1, 2);   store(3, 32'($signed(A) % $signed(B)));
    remu(3, 1, 2);  store(3, A % B);
    div(3, 1, 0);   store(3, 32'hFFFF_FFFF);
    // byte and halfword memory access at slot 40 (byte address 160)
    li(4, 32'h8182_F384);
    sw(4, 160, 0);
    sb(2, 161, 0);                 // byte 1 <- F9
    sh(1, 162, 0);                 // bytes 2-3 <- 5678
    lw(3, 160, 0);  store(3, 32'h5678_F984);
    lb(3, 161, 0);  store(3, 32'hFFFF_FFF9);
    lbu(3, 161, 0); store(3, 32'h0000_00F9);
    lh(3, 162, 0);  store(3, 32'h0000_5678);
    lhu(3, 160, 0); store(3, 32'h0000_F984);
    lh(3, 160, 0);  store(3, 32'hFFFF_F984);
    // branches: bit k of x5 set when branch k is taken
    addi(5, 0, 0);
    beq(1, 1, "b0");  addi(0, 0, 0); label("b0");  ori(5, 5, 1);
    beq(1, 2, "b1");  ori(5, 5, 2);  label("b1");
    bne(1, 2, "b2");  ori(5, 5, 4);  label("b2");
    blt(1, 2, "b3");  ori(5, 5, 8);  label("b3");  // A negative, B negative: A < B
    bge(2, 1, "b4");  ori(5, 5, 16); label("b4");
    bltu(2, 1, "b5"); ori(5, 5, 32); label("b5");
    bgeu(1, 2, "b6"); ori(5, 5, 64); label("b6");
    bge(1, 0, "b7");  ori(5, 5, 128); label("b7"); // A negative: signed A < 0
    blt(0, 1, "b8");  ori(5, 5, 256); label("b8");
    store(5, 32'h0000_01E3);  // b1, b5..b8 not taken; b0 lands on its ori
    // jal / jalr
    jal(6, "sub1");
    label("ret1");
    store(7, 32'd77);
    // SIMD MAC, 2 lanes of 16 bits: lanes (lo, hi)
    li(8, {16'd3, 16'hFFFE});     // hi 3, lo -2
    li(9, {16'd5, 16'd4});        // hi 5, lo 4
    macz(8, 9);                   // acc = (-8, 15)
    mac(8, 9);                    // acc = (-16, 30)
    macrd(3);   store(3, 32'd14);
    macz(9, 9);                   // acc = (16, 25)
    macrd(3);   store(3, 32'd41);
    halt();
    label("sub1");
    addi(7, 0, 77);
    store(6, 32'(labels.exists("ret1") ? labels["ret1"] : 0));
    jalr(0, 6, 0);
  endtask

  task automatic load(int which);
    for (int pass = 0; pass < 2; pass++) begin
      start(pass == 1);
      case (which)
        0: prog_main();
        1: begin addi(1, 0, 1); slt(2, 1, 1); addi(3, 0, 3); halt(); end
        2: begin addi(1, 0, 1); mulh(2, 1, 1); halt(); end
        3: begin addi(1, 0, 1); addi(12, 1, 1); halt(); end
        default: ;
      endcase
    end
    for (int i = 0; i < 256; i++) imem[i] = (i < code.size()) ? code[i] : 32'h0000_0013;
  endtask

  int cycles, stalls, flushes, run_len;
  logic [31:0] prev_stall;

  task automatic run(int max_cycles);
    rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    cycles = 0; stalls = 0; flushes = 0;
    while (!halted && cycles < max_cycles) begin
      @(posedge clk);
      cycles++;
      #1;
    end
  endtask

  // count stall run lengths and flushes
  int stall_runs [$];
  always @(posedge clk) if (rst_n) begin
    if (stall) begin stalls++; run_len++; end
    else if (run_len != 0) begin stall_runs.push_back(run_len); run_len = 0; end
    if (flush) flushes++;
    if (mac_step) begin
      mac_steps++;
      if (stall) begin failures++; $display("FAIL MAC stalled"); end
    end
  end

  initial begin
    for (int i = 0; i < 64; i++) dmem[i] = '0;
    run_len = 0;
    load(0);
    run(2000);
    check("halted", {31'b0, halted}, 32'd1);
    check("not illegal", {31'b0, illegal}, 32'd0);
    for (int k = 0; k < expv.size(); k++) check($sformatf("slot %0d", k), dmem[k], expv[k]);
    // stall runs: MUL 2, then five divides of 33
    check("stall runs", 32'(stall_runs.size()), 32'd6);
    if (stall_runs.size() == 6) begin
      check("MUL stall", 32'(stall_runs[0]), 32'd2);
      for (int k = 1; k < 6; k++) check("DIV stall", 32'(stall_runs[k]), 32'd33);
    end
    // taken: beq b0, bne b2, blt b3, bge b4, jal, jalr, and the final jump-to-self
    check("flushes", 32'(flushes), 32'd7);
    check("MAC steps", 32'(mac_steps), 32'd3);
    for (int p = 1; p <= 3; p++) begin
      load(p);
      run(100);
      check($sformatf("illegal program %0d", p), {30'b0, halted, illegal}, 32'd3);
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
