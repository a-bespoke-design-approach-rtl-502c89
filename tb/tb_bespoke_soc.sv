// End-to-end testbench of bespoke_soc at its default parameters.
//
// Runs a 3-layer MLP (11 inputs padded to 12, 5 ReLU hidden neurons, 3
// outputs, argmax) in 16-bit fixed point, the model shape the paper uses for
// the wine data sets, twice: once written with the SIMD MAC instructions
// (two 16-bit lanes per MAC) and once written with MUL/ADD only, as on the
// core without the MAC unit. Weights and inputs are random and regenerated
// for several runs; the testbench computes the expected hidden values,
// outputs and class with its own integer arithmetic and reads the data RAM
// through the host port. It checks that both programs agree with the
// reference, that the MAC version is faster, and it counts each mechanism:
// MAC steps, multiplier/divider stalls, branch flushes, halt, and the
// illegal-instruction stop (a final program uses the removed SLT).
//
// Number format: inputs are Q0.15 in [0, 1), weights are signed 16-bit,
// biases are 32-bit in product scale; hidden value = min(max(sum, 0) >> 15,
// 32767); outputs are the raw 32-bit sums.
module tb_bespoke_soc;
  import rv_asm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic prog_we;
  logic [7:0] prog_addr;
  logic [31:0] prog_wdata;
  logic [7:0] host_addr;
  logic host_we;
  logic [3:0] host_be;
  logic [31:0] host_wdata, host_rdata;
  logic halted, illegal, retire, stall, flush, mac_step;
  int checks = 0, failures = 0;

  bespoke_soc dut (.*);

  always #5 clk = ~clk;

  task automatic check(string name, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", name, got, exp);
    end
  endtask

  // model shape and data layout (byte addresses)
  localparam int NIN = 12, NH = 5, NHP = 6, NOUT = 3;
  localparam int X_B = 'h00, W1_B = 'h18, B1_B = 'h90, W2_B = 'hA4,
                 B2_B = 'hC8, H_B = 'hD4, Y_B = 'hE0, C_B = 'hEC;

  // one fully connected layer; x9 = weights, x10 = biases, x11 = outputs
  task automatic layer(string tag, bit use_mac, int in_b, int nin, int nout, bit hidden);
    addi(4, 0, nout);
    label({tag, "_n"});
    addi(7, 0, in_b);
    if (use_mac) begin
      addi(3, 0, nin / 2 - 1);
      lw(5, 0, 7); lw(6, 0, 9); macz(5, 6); addi(7, 7, 4); addi(9, 9, 4);
      label({tag, "_i"});
      lw(5, 0, 7); lw(6, 0, 9); mac(5, 6); addi(7, 7, 4); addi(9, 9, 4);
      addi(3, 3, -1); bne(3, 0, {tag, "_i"});
      macrd(5);
    end else begin
      addi(3, 0, nin);
      addi(2, 0, 0);
      label({tag, "_i"});
      lh(5, 0, 7); lh(6, 0, 9); mul(5, 5, 6); add(2, 2, 5); addi(7, 7, 2); addi(9, 9, 2);
      addi(3, 3, -1); bne(3, 0, {tag, "_i"});
      addi(5, 2, 0);
    end
    lw(6, 0, 10); add(5, 5, 6); addi(10, 10, 4);
    if (hidden) begin
      bge(5, 0, {tag, "_p"}); addi(5, 0, 0); label({tag, "_p"});
      srai(5, 5, 15);
      li(6, 32'h7FFF);
      bge(6, 5, {tag, "_s"}); addi(5, 6, 0); label({tag, "_s"});
      sh(5, 0, 11); addi(11, 11, 2);
    end else begin
      sw(5, 0, 11); addi(11, 11, 4);
    end
    addi(4, 4, -1); bne(4, 0, {tag, "_n"});
  endtask

  task automatic prog_mlp(bit use_mac);
    addi(9, 0, W1_B); addi(10, 0, B1_B); addi(11, 0, H_B);
    layer("l1", use_mac, X_B, NIN, NH, 1'b1);
    addi(9, 0, W2_B); addi(10, 0, B2_B); addi(11, 0, Y_B);
    layer("l2", use_mac, H_B, NHP, NOUT, 1'b0);
    // argmax over the outputs, first maximum wins
    lw(5, Y_B, 0); addi(8, 0, 0); addi(3, 0, 1); addi(7, 0, Y_B + 4); addi(1, 0, NOUT);
    label("am");
    lw(6, 0, 7); bge(5, 6, "am_k"); addi(5, 6, 0); addi(8, 3, 0); label("am_k");
    addi(7, 7, 4); addi(3, 3, 1); bne(3, 1, "am");
    sw(8, C_B, 0);
    halt();
  endtask

  task automatic assemble(int which);
    for (int pass = 0; pass < 2; pass++) begin
      start(pass == 1);
      case (which)
        0: prog_mlp(1'b1);
        1: prog_mlp(1'b0);
        default: begin addi(1, 0, 5); slt(2, 1, 1); halt(); end
      endcase
    end
  endtask

  task automatic load_program();
    rst_n = 1'b0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      prog_we = 1'b1; prog_addr = 8'(i);
      prog_wdata = (i < code.size()) ? code[i] : 32'h0000_0013;
    end
    @(negedge clk) prog_we = 1'b0;
  endtask

  task automatic host_write(int addr, logic [31:0] v);
    @(negedge clk);
    host_we = 1'b1; host_be = 4'hF; host_addr = 8'(addr); host_wdata = v;
    @(negedge clk) host_we = 1'b0;
  endtask

  task automatic host_read(int addr, output logic [31:0] v);
    host_addr = 8'(addr);
    #1 v = host_rdata;
  endtask

  // model data
  int x [NIN], w1 [NH][NIN], b1 [NH], w2 [NOUT][NHP], b2 [NOUT];
  int h [NHP], y [NOUT], cls;

  task automatic make_model();
    for (int i = 0; i < NIN; i++) x[i] = (i < 11) ? int'($urandom % 32768) : 0;
    for (int j = 0; j < NH; j++) begin
      for (int i = 0; i < NIN; i++) w1[j][i] = int'($urandom % 4096) - 2048;
      b1[j] = int'($urandom % (1 << 21)) - (1 << 20);
    end
    for (int k = 0; k < NOUT; k++) begin
      for (int j = 0; j < NHP; j++) w2[k][j] = (j < NH) ? int'($urandom % 4096) - 2048 : 0;
      b2[k] = int'($urandom % (1 << 21)) - (1 << 20);
    end
    // reference inference
    for (int j = 0; j < NHP; j++) begin
      int s = 0;
      if (j < NH) begin
        s = b1[j];
        for (int i = 0; i < NIN; i++) s += x[i] * w1[j][i];
        if (s < 0) s = 0;
        s = s >>> 15;
        if (s > 32767) s = 32767;
      end
      h[j] = s;
    end
    cls = 0;
    for (int k = 0; k < NOUT; k++) begin
      y[k] = b2[k];
      for (int j = 0; j < NHP; j++) y[k] += h[j] * w2[k][j];
      if (y[k] > y[cls]) cls = k;
    end
  endtask

  function automatic logic [31:0] pack2(int lo, int hi);
    return {16'(hi), 16'(lo)};
  endfunction

  task automatic load_data();
    for (int i = 0; i < NIN; i += 2) host_write(X_B + 2 * i, pack2(x[i], x[i + 1]));
    for (int j = 0; j < NH; j++) begin
      for (int i = 0; i < NIN; i += 2)
        host_write(W1_B + 2 * (j * NIN + i), pack2(w1[j][i], w1[j][i + 1]));
      host_write(B1_B + 4 * j, 32'(b1[j]));
    end
    for (int k = 0; k < NOUT; k++) begin
      for (int j = 0; j < NHP; j += 2)
        host_write(W2_B + 2 * (k * NHP + j), pack2(w2[k][j], w2[k][j + 1]));
      host_write(B2_B + 4 * k, 32'(b2[k]));
    end
    for (int a = H_B; a < 256; a += 4) host_write(a, 32'hDEAD_BEEF);
    host_write(H_B + 8, 32'h0);        // padding hidden slot must read zero
  endtask

  int cycles;
  int n_mac = 0, n_stall = 0, n_flush = 0, n_halt = 0, n_illegal = 0;

  task automatic run(int max_cycles);
    @(negedge clk) rst_n = 1'b1;
    cycles = 0;
    while (!halted && cycles < max_cycles) begin
      @(posedge clk);
      cycles++;
      #1;
    end
    if (halted) n_halt++;
    if (illegal) n_illegal++;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (mac_step) n_mac++;
    if (stall) n_stall++;
    if (flush) n_flush++;
  end

  task automatic check_outputs(string tag);
    logic [31:0] v;
    check({tag, " halted"}, {31'b0, halted}, 32'd1);
    check({tag, " legal"}, {31'b0, illegal}, 32'd0);
    for (int j = 0; j < NH; j++) begin
      host_read(H_B + 4 * (j / 2), v);
      check($sformatf("%s h[%0d]", tag, j), (v >> (16 * (j % 2))) & 32'hFFFF, 32'(h[j]));
    end
    for (int k = 0; k < NOUT; k++) begin
      host_read(Y_B + 4 * k, v);
      check($sformatf("%s y[%0d]", tag, k), v, 32'(y[k]));
    end
    host_read(C_B, v);
    check({tag, " class"}, v, 32'(cls));
  endtask

  initial begin
    int cyc_mac, cyc_base, mac_before;
    prog_we = 0; prog_addr = 0; prog_wdata = 0;
    host_we = 0; host_be = 0; host_addr = 0; host_wdata = 0;
    for (int r = 0; r < 4; r++) begin
      make_model();
      // SIMD MAC program
      assemble(0);
      load_program();
      load_data();
      mac_before = n_mac;
      run(20000);
      cyc_mac = cycles;
      if (r == 0) $display("MLP with SIMD MAC: %0d instructions", code.size());
      check_outputs("MAC");
      // 12/2 lane pairs per hidden neuron, 6/2 per output neuron
      check("MAC steps", 32'(n_mac - mac_before), 32'(NH * NIN / 2 + NOUT * NHP / 2));
      // MUL/ADD baseline
      assemble(1);
      load_program();
      load_data();
      run(20000);
      cyc_base = cycles;
      if (r == 0) $display("MLP with MUL/ADD: %0d instructions", code.size());
      check_outputs("baseline");
      checks++;
      if (!(cyc_mac < cyc_base)) begin
        failures++;
        $display("FAIL MAC program not faster: %0d vs %0d cycles", cyc_mac, cyc_base);
      end
      if (r == 0)
        $display("MLP 11-5-3: %0d cycles with SIMD MAC, %0d with MUL/ADD (%0.1f%% fewer)",
                 cyc_mac, cyc_base, 100.0 * (cyc_base - cyc_mac) / cyc_base);
    end
    // removed instruction
    assemble(2);
    load_program();
    run(100);
    check("SLT stops the core", {30'b0, halted, illegal}, 32'd3);
    $display("mechanisms: mac=%0d stall=%0d flush=%0d halt=%0d illegal=%0d",
             n_mac, n_stall, n_flush, n_halt, n_illegal);
    checks += 5;
    if (n_mac == 0)     begin failures++; $display("FAIL no MAC step"); end
    if (n_stall == 0)   begin failures++; $display("FAIL no stall"); end
    if (n_flush == 0)   begin failures++; $display("FAIL no flush"); end
    if (n_halt == 0)    begin failures++; $display("FAIL no halt"); end
    if (n_illegal == 0) begin failures++; $display("FAIL no illegal stop"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
