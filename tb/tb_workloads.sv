// Workload testbench of bespoke_soc at its default parameters.
//
// Runs the other application kernels a printed ML core of this kind is
// built for, each on random data, and compares the data RAM afterwards with
// results the testbench computes itself:
//   SVM-C  linear one-vs-one SVM, 21 features (padded to 22), 3 classes,
//          decision values by SIMD MAC, voting, first class wins a tie
//   SVM-R  linear SVM regression, 11 features (padded to 12), by SIMD MAC
//   DT     depth-2 decision tree on 3 features, 4 leaves
//   MD     multiplication and division of 8 operand pairs
//   SORT   insertion sort of 16 signed words
// Each program must halt without an illegal instruction; the cycle count of
// each is printed.
module tb_workloads;
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

  int cycles;
  task automatic run(string tag, int max_cycles);
    @(negedge clk) rst_n = 1'b1;
    cycles = 0;
    while (!halted && cycles < max_cycles) begin
      @(posedge clk);
      cycles++;
      #1;
    end
    check({tag, " halted"}, {31'b0, halted}, 32'd1);
    check({tag, " legal"}, {31'b0, illegal}, 32'd0);
  endtask

  // ------------------------------------------------------------ linear SVM
  // X at 0, weights after X, then biases, decision values, class
  int nf, nc, x_b, w_b, b_b, d_b, c_b;
  int sx [22];
  int sw_ [3][22];
  int sb [3];

  task automatic svm_layout(int features, int classifiers);
    nf = features; nc = classifiers;
    x_b = 0; w_b = 2 * nf; b_b = w_b + 2 * nf * nc; d_b = b_b + 4 * nc; c_b = d_b + 4 * nc;
  endtask

  task automatic prog_svm(bit classify);
    addi(9, 0, w_b);
    for (int k = 0; k < nc; k++) begin
      addi(7, 0, x_b); addi(3, 0, nf / 2 - 1);
      lw(5, 0, 7); lw(6, 0, 9); macz(5, 6); addi(7, 7, 4); addi(9, 9, 4);
      label($sformatf("d%0d", k));
      lw(5, 0, 7); lw(6, 0, 9); mac(5, 6); addi(7, 7, 4); addi(9, 9, 4);
      addi(3, 3, -1); bne(3, 0, $sformatf("d%0d", k));
      macrd(5); lw(6, b_b + 4 * k, 0); add(5, 5, 6); sw(5, d_b + 4 * k, 0);
    end
    if (classify) begin
      // one-vs-one for 3 classes: pairs (0,1), (0,2), (1,2); votes in x1..x3
      addi(1, 0, 0); addi(2, 0, 0); addi(3, 0, 0);
      for (int k = 0; k < 3; k++) begin
        int p = (k == 2) ? 1 : 0, q = (k == 0) ? 1 : 2;
        lw(5, d_b + 4 * k, 0);
        blt(5, 0, $sformatf("v%0d", k));
        addi(1 + p, 1 + p, 1); jal(0, $sformatf("e%0d", k));
        label($sformatf("v%0d", k));
        addi(1 + q, 1 + q, 1);
        label($sformatf("e%0d", k));
      end
      // argmax of votes, lowest class on a tie
      addi(8, 0, 0); addi(4, 1, 0);
      bge(4, 2, "a1"); addi(8, 0, 1); addi(4, 2, 0); label("a1");
      bge(4, 3, "a2"); addi(8, 0, 2); label("a2");
      sw(8, c_b, 0);
    end
    halt();
  endtask

  task automatic svm_data(output int exp_d [3], output int exp_c);
    int votes [3];
    for (int i = 0; i < nf; i++) sx[i] = (i < nf - 1) ? int'($urandom % 32768) : 0;
    for (int k = 0; k < nc; k++) begin
      for (int i = 0; i < nf; i++) sw_[k][i] = (i < nf - 1) ? int'($urandom % 8192) - 4096 : 0;
      sb[k] = int'($urandom % (1 << 24)) - (1 << 23);
    end
    for (int i = 0; i < nf; i += 2) host_write(x_b + 2 * i, {16'(sx[i + 1]), 16'(sx[i])});
    for (int k = 0; k < nc; k++) begin
      for (int i = 0; i < nf; i += 2)
        host_write(w_b + 2 * (k * nf + i), {16'(sw_[k][i + 1]), 16'(sw_[k][i])});
      host_write(b_b + 4 * k, 32'(sb[k]));
    end
    votes = '{0, 0, 0};
    for (int k = 0; k < 3; k++) exp_d[k] = 0;
    for (int k = 0; k < nc; k++) begin
      exp_d[k] = sb[k];
      for (int i = 0; i < nf; i++) exp_d[k] += sx[i] * sw_[k][i];
    end
    if (nc == 3) begin
      if (exp_d[0] >= 0) votes[0]++; else votes[1]++;
      if (exp_d[1] >= 0) votes[0]++; else votes[2]++;
      if (exp_d[2] >= 0) votes[1]++; else votes[2]++;
    end
    exp_c = 0;
    for (int c = 1; c < 3; c++) if (votes[c] > votes[exp_c]) exp_c = c;
  endtask

  // ------------------------------------------------------------ decision tree
  // features f0..f2 at 0, 4, 8; thresholds in the code; class at 12
  int t0, t1, t2, lf [4];
  task automatic prog_dt();
    lw(1, 0, 0); lw(2, 4, 0); lw(3, 8, 0);
    li(4, t0); blt(1, 4, "left");
    li(4, t2); blt(3, 4, "rl");
    addi(8, 0, lf[3]); jal(0, "out");
    label("rl"); addi(8, 0, lf[2]); jal(0, "out");
    label("left");
    li(4, t1); blt(2, 4, "ll");
    addi(8, 0, lf[1]); jal(0, "out");
    label("ll"); addi(8, 0, lf[0]);
    label("out"); sw(8, 12, 0);
    halt();
  endtask

  // ------------------------------------------------------------ mult/div
  // 8 pairs (a, b) at 0..63; results a*b, a/b, a%b at 64 + 12*k
  task automatic prog_md();
    addi(1, 0, 0); addi(2, 0, 64); addi(11, 0, 64);
    label("md");
    lw(3, 0, 1); lw(4, 4, 1);
    mul(5, 3, 4); sw(5, 0, 2);
    div(5, 3, 4); sw(5, 4, 2);
    rem(5, 3, 4); sw(5, 8, 2);
    addi(1, 1, 8); addi(2, 2, 12);
    bne(1, 11, "md");
    halt();
  endtask

  // ------------------------------------------------------------ insertion sort
  task automatic prog_sort();
    addi(1, 0, 1); addi(11, 0, 16);
    label("outer");
    slli(2, 1, 2); lw(3, 0, 2); addi(4, 2, -4);
    label("inner");
    blt(4, 0, "place");
    lw(5, 0, 4); bge(3, 5, "place");
    sw(5, 4, 4); addi(4, 4, -4); jal(0, "inner");
    label("place");
    sw(3, 4, 4); addi(1, 1, 1); bne(1, 11, "outer");
    halt();
  endtask

  task automatic assemble(int which, bit classify = 1'b1);
    for (int pass = 0; pass < 2; pass++) begin
      start(pass == 1);
      case (which)
        0: prog_svm(classify);
        1: prog_dt();
        2: prog_md();
        default: prog_sort();
      endcase
    end
  endtask

  initial begin
    int exp_d [3], exp_c;
    logic [31:0] v;
    prog_we = 0; prog_addr = 0; prog_wdata = 0;
    host_we = 0; host_be = 0; host_addr = 0; host_wdata = 0;
    for (int r = 0; r < 3; r++) begin
      // SVM-C, Cardio shape
      svm_layout(22, 3);
      assemble(0, 1'b1);
      load_program();
      svm_data(exp_d, exp_c);
      run("SVM-C", 5000);
      for (int k = 0; k < 3; k++) begin
        host_read(d_b + 4 * k, v);
        check($sformatf("SVM-C d%0d", k), v, 32'(exp_d[k]));
      end
      host_read(c_b, v);
      check("SVM-C class", v, 32'(exp_c));
      if (r == 0) $display("SVM-C 21 features, 3 classes: %0d cycles, %0d instructions", cycles, code.size());
      // SVM-R, wine shape
      svm_layout(12, 1);
      assemble(0, 1'b0);
      load_program();
      svm_data(exp_d, exp_c);
      run("SVM-R", 5000);
      host_read(d_b, v);
      check("SVM-R value", v, 32'(exp_d[0]));
      if (r == 0) $display("SVM-R 11 features: %0d cycles, %0d instructions", cycles, code.size());
    end
    // decision tree: every leaf reached
    for (int r = 0; r < 16; r++) begin
      int f [3], e;
      t0 = int'($urandom % 4000) - 2000; t1 = int'($urandom % 4000) - 2000; t2 = int'($urandom % 4000) - 2000;
      for (int l = 0; l < 4; l++) lf[l] = int'($urandom % 7);
      assemble(1);
      load_program();
      for (int i = 0; i < 3; i++) begin
        f[i] = int'($urandom % 4000) - 2000;
        host_write(4 * i, 32'(f[i]));
      end
      if (r < 4) begin   // force each path once
        f[0] = (r < 2) ? t0 - 1 : t0;
        f[1] = (r == 0) ? t1 - 1 : t1;
        f[2] = (r == 2) ? t2 - 1 : t2;
        for (int i = 0; i < 3; i++) host_write(4 * i, 32'(f[i]));
      end
      e = (f[0] < t0) ? ((f[1] < t1) ? lf[0] : lf[1]) : ((f[2] < t2) ? lf[2] : lf[3]);
      run("DT", 500);
      if (r == 0) $display("DT depth 2: %0d cycles, %0d instructions", cycles, code.size());
      host_read(12, v);
      check("DT class", v, 32'(e));
    end
    // multiplication / division
    begin
      int a [8], b [8];
      assemble(2);
      load_program();
      for (int k = 0; k < 8; k++) begin
        a[k] = int'($urandom); b[k] = int'($urandom) >>> ($urandom % 31);
        if (k == 3) b[k] = 0;
        if (k == 5) begin a[k] = 32'h8000_0000; b[k] = -1; end
        host_write(8 * k, 32'(a[k])); host_write(8 * k + 4, 32'(b[k]));
      end
      run("MD", 2000);
      $display("MD 8 pairs: %0d cycles, %0d instructions", cycles, code.size());
      for (int k = 0; k < 8; k++) begin
        logic [31:0] q, rm;
        if (b[k] == 0) begin q = '1; rm = 32'(a[k]); end
        else if (a[k] == 32'h8000_0000 && b[k] == -1) begin q = 32'h8000_0000; rm = 0; end
        else begin q = 32'(a[k] / b[k]); rm = 32'(a[k] % b[k]); end
        host_read(64 + 12 * k, v);     check($sformatf("MD mul %0d", k), v, 32'(a[k] * b[k]));
        host_read(64 + 12 * k + 4, v); check($sformatf("MD div %0d", k), v, q);
        host_read(64 + 12 * k + 8, v); check($sformatf("MD rem %0d", k), v, rm);
      end
    end
    // insertion sort
    for (int r = 0; r < 3; r++) begin
      int arr [16];
      assemble(3);
      load_program();
      for (int i = 0; i < 16; i++) begin
        arr[i] = int'($urandom % 200) - 100;
        host_write(4 * i, 32'(arr[i]));
      end
      // reference: exchange sort on signed values
      for (int i = 0; i < 16; i++)
        for (int j = i + 1; j < 16; j++)
          if (arr[j] < arr[i]) begin automatic int t = arr[i]; arr[i] = arr[j]; arr[j] = t; end
      run("SORT", 5000);
      if (r == 0) $display("SORT 16 words: %0d cycles, %0d instructions", cycles, code.size());
      for (int i = 0; i < 16; i++) begin
        host_read(4 * i, v);
        check($sformatf("SORT [%0d]", i), v, 32'(arr[i]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
