// Register file of the bespoke core, trimmed to NREGS architectural registers.
//
// Two combinational read ports and one write port written at the rising clock
// edge. Register 0 always reads as zero and is not stored. Register indices at
// or above NREGS do not exist: they read as zero and writes to them are
// dropped (the core's decoder rejects instructions that name them).
//
// Follows the paper: 12 registers are kept. This design's own choice: the
// kept registers are x0..x11, and the storage is flip-flops reset to zero.
module regfile #(
  parameter int unsigned NREGS = 12,
  parameter int unsigned XLEN  = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [4:0]      raddr_a,
  output logic [XLEN-1:0] rdata_a,
  input  logic [4:0]      raddr_b,
  output logic [XLEN-1:0] rdata_b,
  input  logic            we,
  input  logic [4:0]      waddr,
  input  logic [XLEN-1:0] wdata
);
  logic [XLEN-1:0] regs_q [1:NREGS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i < NREGS; i++) regs_q[i] <= '0;
    end else if (we && waddr != 5'd0 && 32'(waddr) < NREGS) begin
      regs_q[waddr] <= wdata;
    end
  end

  always_comb begin
    rdata_a = '0;
    rdata_b = '0;
    for (int i = 1; i < NREGS; i++) begin
      if (32'(raddr_a) == i) rdata_a = regs_q[i];
      if (32'(raddr_b) == i) rdata_b = regs_q[i];
    end
  end

endmodule
