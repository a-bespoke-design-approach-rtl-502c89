// SIMD multiply-accumulate unit.
//
// The 32-bit operands a and b are cut into LANES = 32/PREC lanes of PREC bits;
// lane i covers bits [(i+1)*PREC-1 : i*PREC] of both operands. Each lane holds
// its own accumulator and, when en is high, performs acc_i <= a_i * b_i + acc_i
// (or acc_i <= a_i * b_i when clr is also high, which starts a new dot
// product). The lane accumulators are summed by a binary adder tree into the
// 32-bit OUT register, which is loaded at the same clock edge as the
// accumulators, so one MAC step takes one cycle and its total can be read in
// the next cycle.
//
// Follows the paper: lane split of the operands, one multiplier and one
// accumulator (z^-1) per lane, adder tree, 32-bit output register, PREC of
// 32/16/8/4 giving 1/2/4/8 lanes, single-cycle operation. This design's own
// choices: lane values and products are signed two's complement; each lane
// accumulator is ACC_W bits wide (products are sign-extended, or truncated to
// the low ACC_W bits when 2*PREC > ACC_W) where the figure prints "n-bit";
// the total wraps modulo 2^32; clr and the reset behaviour.
//
// Interface: en/clr/a/b are sampled at the rising edge; out is registered.
module simd_mac #(
  parameter int unsigned PREC  = 16,
  parameter int unsigned ACC_W = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        clr,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] out
);
  localparam int unsigned LANES = 32 / PREC;

  initial begin
    assert (PREC == 4 || PREC == 8 || PREC == 16 || PREC == 32)
      else $error("simd_mac: PREC must be 4, 8, 16 or 32");
  end

  logic [ACC_W-1:0] acc_q [LANES];
  logic [ACC_W-1:0] acc_d [LANES];
  // Adder tree stored heap-style: node k sums nodes 2k+1 and 2k+2,
  // leaves are nodes LANES-1 .. 2*LANES-2.
  logic [31:0]      tree  [2*LANES-1];

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic signed [PREC-1:0]   a_l, b_l;
    logic signed [2*PREC-1:0] prod;
    assign a_l  = a[i*PREC +: PREC];
    assign b_l  = b[i*PREC +: PREC];
    assign prod = a_l * b_l;
    assign acc_d[i] = (clr ? '0 : acc_q[i]) + ACC_W'(prod);
    assign tree[LANES-1+i] = 32'(signed'(acc_d[i]));
  end

  for (genvar k = 0; k < LANES - 1; k++) begin : g_tree
    assign tree[k] = tree[2*k+1] + tree[2*k+2];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LANES; i++) acc_q[i] <= '0;
      out <= '0;
    end else if (en) begin
      for (int i = 0; i < LANES; i++) acc_q[i] <= acc_d[i];
      out <= tree[0];
    end
  end

endmodule
