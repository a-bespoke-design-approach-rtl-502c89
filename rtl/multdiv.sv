// Multi-cycle multiplier / divider of the bespoke core.
//
// MUL (low 32 bits of the product) is built from one 16x16 multiplier used
// over three cycles: al*bl, then + (al*bh)<<16, then + (ah*bl)<<16, the last
// partial sum being presented together with done. DIV, DIVU, REM and REMU use
// a restoring divider that retires one quotient bit per cycle on the operand
// magnitudes and fixes the signs at the end (34 cycles in all). Division by
// zero and signed overflow give the RISC-V results (quotient all ones and
// remainder = dividend; quotient = dividend and remainder 0).
//
// Handshake: the core holds req high, with op/a/b stable, for as long as the
// instruction sits in its execute stage. done is high for exactly one cycle,
// with result valid in that same cycle; the core retires the instruction at
// that clock edge. A request seen in the idle state starts a new operation.
//
// Follows the paper: a multi-stage multiplier with MULH removed. Its insides,
// the cycle counts and the divider are this design's own choice.
module multdiv
  import bespoke_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  md_op_e      op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        done,
  output logic [31:0] result
);
  typedef enum logic [2:0] {S_IDLE, S_MUL1, S_MUL2, S_DIV, S_DDONE} state_e;

  state_e      state_q;
  logic [31:0] acc_q;      // product partial sum / quotient
  logic [31:0] rem_q;      // partial remainder
  logic [31:0] dvd_q;      // dividend magnitude, shifted out MSB first
  logic [31:0] dvs_q;      // divisor magnitude
  logic [5:0]  cnt_q;
  logic        neg_q_q, neg_r_q, dz_q;

  logic [31:0] a_mag, b_mag;
  logic        a_neg, b_neg, is_signed;
  assign is_signed = (op == MD_DIV) || (op == MD_REM);
  assign a_neg = is_signed && a[31];
  assign b_neg = is_signed && b[31];
  assign a_mag = a_neg ? -a : a;
  assign b_mag = b_neg ? -b : b;

  // one 16x16 unsigned multiplier shared by the three MUL cycles
  logic [15:0] mx, my;
  logic [31:0] mp;
  always_comb begin
    unique case (state_q)
      S_MUL1:  begin mx = a[15:0];  my = b[31:16]; end
      S_MUL2:  begin mx = a[31:16]; my = b[15:0];  end
      default: begin mx = a[15:0];  my = b[15:0];  end
    endcase
  end
  assign mp = mx * my;

  // one restoring-division step
  logic [32:0] trial;
  logic [31:0] rem_shift;
  assign rem_shift = {rem_q[30:0], dvd_q[31]};
  assign trial     = {1'b0, rem_shift} - {1'b0, dvs_q};

  logic [31:0] q_fix, r_fix;
  always_comb begin
    if (dz_q) begin
      q_fix = '1;
      r_fix = neg_r_q ? -rem_q : rem_q;
    end else begin
      q_fix = neg_q_q ? -acc_q : acc_q;
      r_fix = neg_r_q ? -rem_q : rem_q;
    end
  end

  always_comb begin
    done   = 1'b0;
    result = '0;
    unique case (state_q)
      S_MUL2:  begin done = 1'b1; result = acc_q + {mp[15:0], 16'b0}; end
      S_DDONE: begin
        done   = 1'b1;
        result = (op == MD_DIV || op == MD_DIVU) ? q_fix : r_fix;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      acc_q   <= '0;
      rem_q   <= '0;
      dvd_q   <= '0;
      dvs_q   <= '0;
      cnt_q   <= '0;
      neg_q_q <= 1'b0;
      neg_r_q <= 1'b0;
      dz_q    <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req) begin
          if (op == MD_MUL) begin
            acc_q   <= mp;
            state_q <= S_MUL1;
          end else begin
            acc_q   <= '0;
            rem_q   <= '0;
            dvd_q   <= a_mag;
            dvs_q   <= b_mag;
            cnt_q   <= 6'd32;
            neg_q_q <= a_neg ^ b_neg;
            neg_r_q <= a_neg;
            dz_q    <= (b == 32'd0);
            state_q <= S_DIV;
          end
        end
        S_MUL1: begin
          acc_q   <= acc_q + {mp[15:0], 16'b0};
          state_q <= S_MUL2;
        end
        S_MUL2:  state_q <= S_IDLE;
        S_DIV: begin
          dvd_q <= {dvd_q[30:0], 1'b0};
          if (!trial[32]) begin
            rem_q <= trial[31:0];
            acc_q <= {acc_q[30:0], 1'b1};
          end else begin
            rem_q <= rem_shift;
            acc_q <= {acc_q[30:0], 1'b0};
          end
          cnt_q <= cnt_q - 6'd1;
          if (cnt_q == 6'd1) state_q <= S_DDONE;
        end
        S_DDONE: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
