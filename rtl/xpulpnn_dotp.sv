// xpulpnn_dotp: the packed-SIMD dot-product (DOTP) unit of an Xpulpnn core.
//
// Computes dot products of two 32-bit registers seen as vectors of 2x16,
// 4x8, 8x4 (nibble) or 16x2-bit (crumb) elements, and the sum-of-dot-
// product form that adds a 32-bit accumulator (sdotp):
//   res = (sdotp ? acc : 0) + sum_i a[i] * b[i]
// Operands are both unsigned (u), first unsigned and second signed (us), or
// both signed (s). In the vector-scalar form (vs) element 0 of b is used for
// every element. As in the paper, each precision has its own multiplier
// island (16 2-bit, 8 4-bit, 4 8-bit and 2 16-bit multipliers) followed by
// an adder tree and a result multiplexer; the operands of the islands not
// in use are forced to zero (operand isolation) so they do not toggle.
// Purely combinational, one result per cycle in the EX stage.
module xpulpnn_dotp
  import marsellus_pkg::*;
(
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  input  logic [31:0] acc_i,
  input  simd_fmt_e   fmt_i,
  input  simd_sign_e  sign_i,
  input  logic        vs_i,      // b is a scalar replicated in each element
  input  logic        sdotp_i,   // accumulate into acc_i
  output logic [31:0] res_o
);
  logic sa, sb;
  assign sa = (sign_i == SGN_S);
  assign sb = (sign_i == SGN_S) || (sign_i == SGN_US);

  // replicate element 0 of b for the vector-scalar forms
  function automatic logic [31:0] bcast(logic [31:0] v, int unsigned ew);
    logic [31:0] r;
    for (int unsigned i = 0; i < 32 / ew; i++)
      for (int unsigned k = 0; k < ew; k++) r[i * ew + k] = v[k];
    return r;
  endfunction

  // one multiplier island: n elements of ew bits, products summed
  function automatic logic signed [33:0] island(logic [31:0] a, logic [31:0] b,
                                                int unsigned ew, logic as, logic bs);
    logic signed [33:0] s;
    s = '0;
    for (int unsigned i = 0; i < 32 / ew; i++) begin
      logic signed [16:0] ea, eb;
      logic [15:0] ra, rb;
      ra = 16'(a >> (i * ew)) & 16'((17'd1 << ew) - 1);
      rb = 16'(b >> (i * ew)) & 16'((17'd1 << ew) - 1);
      ea = (as && ra[ew - 1]) ? $signed({1'b0, ra}) - $signed(17'(17'd1 << ew)) : $signed({1'b0, ra});
      eb = (bs && rb[ew - 1]) ? $signed({1'b0, rb}) - $signed(17'(17'd1 << ew)) : $signed({1'b0, rb});
      s = s + 34'(ea * eb);
    end
    return s;
  endfunction

  logic [31:0] b_eff;
  logic [31:0] a_h, a_b, a_n, a_c, b_h, b_b, b_n, b_c;
  logic signed [33:0] p_h, p_b, p_n, p_c, dot;

  always_comb begin
    unique case (fmt_i)
      SIMD_H:  b_eff = vs_i ? bcast(op_b_i, 16) : op_b_i;
      SIMD_B:  b_eff = vs_i ? bcast(op_b_i, 8)  : op_b_i;
      SIMD_N:  b_eff = vs_i ? bcast(op_b_i, 4)  : op_b_i;
      default: b_eff = vs_i ? bcast(op_b_i, 2)  : op_b_i;
    endcase
    // operand isolation of the idle islands
    a_h = (fmt_i == SIMD_H) ? op_a_i : '0;  b_h = (fmt_i == SIMD_H) ? b_eff : '0;
    a_b = (fmt_i == SIMD_B) ? op_a_i : '0;  b_b = (fmt_i == SIMD_B) ? b_eff : '0;
    a_n = (fmt_i == SIMD_N) ? op_a_i : '0;  b_n = (fmt_i == SIMD_N) ? b_eff : '0;
    a_c = (fmt_i == SIMD_C) ? op_a_i : '0;  b_c = (fmt_i == SIMD_C) ? b_eff : '0;
    p_h = island(a_h, b_h, 16, sa, sb);
    p_b = island(a_b, b_b, 8,  sa, sb);
    p_n = island(a_n, b_n, 4,  sa, sb);
    p_c = island(a_c, b_c, 2,  sa, sb);
    // result multiplexer
    unique case (fmt_i)
      SIMD_H:  dot = p_h;
      SIMD_B:  dot = p_b;
      SIMD_N:  dot = p_n;
      default: dot = p_c;
    endcase
    res_o = (sdotp_i ? acc_i : 32'd0) + dot[31:0];
  end

endmodule
