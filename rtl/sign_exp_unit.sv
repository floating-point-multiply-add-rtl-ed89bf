// sign_exp_unit: first-stage sign and exponent logic of the multiply-add PE.
//
// Computes the sign of A*B, the exponent of the product in the extended
// partial-sum format, and compares it with the exponent of the partial sum C.
// The product of two 1.xxxxxxx significands lies in [1,4); read with the
// binary point after its top bit (like C) it carries exponent
// ea + eb - BIAS + 1. The larger of the two exponents becomes the exponent of
// the sum; the difference is the right shift that aligns the other operand,
// saturated to 31 (any amount of 16 or more clears a 16-bit significand).
// A zero operand (exponent field 0) makes the product zero: the product is
// then always the operand shifted out, so the sum is exactly C.
//
// Interface: {sign, exponent} of A, B and C (9 bits each, as in the paper's
// PE diagram). Purely combinational; it sits in the first pipeline stage.
// The adding of exponents and the comparison with C follow the paper; the
// saturation and zero handling are this design's choice.
module sign_exp_unit
  import bf16_an_pkg::*;
(
  input  logic [EXP_W:0]     a_se,     // {sign, exponent} of A
  input  logic [EXP_W:0]     b_se,     // {sign, exponent} of B
  input  logic [EXP_W:0]     c_se,     // {sign, exponent} of C
  output logic               p_sign,   // sign of A*B
  output logic               c_sign,   // sign of C
  output sexp_t              e_max,    // exponent of the larger operand
  output logic               c_larger, // 1: product is aligned (shifted right)
  output logic [SHAMT_W-1:0] shamt     // alignment shift amount
);

  sexp_t e_p, e_c, diff;
  logic  p_zero;

  always_comb begin
    p_sign = a_se[EXP_W] ^ b_se[EXP_W];
    c_sign = c_se[EXP_W];
    p_zero = (a_se[EXP_W-1:0] == '0) || (b_se[EXP_W-1:0] == '0);
    e_p    = sexp_t'({2'b00, a_se[EXP_W-1:0]}) + sexp_t'({2'b00, b_se[EXP_W-1:0]})
             - sexp_t'(BIAS - 1);
    e_c    = sexp_t'({2'b00, c_se[EXP_W-1:0]});
    diff   = e_p - e_c;
    if (p_zero) begin
      c_larger = 1'b1;
      e_max    = e_c;
      shamt    = '1;
    end else if (diff < 0) begin
      c_larger = 1'b1;
      e_max    = e_c;
      shamt    = (-diff > sexp_t'(31)) ? '1 : SHAMT_W'(-diff);
    end else begin
      c_larger = 1'b0;
      e_max    = e_p;
      shamt    = (diff > sexp_t'(31)) ? '1 : SHAMT_W'(diff);
    end
  end

endmodule
