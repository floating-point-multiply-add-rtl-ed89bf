// sign_exp_correct: exponent update after approximate normalization.
//
// The exponent of the sum is the larger input exponent, plus one when the
// adder carried out, minus k or k+lambda when the normalizer shifted left.
// The same shift choice that steers the normalizer's multiplexers steers this
// update, as in the paper. Results whose exponent falls to 0 or below are
// flushed to zero; results whose exponent reaches 255 saturate to infinity
// (exponent 255, significand 1.0). Flushing and saturation are this design's
// choice: the paper does not discuss exponent range. Combinational.
module sign_exp_correct
  import bf16_an_pkg::*;
#(
  parameter int K      = 1,
  parameter int LAMBDA = 2
) (
  input  logic              sign,
  input  sexp_t             e_max,
  input  norm_shift_e       shift,
  input  logic              ovf,
  input  logic [PSIG_W-1:0] sig_norm,
  output ext_t              res
);

  sexp_t e_res;

  always_comb begin
    unique case (shift)
      NS_K:    e_res = e_max + sexp_t'(ovf) - sexp_t'(K);
      NS_KL:   e_res = e_max + sexp_t'(ovf) - sexp_t'(K + LAMBDA);
      default: e_res = e_max + sexp_t'(ovf);
    endcase
    if (e_res <= 0) begin
      res = EXT_ZERO;
    end else if (e_res >= sexp_t'(EXP_MAX)) begin
      res.sign = sign;
      res.exp  = EXP_W'(EXP_MAX);
      res.sig  = {1'b1, {(PSIG_W-1){1'b0}}};
    end else begin
      res.sign = sign;
      res.exp  = e_res[EXP_W-1:0];
      res.sig  = sig_norm;
    end
  end

endmodule
