// round_bf16: converts an extended-precision column result to Bfloat16.
//
// The 16-bit significand may carry leading zeros left by approximate
// normalization, so it is first normalized exactly (leading-zero count and
// left shift, exponent reduced by the count). The top 8 bits then form the
// BF16 significand and the remaining 8 bits are rounded to nearest, ties to
// even (guard bit and sticky OR of the rest). A carry out of rounding bumps the
// exponent. Zero significands and results with exponent 0 or below become
// (signed) zero; exponent 255 or more becomes infinity. Combinational.
//
// The paper places one rounding module at the south end of each column so
// that rounding happens once per column rather than in every PE; the rounding
// mode and the exact normalization here are this design's choice.
module round_bf16
  import bf16_an_pkg::*;
(
  input  ext_t  in,
  output bf16_t out
);

  logic [4:0]        lz;
  logic [PSIG_W-1:0] norm;
  logic [MAN_W:0]    man_r;      // rounded 8-bit significand incl. carry
  logic              guard, sticky, round_up;
  sexp_t             e;

  always_comb begin
    lz = 5'd16;
    for (int i = 0; i < PSIG_W; i++) begin
      if (in.sig[i]) lz = 5'(PSIG_W - 1 - i);
    end
    norm     = in.sig << lz;
    guard    = norm[PSIG_W-SIG_W-1];
    sticky   = |norm[PSIG_W-SIG_W-2:0];
    round_up = guard && (sticky || norm[PSIG_W-SIG_W]);
    man_r    = {1'b0, norm[PSIG_W-2:PSIG_W-SIG_W]} + (MAN_W+1)'(round_up);
    e        = sexp_t'({2'b00, in.exp}) - sexp_t'({5'b0, lz}) + sexp_t'(man_r[MAN_W]);

    out.sign = in.sign;
    if (in.exp == EXP_W'(EXP_MAX)) begin
      out.exp = EXP_W'(EXP_MAX);
      out.man = '0;
    end else if (in.sig == '0 || in.exp == '0 || e <= 0) begin
      out.exp = '0;
      out.man = '0;
    end else if (e >= sexp_t'(EXP_MAX)) begin
      out.exp = EXP_W'(EXP_MAX);
      out.man = '0;
    end else begin
      out.exp = e[EXP_W-1:0];
      out.man = man_r[MAN_W-1:0];
    end
  end

endmodule
