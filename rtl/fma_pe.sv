// fma_pe: two-stage pipelined fused multiply-add, res = A*B + C, with
// approximate normalization.
//
// A and B are BF16; C and the result use the extended format of bf16_an_pkg
// (sign, 8-bit exponent, 16-bit significand), so no rounding happens here.
// Stage 1: significand multiplication (8x8 -> 16) in parallel with sign and
//          exponent computation and comparison with C's exponent.
// Stage 2: alignment of the operand with the smaller exponent, signed-
//          magnitude addition (17 bits), approximate normalization (shift by
//          0, k or k+lambda, or 1 right on carry) and exponent correction.
// Both stages end in a register: res is valid two cycles after the operands,
// flagged by out_valid. One operation can start every cycle.
//
// The stage split and the widths (9-bit sign/exponent, 8-bit significands,
// 16-bit product and C, 17-bit sum, 16-bit result) follow the paper's PE
// diagram, with the paper's approximate normalizer replacing leading-zero
// anticipation. Pipeline registers update only when valid data moves (an
// enable, to save power) and the valid bits reset to 0; both are this
// design's choice.
module fma_pe
  import bf16_an_pkg::*;
#(
  parameter int K      = 1,
  parameter int LAMBDA = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  bf16_t a,
  input  bf16_t b,
  input  ext_t  c,
  output logic  out_valid,
  output ext_t  res
);

  // ---------------- stage 1 ----------------
  logic               p_sign_d, c_sign_d, c_larger_d;
  sexp_t              e_max_d;
  logic [SHAMT_W-1:0] shamt_d;
  logic [PSIG_W-1:0]  prod_d;
  logic [SIG_W-1:0]   a_sig, b_sig;

  always_comb begin
    a_sig = {(a.exp != '0), a.man};
    b_sig = {(b.exp != '0), b.man};
  end

  sign_exp_unit u_se (
    .a_se    ({a.sign, a.exp}),
    .b_se    ({b.sign, b.exp}),
    .c_se    ({c.sign, c.exp}),
    .p_sign  (p_sign_d),
    .c_sign  (c_sign_d),
    .e_max   (e_max_d),
    .c_larger(c_larger_d),
    .shamt   (shamt_d)
  );

  sig_multiplier #(.SIG_W(SIG_W)) u_mul (
    .a_sig(a_sig),
    .b_sig(b_sig),
    .prod (prod_d)
  );

  // stage-1 pipeline register
  logic               v1;
  logic               p_sign_q, c_sign_q, c_larger_q;
  sexp_t              e_max_q;
  logic [SHAMT_W-1:0] shamt_q;
  logic [PSIG_W-1:0]  prod_q, csig_q;

  always_ff @(posedge clk) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      p_sign_q   <= p_sign_d;
      c_sign_q   <= c_sign_d;
      c_larger_q <= c_larger_d;
      e_max_q    <= e_max_d;
      shamt_q    <= shamt_d;
      prod_q     <= prod_d;
      csig_q     <= c.sig;
    end
  end

  // ---------------- stage 2 ----------------
  logic [PSIG_W-1:0] p_al, c_al, sig_norm;
  logic [SUM_W-1:0]  sum;
  logic              sum_sign, ovf;
  norm_shift_e       nshift;
  ext_t              res_d;

  align_unit #(.W(PSIG_W), .SHAMT_W(SHAMT_W)) u_align (
    .p_sig   (prod_q),
    .c_sig   (csig_q),
    .c_larger(c_larger_q),
    .shamt   (shamt_q),
    .p_al    (p_al),
    .c_al    (c_al)
  );

  sig_adder #(.W(PSIG_W)) u_add (
    .p_sign  (p_sign_q),
    .c_sign  (c_sign_q),
    .p_al    (p_al),
    .c_al    (c_al),
    .sum     (sum),
    .sum_sign(sum_sign)
  );

  approx_norm #(.K(K), .LAMBDA(LAMBDA), .SW(SUM_W)) u_norm (
    .sum     (sum),
    .sig_norm(sig_norm),
    .shift   (nshift),
    .ovf     (ovf)
  );

  sign_exp_correct #(.K(K), .LAMBDA(LAMBDA)) u_corr (
    .sign    (sum_sign),
    .e_max   (e_max_q),
    .shift   (nshift),
    .ovf     (ovf),
    .sig_norm(sig_norm),
    .res     (res_d)
  );

  // stage-2 pipeline register
  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v1;
  end

  always_ff @(posedge clk) begin
    if (v1) res <= res_d;
  end

endmodule
