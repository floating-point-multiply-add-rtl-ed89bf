// column_accumulator: per-column accumulation of results across passes.
//
// Sits below one column of the systolic array. It holds one extended-precision
// entry per input vector of a pass (DEPTH entries). The i-th valid result of a
// pass (counted from clear) goes to entry i: with acc_en low it overwrites the
// entry, with acc_en high it is added to it. This lets a reduction longer than
// the array height be split into several passes over weight tiles. The adder
// is the same datapath as the PE's second stage: exponent compare, alignment,
// signed-magnitude add, approximate normalization and exponent correction.
//
// Timing: read, add and write of an entry happen in the cycle the result
// arrives; the updated value and its entry index are registered and appear on
// out/out_addr with out_valid one cycle later. clear (one cycle, before a pass)
// resets the entry counter.
//
// The paper's systolic-array figure draws an adder with a feedback register
// below each column but does not describe it; the per-vector storage, the
// mode input and the reuse of the approximate-normalization adder are this
// design's choices.
module column_accumulator
  import bf16_an_pkg::*;
#(
  parameter int DEPTH  = 128,
  parameter int K      = 1,
  parameter int LAMBDA = 2,
  parameter int AW     = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          acc_en,
  input  logic          in_valid,
  input  ext_t          in,
  output logic          out_valid,
  output logic [AW-1:0] out_addr,
  output ext_t          out
);

  ext_t          mem [DEPTH];
  logic [AW-1:0] idx;
  ext_t          old, sum_res;

  // exponent compare
  logic               old_larger;
  logic [SHAMT_W-1:0] shamt;
  sexp_t              e_max, diff;

  always_comb begin
    old  = mem[idx];
    diff = sexp_t'({2'b00, in.exp}) - sexp_t'({2'b00, old.exp});
    if (diff < 0) begin
      old_larger = 1'b1;
      e_max      = sexp_t'({2'b00, old.exp});
      shamt      = (-diff > sexp_t'(31)) ? '1 : SHAMT_W'(-diff);
    end else begin
      old_larger = 1'b0;
      e_max      = sexp_t'({2'b00, in.exp});
      shamt      = (diff > sexp_t'(31)) ? '1 : SHAMT_W'(diff);
    end
  end

  logic [PSIG_W-1:0] in_al, old_al, sig_norm;
  logic [SUM_W-1:0]  sum;
  logic              sum_sign, ovf;
  norm_shift_e       nshift;

  align_unit #(.W(PSIG_W), .SHAMT_W(SHAMT_W)) u_align (
    .p_sig   (in.sig),
    .c_sig   (old.sig),
    .c_larger(old_larger),
    .shamt   (shamt),
    .p_al    (in_al),
    .c_al    (old_al)
  );

  sig_adder #(.W(PSIG_W)) u_add (
    .p_sign  (in.sign),
    .c_sign  (old.sign),
    .p_al    (in_al),
    .c_al    (old_al),
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
    .e_max   (e_max),
    .shift   (nshift),
    .ovf     (ovf),
    .sig_norm(sig_norm),
    .res     (sum_res)
  );

  ext_t nxt;
  always_comb nxt = acc_en ? sum_res : in;

  always_ff @(posedge clk) begin
    if (in_valid) mem[idx] <= nxt;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) idx <= '0;
    else if (in_valid)   idx <= idx + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      out      <= nxt;
      out_addr <= idx;
    end
  end

endmodule
