// approx_norm: approximate normalization of the adder result.
//
// Instead of counting the leading zeros of the whole sum, only two groups of
// the most significant bits are inspected. With N the MSB index of the 17-bit
// sum (N = 16, the carry position):
//   * OR of sum[N:N-k] is 1        -> no left shift
//   * else OR of sum[N-k-1:N-k-l]  -> shift left by k
//   * else                         -> shift left by k+l   (l = lambda)
// Two levels of 2-to-1 multiplexers pick among the three fixed shifts, the
// first controlled by the first OR tree, the second by the OR of both trees.
// The result may stay un-normalized when the leading one lies below the
// inspected bits. Finally the 17-bit value is taken down to the 16-bit
// partial-sum significand: if the carry bit is set (possible only when no left
// shift was made) the top 16 bits are kept, a 1-bit right shift with exponent
// +1; otherwise the low 16 bits are kept.
//
// The OR trees, bit ranges and the two mux levels follow the paper's figure of
// the approximate normalizer; the final carry handling is this design's way of
// making the paper's "1-bit right shift when addition overflows". K and LAMBDA
// default to 1 and 2 (the paper's BF16an-1-2). Combinational.
module approx_norm
  import bf16_an_pkg::*;
#(
  parameter int K      = 1,
  parameter int LAMBDA = 2,
  parameter int SW     = 17      // adder output width, N = SW-1
) (
  input  logic [SW-1:0] sum,
  output logic [SW-2:0] sig_norm,
  output norm_shift_e   shift,
  output logic          ovf
);

  localparam int N = SW - 1;

  logic          or_k, or_l;
  logic [SW-1:0] mux1, mux2;

  initial begin
    assert (K >= 1 && LAMBDA >= 1 && K + LAMBDA < N)
      else $error("approx_norm: K and LAMBDA out of range");
  end

  always_comb begin
    or_k = |sum[N:N-K];
    or_l = |sum[N-K-1:N-K-LAMBDA];
    mux1 = or_k ? sum : (sum << K);
    mux2 = (or_k | or_l) ? mux1 : (sum << (K + LAMBDA));
    if (or_k)      shift = NS_NONE;
    else if (or_l) shift = NS_K;
    else           shift = NS_KL;
    ovf      = mux2[N];
    sig_norm = ovf ? mux2[N:1] : mux2[N-1:0];
  end

endmodule
