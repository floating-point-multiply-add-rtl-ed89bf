// sig_multiplier: unsigned significand multiplier of the PE's first stage.
//
// Multiplies the two 8-bit BF16 significands (hidden bit included) into a
// full 16-bit product, which is kept exactly and passed to the second stage.
// Combinational; the multiplier architecture is left to synthesis. Widths
// follow the paper's PE diagram (8 x 8 -> 16).
module sig_multiplier #(
  parameter int SIG_W = 8
) (
  input  logic [SIG_W-1:0]   a_sig,
  input  logic [SIG_W-1:0]   b_sig,
  output logic [2*SIG_W-1:0] prod
);

  always_comb prod = a_sig * b_sig;

endmodule
