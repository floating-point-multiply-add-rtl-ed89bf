// align_unit: operand alignment of the PE's second stage.
//
// The operand with the smaller exponent (the product when c_larger is 1,
// otherwise the partial sum C) is shifted right by the exponent difference;
// the other passes unchanged. Bits shifted past the LSB are dropped: there are
// no guard or sticky bits, so alignment is where precision is lost, and why
// each PE normalizes its result before passing it on. Combinational.
// The paper gives the two Align blocks and the 16-bit widths; truncation of
// the shifted-out bits is this design's reading of "bits are shifted out
// permanently".
module align_unit #(
  parameter int W       = 16,
  parameter int SHAMT_W = 5
) (
  input  logic [W-1:0]       p_sig,
  input  logic [W-1:0]       c_sig,
  input  logic               c_larger,
  input  logic [SHAMT_W-1:0] shamt,
  output logic [W-1:0]       p_al,
  output logic [W-1:0]       c_al
);

  always_comb begin
    if (c_larger) begin
      p_al = p_sig >> shamt;
      c_al = c_sig;
    end else begin
      p_al = p_sig;
      c_al = c_sig >> shamt;
    end
  end

endmodule
