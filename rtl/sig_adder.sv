// sig_adder: signed-magnitude significand adder of the PE's second stage.
//
// With like signs the magnitudes are added (17-bit result, the top bit being
// the carry). With unlike signs the smaller magnitude is subtracted from the
// larger, and the result takes the sign of the larger operand, as the paper
// describes for effective subtraction. An exact zero takes the product's sign.
// Combinational; output width 17 as in the paper's PE diagram.
module sig_adder #(
  parameter int W = 16
) (
  input  logic         p_sign,
  input  logic         c_sign,
  input  logic [W-1:0] p_al,
  input  logic [W-1:0] c_al,
  output logic [W:0]   sum,
  output logic         sum_sign
);

  always_comb begin
    if (p_sign == c_sign) begin
      sum      = {1'b0, p_al} + {1'b0, c_al};
      sum_sign = p_sign;
    end else if (p_al >= c_al) begin
      sum      = {1'b0, p_al - c_al};
      sum_sign = p_sign;
    end else begin
      sum      = {1'b0, c_al - p_al};
      sum_sign = c_sign;
    end
  end

endmodule
