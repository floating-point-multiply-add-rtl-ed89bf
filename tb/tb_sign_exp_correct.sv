// tb_sign_exp_correct: checks the exponent update (+1 on carry, -k, -(k+l)),
// flush of underflow to zero and saturation to infinity.
module tb_sign_exp_correct;
  import bf16_an_pkg::*;
  int checks = 0, failures = 0;
  logic sign, ovf;
  sexp_t e_max;
  norm_shift_e shift;
  logic [15:0] sig_norm;
  ext_t res;

  sign_exp_correct dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      int e; logic [24:0] exp_res;
      sign = 1'($urandom); ovf = 1'($urandom);
      e_max = sexp_t'(int'($urandom % 300) - 20);
      shift = norm_shift_e'($urandom % 3);
      sig_norm = 16'($urandom);
      #1;
      e = int'(e_max) + int'(ovf) - (shift == NS_K ? 1 : shift == NS_KL ? 3 : 0);
      if (e <= 0) exp_res = '0;
      else if (e >= 255) exp_res = {sign, 8'hFF, 16'h8000};
      else exp_res = {sign, 8'(e), sig_norm};
      checks++;
      if (res !== exp_res) begin
        failures++;
        $display("FAIL e_max=%0d sh=%0d ovf=%b got %h exp %h", e_max, shift, ovf, res, exp_res);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
