// tb_sig_multiplier: exhaustive check of the 8x8 significand multiplier.
module tb_sig_multiplier;
  int checks = 0, failures = 0;
  logic [7:0] a_sig, b_sig;
  logic [15:0] prod;

  sig_multiplier dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < 256; a++)
      for (int b = 0; b < 256; b++) begin
        a_sig = 8'(a); b_sig = 8'(b); #1;
        checks++;
        if (int'(prod) != a * b) begin
          failures++;
          if (failures < 10) $display("FAIL %0d*%0d got %0d", a, b, prod);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
