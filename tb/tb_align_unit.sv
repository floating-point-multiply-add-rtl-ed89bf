// tb_align_unit: checks that only the operand with the smaller exponent is
// shifted right, with truncation, for all shift amounts.
module tb_align_unit;
  int checks = 0, failures = 0;
  logic [15:0] p_sig, c_sig, p_al, c_al;
  logic c_larger;
  logic [4:0] shamt;

  align_unit dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      int unsigned ep, ec;
      p_sig = 16'($urandom); c_sig = 16'($urandom);
      c_larger = 1'($urandom); shamt = 5'($urandom);
      #1;
      ep = c_larger ? (shamt >= 16 ? 0 : int'(p_sig) / (1 << shamt)) : p_sig;
      ec = c_larger ? c_sig : (shamt >= 16 ? 0 : int'(c_sig) / (1 << shamt));
      checks++;
      if (int'(p_al) != ep || int'(c_al) != ec) begin
        failures++;
        $display("FAIL p=%h c=%h cl=%b sh=%0d got %h %h", p_sig, c_sig, c_larger, shamt, p_al, c_al);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
