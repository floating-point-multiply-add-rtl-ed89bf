// tb_sig_adder: checks the signed-magnitude adder against signed integer
// arithmetic: the magnitude and sign of (+/-p) + (+/-c).
module tb_sig_adder;
  int checks = 0, failures = 0;
  logic p_sign, c_sign, sum_sign;
  logic [15:0] p_al, c_al;
  logic [16:0] sum;

  sig_adder dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      int v, mag; bit neg;
      p_sign = 1'($urandom); c_sign = 1'($urandom);
      p_al = 16'($urandom); c_al = (i % 7 == 0) ? p_al : 16'($urandom);
      #1;
      v = (p_sign ? -int'(p_al) : int'(p_al)) + (c_sign ? -int'(c_al) : int'(c_al));
      mag = v < 0 ? -v : v;
      neg = v < 0;
      checks++;
      if (int'(sum) != mag || (mag != 0 && sum_sign != neg)) begin
        failures++;
        $display("FAIL %b%h + %b%h got %b%h", p_sign, p_al, c_sign, c_al, sum_sign, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
