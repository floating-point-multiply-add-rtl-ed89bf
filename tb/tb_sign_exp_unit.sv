// tb_sign_exp_unit: random and corner-case check of the PE's sign/exponent
// stage against an integer model (product exponent ea+eb-126, comparison with
// C's exponent, saturated difference, zero product).
module tb_sign_exp_unit;
  import bf16_an_pkg::*;
  int checks = 0, failures = 0;
  logic [8:0] a_se, b_se, c_se;
  logic p_sign, c_sign, c_larger;
  sexp_t e_max;
  logic [4:0] shamt;

  sign_exp_unit dut (.*);

  task automatic check(logic [8:0] a, logic [8:0] b, logic [8:0] c);
    int ep, ec, emax, sh;
    bit cl;
    a_se = a; b_se = b; c_se = c;
    #1;
    ep = int'(a[7:0]) + int'(b[7:0]) - 126;
    ec = int'(c[7:0]);
    if (a[7:0] == 0 || b[7:0] == 0) begin cl = 1; emax = ec; sh = 31; end
    else if (ep < ec) begin cl = 1; emax = ec; sh = (ec - ep > 31) ? 31 : ec - ep; end
    else begin cl = 0; emax = ep; sh = (ep - ec > 31) ? 31 : ep - ec; end
    checks++;
    if (p_sign !== (a[8] ^ b[8]) || c_sign !== c[8] || c_larger !== cl ||
        int'(e_max) != emax || int'(shamt) != sh) begin
      failures++;
      $display("FAIL a=%h b=%h c=%h: got s=%b emax=%0d cl=%b sh=%0d exp emax=%0d cl=%b sh=%0d",
               a, b, c, p_sign, e_max, c_larger, shamt, emax, cl, sh);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    check(9'h07F, 9'h07F, 9'h07F);   // 1*1 against 1
    check(9'h17F, 9'h07F, 9'h000);   // C zero
    check(9'h000, 9'h085, 9'h080);   // A zero
    check(9'h0FE, 9'h0FE, 9'h001);   // huge difference, saturates
    check(9'h001, 9'h001, 9'h0FE);   // product tiny
    for (int i = 0; i < 3000; i++)
      check(9'($urandom), 9'($urandom), 9'($urandom));
    for (int i = 0; i < 3000; i++)
      check({1'($urandom), 8'(120 + $urandom % 16)}, {1'($urandom), 8'(120 + $urandom % 16)},
            {1'($urandom), 8'(120 + $urandom % 16)});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
