// tb_approx_norm: checks the approximate normalizer for the three
// configurations (k,lambda) = (1,1), (1,2), (2,2): every leading-one position
// of the 17-bit sum, plus random values, against a leading-one-position model.
module tb_approx_norm;
  import bf16_an_pkg::*;
  int checks = 0, failures = 0;
  logic [16:0] sum;
  logic [15:0] sn11, sn12, sn22;
  norm_shift_e sh11, sh12, sh22;
  logic ov11, ov12, ov22;

  approx_norm #(.K(1), .LAMBDA(1)) d11 (.sum(sum), .sig_norm(sn11), .shift(sh11), .ovf(ov11));
  approx_norm                      d12 (.sum(sum), .sig_norm(sn12), .shift(sh12), .ovf(ov12));
  approx_norm #(.K(2), .LAMBDA(2)) d22 (.sum(sum), .sig_norm(sn22), .shift(sh22), .ovf(ov22));

  task automatic model(int k, int l, output int code, output int unsigned sig, output bit ov);
    int p = fp_ref_pkg::lead_pos(sum, 17);
    int sh;
    longint unsigned t;
    if (p >= 16 - k)          begin code = 0; sh = 0; end
    else if (p >= 16 - k - l) begin code = 1; sh = k; end
    else                      begin code = 2; sh = k + l; end
    t = (longint'(sum) << sh) & 64'h1FFFF;
    ov = t[16];
    sig = ov ? int'(t >> 1) : int'(t & 16'hFFFF);
  endtask

  task automatic one(logic [16:0] v);
    int c; int unsigned s; bit o;
    sum = v; #1;
    model(1, 1, c, s, o); checks++;
    if (int'(sh11) != c || int'(sn11) != s || ov11 != o) begin failures++; $display("FAIL 1-1 %h", v); end
    model(1, 2, c, s, o); checks++;
    if (int'(sh12) != c || int'(sn12) != s || ov12 != o) begin failures++; $display("FAIL 1-2 %h", v); end
    model(2, 2, c, s, o); checks++;
    if (int'(sh22) != c || int'(sn22) != s || ov22 != o) begin failures++; $display("FAIL 2-2 %h", v); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    one('0);
    for (int p = 0; p < 17; p++) begin
      one(17'(1) << p);
      for (int j = 0; j < 20; j++) one((17'(1) << p) | (17'($urandom) & ((17'(1) << p) - 1)));
    end
    for (int i = 0; i < 2000; i++) one(17'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
