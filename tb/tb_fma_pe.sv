// tb_fma_pe: streams random multiply-adds (with idle gaps) through the
// two-stage PE and compares every result, bit for bit, with the reference
// model; checks the two-cycle latency and that all normalization cases
// (no shift, shift k, shift k+lambda, carry) were exercised.
module tb_fma_pe;
  import bf16_an_pkg::*;
  import fp_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  bf16_t a, b;
  ext_t c, res;
  int cycle = 0;

  fma_pe dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  logic [24:0] exp_q[$];
  int          cyc_q[$];

  always @(posedge clk) begin
    if (rst_n && in_valid) begin
      exp_q.push_back(ref_fma(a, b, c, 1, 2));
      cyc_q.push_back(cycle);
    end
    if (rst_n && out_valid) begin
      logic [24:0] e;
      int c0;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        e = exp_q.pop_front(); c0 = cyc_q.pop_front();
        if (res !== e || cycle - c0 != 2) begin
          failures++;
          if (failures < 10) $display("FAIL got %h exp %h latency %0d", res, e, cycle - c0);
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clear_stats();
    a = '0; b = '0; c = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 5 != 0);
      a = rand_bf16(4, 30);
      b = rand_bf16(4, 30);
      c = (i % 10 == 0) ? 25'd0 : rand_ext(6);
      if (i % 13 == 0) c.exp = 8'(a.exp + b.exp - 126);      // equal exponents
      if (i % 17 == 0) c.exp = 8'(a.exp + b.exp - 125);      // one apart
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("cases: none=%0d k=%0d k+l=%0d carry=%0d", n_none, n_k, n_kl, n_ovf);
    checks++;
    if (n_none == 0 || n_k == 0 || n_kl == 0 || n_ovf == 0) begin
      failures++; $display("FAIL a normalization case was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
