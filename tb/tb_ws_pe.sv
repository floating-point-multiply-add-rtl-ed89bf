// tb_ws_pe: checks one systolic cell: weight capture and pass-through on
// w_load, the one-cycle east forwarding of activations, and the two-cycle
// multiply-add of activation x stored weight + north partial sum.
module tb_ws_pe;
  import bf16_an_pkg::*;
  import fp_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic w_load = 0, a_valid_in = 0, ps_valid_in = 0;
  logic a_valid_out, ps_valid_out;
  bf16_t w_in, w_out, a_in, a_out;
  ext_t ps_in, ps_out;

  ws_pe dut (.*);

  always #5 clk = ~clk;

  logic [24:0] exp_q[$];
  logic [15:0] a_q[$];
  logic [15:0] w_cur;

  always @(posedge clk) begin
    if (rst_n && a_valid_out) begin
      checks++;
      if (a_q.size() == 0 || a_out !== a_q.pop_front()) begin failures++; $display("FAIL east forward"); end
    end
    if (rst_n && ps_valid_out) begin
      checks++;
      if (exp_q.size() == 0 || ps_out !== exp_q.pop_front()) begin failures++; $display("FAIL psum"); end
    end
    if (rst_n && a_valid_in) begin
      exp_q.push_back(ref_fma(a_in, w_cur, ps_in, 1, 2));
      a_q.push_back(a_in);
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    w_in = '0; a_in = '0; ps_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      // load a new weight; it must show at w_out for the cell below
      @(negedge clk);
      w_in = rand_bf16(2, 0); w_load = 1;
      @(negedge clk);
      w_load = 0;
      checks++;
      if (w_out !== w_in) begin failures++; $display("FAIL weight not captured"); end
      w_cur = w_in;
      w_in = rand_bf16(2, 0);   // the north input moves on; the cell keeps its weight
      for (int i = 0; i < 50; i++) begin
        @(negedge clk);
        a_valid_in = ($urandom % 4 != 0); ps_valid_in = a_valid_in;
        a_in = rand_bf16(3, 20); ps_in = rand_ext(5);
      end
      @(negedge clk) begin a_valid_in = 0; ps_valid_in = 0; end
      repeat (4) @(posedge clk);
    end
    checks++;
    if (exp_q.size() != 0 || a_q.size() != 0) begin failures++; $display("FAIL outputs missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
