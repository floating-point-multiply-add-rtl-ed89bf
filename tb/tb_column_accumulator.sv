// tb_column_accumulator: runs several passes into one accumulator column: the
// first overwrites, the following add (acc_en), in random bursts. Each output
// is checked bit for bit against the reference adder, with its entry index
// and its one-cycle latency.
module tb_column_accumulator;
  import bf16_an_pkg::*;
  import fp_ref_pkg::*;
  localparam int D = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, acc_en = 0, in_valid = 0, out_valid;
  ext_t in, out;
  logic [2:0] out_addr;
  logic [24:0] model [D];
  logic [24:0] exp_q[$];
  int          idx_q[$];

  column_accumulator #(.DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL spurious output"); end
      else begin
        logic [24:0] e;
        int i;
        e = exp_q.pop_front(); i = idx_q.pop_front();
        if (out !== e || int'(out_addr) != i) begin
          failures++; $display("FAIL entry %0d got %h@%0d exp %h", i, out, out_addr, e);
        end
      end
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in = '0;
    clear_stats();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 40; pass++) begin
      int n;
      @(negedge clk);
      clear = 1; acc_en = (pass % 8 != 0);
      @(negedge clk);
      clear = 0;
      n = 0;
      while (n < D) begin
        @(negedge clk);
        in_valid = ($urandom % 3 != 0);
        in = rand_ext(3);
        if (in_valid) begin
          model[n] = acc_en ? ref_add_ext(in, model[n], 1, 2) : in;
          exp_q.push_back(model[n]);
          idx_q.push_back(n);
          n++;
        end
      end
      @(negedge clk) in_valid = 0;
    end
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL outputs missing"); end
    checks++;
    if (n_none == 0 || n_k == 0 || n_kl == 0 || n_ovf == 0) begin
      failures++; $display("FAIL normalization case not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
