// tb_input_buffer: fills a small input buffer word by word, then reads whole
// vectors back in random order and checks data and the one-cycle read latency.
module tb_input_buffer;
  import bf16_an_pkg::*;
  localparam int R = 4, D = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, rd_valid;
  logic [3:0] wr_addr, rd_addr;
  logic [1:0] wr_row;
  bf16_t wr_data;
  bf16_t rd_vec [R];
  logic [15:0] model [D][R];

  input_buffer #(.ROWS(R), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_addr = '0; rd_addr = '0; wr_row = '0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 3; pass++) begin
      for (int a = 0; a < D; a++) for (int r = 0; r < R; r++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 4'(a); wr_row = 2'(r); wr_data = 16'($urandom);
        model[a][r] = wr_data;
      end
      @(negedge clk) wr_en = 0;
      for (int i = 0; i < 2 * D; i++) begin
        int a;
        a = $urandom % D;
        @(negedge clk);
        rd_en = 1; rd_addr = 4'(a);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (!rd_valid) begin failures++; $display("FAIL no rd_valid"); end
        for (int r = 0; r < R; r++) if (rd_vec[r] !== model[a][r]) begin
          failures++; $display("FAIL addr %0d row %0d", a, r);
        end
        checks++;
        @(negedge clk);
        if (rd_valid) begin failures++; $display("FAIL rd_valid stuck"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
