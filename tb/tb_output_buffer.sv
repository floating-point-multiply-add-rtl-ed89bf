// tb_output_buffer: each column writes through its own port, at staggered
// times as the engine's columns do (several columns in the same cycle); the
// host then reads every word back and checks data and read latency.
module tb_output_buffer;
  import bf16_an_pkg::*;
  localparam int C = 4, D = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, rd_en = 0, rd_valid;
  logic       wr_en   [C];
  logic [3:0] wr_addr [C];
  bf16_t      wr_data [C];
  logic [3:0] rd_addr;
  logic [1:0] rd_col;
  bf16_t      rd_data;
  logic [15:0] model [D][C];

  output_buffer #(.COLS(C), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < C; c++) begin wr_en[c] = 0; wr_addr[c] = '0; wr_data[c] = '0; end
    rd_addr = '0; rd_col = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      // column c writes row t-c at cycle t
      for (int t = 0; t < D + C; t++) begin
        @(negedge clk);
        for (int c = 0; c < C; c++) begin
          int a;
          a = t - c;
          wr_en[c] = (a >= 0 && a < D);
          wr_addr[c] = 4'(a);
          wr_data[c] = 16'($urandom);
          if (a >= 0 && a < D) model[a][c] = wr_data[c];
        end
      end
      @(negedge clk);
      for (int c = 0; c < C; c++) wr_en[c] = 0;
      for (int a = 0; a < D; a++) for (int c = 0; c < C; c++) begin
        @(negedge clk);
        rd_en = 1; rd_addr = 4'(a); rd_col = 2'(c);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (!rd_valid || rd_data !== model[a][c]) begin
          failures++; $display("FAIL addr %0d col %0d got %h exp %h", a, c, rd_data, model[a][c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
