// tb_weight_buffer: writes a weight tile word by word and reads it back a row
// at a time, checking data and the one-cycle read latency.
module tb_weight_buffer;
  import bf16_an_pkg::*;
  localparam int R = 4, C = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, rd_valid;
  logic [1:0] wr_row, rd_row;
  logic [2:0] wr_col;
  bf16_t wr_data;
  bf16_t rd_row_data [C];
  logic [15:0] model [R][C];

  weight_buffer #(.ROWS(R), .COLS(C)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_row = '0; wr_col = '0; rd_row = '0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 4; pass++) begin
      for (int i = 0; i < R * C; i++) begin
        int r, c;
        r = $urandom % R; c = $urandom % C;
        if (pass == 0) begin r = i / C; c = i % C; end
        @(negedge clk);
        wr_en = 1; wr_row = 2'(r); wr_col = 3'(c); wr_data = 16'($urandom);
        model[r][c] = wr_data;
      end
      @(negedge clk) wr_en = 0;
      for (int r = R - 1; r >= 0; r--) begin
        @(negedge clk);
        rd_en = 1; rd_row = 2'(r);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (!rd_valid) begin failures++; $display("FAIL no rd_valid"); end
        for (int c = 0; c < C; c++) if (rd_row_data[c] !== model[r][c]) begin
          failures++; $display("FAIL row %0d col %0d", r, c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
