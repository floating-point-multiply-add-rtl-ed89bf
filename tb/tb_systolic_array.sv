// tb_systolic_array: a small array (4 rows x 3 columns) is pre-loaded with
// random weights through the north shift chain, then fed skewed input vectors
// (row r delayed 2r cycles, generated by the testbench itself). Each column
// result is compared bit for bit with the reference chain of multiply-adds
// down the column, and its arrival cycle with 2*ROWS + c cycles after row 0 of
// the vector entered. Two weight tiles are run back to back.
module tb_systolic_array;
  import bf16_an_pkg::*;
  import fp_ref_pkg::*;
  localparam int R = 4, C = 3, M = 20;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, w_load = 0;
  bf16_t w_north [C];
  logic  a_valid_west [R];
  bf16_t a_west [R];
  logic  ps_valid_south [C];
  ext_t  ps_south [C];
  int cycle = 0;

  systolic_array #(.ROWS(R), .COLS(C)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  logic [15:0] W [R][C];
  logic [15:0] A [M][R];
  int t_start;
  int got [C];

  always @(posedge clk) begin
    for (int c = 0; c < C; c++) begin
      if (rst_n && ps_valid_south[c]) begin
        logic [24:0] e;
        int m;
        e = 25'd0;
        m = got[c];
        for (int r = 0; r < R; r++) e = ref_fma(A[m][r], W[r][c], e, 1, 2);
        checks++;
        if (ps_south[c] !== e || cycle != t_start + m + 2 * R + c) begin
          failures++;
          $display("FAIL m=%0d c=%0d got %h exp %h at %0d (exp %0d)", m, c, ps_south[c], e,
                   cycle, t_start + m + 2 * R + c);
        end
        got[c]++;
      end
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < R; r++) begin a_valid_west[r] = 0; a_west[r] = '0; end
    for (int c = 0; c < C; c++) w_north[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 2; tile++) begin
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) W[r][c] = rand_bf16(2, 10);
      for (int m = 0; m < M; m++) for (int r = 0; r < R; r++) A[m][r] = rand_bf16(3, 10);
      for (int c = 0; c < C; c++) got[c] = 0;
      // weight pre-load: last row first
      for (int i = 0; i < R; i++) begin
        @(negedge clk);
        w_load = 1;
        for (int c = 0; c < C; c++) w_north[c] = W[R-1-i][c];
      end
      @(negedge clk) w_load = 0;
      // stream skewed inputs
      t_start = cycle;
      for (int t = 0; t < M + 2 * R; t++) begin
        for (int r = 0; r < R; r++) begin
          int m;
          m = t - 2 * r;
          a_valid_west[r] = (m >= 0 && m < M);
          a_west[r] = (m >= 0 && m < M) ? A[m][r] : 16'h0;
        end
        @(negedge clk);
      end
      for (int r = 0; r < R; r++) a_valid_west[r] = 0;
      repeat (2 * R + C + 4) @(posedge clk);
      for (int c = 0; c < C; c++) begin
        checks++;
        if (got[c] != M) begin failures++; $display("FAIL column %0d gave %0d results", c, got[c]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
