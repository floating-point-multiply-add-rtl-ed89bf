// tb_engine_ctrl: runs several passes through the sequencer with a model of
// the array's result stream, checking the weight-row read order (ROWS-1 down
// to 0), the input read addresses (0 .. n_vec-1, one per cycle), acc_clear,
// acc_mode, busy, and that done comes only after n_vec results.
module tb_engine_ctrl;
  localparam int R = 4, D = 16, LAT = 9;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, acc_en = 0, last_col_valid;
  logic [4:0] n_vec;
  logic busy, done, acc_clear, acc_mode, wb_rd_en, ib_rd_en;
  logic [1:0] wb_rd_row;
  logic [3:0] ib_rd_addr;

  engine_ctrl #(.ROWS(R), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  // result stream model: every input read returns a result LAT cycles later
  logic [LAT-1:0] pipe;
  always @(posedge clk) begin
    if (!rst_n) pipe <= '0;
    else pipe <= {pipe[LAT-2:0], ib_rd_en};
  end
  assign last_col_valid = pipe[LAT-1];

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    n_vec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 12; pass++) begin
      int n, w_seen, i_seen, results;
      bit a;
      n = 1 + $urandom % D;
      a = 1'($urandom);
      @(negedge clk);
      start = 1; n_vec = 5'(n); acc_en = a;
      #1;
      checks++;
      if (!acc_clear || busy) begin failures++; $display("FAIL acc_clear/busy at start"); end
      @(negedge clk);
      start = 0; acc_en = !a;
      w_seen = 0; i_seen = 0; results = 0;
      while (!done) begin
        checks++;
        if (!busy || acc_mode != a) begin failures++; $display("FAIL busy/acc_mode"); end
        if (wb_rd_en) begin
          checks++;
          if (int'(wb_rd_row) != R - 1 - w_seen || i_seen != 0) begin
            failures++; $display("FAIL weight row %0d", wb_rd_row);
          end
          w_seen++;
        end
        if (ib_rd_en) begin
          checks++;
          if (int'(ib_rd_addr) != i_seen || w_seen != R) begin
            failures++; $display("FAIL input addr %0d", ib_rd_addr);
          end
          i_seen++;
        end
        if (last_col_valid) results++;
        @(negedge clk);
      end
      checks++;
      if (w_seen != R || i_seen != n || results != n) begin
        failures++; $display("FAIL pass %0d: w=%0d i=%0d res=%0d n=%0d", pass, w_seen, i_seen, results, n);
      end
      @(negedge clk);
      checks++;
      if (busy || done) begin failures++; $display("FAIL not idle after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
