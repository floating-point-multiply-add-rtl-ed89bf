// tb_input_skew: pushes numbered vectors (with gaps) through a 5-row skew and
// checks that row r of each vector appears exactly r*STEP cycles after it went
// in, with its valid bit.
module tb_input_skew;
  import bf16_an_pkg::*;
  localparam int R = 5, STEP = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0;
  bf16_t in_vec [R];
  logic  out_valid [R];
  bf16_t out_vec [R];
  int cycle = 0;

  input_skew #(.ROWS(R), .STEP(STEP)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // history of what went in, by cycle
  logic  hv [1000];
  bf16_t hd [1000][R];

  always @(posedge clk) begin
    if (rst_n) begin
      hv[cycle] = in_valid;
      for (int r = 0; r < R; r++) hd[cycle][r] = in_vec[r];
      for (int r = 0; r < R; r++) begin
        int t0;
        t0 = cycle - r * STEP;
        if (t0 >= 20) begin
          checks++;
          if (out_valid[r] != hv[t0] || (hv[t0] && out_vec[r] !== hd[t0][r])) begin
            failures++;
            $display("FAIL row %0d cycle %0d", r, cycle);
          end
        end
      end
    end
  end

  initial begin
    repeat (900) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < R; r++) in_vec[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 3 != 0);
      for (int r = 0; r < R; r++) in_vec[r] = 16'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
