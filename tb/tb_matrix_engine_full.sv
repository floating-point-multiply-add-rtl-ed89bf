// tb_matrix_engine_full: end-to-end test of the engine at its default size
// (32 x 32 array, 128-vector buffers, k = 1, lambda = 2). Two passes over the
// full buffer depth: a fresh 128 x 32 by 32 x 32 product, then a second tile
// accumulated onto it (a reduction over 64 terms). Every result is checked
// bit for bit against the reference model, the pass latency against
// 3*ROWS + n_vec + COLS + 3 cycles, and each mechanism must occur.
module tb_matrix_engine_full;
  import bf16_an_pkg::*;
  import fp_ref_pkg::*;
  localparam int R = 32, C = 32, D = 128;
  localparam int AW = $clog2(D), RW = $clog2(R), CW = $clog2(C);
  localparam int KK = 1, LL = 2;
  localparam int PASSES = 2, FULL_N = D, WATCHDOG = 100000;
`include "tb_matrix_engine_decl.svh"

  matrix_engine dut (.*);

`include "tb_matrix_engine_body.svh"

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
