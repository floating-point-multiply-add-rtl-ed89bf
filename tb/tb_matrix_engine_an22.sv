// tb_matrix_engine_an22: end-to-end test of a 16 x 16 engine with the
// normalizer set to k = 2, lambda = 2 (the "BF16an-2-2" setting), 32-vector
// buffers, six passes in groups of one fresh and two accumulated tiles. Same
// checks as tb_matrix_engine: bit-exact results, pass latency, mechanisms.
module tb_matrix_engine_an22;
  import bf16_an_pkg::*;
  import fp_ref_pkg::*;
  localparam int R = 16, C = 16, D = 32;
  localparam int AW = $clog2(D), RW = $clog2(R), CW = $clog2(C);
  localparam int KK = 2, LL = 2;
  localparam int PASSES = 6, FULL_N = 0, WATCHDOG = 60000;
`include "tb_matrix_engine_decl.svh"

  matrix_engine #(.ROWS(R), .COLS(C), .DEPTH(D), .K(KK), .LAMBDA(LL)) dut (.*);

`include "tb_matrix_engine_body.svh"

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
