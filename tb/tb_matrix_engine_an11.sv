// tb_matrix_engine_an11: end-to-end test of an 8 x 8 engine with the
// normalizer set to k = 1, lambda = 1 (the "BF16an-1-1" setting), 32-vector
// buffers, six passes in groups of one fresh and two accumulated tiles. Same
// checks as tb_matrix_engine: bit-exact results, pass latency, mechanisms.
module tb_matrix_engine_an11;
  import bf16_an_pkg::*;
  import fp_ref_pkg::*;
  localparam int R = 8, C = 8, D = 32;
  localparam int AW = $clog2(D), RW = $clog2(R), CW = $clog2(C);
  localparam int KK = 1, LL = 1;
  localparam int PASSES = 6, FULL_N = 0, WATCHDOG = 40000;
`include "tb_matrix_engine_decl.svh"

  matrix_engine #(.ROWS(R), .COLS(C), .DEPTH(D), .K(KK), .LAMBDA(LL)) dut (.*);

`include "tb_matrix_engine_body.svh"

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
