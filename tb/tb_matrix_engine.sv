// tb_matrix_engine: end-to-end test of the engine at a reduced size
// (4 x 3 array, 16-vector buffers). The host writes a weight tile and input
// vectors, starts a pass, waits for done and reads every BF16 result back.
// Results are compared bit for bit with a reference that chains the PE model
// down each column, adds into the accumulator model and rounds. Passes mix
// fresh results and accumulation over several weight tiles (a K = 3*ROWS
// reduction). The pass latency start -> done is checked against
// 3*ROWS + n_vec + COLS + 3 cycles. Every mechanism (weight reload, overwrite
// and accumulate passes, the four normalization cases, underflow flushing)
// is counted and must occur. The mean relative error against exact real
// arithmetic is printed for information.
module tb_matrix_engine;
  import bf16_an_pkg::*;
  import fp_ref_pkg::*;
  localparam int R = 4, C = 3, D = 16;
  localparam int AW = $clog2(D), RW = $clog2(R), CW = $clog2(C);
  localparam int KK = 1, LL = 2;
  localparam int PASSES = 12, FULL_N = 0, WATCHDOG = 20000;
`include "tb_matrix_engine_decl.svh"

  matrix_engine #(.ROWS(R), .COLS(C), .DEPTH(D), .K(KK), .LAMBDA(LL)) dut (.*);

`include "tb_matrix_engine_body.svh"

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
