// Signals shared by the end-to-end testbenches. The including module defines
// R, C, D, AW, RW, CW, KK, LL, PASSES, FULL_N and WATCHDOG, includes this file,
// instantiates the engine with .*, includes tb_matrix_engine_body.svh and
// adds its own watchdog of WATCHDOG cycles.
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic          wb_wr_en = 0, ib_wr_en = 0, ob_rd_en = 0, start = 0, acc_en = 0;
  logic [RW-1:0] wb_wr_row, ib_wr_row;
  logic [CW-1:0] wb_wr_col, ob_rd_col;
  logic [AW-1:0] ib_wr_addr, ob_rd_addr;
  logic [AW:0]   n_vec;
  bf16_t         wb_wr_data, ib_wr_data, ob_rd_data;
  logic          ob_rd_valid, busy, done;
  int cycle = 0;

