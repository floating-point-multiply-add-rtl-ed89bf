// matrix_engine: weight-stationary Bfloat16 matrix engine whose multiply-add
// PEs use approximate normalization.
//
// One pass computes O = A x W for a ROWS x COLS weight tile W and n_vec input
// vectors (rows of A, ROWS elements each): O[m][c] = sum_r A[m][r] * W[r][c].
// The host writes W into the weight buffer and A into the input buffer, pulses
// start, waits for done and reads O (BF16) from the output buffer. With
// acc_en set for a pass, its results are added to those of the previous pass
// (same n_vec), so a reduction over more than ROWS terms runs as several
// passes over successive tiles of W and slices of A.
//
// Data path: weight buffer -> systolic array (pre-loaded from the north);
// input buffer -> input skew (row r delayed 2r cycles) -> array west edge;
// array south edge (16-bit-significand partial sums) -> column accumulator
// -> round_bf16 -> output buffer. The controller sequences weight load,
// streaming and drain.
//
// Timing of a pass: ROWS cycles of weight load, n_vec cycles of streaming,
// then results of vector m in column c reach the output buffer
// 2*ROWS + c + 3 cycles after vector m was read from the input buffer.
// Throughput is one input vector (ROWS x COLS multiply-adds) per cycle.
//
// The systolic array, the PE and the approximate normalization follow the
// paper; buffer sizes, the host interface, the controller and the
// accumulators' storage are this design's choices. Defaults: a 32x32 array
// (the largest size the paper evaluates), k = 1 and lambda = 2 (the paper's
// BF16an-1-2 configuration), 128-vector buffers.
module matrix_engine
  import bf16_an_pkg::*;
#(
  parameter int ROWS   = 32,
  parameter int COLS   = 32,
  parameter int DEPTH  = 128,
  parameter int K      = 1,
  parameter int LAMBDA = 2,
  parameter int AW     = $clog2(DEPTH),
  parameter int RW     = $clog2(ROWS),
  parameter int CW     = $clog2(COLS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // weight buffer write
  input  logic          wb_wr_en,
  input  logic [RW-1:0] wb_wr_row,
  input  logic [CW-1:0] wb_wr_col,
  input  bf16_t         wb_wr_data,
  // input buffer write
  input  logic          ib_wr_en,
  input  logic [AW-1:0] ib_wr_addr,
  input  logic [RW-1:0] ib_wr_row,
  input  bf16_t         ib_wr_data,
  // output buffer read
  input  logic          ob_rd_en,
  input  logic [AW-1:0] ob_rd_addr,
  input  logic [CW-1:0] ob_rd_col,
  output logic          ob_rd_valid,
  output bf16_t         ob_rd_data,
  // pass control
  input  logic          start,
  input  logic [AW:0]   n_vec,
  input  logic          acc_en,
  output logic          busy,
  output logic          done
);

  // controller
  logic          acc_clear, acc_mode, wb_rd_en, ib_rd_en;
  logic [RW-1:0] wb_rd_row;
  logic [AW-1:0] ib_rd_addr;
  logic          acc_out_valid [COLS];

  engine_ctrl #(.ROWS(ROWS), .DEPTH(DEPTH)) u_ctrl (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (start),
    .n_vec         (n_vec),
    .acc_en        (acc_en),
    .last_col_valid(acc_out_valid[COLS-1]),
    .busy          (busy),
    .done          (done),
    .acc_clear     (acc_clear),
    .acc_mode      (acc_mode),
    .wb_rd_en      (wb_rd_en),
    .wb_rd_row     (wb_rd_row),
    .ib_rd_en      (ib_rd_en),
    .ib_rd_addr    (ib_rd_addr)
  );

  // weight path
  logic  w_load;
  bf16_t w_row [COLS];

  weight_buffer #(.ROWS(ROWS), .COLS(COLS)) u_wbuf (
    .clk        (clk),
    .rst_n      (rst_n),
    .wr_en      (wb_wr_en),
    .wr_row     (wb_wr_row),
    .wr_col     (wb_wr_col),
    .wr_data    (wb_wr_data),
    .rd_en      (wb_rd_en),
    .rd_row     (wb_rd_row),
    .rd_valid   (w_load),
    .rd_row_data(w_row)
  );

  // input path
  logic  in_valid;
  bf16_t in_vec   [ROWS];
  logic  sk_valid [ROWS];
  bf16_t sk_vec   [ROWS];

  input_buffer #(.ROWS(ROWS), .DEPTH(DEPTH)) u_ibuf (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (ib_wr_en),
    .wr_addr (ib_wr_addr),
    .wr_row  (ib_wr_row),
    .wr_data (ib_wr_data),
    .rd_en   (ib_rd_en),
    .rd_addr (ib_rd_addr),
    .rd_valid(in_valid),
    .rd_vec  (in_vec)
  );

  input_skew #(.ROWS(ROWS), .STEP(2)) u_skew (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .in_vec   (in_vec),
    .out_valid(sk_valid),
    .out_vec  (sk_vec)
  );

  // array
  logic ps_valid [COLS];
  ext_t ps       [COLS];

  systolic_array #(.ROWS(ROWS), .COLS(COLS), .K(K), .LAMBDA(LAMBDA)) u_array (
    .clk           (clk),
    .rst_n         (rst_n),
    .w_load        (w_load),
    .w_north       (w_row),
    .a_valid_west  (sk_valid),
    .a_west        (sk_vec),
    .ps_valid_south(ps_valid),
    .ps_south      (ps)
  );

  // south end: accumulate, round, store
  logic [AW-1:0] acc_addr [COLS];
  ext_t          acc_out  [COLS];
  bf16_t         rounded  [COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_col
    column_accumulator #(.DEPTH(DEPTH), .K(K), .LAMBDA(LAMBDA)) u_acc (
      .clk      (clk),
      .rst_n    (rst_n),
      .clear    (acc_clear),
      .acc_en   (acc_mode),
      .in_valid (ps_valid[c]),
      .in       (ps[c]),
      .out_valid(acc_out_valid[c]),
      .out_addr (acc_addr[c]),
      .out      (acc_out[c])
    );

    round_bf16 u_round (
      .in (acc_out[c]),
      .out(rounded[c])
    );
  end

  output_buffer #(.COLS(COLS), .DEPTH(DEPTH)) u_obuf (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (acc_out_valid),
    .wr_addr (acc_addr),
    .wr_data (rounded),
    .rd_en   (ob_rd_en),
    .rd_addr (ob_rd_addr),
    .rd_col  (ob_rd_col),
    .rd_valid(ob_rd_valid),
    .rd_data (ob_rd_data)
  );

  // The host must leave the weight and input buffers alone during a pass.
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !(wb_wr_en || ib_wr_en))
    else $error("matrix_engine: buffer written during a pass");

endmodule
