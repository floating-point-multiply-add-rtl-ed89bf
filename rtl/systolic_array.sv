// systolic_array: ROWS x COLS grid of weight-stationary PEs.
//
// Weights enter every column from the north and shift down while w_load is
// high; after ROWS load cycles row r holds the ROWS-1-r'th word pushed.
// Activations enter each row from the west (a_west[r]) and move one column east
// per cycle. Partial sums start as zero at the north edge, move one row south
// every two cycles (the PE latency) and leave at the south edge as the
// extended-precision column results. Because of the two-cycle PE latency the
// activation of row r must enter 2*r cycles after that of row 0; column c's
// result for an input vector leaves 2*ROWS + c cycles after row 0 of that vector
// entered.
//
// Grid and dataflow follow the paper's systolic-array figure and its
// description of the weight-stationary dataflow. The paper evaluates 8x8,
// 16x16 and 32x32 engines; the default is the largest.
module systolic_array
  import bf16_an_pkg::*;
#(
  parameter int ROWS   = 32,
  parameter int COLS   = 32,
  parameter int K      = 1,
  parameter int LAMBDA = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  w_load,
  input  bf16_t w_north        [COLS],
  input  logic  a_valid_west   [ROWS],
  input  bf16_t a_west         [ROWS],
  output logic  ps_valid_south [COLS],
  output ext_t  ps_south       [COLS]
);

  // Nets between cells: index [r][c] is the input of cell (r,c).
  bf16_t w_n   [ROWS+1][COLS];
  logic  av_w  [ROWS][COLS+1];
  bf16_t a_w   [ROWS][COLS+1];
  logic  pv_n  [ROWS+1][COLS];
  ext_t  ps_n  [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_west
    assign av_w[r][0] = a_valid_west[r];
    assign a_w[r][0]  = a_west[r];
  end

  for (genvar c = 0; c < COLS; c++) begin : g_edge
    assign w_n[0][c]         = w_north[c];
    assign ps_n[0][c]        = EXT_ZERO;
    assign pv_n[0][c]        = av_w[0][c];
    assign ps_valid_south[c] = pv_n[ROWS][c];
    assign ps_south[c]       = ps_n[ROWS][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      ws_pe #(.K(K), .LAMBDA(LAMBDA)) u_pe (
        .clk         (clk),
        .rst_n       (rst_n),
        .w_load      (w_load),
        .w_in        (w_n[r][c]),
        .w_out       (w_n[r+1][c]),
        .a_valid_in  (av_w[r][c]),
        .a_in        (a_w[r][c]),
        .a_valid_out (av_w[r][c+1]),
        .a_out       (a_w[r][c+1]),
        .ps_valid_in (pv_n[r][c]),
        .ps_in       (ps_n[r][c]),
        .ps_valid_out(pv_n[r+1][c]),
        .ps_out      (ps_n[r+1][c])
      );
    end
  end

endmodule
