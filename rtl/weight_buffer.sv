// weight_buffer: storage for one ROWS x COLS weight tile.
//
// The host writes one BF16 word per cycle at (wr_row, wr_col). For pre-loading
// the array the engine reads a whole row of COLS weights per cycle: rd_row_data
// and rd_valid appear one cycle after rd_en/rd_row. Written as an array. The
// paper names the weight buffer and says weights are loaded from the north;
// the size (one tile) and the ports are this design's choice.
module weight_buffer
  import bf16_an_pkg::*;
#(
  parameter int ROWS = 32,
  parameter int COLS = 32,
  parameter int RW   = $clog2(ROWS),
  parameter int CW   = $clog2(COLS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [RW-1:0] wr_row,
  input  logic [CW-1:0] wr_col,
  input  bf16_t         wr_data,
  input  logic          rd_en,
  input  logic [RW-1:0] rd_row,
  output logic          rd_valid,
  output bf16_t         rd_row_data [COLS]
);

  bf16_t mem [ROWS][COLS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][wr_col] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_row_data <= mem[rd_row];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end

endmodule
