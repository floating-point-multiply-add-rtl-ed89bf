// output_buffer: storage for the BF16 results of one pass.
//
// DEPTH rows of COLS words. Each column has its own write port, because the
// columns deliver their results at different cycles (column c is c cycles
// behind column 0). The host reads one word at (rd_addr, rd_col); rd_data and
// rd_valid appear one cycle after rd_en. Written as an array. The paper names
// the output buffer only; size and ports are this design's choice.
module output_buffer
  import bf16_an_pkg::*;
#(
  parameter int COLS  = 32,
  parameter int DEPTH = 128,
  parameter int AW    = $clog2(DEPTH),
  parameter int CW    = $clog2(COLS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en   [COLS],
  input  logic [AW-1:0] wr_addr [COLS],
  input  bf16_t         wr_data [COLS],
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  input  logic [CW-1:0] rd_col,
  output logic          rd_valid,
  output bf16_t         rd_data
);

  bf16_t mem [DEPTH][COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_col
    always_ff @(posedge clk) begin
      if (wr_en[c]) mem[wr_addr[c]][c] <= wr_data[c];
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr][rd_col];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end

endmodule
