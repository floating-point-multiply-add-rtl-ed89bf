// input_buffer: storage for the input (activation) vectors of one pass.
//
// DEPTH vectors of ROWS BF16 words each. The host writes one word per cycle
// (vector index wr_addr, element wr_row). The engine reads a whole vector per
// cycle: rd_vec and rd_valid appear one cycle after rd_en/rd_addr. Written as
// an array, one read and one write port. The paper names the input buffer
// only; its size and ports are this design's choice.
module input_buffer
  import bf16_an_pkg::*;
#(
  parameter int ROWS  = 32,
  parameter int DEPTH = 128,
  parameter int AW    = $clog2(DEPTH),
  parameter int RW    = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [RW-1:0] wr_row,
  input  bf16_t         wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic          rd_valid,
  output bf16_t         rd_vec [ROWS]
);

  bf16_t mem [DEPTH][ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][wr_row] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_vec <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end

endmodule
