// input_skew: staggers the rows of each input vector for the systolic array.
//
// Row r of the vector presented at the input (with in_valid) leaves r*STEP
// cycles later, with its own valid bit, so that along the array's west edge
// each activation meets the partial sum coming down from the row above.
// STEP is the PE latency (2). Built as one shift register per row; row 0 is
// passed straight through. The staggered input streams are those of the
// paper's weight-stationary dataflow figure; the delay-line structure is this
// design's choice.
module input_skew
  import bf16_an_pkg::*;
#(
  parameter int ROWS = 32,
  parameter int STEP = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  bf16_t in_vec    [ROWS],
  output logic  out_valid [ROWS],
  output bf16_t out_vec   [ROWS]
);

  assign out_valid[0] = in_valid;
  assign out_vec[0]   = in_vec[0];

  for (genvar r = 1; r < ROWS; r++) begin : g_row
    localparam int D = r * STEP;
    logic  v_sr [D];
    bf16_t d_sr [D];
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int i = 0; i < D; i++) v_sr[i] <= 1'b0;
      end else begin
        v_sr[0] <= in_valid;
        for (int i = 1; i < D; i++) v_sr[i] <= v_sr[i-1];
      end
    end
    always_ff @(posedge clk) begin
      d_sr[0] <= in_vec[r];
      for (int i = 1; i < D; i++) d_sr[i] <= d_sr[i-1];
    end
    assign out_valid[r] = v_sr[D-1];
    assign out_vec[r]   = d_sr[D-1];
  end

endmodule
