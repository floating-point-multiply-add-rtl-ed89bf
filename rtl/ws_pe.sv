// ws_pe: one processing element of the weight-stationary systolic array.
//
// The cell holds one BF16 weight in a local register. While w_load is high
// the weight arriving from the north is captured and the previously held
// weight is passed on to the south, so a column of cells forms a shift chain
// that pre-loads the weights from the north edge. During computation the
// activation arriving from the west is multiplied by the held weight and added
// to the partial sum arriving from the north (fma_pe, two pipeline stages);
// the activation itself is forwarded east through a one-cycle register.
//
// Timing: ps_out/ps_valid_out follow a_in/ps_in by 2 cycles, a_out follows a_in
// by 1 cycle. The activation and the partial sum of one operation must arrive
// in the same cycle (checked by an assertion); the input skew in front of the
// array arranges that. Weights must not change while operations are in flight.
//
// The cell organisation (weight register, east-going activation register,
// multiply, add, output register) follows the paper's systolic-array figure;
// the load-enable shift chain is this design's choice.
module ws_pe
  import bf16_an_pkg::*;
#(
  parameter int K      = 1,
  parameter int LAMBDA = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  // weight pre-load chain (north -> south)
  input  logic  w_load,
  input  bf16_t w_in,
  output bf16_t w_out,
  // activations (west -> east)
  input  logic  a_valid_in,
  input  bf16_t a_in,
  output logic  a_valid_out,
  output bf16_t a_out,
  // partial sums (north -> south)
  input  logic  ps_valid_in,
  input  ext_t  ps_in,
  output logic  ps_valid_out,
  output ext_t  ps_out
);

  bf16_t w_q;

  always_ff @(posedge clk) begin
    if (!rst_n)      w_q <= '0;
    else if (w_load) w_q <= w_in;
  end
  assign w_out = w_q;

  always_ff @(posedge clk) begin
    if (!rst_n) a_valid_out <= 1'b0;
    else        a_valid_out <= a_valid_in;
  end

  always_ff @(posedge clk) begin
    if (a_valid_in) a_out <= a_in;
  end

  fma_pe #(.K(K), .LAMBDA(LAMBDA)) u_fma (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (a_valid_in),
    .a        (a_in),
    .b        (w_q),
    .c        (ps_in),
    .out_valid(ps_valid_out),
    .res      (ps_out)
  );

  // The activation and its partial sum arrive together, and no weight is
  // updated while an operation enters the cell.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (a_valid_in == ps_valid_in)
        else $error("ws_pe: activation and partial sum out of step");
      assert (!(w_load && a_valid_in))
        else $error("ws_pe: weight load during computation");
    end
  end

endmodule
