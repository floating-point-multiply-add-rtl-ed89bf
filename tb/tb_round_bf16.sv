// tb_round_bf16: checks conversion of extended results to BF16 (exact
// normalization, round to nearest even, zero, underflow, infinity) against an
// integer-division model, plus directed tie cases.
module tb_round_bf16;
  import bf16_an_pkg::*;
  import fp_ref_pkg::*;
  int checks = 0, failures = 0;
  ext_t in;
  bf16_t out;

  round_bf16 dut (.*);

  task automatic one(logic [24:0] v);
    logic [15:0] e;
    in = v; #1;
    e = ref_round(v);
    checks++;
    if (out !== e) begin
      failures++;
      $display("FAIL in=%h got %h exp %h", v, out, e);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    one({1'b0, 8'd127, 16'h8080});  // tie, even -> down
    one({1'b0, 8'd127, 16'h8180});  // tie, odd -> up
    one({1'b0, 8'd127, 16'hFF80});  // rounds to 2.0
    one({1'b0, 8'd254, 16'hFFFF});  // overflow to infinity
    one({1'b1, 8'd3, 16'h0010});    // underflow
    one({1'b0, 8'd130, 16'h0000});  // zero significand
    one({1'b0, 8'd255, 16'h8000});  // infinity
    for (int i = 0; i < 5000; i++) begin
      logic [15:0] s;
      s = 16'($urandom);
      s = s >> ($urandom % 16);
      one({1'($urandom), 8'($urandom), s});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
