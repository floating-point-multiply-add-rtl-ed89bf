// engine_ctrl: sequencer for one pass of the matrix engine.
//
// A pass multiplies n_vec input vectors by the weight tile held in the weight
// buffer. On start (accepted only when idle) the controller
//   LOAD_W : reads the weight rows ROWS-1 down to 0, one per cycle, so that
//            the shift chain of every column ends with row r in PE row r;
//   STREAM : reads input vectors 0 .. n_vec-1, one per cycle;
//   DRAIN  : waits until the last column has delivered n_vec results;
//   DONE   : raises done for one cycle and returns to IDLE.
// acc_clear pulses when a pass starts (resets the accumulators' entry
// counters) and acc_mode holds the start-time acc_en for the whole pass.
// busy is high from the cycle after start until done.
//
// The order "pre-load weights from the north, then stream the inputs" is the
// weight-stationary dataflow of the paper; the state machine and its
// interface are this design's own.
module engine_ctrl #(
  parameter int ROWS  = 32,
  parameter int DEPTH = 128,
  parameter int AW    = $clog2(DEPTH),
  parameter int RW    = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW:0]   n_vec,       // vectors in this pass, 1 .. DEPTH
  input  logic          acc_en,      // add results to the accumulators
  input  logic          last_col_valid,
  output logic          busy,
  output logic          done,
  output logic          acc_clear,
  output logic          acc_mode,
  output logic          wb_rd_en,
  output logic [RW-1:0] wb_rd_row,
  output logic          ib_rd_en,
  output logic [AW-1:0] ib_rd_addr
);

  typedef enum logic [2:0] {IDLE, LOAD_W, STREAM, DRAIN, DONE} state_e;

  state_e        state;
  logic [AW:0]   cnt;
  logic [AW:0]   out_cnt;
  logic [AW:0]   n_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= IDLE;
      cnt      <= '0;
      out_cnt  <= '0;
      n_q      <= '0;
      acc_mode <= 1'b0;
    end else begin
      if (state != IDLE && last_col_valid) out_cnt <= out_cnt + 1'b1;
      unique case (state)
        IDLE: if (start) begin
          state    <= LOAD_W;
          cnt      <= '0;
          out_cnt  <= '0;
          n_q      <= n_vec;
          acc_mode <= acc_en;
        end
        LOAD_W: begin
          if (cnt == (AW+1)'(ROWS - 1)) begin
            state <= STREAM;
            cnt   <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        STREAM: begin
          if (cnt == n_q - 1'b1) state <= DRAIN;
          cnt <= cnt + 1'b1;
        end
        DRAIN: if (out_cnt == n_q) state <= DONE;
        DONE:  state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  always_comb begin
    busy       = (state != IDLE);
    done       = (state == DONE);
    acc_clear  = (state == IDLE) && start;
    wb_rd_en   = (state == LOAD_W);
    wb_rd_row  = RW'(ROWS - 1) - RW'(cnt);
    ib_rd_en   = (state == STREAM);
    ib_rd_addr = AW'(cnt);
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == IDLE && start) |-> (n_vec != '0 && n_vec <= (AW+1)'(DEPTH)))
    else $error("engine_ctrl: n_vec out of range");

endmodule
