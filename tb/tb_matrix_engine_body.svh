// Stimulus, reference model and checks shared by the end-to-end testbenches
// (see tb_matrix_engine_decl.svh).

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  logic [15:0] W [R][C];
  logic [15:0] A [D][R];
  logic [24:0] acc_model [D][C];
  real         exact [D][C];
  int n_passes_acc = 0, n_passes_new = 0, n_reloads = 0;
  real err_sum = 0.0;
  int  err_n = 0;

  task automatic load_tile();
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      W[r][c] = rand_bf16(3, 12);
      @(negedge clk);
      wb_wr_en = 1; wb_wr_row = RW'(r); wb_wr_col = CW'(c); wb_wr_data = W[r][c];
    end
    @(negedge clk) wb_wr_en = 0;
    n_reloads++;
  endtask

  task automatic load_inputs(int n);
    for (int m = 0; m < n; m++) for (int r = 0; r < R; r++) begin
      A[m][r] = rand_bf16(3, 12);
      @(negedge clk);
      ib_wr_en = 1; ib_wr_addr = AW'(m); ib_wr_row = RW'(r); ib_wr_data = A[m][r];
    end
    @(negedge clk) ib_wr_en = 0;
  endtask

  task automatic run_pass(int n, bit acc);
    int t0, lat;
    for (int m = 0; m < n; m++) for (int c = 0; c < C; c++) begin
      logic [24:0] ps;
      real x;
      ps = 25'd0;
      x = 0.0;
      for (int r = 0; r < R; r++) begin
        ps = ref_fma(A[m][r], W[r][c], ps, KK, LL);
        x += bf16_to_real(A[m][r]) * bf16_to_real(W[r][c]);
      end
      acc_model[m][c] = acc ? ref_add_ext(ps, acc_model[m][c], KK, LL) : ps;
      exact[m][c] = acc ? exact[m][c] + x : x;
    end
    @(negedge clk);
    start = 1; n_vec = (AW+1)'(n); acc_en = acc;
    t0 = cycle;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    lat = cycle - t0;
    checks++;
    if (lat != 3 * R + n + C + 3) begin
      failures++; $display("FAIL pass latency %0d, expected %0d", lat, 3 * R + n + C + 3);
    end
    if (acc) n_passes_acc++; else n_passes_new++;
  endtask

  task automatic check_outputs(int n);
    for (int m = 0; m < n; m++) for (int c = 0; c < C; c++) begin
      logic [15:0] e;
      real got;
      e = ref_round(acc_model[m][c]);
      @(negedge clk);
      ob_rd_en = 1; ob_rd_addr = AW'(m); ob_rd_col = CW'(c);
      @(negedge clk);
      ob_rd_en = 0;
      checks++;
      if (!ob_rd_valid || ob_rd_data !== e) begin
        failures++;
        if (failures < 20) $display("FAIL out[%0d][%0d] got %h exp %h", m, c, ob_rd_data, e);
      end
      got = bf16_to_real(ob_rd_data);
      if (exact[m][c] != 0.0) begin
        err_sum += (got > exact[m][c] ? got - exact[m][c] : exact[m][c] - got)
                   / (exact[m][c] > 0 ? exact[m][c] : -exact[m][c]);
        err_n++;
      end
    end
  endtask

  int n_grp = 1;

  initial begin
    wb_wr_row = '0; wb_wr_col = '0; wb_wr_data = '0;
    ib_wr_row = '0; ib_wr_addr = '0; ib_wr_data = '0;
    ob_rd_addr = '0; ob_rd_col = '0; n_vec = '0;
    clear_stats();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < PASSES; p++) begin
      // groups of three passes: one fresh tile, then two accumulating tiles
      // (the same vectors count n for the whole group)
      int n;
      if (p % 3 == 0) n_grp = (FULL_N > 0) ? FULL_N : 1 + $urandom % D;
      n = n_grp;
      load_tile();
      load_inputs(n);
      run_pass(n, p % 3 != 0);
      check_outputs(n);
    end
    $display("mechanisms: reloads=%0d fresh=%0d accumulate=%0d norm none=%0d k=%0d k+l=%0d carry=%0d flush=%0d",
             n_reloads, n_passes_new, n_passes_acc, n_none, n_k, n_kl, n_ovf, n_flush);
    if (err_n > 0) $display("mean relative error against exact arithmetic: %f", err_sum / err_n);
    checks++;
    if (n_reloads < 2 || n_passes_new == 0 || n_passes_acc == 0 || n_none == 0 || n_k == 0 ||
        n_kl == 0 || n_ovf == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
