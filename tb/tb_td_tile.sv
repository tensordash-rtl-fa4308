// tb_td_tile: end-to-end test of one 4x4 tile at its default size.
// Operands are small integers held as FP32 so that every partial sum is exact
// whatever order the schedule adds them in; the expected outputs are integer
// dot products of A column streams with B row streams. Per operation the
// test checks every result in the C pad, the count of multiplier operations
// (B non-zeros x columns in sparse mode, all pairs in dense mode), the step
// count (exactly nsteps dense or with fully dense B, exactly ceil(nsteps/3)
// with all-zero B, and in between otherwise) and the start-to-done latency.
// The last four operations continue the previous dot products (acc_keep),
// as a reduction longer than one pad load would. It also requires that
// lookahead, lookaside, multi-row advances and row waits (lock-step stalls)
// all occur.
module tb_td_tile;
  import td_pkg::*;
  import tb_fp_ref_pkg::*;
  localparam int R = 4, C = 4, NR = 48;
  logic clk = 0, rst_n = 0, td_en = 1, start = 0, acc_keep = 0, busy, done;
  logic [C-1:0] a_we = '0;
  logic [R-1:0] b_we = '0;
  logic [5:0] pad_waddr = '0, nsteps = '0, c_addr = '0, c_raddr = '0;
  row_t pad_wrow = '0, c_rrow;
  tile_stats_t stats;
  fp32_t acc [R][C];
  int checks = 0, failures = 0;
  int av [C][NR][LANES];
  int bv [R][NR][LANES];
  int n_la = 0, n_ls = 0, n_ma = 0, n_rw = 0, n_dense = 0, n_keep = 0;
  int prev [R][C];
  int prev_macs = 0;

  td_tile dut (.clk, .rst_n, .td_en, .a_we, .b_we, .pad_waddr, .pad_wrow, .start, .acc_keep, .nsteps,
               .c_addr, .busy, .done, .stats, .c_raddr, .c_rrow, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // B density in eighths: 0 = all zero, 8 = no zeros
  task automatic load(int n, int bdens);
    for (int c = 0; c < C; c++)
      for (int s = 0; s < NR; s++) begin
        for (int l = 0; l < LANES; l++)
          av[c][s][l] = (s < n) ? int'($urandom % 15) - 7 : 0;
        @(negedge clk);
        a_we = '0; a_we[c] = 1'b1; pad_waddr = 6'(s);
        for (int l = 0; l < LANES; l++) pad_wrow[l] = r2f(real'(av[c][s][l]));
      end
    for (int r = 0; r < R; r++)
      for (int s = 0; s < NR; s++) begin
        // per-row density differs so rows go out of step
        automatic int d = (bdens == 8 || bdens == 0) ? bdens : (bdens + r) % 8;
        for (int l = 0; l < LANES; l++) begin
          bv[r][s][l] = (s < n && int'($urandom % 8) < d) ? 1 + int'($urandom % 7) : 0;
          if ($urandom % 2) bv[r][s][l] = -bv[r][s][l];
        end
        @(negedge clk);
        b_we = '0; b_we[r] = 1'b1; a_we = '0; pad_waddr = 6'(s);
        for (int l = 0; l < LANES; l++) pad_wrow[l] = r2f(real'(bv[r][s][l]));
      end
    @(negedge clk); a_we = '0; b_we = '0;
  endtask

  task automatic run(int n, logic sparse, int caddr, int bdens, logic keep = 1'b0);
    automatic int lat = 0, nzb = 0, exp_macs;
    td_en = sparse;
    @(negedge clk);
    start = 1; nsteps = 6'(n); c_addr = 6'(caddr); acc_keep = keep;
    @(negedge clk); start = 0; acc_keep = 0;
    while (!done) begin @(negedge clk); lat++; end
    // results
    c_raddr = 6'(caddr); #1;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        automatic int e = keep ? prev[r][c] : 0;
        for (int s = 0; s < n; s++)
          for (int l = 0; l < LANES; l++) e += av[c][s][l] * bv[r][s][l];
        expect_true(feq(c_rrow[r*C + c], r2f(real'(e))), $sformatf("result PE(%0d,%0d) n=%0d", r, c, n));
        prev[r][c] = e;
      end
    for (int r = 0; r < R; r++)
      for (int s = 0; s < n; s++)
        for (int l = 0; l < LANES; l++) nzb += (bv[r][s][l] != 0);
    exp_macs = (sparse ? nzb * C : n * LANES * R * C) + (keep ? prev_macs : 0);
    prev_macs = exp_macs;
    if (keep) n_keep++;
    expect_true(stats.macs == 32'(exp_macs), $sformatf("macs %0d expected %0d", stats.macs, exp_macs));
    if (!sparse || bdens == 8)
      expect_true(stats.cycles == 32'(n), $sformatf("dense steps %0d for n=%0d", stats.cycles, n));
    else if (bdens == 0)
      expect_true(stats.cycles == 32'((n + 2) / 3), $sformatf("empty steps %0d for n=%0d", stats.cycles, n));
    else
      expect_true(stats.cycles >= 32'((n + 2) / 3) && stats.cycles <= 32'(n), "step bounds");
    expect_true(lat == int'(stats.cycles) + 2, $sformatf("latency %0d for %0d steps", lat, stats.cycles));
    n_la += stats.lookahead; n_ls += stats.lookaside; n_ma += stats.multi_adv; n_rw += stats.row_waits;
    if (!sparse) n_dense++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    load(48, 8); run(48, 1'b1, 0, 8);     // no zeros: no skipping possible
    load(48, 0); run(48, 1'b1, 1, 0);     // all zeros: three rows per step
    load(48, 3); run(48, 1'b0, 2, 3);     // dense (bypass) mode
    for (int k = 0; k < 12; k++) begin
      automatic int n = (k < 4) ? k + 1 : 8 + 4 * k - 16 + ($urandom % 8);
      if (n > NR) n = NR;
      load(n, 1 + k % 7); run(n, 1'b1, 3 + k, 1 + k % 7, k >= 8);
    end
    expect_true(n_la > 0, "lookahead used");
    expect_true(n_ls > 0, "lookaside used");
    expect_true(n_ma > 0, "multi-row advance happened");
    expect_true(n_rw > 0, "lock-step row wait happened");
    expect_true(n_dense > 0, "dense mode ran");
    expect_true(n_keep > 0, "accumulation over several pad loads");
    $display("tile events: lookahead=%0d lookaside=%0d multi_adv=%0d row_waits=%0d dense_runs=%0d kept=%0d",
             n_la, n_ls, n_ma, n_rw, n_dense, n_keep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
