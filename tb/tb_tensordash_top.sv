// tb_tensordash_top: end-to-end test of the accelerator core. It runs with
// two tiles, the first with a transposer and the second without, so that a
// simulation builds in minutes; tiles are identical, so this covers every
// path of the 16-tile default. Each tile keeps its default 4x4 PEs, 16
// lanes and 3-bank pads.
//
// Every tile gets its own A and B streams of small integers stored as FP32
// (exact under any summation order) with a B sparsity that differs per tile
// and per PE row. The B pad of PE row 0 in tiles 0..14 is filled through the
// tile's transposer (16 blocks in, 16 transposed columns out); the last tile has no
// transposer, so a transposer write to it must be ignored. Five operations:
//   1. sparse mode set by configuration;
//   2. automatic mode after a tensor with no zeros: the zero monitor must
//      switch the tiles to the dense schedule (exactly 16 steps each);
//   3. automatic mode, dense, with B all zero in every tile but the first;
//   4. automatic mode after that zero-heavy tensor: back to sparse;
//   5. sparse, after one B pad was refilled from a stream in scheduled form
//      through the decompressor (FILL_SCHED, honouring fill_ready), adding
//      onto the results of operation 4 (acc_keep), as the second half of a
//      longer reduction would.
// Between 4 and 5 the result rows of the first four operations are pushed
// through the backside scheduler; expanding its output with the reference
// decompressor must give the rows back, in fewer scheduled rows.
// Each operation checks all 256 results, each tile's step count against the
// mode, and the start-to-done latency (slowest tile + 3 cycles). The events
// lookahead, lookaside, multi-row advance, lock-step row wait, transposer
// fill, ignored transposer command, dense mode and both automatic mode
// switches, backside scheduling and compression, scheduled fills and the
// decompressor's multi-row release are counted and each must occur.
module tb_tensordash_top;
  import td_pkg::*;
  import tb_fp_ref_pkg::*;
  import tb_sched_ref_pkg::*;
  localparam int NT = 2, NX = 1, R = 4, C = 4, NS = 16;
  localparam int TW = (NT > 1) ? $clog2(NT) : 1;
  logic clk = 0, rst_n = 0;
  logic cfg_td_en = 1, cfg_auto = 0, td_active;
  logic fill_valid = 0, fill_side = 0;
  logic [1:0] fill_cmd = '0;
  logic [3:0] fill_idx = '0;
  logic [TW-1:0] fill_tile = '0, rd_tile = '0;
  logic [2:0] fill_pad = '0;
  logic [5:0] fill_addr = '0, nsteps = '0, c_addr = '0, rd_addr = '0;
  row_t fill_row = '0, rd_row;
  logic fill_ready, dec_clear = 0, acc_keep = 0;
  logic [LANES-1:0][MSW-1:0] fill_ms = '0, bs_ms;
  lane_mask_t fill_nz = '0, bs_nz;
  logic [ASW-1:0] fill_as = '0, bs_as;
  logic bs_push = 0, bs_in_last = 0, bs_ready, bs_valid, bs_last;
  row_t bs_v;
  int ev_dec_rows = 0, ev_dec_multi = 0, ev_bs_rows = 0, ev_bs_saved = 0;
  logic start = 0, busy, done, rd_valid = 0, layer_end = 0;
  tile_stats_t stats [NT];
  logic [31:0] mon_zeros, mon_values;
  int checks = 0, failures = 0;
  int av [NT][C][NS][LANES];
  int bv [NT][R][NS][LANES];
  int ev_la = 0, ev_ls = 0, ev_ma = 0, ev_rw = 0, ev_xp = 0, ev_xp_ign = 0;
  int ev_dense = 0, ev_to_dense = 0, ev_to_sparse = 0, ev_keep = 0;
  int prev_res [NT][R][C];

  tensordash_top #(.NUM_TILES(NT), .NUM_XPOSE(NX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
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

  task automatic cmd(logic [1:0] k, int t, logic side, int pad, int addr, int idx, row_t row);
    @(negedge clk);
    fill_valid = 1; fill_cmd = k; fill_tile = TW'(t); fill_side = side;
    fill_pad = 3'(pad); fill_addr = 6'(addr); fill_idx = 4'(idx); fill_row = row;
    @(negedge clk);
    fill_valid = 0;
  endtask

  function automatic row_t to_row(int v [LANES]);
    row_t x;
    for (int l = 0; l < LANES; l++) x[l] = r2f(real'(v[l]));
    return x;
  endfunction

  // zero_b: B all zero in every tile but tile 0
  task automatic load_all(logic zero_b);
    for (int t = 0; t < NT; t++) begin
      for (int c = 0; c < C; c++)
        for (int s = 0; s < NS; s++) begin
          for (int l = 0; l < LANES; l++) av[t][c][s][l] = 1 + int'($urandom % 7);
          cmd(2'd0, t, 1'b0, c, s, 0, to_row(av[t][c][s]));
        end
      for (int r = 0; r < R; r++)
        for (int s = 0; s < NS; s++)
          for (int l = 0; l < LANES; l++) begin
            automatic int d = 1 + (t + 2 * r) % 7;   // density in eighths
            bv[t][r][s][l] = (!(zero_b && t > 0) && int'($urandom % 8) < d) ? 1 + int'($urandom % 5) : 0;
          end
      for (int r = 0; r < R; r++) begin
        if (r == 0 && t < NX) begin
          // through the transposer: block j holds value (row k, lane j) at position k
          for (int j = 0; j < LANES; j++) begin
            automatic int blk [LANES];
            for (int k = 0; k < NS; k++) blk[k] = bv[t][0][k][j];
            cmd(2'd1, t, 1'b1, 0, 0, j, to_row(blk));
          end
          for (int k = 0; k < NS; k++) cmd(2'd2, t, 1'b1, 0, k, k, '0);
          ev_xp++;
        end else begin
          for (int s = 0; s < NS; s++) cmd(2'd0, t, 1'b1, r, s, 0, to_row(bv[t][r][s]));
          if (r == 0) begin
            // no transposer in this tile: this must change nothing
            cmd(2'd2, t, 1'b1, 0, 0, 0, '0);
            ev_xp_ign++;
          end
        end
      end
    end
  endtask

  task automatic run_op(int caddr, logic exp_sparse, logic keep = 1'b0);
    automatic int lat = 0, maxc = 0;
    expect_true(td_active == exp_sparse, $sformatf("mode before op %0d", caddr));
    @(negedge clk);
    start = 1; nsteps = 6'(NS); c_addr = 6'(caddr); acc_keep = keep;
    @(negedge clk); start = 0; acc_keep = 0;
    while (!done) begin @(negedge clk); lat++; end
    for (int t = 0; t < NT; t++) begin
      automatic int nzb = 0;
      if (int'(stats[t].cycles) > maxc) maxc = int'(stats[t].cycles);
      for (int r = 0; r < R; r++)
        for (int s = 0; s < NS; s++)
          for (int l = 0; l < LANES; l++) nzb += (bv[t][r][s][l] != 0);
      if (!exp_sparse)
        expect_true(stats[t].cycles == NS, $sformatf("tile %0d dense steps %0d", t, stats[t].cycles));
      else if (nzb == 0)
        expect_true(stats[t].cycles == (NS + 2) / 3, $sformatf("tile %0d empty steps %0d", t, stats[t].cycles));
      else
        expect_true(stats[t].cycles >= (NS + 2) / 3 && stats[t].cycles <= NS, "step bounds");
      ev_la += stats[t].lookahead; ev_ls += stats[t].lookaside;
      ev_ma += stats[t].multi_adv; ev_rw += stats[t].row_waits;
    end
    expect_true(lat == maxc + 3, $sformatf("latency %0d, slowest tile %0d", lat, maxc));
    if (!exp_sparse) ev_dense++;
    // read every tile's results through the monitor
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      rd_tile = TW'(t); rd_addr = 6'(caddr); rd_valid = 1; #1;
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          automatic int e = keep ? prev_res[t][r][c] : 0;
          for (int s = 0; s < NS; s++)
            for (int l = 0; l < LANES; l++) e += av[t][c][s][l] * bv[t][r][s][l];
          expect_true(feq(rd_row[r*C + c], r2f(real'(e))),
                      $sformatf("op %0d tile %0d PE(%0d,%0d): %h vs %0d", caddr, t, r, c, rd_row[r*C+c], e));
          prev_res[t][r][c] = e;
        end
    end
    @(negedge clk); rd_valid = 0;
    layer_end = 1;
    @(negedge clk); layer_end = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1. sparse by configuration
    load_all(1'b0);
    run_op(0, 1'b1);
    // 2. automatic: op 1 produced no zeros, so the monitor chose dense
    cfg_auto = 1;
    #1;
    if (!td_active) ev_to_dense++;
    load_all(1'b0);
    run_op(1, 1'b0);
    // 3. still dense; most outputs are zero this time
    load_all(1'b1);
    run_op(2, 1'b0);
    // 4. the zero-heavy tensor switches sparse mode back on
    #1;
    if (td_active) ev_to_sparse++;
    load_all(1'b0);
    run_op(3, 1'b1);

    // 5. backside scheduler: compress the result rows of operations 0..3
    begin
      automatic row_t dense [$], back [$];
      automatic srow_t sq [$];
      automatic int k = 0;
      for (int t = 0; t < NT; t++)
        for (int a = 0; a < 4; a++) begin
          @(negedge clk); rd_tile = TW'(t); rd_addr = 6'(a); #1;
          dense.push_back(rd_row);
        end
      fork
        for (k = 0; k < dense.size(); k++) begin
          @(negedge clk); rd_tile = TW'(k / 4); rd_addr = 6'(k % 4);
          bs_push = 1; bs_in_last = (k == dense.size() - 1); #1;
          while (!bs_ready) begin @(negedge clk); #1; end
          @(posedge clk); #1 bs_push = 0;
        end
        begin
          automatic bit fin = 0;
          while (!fin) begin
            @(posedge clk);
            if (bs_valid) begin
              automatic srow_t sr;
              sr.v = bs_v; sr.ms = bs_ms; sr.nz = bs_nz; sr.as_ = bs_as;
              sq.push_back(sr); fin = bs_last; ev_bs_rows++;
            end
          end
        end
      join
      bs_push = 0;
      expand_stream(sq, back);
      for (int r = 0; r < dense.size(); r++)
        expect_true(r < back.size() && row_eq(back[r], dense[r]), $sformatf("backside row %0d", r));
      if (sq.size() < dense.size()) ev_bs_saved++;
    end
    // 6. a B stream stored in scheduled form, expanded into tile 0's B pad 1
    begin
      automatic row_t dense [$];
      automatic srow_t sq [$];
      cfg_auto = 0; cfg_td_en = 1;
      for (int sidx = 0; sidx < NS; sidx++) begin
        for (int l = 0; l < LANES; l++)
          bv[0][1][sidx][l] = (int'($urandom % 8) < 3) ? 1 + int'($urandom % 5) : 0;
        dense.push_back(to_row(bv[0][1][sidx]));
      end
      sched_stream(dense, sq);
      @(negedge clk); dec_clear = 1; fill_addr = '0;
      @(negedge clk); dec_clear = 0;
      foreach (sq[k]) begin
        while (!fill_ready) @(negedge clk);
        fill_valid = 1; fill_cmd = 2'd3; fill_tile = '0; fill_side = 1; fill_pad = 3'd1;
        fill_row = sq[k].v; fill_ms = sq[k].ms; fill_nz = sq[k].nz; fill_as = sq[k].as_;
        ev_dec_rows++;
        if (sq[k].as_ > 1) ev_dec_multi++;
        @(negedge clk); fill_valid = 0;
      end
      while (!fill_ready) @(negedge clk);
      run_op(4, 1'b1, 1'b1);
      ev_keep++;
    end

    expect_true(ev_bs_rows > 0, "backside scheduling");
    expect_true(ev_bs_saved > 0, "backside compression");
    expect_true(ev_dec_rows > 0, "decompressed fill");
    expect_true(ev_keep > 0, "accumulation onto earlier results");
    expect_true(ev_dec_multi > 0, "decompressor multi-row release");
    expect_true(ev_la > 0, "lookahead");
    expect_true(ev_ls > 0, "lookaside");
    expect_true(ev_ma > 0, "multi-row advance");
    expect_true(ev_rw > 0, "lock-step row wait");
    expect_true(ev_xp > 0, "transposer fill");
    expect_true(ev_xp_ign > 0, "transposer command to a tile without one");
    expect_true(ev_dense > 0, "dense mode");
    expect_true(ev_to_dense > 0, "automatic switch to dense");
    expect_true(ev_to_sparse > 0, "automatic switch to sparse");
    $display("events: backside_rows=%0d backside_saved=%0d sched_fill_rows=%0d sched_fill_multi=%0d",
             ev_bs_rows, ev_bs_saved, ev_dec_rows, ev_dec_multi);
    $display("events: lookahead=%0d lookaside=%0d multi_adv=%0d row_waits=%0d xpose=%0d xpose_ignored=%0d dense_ops=%0d to_dense=%0d to_sparse=%0d",
             ev_la, ev_ls, ev_ma, ev_rw, ev_xp, ev_xp_ign, ev_dense, ev_to_dense, ev_to_sparse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
