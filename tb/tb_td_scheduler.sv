// tb_td_scheduler: checks the hierarchical scheduler.
// 1. The promotion map: lanes that share a level never reach a common slot.
// 2. A hand-worked case: only slots (+1,9) and (+2,6) hold pairs. Lane 6
//    (level 1) takes (+2,6) by lookahead (MS=2). (+1,9) is reachable by
//    lanes 8, 9, 10 and 12; lane 10 sits in level 0, so it steals it first
//    with option (+1,i-1) (MS=3). All rows drain (AS=3).
// 3. Random windows against a sequential software model, plus the schedule
//    rules: every chosen slot was effectual, no slot is used twice, z_left is
//    z minus the chosen slots, and the advance counts the empty leading rows.
// 4. Bypass mode: dense selects, every lane busy, advance 1.
module tb_td_scheduler;
  import td_pkg::*;
  logic en;
  window_mask_t z, z_left;
  ms_t ms [LANES];
  lane_mask_t sel;
  logic [ASW-1:0] adv;
  int checks = 0, failures = 0;

  td_scheduler dut (.en, .z, .ms, .sel, .adv, .z_left);

  task automatic expect_true(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s (z=%h)", what, z);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // 1. level groups are conflict free
    for (int i = 0; i < LANES; i++)
      for (int j = i + 1; j < LANES; j++)
        if (lane_level(i) == lane_level(j))
          for (int oi = 0; oi < NOPT; oi++)
            for (int oj = 0; oj < NOPT; oj++)
              expect_true(!(opt_step(oi) == opt_step(oj) && opt_lane(i, oi) == opt_lane(j, oj)),
                          "level conflict");

    // 2. hand-worked example
    en = 1'b1;
    z = '0; z[1][9] = 1'b1; z[2][6] = 1'b1;
    #1;
    expect_true(sel == 16'h0440, "example: busy lanes 6 and 10");
    expect_true(ms[6] == 3'd2, "example: lane 6 lookahead 2");
    expect_true(ms[10] == 3'd3, "example: lane 10 steals (+1,9)");
    expect_true(adv == 2'd3, "example: advance 3");
    expect_true(z_left == '0, "example: nothing left");

    // 3. random windows against a software model
    for (int n = 0; n < 20000; n++) begin
      automatic window_mask_t zz, used;
      automatic int exp_ms [LANES];
      automatic logic [LANES-1:0] exp_sel;
      automatic int exp_adv;
      automatic int dens = 1 + n % 8;
      for (int r = 0; r < DEPTH; r++)
        for (int l = 0; l < LANES; l++)
          zz[r][l] = ($urandom % 8) < dens;
      z = zz; #1;
      // model: levels in order, lanes in order, first free option wins
      used = '0; exp_sel = '0;
      for (int lvl = 0; lvl < NLEVELS; lvl++)
        for (int i = 0; i < LANES; i++) begin
          if (lane_level(i) != lvl) continue;
          exp_ms[i] = 0;
          for (int o = 0; o < NOPT; o++) begin
            int s, l;
            s = opt_step(o); l = opt_lane(i, o);
            if (zz[s][l] && !used[s][l]) begin
              used[s][l] = 1'b1; exp_ms[i] = o; exp_sel[i] = 1'b1;
              break;
            end
          end
        end
      exp_adv = 1;
      if ((zz[1] & ~used[1]) == 0) exp_adv = 2;
      if (exp_adv == 2 && (zz[2] & ~used[2]) == 0) exp_adv = 3;
      expect_true(sel == exp_sel, "busy lanes");
      for (int i = 0; i < LANES; i++)
        if (exp_sel[i]) expect_true(int'(ms[i]) == exp_ms[i], "movement select");
      expect_true(z_left == (zz & ~used), "z_left");
      expect_true(int'(adv) == exp_adv, "advance");
      expect_true(used[0] == zz[0], "row +0 always drained");
    end

    // 4. bypass mode
    en = 1'b0;
    z = '1; #1;
    expect_true(sel == '1 && adv == 2'd1, "bypass: all lanes, advance 1");
    for (int i = 0; i < LANES; i++) expect_true(ms[i] == '0, "bypass: dense select");
    expect_true(z_left[0] == '0 && z_left[1] == '1 && z_left[2] == '1, "bypass: z_left");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
