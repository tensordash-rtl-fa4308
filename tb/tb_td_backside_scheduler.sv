// tb_td_backside_scheduler: streams random dense tensors of random length and
// sparsity into the backside scheduler and checks every scheduled row it
// emits against the single-cycle forward scheduler (td_scheduler), driven
// from a software copy of the window and pending mask: the movements, lane
// flags and advance must be the ones the forward scheduler picks, and each
// value must be the window value its movement names. The emitted rows are
// then expanded with the reference decompressor and must give back the dense
// tensor. Timing: each scheduled row is presented exactly NLEVELS cycles
// after the clock edge that completed its window (one cycle per level), and out_last comes with the final row.
module tb_td_backside_scheduler;
  import td_pkg::*;
  import tb_sched_ref_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, in_last = 0;
  logic out_valid, out_last;
  row_t in_row = '0, out_v;
  logic [LANES-1:0][MSW-1:0] out_ms;
  lane_mask_t out_nz;
  logic [ASW-1:0] out_as;
  int checks = 0, failures = 0, cyc = 0, last_in_cyc = 0;

  // reference: the forward scheduler on the model's pending window
  window_mask_t ref_z, ref_left;
  ms_t ref_ms [LANES];
  lane_mask_t ref_sel;
  logic [ASW-1:0] ref_adv;
  td_scheduler ref_sch (.en(1'b1), .z(ref_z), .ms(ref_ms), .sel(ref_sel), .adv(ref_adv), .z_left(ref_left));

  td_backside_scheduler dut (.clk, .rst_n, .in_valid, .in_ready, .in_row, .in_last, .out_valid,
                             .out_v, .out_ms, .out_nz, .out_as, .out_last);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

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

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic row_t dense [$], back [$];
      automatic srow_t s [$];
      automatic int n = 1 + $urandom % 20;
      automatic int pct = $urandom % 101;
      automatic int fed = 0, ptr = 0, ready_cyc = -1;
      automatic bit done_t = 0;
      automatic window_mask_t pend = '0;
      for (int r = 0; r < n; r++) dense.push_back(rand_row(pct));
      // model pending bits of rows ptr..ptr+2
      for (int r = 0; r < DEPTH; r++)
        for (int l = 0; l < LANES; l++)
          pend[r][l] = (r < n) && dense[r][l][30:0] != 0;
      while (!done_t) begin
        @(negedge clk);
        in_valid = 0; in_last = 0;
        if (in_ready && fed < n && ($urandom % 4) != 0) begin
          in_valid = 1; in_row = dense[fed]; in_last = (fed == n - 1);
        end
        if (out_valid) begin
          automatic srow_t sr;
          // the window is complete once rows up to ptr+2 (or the end) arrived
          ref_z = pend; #1;
          expect_true(cyc - ready_cyc == NLEVELS,
                      $sformatf("tensor %0d: row out %0d cycles after window complete", t, cyc - ready_cyc));
          expect_true(out_nz == ref_sel, $sformatf("tensor %0d lane flags", t));
          expect_true(out_as == ref_adv, $sformatf("tensor %0d advance %0d vs %0d", t, out_as, ref_adv));
          for (int i = 0; i < LANES; i++)
            if (ref_sel[i]) begin
              automatic int rr = ptr + opt_step(int'(ref_ms[i]));
              expect_true(out_ms[i] == ref_ms[i], $sformatf("tensor %0d lane %0d movement", t, i));
              expect_true(rr < n && out_v[i] == dense[rr][opt_lane(i, int'(ref_ms[i]))],
                          $sformatf("tensor %0d lane %0d value", t, i));
            end
          sr.v = out_v; sr.ms = out_ms; sr.nz = out_nz; sr.as_ = out_as;
          s.push_back(sr);
          // advance the model
          for (int r = 0; r < DEPTH; r++)
            for (int l = 0; l < LANES; l++) begin
              automatic int rr = ptr + int'(ref_adv) + r;
              automatic int sr_ = r + int'(ref_adv);
              pend[r][l] = (sr_ < DEPTH) ? ref_left[sr_][l] : (rr < n && dense[rr][l][30:0] != 0);
            end
          ptr += int'(ref_adv);
          expect_true(out_last == (ptr >= n), $sformatf("tensor %0d last flag", t));
          if (out_last) done_t = 1;
          ready_cyc = -1;
        end
        @(posedge clk);
        if (in_valid) fed++;
        if (ready_cyc < 0 && (fed >= ptr + DEPTH || fed == n)) ready_cyc = cyc + 1;
      end
      @(negedge clk); in_valid = 0;
      expand_stream(s, back);
      expect_true(back.size() >= n, "expanded length");
      for (int r = 0; r < back.size(); r++)
        expect_true(row_eq(back[r], (r < n) ? dense[r] : row_t'('0)),
                    $sformatf("tensor %0d row %0d after expansion", t, r));
      expect_true(s.size() <= n, "schedule longer than the dense stream");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
