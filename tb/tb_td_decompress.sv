// tb_td_decompress: feeds scheduled rows, built by the reference scheduler of
// tb_sched_ref_pkg from random dense streams of random sparsity, into the
// decompressor and compares every dense row it emits with the original
// stream (rows past the end must be zero). Timing checks: with back-to-back
// input the k-th dense row leaves exactly k cycles after the first accepted
// row, in_ready stays low for as-1 cycles after each row, and the number of
// rows emitted equals the sum of the as fields. Lookaside movements must
// occur in the streams. Some tensors are fed with
// random idle cycles and a clear between tensors.
module tb_td_decompress;
  import td_pkg::*;
  import tb_sched_ref_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_ready, out_valid;
  row_t in_v = '0, out_row;
  logic [LANES-1:0][MSW-1:0] in_ms = '0;
  lane_mask_t in_nz = '0;
  logic [ASW-1:0] in_as = '0;
  int checks = 0, failures = 0, cyc = 0, n_side = 0;
  row_t got [$];
  int   got_cyc [$];

  td_decompress dut (.clk, .rst_n, .clear, .in_valid, .in_ready, .in_v, .in_ms, .in_nz, .in_as,
                     .out_valid, .out_row);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid) begin got.push_back(out_row); got_cyc.push_back(cyc); end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      automatic row_t dense [$];
      automatic srow_t s [$];
      automatic int n = 1 + $urandom % 24;
      automatic int pct = $urandom % 101;
      automatic bit gaps = t % 3 == 2;
      automatic int first_cyc = -1, total = 0;
      for (int r = 0; r < n; r++) dense.push_back(rand_row(pct));
      sched_stream(dense, s);
      foreach (s[k]) for (int i = 0; i < LANES; i++) if (s[k].nz[i] && s[k].ms[i] >= 3) n_side++;
      got.delete(); got_cyc.delete();
      foreach (s[k]) begin
        @(negedge clk);
        while (gaps && ($urandom % 2) != 0) begin in_valid = 0; @(negedge clk); end
        // in_ready must be high now: the previous row's extra cycles are over
        checks++;
        if (!in_ready) begin failures++; $display("FAIL in_ready low at row %0d", k); end
        in_valid = 1; in_v = s[k].v; in_ms = s[k].ms; in_nz = s[k].nz; in_as = s[k].as_;
        if (first_cyc < 0) first_cyc = cyc;
        @(posedge clk);
        total += int'(s[k].as_);
        for (int w = 1; w < int'(s[k].as_); w++) begin
          @(negedge clk);
          in_valid = 0;
          checks++;
          if (in_ready) begin failures++; $display("FAIL in_ready high during extra row"); end
          @(posedge clk);
        end
      end
      @(negedge clk); in_valid = 0;
      @(negedge clk);
      checks++;
      if (got.size() != total) begin
        failures++; $display("FAIL tensor %0d: %0d rows out, expected %0d", t, got.size(), total);
      end
      for (int r = 0; r < got.size(); r++) begin
        checks++;
        if (!row_eq(got[r], (r < n) ? dense[r] : row_t'('0))) begin
          failures++;
          if (failures < 10) $display("FAIL tensor %0d row %0d", t, r);
        end
        if (!gaps) begin
          checks++;
          if (got_cyc[r] != first_cyc + r) begin
            failures++; $display("FAIL tensor %0d row %0d left at cycle %0d, expected %0d",
                                 t, r, got_cyc[r] - first_cyc, r);
          end
        end
      end
      checks++;
      if (total < n) begin failures++; $display("FAIL schedule too short"); end
      // between tensors: a clear, and a stray row that the clear must discard
      if (t % 5 == 4) begin
        in_valid = 1; in_nz = '1; in_ms = '0; in_v = rand_row(100); in_as = 2'd0;
        @(negedge clk); in_valid = 0; clear = 1;
        @(negedge clk); clear = 0;
        got.delete();
      end
    end
    checks++;
    if (n_side == 0) begin failures++; $display("FAIL no lookaside movement was exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
