// tb_td_pe: checks the processing element. Random FP32 operand rows (idle
// lanes fed zeros, as the multiplexers do) are accumulated over several
// cycles; the expected value is built with reference multiplications and the
// same pairwise tree order (lane 2k with 2k+1, and so on up), each step
// rounded to FP32, then added to the running accumulator. Also checks the
// clear and the count of busy lanes.
module tb_td_pe;
  import td_pkg::*;
  import tb_fp_ref_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, acc_en = 0;
  row_t a, b;
  lane_mask_t lane_busy;
  fp32_t acc;
  logic [15:0] macs;
  int checks = 0, failures = 0;

  td_pe dut (.clk, .rst_n, .clear, .acc_en, .a, .b, .lane_busy, .acc, .macs);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp32_t tree(row_t x, row_t y);
    fp32_t lvl [LANES];
    for (int i = 0; i < LANES; i++) lvl[i] = fmul(x[i], y[i]);
    for (int w = LANES / 2; w >= 1; w /= 2)
      for (int i = 0; i < w; i++) lvl[i] = fadd(lvl[2*i], lvl[2*i+1]);
    return lvl[0];
  endfunction

  initial begin
    automatic fp32_t exp_acc;
    automatic int exp_macs;
    a = '0; b = '0; lane_busy = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 300; op++) begin
      @(negedge clk); clear = 1; acc_en = 0;
      @(negedge clk); clear = 0;
      checks++;
      if (acc != 0 || macs != 0) failures++;
      exp_acc = '0; exp_macs = 0;
      for (int c = 0; c < 1 + op % 8; c++) begin
        lane_busy = LANES'($urandom);
        for (int i = 0; i < LANES; i++) begin
          a[i] = lane_busy[i] ? frand(122, 132) : '0;
          b[i] = lane_busy[i] ? frand(122, 132) : '0;
        end
        acc_en = ($urandom % 4) != 0;
        if (acc_en) begin
          exp_acc = fadd(exp_acc, tree(a, b));
          exp_macs += $countones(lane_busy);
        end
        @(negedge clk);
        checks++;
        if (!feq(acc, exp_acc) || macs != 16'(exp_macs)) begin
          failures++;
          if (failures < 10) $display("FAIL op %0d: acc %h expected %h, macs %0d/%0d", op, acc, exp_acc, macs, exp_macs);
        end
      end
      acc_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
