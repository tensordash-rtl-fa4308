// tb_td_zero_monitor: feeds rows with a known number of zeros (+0 and -0),
// checks the running counts, and checks the decision latched at the end of a
// tensor just below, at and above the 10% threshold.
module tb_td_zero_monitor;
  import td_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, layer_end = 0, sparse_en;
  row_t in_row;
  logic [31:0] zeros, values;
  int checks = 0, failures = 0;

  td_zero_monitor dut (.clk, .rst_n, .in_valid, .in_row, .layer_end, .sparse_en, .zeros, .values);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(int nzero);
    @(negedge clk);
    in_valid = 1;
    for (int l = 0; l < LANES; l++)
      in_row[l] = (l < nzero) ? ((l % 2) ? 32'h8000_0000 : 32'h0) : 32'h3F80_0000 + 32'(l);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic finish_tensor(logic exp_en);
    @(negedge clk); layer_end = 1;
    @(negedge clk); layer_end = 0;
    checks++;
    if (sparse_en != exp_en || zeros != 0 || values != 0) begin
      failures++;
      $display("FAIL decision %0d expected %0d", sparse_en, exp_en);
    end
  endtask

  initial begin
    in_row = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (sparse_en !== 1'b1) failures++;
    // 10 rows = 160 values; 15 zeros is below 10%
    for (int i = 0; i < 10; i++) send(i < 5 ? 3 : 0);
    checks++; if (zeros != 15 || values != 160) failures++;
    finish_tensor(1'b0);
    // exactly 16 of 160 zeros: at the threshold
    for (int i = 0; i < 10; i++) send(i == 0 ? 16 : 0);
    checks++; if (zeros != 16 || values != 160) failures++;
    finish_tensor(1'b1);
    // heavy sparsity
    for (int i = 0; i < 7; i++) send(9);
    checks++; if (zeros != 63 || values != 112) failures++;
    finish_tensor(1'b1);
    // no zeros at all
    for (int i = 0; i < 4; i++) send(0);
    finish_tensor(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
