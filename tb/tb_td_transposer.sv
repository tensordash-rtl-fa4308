// tb_td_transposer: loads 16 random 16-value blocks and checks that output
// position k returns value k of every block, block j in lane j.
module tb_td_transposer;
  import td_pkg::*;
  logic clk = 0, we = 0;
  logic [3:0] widx = '0, ridx = '0;
  row_t wrow, rrow;
  row_t blocks [16];
  int checks = 0, failures = 0;

  td_transposer dut (.clk, .we, .widx, .wrow, .ridx, .rrow);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pass = 0; pass < 4; pass++) begin
      for (int j = 0; j < 16; j++) begin
        @(negedge clk);
        we = 1; widx = 4'(j);
        for (int l = 0; l < 16; l++) wrow[l] = $urandom;
        blocks[j] = wrow;
      end
      @(negedge clk); we = 0;
      for (int k = 0; k < 16; k++) begin
        ridx = 4'(k); #1;
        for (int j = 0; j < 16; j++) begin
          checks++;
          if (rrow[j] != blocks[j][k]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
