// tb_td_scratchpad: fills all 48 rows of a 3-bank scratchpad with random rows
// and reads three consecutive rows from every start address, including the
// ends where rows past the last read as zero.
module tb_td_scratchpad;
  import td_pkg::*;
  localparam int NR = 48;
  logic clk = 0, we = 0;
  logic [5:0] waddr = '0, raddr = '0;
  row_t wrow, rrow [DEPTH];
  row_t model [NR];
  int checks = 0, failures = 0;

  td_scratchpad dut (.clk, .we, .waddr, .wrow, .raddr, .rrow);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pass = 0; pass < 3; pass++) begin
      for (int r = 0; r < NR; r++) begin
        @(negedge clk);
        we = 1; waddr = 6'(r);
        for (int l = 0; l < LANES; l++) wrow[l] = $urandom;
        model[r] = wrow;
      end
      @(negedge clk); we = 0;
      for (int r = 0; r < NR + 2; r++) begin
        raddr = 6'(r); #1;
        for (int k = 0; k < DEPTH; k++) begin
          checks++;
          if (rrow[k] != ((r + k < NR) ? model[r + k] : '0)) begin
            failures++;
            if (failures < 10) $display("FAIL read %0d+%0d", r, k);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
