// tb_td_staging_buffer: drives random advances, row writes and consume masks
// into the staging buffer and compares window, non-zero vector and pending
// bits every cycle with a software model of the move-then-write rule.
module tb_td_staging_buffer;
  import td_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, step = 0;
  logic [ASW-1:0] adv = '0;
  window_mask_t keep = '1, nz, pend;
  logic [DEPTH-1:0] wr_en = '0;
  row_t wr_row [DEPTH];
  window_t win;
  window_t m_win;
  window_mask_t m_pend;
  int checks = 0, failures = 0;

  td_staging_buffer dut (.clk, .rst_n, .clear, .step, .adv, .keep, .wr_en, .wr_row, .win, .nz, .pend);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    checks++;
    if (win != m_win || pend != m_pend) begin
      failures++;
      if (failures < 10) $display("FAIL window/pending mismatch at %0t", $time);
    end
    for (int r = 0; r < DEPTH; r++)
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (nz[r][l] != (m_win[r][l][30:0] != 0)) failures++;
      end
  endtask

  initial begin
    for (int r = 0; r < DEPTH; r++) wr_row[r] = '0;
    m_win = '0; m_pend = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); compare();
    for (int n = 0; n < 5000; n++) begin
      automatic window_t nw;
      automatic window_mask_t np;
      clear = ($urandom % 50) == 0;
      step  = ($urandom % 4) != 0;
      adv   = ASW'($urandom);
      wr_en = DEPTH'($urandom);
      for (int r = 0; r < DEPTH; r++) begin
        keep[r] = LANES'($urandom);
        for (int l = 0; l < LANES; l++)
          wr_row[r][l] = ($urandom % 3 == 0) ? {1'($urandom), 31'd0} : $urandom;
      end
      // model
      nw = m_win; np = m_pend;
      if (clear) begin
        nw = '0; np = '0;
      end else if (step) begin
        for (int r = 0; r < DEPTH; r++) begin
          if (wr_en[r]) begin nw[r] = wr_row[r]; np[r] = '1; end
          else if (r + adv < DEPTH) begin nw[r] = m_win[r + adv]; np[r] = m_pend[r + adv] & keep[r + adv]; end
          else begin nw[r] = '0; np[r] = '0; end
        end
      end
      @(posedge clk);
      m_win = nw; m_pend = np;
      @(negedge clk);
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
