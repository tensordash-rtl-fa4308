// tb_td_lane_mux: checks each lane's 8-way operand multiplexer against the
// promotion map written out here as a table: (step,lane offset) =
// (0,0) (1,0) (2,0) (1,-1) (1,+1) (2,-2) (2,+2) (1,-3), wrapping mod 16,
// and that a lane without a selection gets zero.
module tb_td_lane_mux;
  import td_pkg::*;
  window_t win;
  ms_t ms [LANES];
  lane_mask_t sel;
  row_t out;
  int checks = 0, failures = 0;
  int st  [8] = '{0, 1, 2, 1, 1, 2, 2, 1};
  int off [8] = '{0, 0, 0, -1, 1, -2, 2, -3};

  td_lane_mux dut (.win, .ms, .sel, .out);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      for (int r = 0; r < DEPTH; r++)
        for (int l = 0; l < LANES; l++) win[r][l] = $urandom;
      for (int i = 0; i < LANES; i++) ms[i] = MSW'($urandom);
      sel = LANES'($urandom);
      #1;
      for (int i = 0; i < LANES; i++) begin
        automatic fp32_t e = sel[i] ? win[st[ms[i]]][(i + off[ms[i]] + 16) % 16] : '0;
        checks++;
        if (out[i] != e) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d ms %0d", i, ms[i]);
        end
      end
    end
    // lane 8 reaches exactly (+0,8) (+1,8) (+2,8) (+1,7) (+1,9) (+2,6) (+2,10) (+1,5)
    win = '0; sel = '1;
    win[1][5] = 32'h4040_0000;
    for (int i = 0; i < LANES; i++) ms[i] = 3'd7;
    #1; checks++;
    if (out[8] != 32'h4040_0000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
