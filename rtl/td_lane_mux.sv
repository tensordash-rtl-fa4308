// td_lane_mux: the sparse operand interconnect of one staging buffer.
//
// For each of the LANES multiplier inputs an 8-input multiplexer picks one
// staging-window slot according to that lane's 3-bit movement select ms:
// option 0 is the lane's own value at step +0 (dense schedule), options 1 and
// 2 look ahead in time in the same lane, and options 3..7 "steal" a value from
// a neighbouring lane one or two steps ahead (the promotion map in td_pkg, the
// same shape for every lane, wrapping at the ends). A lane whose sel bit is
// low gets +0.0, so an idle multiplier adds nothing.
//
// Combinational. The connectivity is the paper's; the zeroing of idle lanes
// stands in for the multiplier gating, which the paper does not detail.
module td_lane_mux
  import td_pkg::*;
(
  input  window_t    win,
  input  ms_t        ms  [LANES],
  input  lane_mask_t sel,
  output row_t       out
);
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      out[i] = '0;
      for (int o = 0; o < NOPT; o++)
        if (int'(ms[i]) == o) out[i] = win[opt_step(o)][opt_lane(i, o)];
      if (!sel[i]) out[i] = '0;
    end
  end
endmodule
