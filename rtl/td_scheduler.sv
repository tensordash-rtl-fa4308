// td_scheduler: the per-PE (or per-tile-row) hardware scheduler.
//
// Input z has one bit per staging-window slot (DEPTH rows x LANES lanes); a 1
// marks a slot that still holds an effectual operand pair. Each lane walks its
// eight options in the fixed priority order of td_pkg (dense, lookahead 1,
// lookahead 2, then the five lookaside moves) and takes the first one whose
// slot is set: an 8-to-3 priority encoder per lane. To keep two lanes from
// taking the same pair the lanes are resolved in six levels
// {0,5,10},{1,6,11},{2,7,12},{3,8,13},{4,9,14},{15}; the lanes of one level
// cannot reach a common slot, so they decide in parallel, and the slots they
// take are cleared from z before the next level looks at it. The whole
// cascade is combinational and settles within one cycle.
//
// Outputs, per lane: ms (3-bit movement select, shared by the A-side and
// B-side multiplexers of that lane) and sel (the lane found a pair; a lane
// with no pair leaves its multiplier idle). z_left is z minus the slots taken
// this cycle, and adv (the paper's AS) counts the leading window rows, from
// step +0 upward, that z_left leaves empty: the rows that may be refilled.
// Row +0 is only reachable by its own lane at top priority, so adv >= 1.
//
// With en low the scheduler reproduces the dense schedule (bypass mode): every
// lane takes its own step +0 slot whatever its value, and adv is 1.
//
// Follows the paper: the option map, the priority order, the level groups and
// the 3b MS / 2b AS widths. This design's own choices: the per-lane sel bit
// (the paper sends only MS), the polarity of z (1 = effectual) and the bypass
// encoding.
module td_scheduler
  import td_pkg::*;
(
  input  logic         en,
  input  window_mask_t z,
  output ms_t          ms     [LANES],
  output lane_mask_t   sel,
  output logic [ASW-1:0] adv,
  output window_mask_t z_left
);
  window_mask_t zl [NLEVELS+1];

  always_comb begin
    zl[0] = z;
    sel   = '0;
    for (int i = 0; i < LANES; i++) ms[i] = '0;
    for (int lvl = 0; lvl < NLEVELS; lvl++) begin
      zl[lvl+1] = zl[lvl];
      for (int i = 0; i < LANES; i++) begin
        if (lane_level(i) == lvl) begin
          // priority encoder: the lowest-numbered available option wins
          for (int o = NOPT - 1; o >= 0; o--) begin
            if (zl[lvl][opt_step(o)][opt_lane(i, o)]) begin
              ms[i]  = MSW'(o);
              sel[i] = 1'b1;
            end
          end
          if (sel[i]) zl[lvl+1][opt_step(int'(ms[i]))][opt_lane(i, int'(ms[i]))] = 1'b0;
        end
      end
    end

    if (en) begin
      z_left = zl[NLEVELS];
      if (z_left[0] != '0)      adv = 2'd0;  // cannot happen, kept for safety
      else if (z_left[1] != '0) adv = 2'd1;
      else if (z_left[2] != '0) adv = 2'd2;
      else                      adv = 2'd3;
    end else begin
      for (int i = 0; i < LANES; i++) ms[i] = '0;
      sel       = '1;
      z_left    = z;
      z_left[0] = '0;
      adv       = 2'd1;
    end
  end
endmodule
