// td_backside_scheduler: iterative one-sided scheduler placed on the output
// side of the PEs, so that a tensor can be written to memory already in
// scheduled (compressed) form.
//
// Dense rows enter a three-row window together with a pending mask (one bit
// per non-zero value not yet scheduled). Producing one scheduled row takes
// NLEVELS + 1 cycles: one cycle per scheduler level, re-using a single level's
// worth of priority encoders (level l resolves the lanes of group l of td_pkg,
// each taking its first pending slot in the promotion-map order and clearing
// it), then one cycle that emits the row and shifts the window by as, the
// number of leading window rows left with nothing pending. The freed rows are
// refilled from the input, one row per cycle, before the next round; once
// the tensor's last row has arrived the next round starts at once.
//
// Interface: in_valid/in_ready/in_last accept dense rows; in_last marks the
// final row of a tensor, after which missing rows are treated as zero. Each
// scheduled row is presented for one cycle with out_valid: per lane the value
// out_v, the flag out_nz and the movement out_ms, plus out_as; out_last marks
// the row after which nothing of the tensor is pending. The resulting
// (value, movement) pairs are exactly what the forward scheduler would choose
// for this tensor alone. No back-pressure on the output.
//
// Follows the paper: the (value, movement) output format, re-use of one
// scheduler level over six cycles, the promotion map and level groups. This
// design's own choices: the fill/schedule/emit sequencing, the handshake and
// the end-of-tensor flags.
module td_backside_scheduler
  import td_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  row_t                      in_row,
  input  logic                      in_last,
  output logic                      out_valid,
  output row_t                      out_v,
  output logic [LANES-1:0][MSW-1:0] out_ms,
  output lane_mask_t                out_nz,
  output logic [ASW-1:0]            out_as,
  output logic                      out_last
);
  typedef enum logic [1:0] {S_FILL, S_SCHED, S_EMIT} state_t;

  state_t                    st_q;
  window_t                   win_q;
  window_mask_t              pend_q, pend_lvl;
  logic [1:0]                fill_q;     // window rows holding input data
  logic                      ended_q;    // in_last has been accepted
  logic [2:0]                lvl_q;
  row_t                      v_q,  v_lvl;
  logic [LANES-1:0][MSW-1:0] ms_q, ms_lvl;
  lane_mask_t                nz_q, nz_lvl;
  logic [ASW-1:0]            adv;

  // One scheduler level: the lanes of group lvl_q pick their first pending
  // slot. Lanes of one group never reach a common slot.
  always_comb begin
    pend_lvl = pend_q;
    v_lvl    = v_q;
    ms_lvl   = ms_q;
    nz_lvl   = nz_q;
    for (int i = 0; i < LANES; i++) begin
      if (lane_level(i) == int'(lvl_q)) begin
        for (int o = NOPT - 1; o >= 0; o--) begin
          if (pend_q[opt_step(o)][opt_lane(i, o)]) begin
            ms_lvl[i] = MSW'(o);
            nz_lvl[i] = 1'b1;
          end
        end
        if (nz_lvl[i]) begin
          v_lvl[i] = win_q[opt_step(int'(ms_lvl[i]))][opt_lane(i, int'(ms_lvl[i]))];
          pend_lvl[opt_step(int'(ms_lvl[i]))][opt_lane(i, int'(ms_lvl[i]))] = 1'b0;
        end
      end
    end
  end

  // Rows drained: leading window rows with nothing left pending.
  always_comb begin
    if (pend_q[0] != '0)      adv = 2'd0;
    else if (pend_q[1] != '0) adv = 2'd1;
    else if (pend_q[2] != '0) adv = 2'd2;
    else                      adv = 2'd3;
  end

  assign in_ready  = (st_q == S_FILL) && !ended_q && (fill_q != 2'd3);
  assign out_valid = (st_q == S_EMIT);
  assign out_v     = v_q;
  assign out_ms    = ms_q;
  assign out_nz    = nz_q;
  assign out_as    = adv;
  assign out_last  = (st_q == S_EMIT) && ended_q && (pend_q == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q    <= S_FILL;
      win_q   <= '0;
      pend_q  <= '0;
      fill_q  <= '0;
      ended_q <= 1'b0;
      lvl_q   <= '0;
      v_q     <= '0;
      ms_q    <= '0;
      nz_q    <= '0;
    end else begin
      case (st_q)
        S_FILL: begin
          if (in_valid && in_ready) begin
            win_q[fill_q] <= in_row;
            for (int i = 0; i < LANES; i++)
              pend_q[fill_q][i] <= !fp_is_zero(in_row[i][30:0]);
            fill_q  <= fill_q + 1'b1;
            ended_q <= in_last;
            if (fill_q == 2'd2 || in_last) st_q <= S_SCHED;
          end else if (ended_q || fill_q == 2'd3) begin
            st_q <= S_SCHED;
          end
          lvl_q <= '0;
          v_q   <= '0;
          ms_q  <= '0;
          nz_q  <= '0;
        end
        S_SCHED: begin
          pend_q <= pend_lvl;
          v_q    <= v_lvl;
          ms_q   <= ms_lvl;
          nz_q   <= nz_lvl;
          lvl_q  <= lvl_q + 1'b1;
          if (int'(lvl_q) == NLEVELS - 1) st_q <= S_EMIT;
        end
        default: begin  // S_EMIT
          for (int r = 0; r < DEPTH; r++) begin
            win_q[r]  <= (r + int'(adv) < DEPTH) ? win_q[r + int'(adv)]  : '0;
            pend_q[r] <= (r + int'(adv) < DEPTH) ? pend_q[r + int'(adv)] : '0;
          end
          lvl_q <= '0;
          v_q   <= '0;
          ms_q  <= '0;
          nz_q  <= '0;
          if (out_last) begin
            fill_q  <= '0;
            ended_q <= 1'b0;
            st_q    <= S_FILL;
          end else begin
            fill_q <= (fill_q > 2'(adv)) ? fill_q - 2'(adv) : 2'd0;
            // after the last input row nothing is left to fill
            st_q   <= ended_q ? S_SCHED : S_FILL;
          end
        end
      endcase
    end
  end
endmodule
