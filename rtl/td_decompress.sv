// td_decompress: expands a tensor stored in scheduled form back into dense
// rows on its way from the on-chip memory to a scratchpad.
//
// A scheduled row holds, per lane i, a value v, a flag nz (lane i carries a
// value) and the 3-bit movement idx (the MS code of td_pkg) that says where
// the value came from in the dense stream: step opt_step(idx), lane
// opt_lane(i, idx), relative to the current dense row. The row also carries
// as, the number of dense rows the schedule moved past after it. The unit
// keeps a three-row window; each accepted scheduled row is scattered into it
// through the mirror image of the PE's operand multiplexer (lane i drives the
// eight window slots of its promotion map, slot contents are OR-merged since
// a schedule never uses a slot twice). Window row +0 then leaves for the
// scratchpad and the window shifts up by one row. When as > 1 the remaining
// rows leave on the following cycles while in_ready is held low.
//
// Interface: in_valid/in_ready handshake on the scheduled row; out_valid
// marks a dense row on out_row (one per cycle, no back-pressure). clear
// empties the window between tensors. Throughput: one dense row per cycle;
// a scheduled row with as = k occupies the input for k cycles.
//
// Follows the paper: the (value, movement) storage format and the mirrored
// multiplexer driven by the promotion map. This design's own choices: storing
// as with each scheduled row, the nz flag per lane, the handshake and the
// one-row-per-cycle output. A dense stream whose length is not a multiple of
// the schedule's advances comes out padded with trailing zero rows.
module td_decompress
  import td_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  row_t                      in_v,
  input  logic [LANES-1:0][MSW-1:0] in_ms,
  input  lane_mask_t                in_nz,
  input  logic [ASW-1:0]            in_as,
  output logic                      out_valid,
  output row_t                      out_row
);
  window_t        win_q, merged;
  logic [ASW-1:0] rem_q;

  // Scatter the incoming scheduled row into the window.
  always_comb begin
    merged = win_q;
    for (int i = 0; i < LANES; i++)
      if (in_nz[i])
        merged[opt_step(int'(in_ms[i]))][opt_lane(i, int'(in_ms[i]))] = in_v[i];
  end

  assign in_ready  = (rem_q == '0);
  assign out_valid = !in_ready || (in_valid && in_as != '0);
  assign out_row   = in_ready ? merged[0] : win_q[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_q <= '0;
      rem_q <= '0;
    end else if (clear) begin
      win_q <= '0;
      rem_q <= '0;
    end else if (!in_ready) begin
      win_q <= {row_t'('0), win_q[DEPTH-1:1]};
      rem_q <= rem_q - 1'b1;
    end else if (in_valid) begin
      if (in_as == '0) begin
        win_q <= merged;
      end else begin
        win_q <= {row_t'('0), merged[DEPTH-1:1]};
        rem_q <= in_as - 1'b1;
      end
    end
  end
endmodule
