// td_staging_buffer: the DEPTH-row operand window in front of the multipliers.
//
// Holds DEPTH rows of LANES FP32 values: row 0 is the current dense step (+0),
// rows 1 and 2 the next two steps. Every cycle with step high the window moves
// forward by adv rows (0..3): row r takes what row r+adv held, and each of the
// three row write ports (wr_en/wr_row) may overwrite its row after the move,
// which is how the scratchpad refills the rows that were drained. A row that
// is neither moved into nor written becomes all zeros (nothing to do there).
// clear empties the window.
//
// nz is the per-slot non-zero vector (the paper's 3x16b zero vector, 1 = the
// value is non-zero). The buffer also keeps one "pending" bit per slot: set
// when a value is written, cleared for every slot the scheduler reports as
// consumed (keep low) and moved along with the values. pend & nz is the z
// vector the scheduler of a one-sided (B-side) tile row needs: values already
// multiplied, possibly out of order, are never picked twice. Shared A-side
// buffers simply leave keep at all ones.
//
// Registered state, one cycle per step; outputs are read straight from the
// registers. Depth, width, the three write ports and the zero vector follow
// the paper; the pending bits and the zero fill are this design's choices.
module td_staging_buffer
  import td_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           step,
  input  logic [ASW-1:0] adv,
  input  window_mask_t   keep,
  input  logic [DEPTH-1:0] wr_en,
  input  row_t           wr_row [DEPTH],
  output window_t        win,
  output window_mask_t   nz,
  output window_mask_t   pend
);
  window_t      win_q;
  window_mask_t pend_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_q  <= '0;
      pend_q <= '0;
    end else if (clear) begin
      win_q  <= '0;
      pend_q <= '0;
    end else if (step) begin
      for (int r = 0; r < DEPTH; r++) begin
        if (wr_en[r]) begin
          win_q[r]  <= wr_row[r];
          pend_q[r] <= '1;
        end else if (r + int'(adv) < DEPTH) begin
          win_q[r]  <= win_q[r + int'(adv)];
          pend_q[r] <= pend_q[r + int'(adv)] & keep[r + int'(adv)];
        end else begin
          win_q[r]  <= '0;
          pend_q[r] <= '0;
        end
      end
    end
  end

  always_comb begin
    win  = win_q;
    pend = pend_q;
    for (int r = 0; r < DEPTH; r++)
      for (int l = 0; l < LANES; l++)
        nz[r][l] = !fp_is_zero(win_q[r][l][30:0]);
  end
endmodule
