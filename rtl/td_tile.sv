// td_tile: a ROWS x COLS grid of processing elements that skips zeros on the
// B side, with the scratchpads, staging buffers, schedulers and operand
// multiplexers around it.
//
// PE (r,c) computes the dot product of B stream r with A stream c: B values
// are shared along a PE row, A values along a PE column. Each PE row has one
// B scratchpad, one B staging buffer, one scheduler and one B multiplexer
// block; each PE column has one A scratchpad and one A staging buffer, and
// every PE has its own A multiplexer block driven by its row's movement
// selects. The row schedulers look only at their B window (one-sided
// skipping: a pair is ineffectual when its B value is zero), so the zero and
// pending vectors of the A staging buffers are left unused.
//
// All staging buffers move in lock step: each step the window advances by the
// smallest advance over the rows, so a row that could drain more rows waits
// for the densest one. Drained rows are refilled from the scratchpads, which
// are read three rows per cycle at a shared stream pointer.
//
// Operation: load the pads through the write ports (a_we/b_we select the
// pads, one row per cycle), then pulse start with nsteps, the stream length in
// dense steps (rows). Unless acc_keep is high with start (a long reduction
// continued over several pad loads) the tile clears the accumulators and the
// multiplier counters; it then spends one cycle
// filling the windows, then one cycle per scheduling step; when all nsteps
// rows are drained it writes the ROWS*COLS results as one row (PE (r,c) at
// lane r*COLS+c) into the C scratchpad at c_addr and pulses done.
// stats holds the counts of the last operation. With td_en low the tile runs
// the dense schedule (nsteps steps), standing in for the bypass mode.
// A dense run takes nsteps + 2 cycles from start to done, a sparse one as
// few as ceil(nsteps/3) + 2.
//
// Follows the paper: the grid, the sharing of staging buffers, schedulers and
// multiplexers (Fig. 15), one-sided scheduling, the 3-row refill. This
// design's choices: the controller, the lock-step advance rule, the result
// placement and the counters.
module td_tile
  import td_pkg::*;
#(
  parameter int ROWS      = 4,
  parameter int COLS      = 4,
  parameter int BANK_ROWS = 16,
  localparam int NROWS    = DEPTH * BANK_ROWS,
  localparam int AW       = $clog2(NROWS + 1)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          td_en,
  // operand pad fill port
  input  logic [COLS-1:0] a_we,
  input  logic [ROWS-1:0] b_we,
  input  logic [AW-1:0] pad_waddr,
  input  row_t          pad_wrow,
  // operation control
  input  logic          start,
  input  logic          acc_keep,     // with start: add to the previous results
  input  logic [AW-1:0] nsteps,
  input  logic [AW-1:0] c_addr,
  output logic          busy,
  output logic          done,
  output tile_stats_t   stats,
  // result pad read port
  input  logic [AW-1:0] c_raddr,
  output row_t          c_rrow,
  // live view of the PE accumulators
  output fp32_t         acc [ROWS][COLS]
);
  typedef enum logic [1:0] {S_IDLE, S_FILL, S_RUN, S_WRITE} state_e;
  state_e state_q;

  logic [AW-1:0] ptr_q, retired_q, nsteps_q, caddr_q;
  row_t a_rd [COLS][DEPTH];
  row_t b_rd [ROWS][DEPTH];
  window_t a_win [COLS];
  window_mask_t a_nz [COLS], a_pend [COLS];   // unused: the A side is not scheduled
  window_t b_win [ROWS];
  window_mask_t b_nz [ROWS], b_pend [ROWS], b_left [ROWS], b_z [ROWS];
  ms_t ms [ROWS][LANES];
  lane_mask_t sel [ROWS];
  logic [ASW-1:0] adv_r [ROWS];
  logic [ASW-1:0] adv;
  logic st_clear, st_step;
  logic [DEPTH-1:0] st_wen;
  row_t a_wr [COLS][DEPTH];
  row_t b_wr [ROWS][DEPTH];
  logic pe_clear, pe_en;
  row_t a_mx [ROWS][COLS];
  row_t b_mx [ROWS];
  row_t c_wrow;
  row_t c_rd [DEPTH];
  tile_stats_t stats_q;
  logic [15:0] macs [ROWS][COLS];

  // ---------------- scratchpads and staging buffers ----------------
  for (genvar c = 0; c < COLS; c++) begin : g_acol
    td_scratchpad #(.NBANKS(DEPTH), .BANK_ROWS(BANK_ROWS)) u_apad (
      .clk, .we(a_we[c]), .waddr(pad_waddr), .wrow(pad_wrow),
      .raddr(ptr_q), .rrow(a_rd[c]));
    for (genvar r = 0; r < DEPTH; r++) begin : g_w
      assign a_wr[c][r] = a_rd[c][(r + int'(adv)) % DEPTH];
    end
    td_staging_buffer u_astage (
      .clk, .rst_n, .clear(st_clear), .step(st_step), .adv, .keep('1),
      .wr_en(st_wen), .wr_row(a_wr[c]), .win(a_win[c]), .nz(a_nz[c]), .pend(a_pend[c]));
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_brow
    td_scratchpad #(.NBANKS(DEPTH), .BANK_ROWS(BANK_ROWS)) u_bpad (
      .clk, .we(b_we[r]), .waddr(pad_waddr), .wrow(pad_wrow),
      .raddr(ptr_q), .rrow(b_rd[r]));
    for (genvar k = 0; k < DEPTH; k++) begin : g_w
      assign b_wr[r][k] = b_rd[r][(k + int'(adv)) % DEPTH];
    end
    td_staging_buffer u_bstage (
      .clk, .rst_n, .clear(st_clear), .step(st_step), .adv, .keep(b_left[r]),
      .wr_en(st_wen), .wr_row(b_wr[r]), .win(b_win[r]), .nz(b_nz[r]), .pend(b_pend[r]));
    assign b_z[r] = b_nz[r] & b_pend[r];

    td_scheduler u_sched (
      .en(td_en), .z(b_z[r]), .ms(ms[r]), .sel(sel[r]), .adv(adv_r[r]), .z_left(b_left[r]));

    td_lane_mux u_bmux (.win(b_win[r]), .ms(ms[r]), .sel(sel[r]), .out(b_mx[r]));

    for (genvar c = 0; c < COLS; c++) begin : g_pe
      td_lane_mux u_amux (.win(a_win[c]), .ms(ms[r]), .sel(sel[r]), .out(a_mx[r][c]));
      td_pe u_pe (
        .clk, .rst_n, .clear(pe_clear), .acc_en(pe_en), .a(a_mx[r][c]), .b(b_mx[r]),
        .lane_busy(sel[r]), .acc(acc[r][c]), .macs(macs[r][c]));
      assign c_wrow[r*COLS + c] = acc[r][c];
    end
  end
  for (genvar l = ROWS * COLS; l < LANES; l++) begin : g_cpad0
    assign c_wrow[l] = '0;
  end

  td_scratchpad #(.NBANKS(DEPTH), .BANK_ROWS(BANK_ROWS)) u_cpad (
    .clk, .we(state_q == S_WRITE), .waddr(caddr_q), .wrow(c_wrow),
    .raddr(c_raddr), .rrow(c_rd));
  assign c_rrow = c_rd[0];

  // ---------------- lock-step advance ----------------
  always_comb begin
    adv = 2'd3;
    for (int r = 0; r < ROWS; r++)
      if (adv_r[r] < adv) adv = adv_r[r];
    if (state_q == S_FILL) adv = 2'd3;   // window starts empty
  end

  // rows DEPTH-adv..DEPTH-1 are refilled from stream rows ptr..ptr+adv-1
  always_comb begin
    for (int r = 0; r < DEPTH; r++)
      st_wen[r] = (r >= DEPTH - int'(adv)) &&
                  (int'(ptr_q) + r - (DEPTH - int'(adv)) < int'(nsteps_q));
  end

  assign st_clear = (state_q == S_IDLE) && start;
  assign st_step  = (state_q == S_FILL) || (state_q == S_RUN);
  assign pe_clear = st_clear && !acc_keep;
  assign pe_en    = (state_q == S_RUN);
  assign busy     = (state_q != S_IDLE);
  always_comb begin
    stats      = stats_q;
    stats.macs = '0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        stats.macs = stats.macs + 32'(macs[r][c]);
  end

  // ---------------- controller ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      ptr_q     <= '0;
      retired_q <= '0;
      nsteps_q  <= '0;
      caddr_q   <= '0;
      stats_q   <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state_q)
        S_IDLE: if (start) begin
          state_q   <= S_FILL;
          ptr_q     <= '0;
          retired_q <= '0;
          nsteps_q  <= nsteps;
          caddr_q   <= c_addr;
          stats_q   <= '0;
        end
        S_FILL: begin
          ptr_q   <= ptr_q + AW'(DEPTH);
          state_q <= (nsteps_q == '0) ? S_WRITE : S_RUN;
        end
        S_RUN: begin
          ptr_q     <= ptr_q + AW'(adv);
          retired_q <= retired_q + AW'(adv);
          stats_q.cycles <= stats_q.cycles + 32'd1;
          if (adv >= 2'd2) stats_q.multi_adv <= stats_q.multi_adv + 32'd1;
          begin
            automatic logic [31:0] la = '0, ls = '0, rw = '0;
            for (int r = 0; r < ROWS; r++) begin
              if (adv_r[r] > adv) rw = rw + 32'd1;
              for (int i = 0; i < LANES; i++)
                if (sel[r][i] && td_en) begin
                  if (ms[r][i] == 3'd1 || ms[r][i] == 3'd2) la = la + 32'd1;
                  else if (ms[r][i] >= 3'd3)                ls = ls + 32'd1;
                end
            end
            stats_q.lookahead <= stats_q.lookahead + la;
            stats_q.lookaside <= stats_q.lookaside + ls;
            stats_q.row_waits <= stats_q.row_waits + rw;
          end
          if (int'(retired_q) + int'(adv) >= int'(nsteps_q)) state_q <= S_WRITE;
        end
        S_WRITE: begin
          state_q <= S_IDLE;
          done    <= 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
