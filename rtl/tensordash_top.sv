// tensordash_top: the accelerator core: NUM_TILES tiles of 4x4 sparse
// processing elements, the transposers on the fill path, and the zero
// monitor that picks the sparse or the dense mode.
//
// The on-chip memories (AM/BM/CM) and the DRAM behind them are outside this
// module; their traffic arrives on a fill bus and leaves on a read bus.
//
// Fill bus (one command per cycle while fill_valid):
//   FILL_PAD     write fill_row into row fill_addr of operand pad fill_pad
//                (A pad = PE column, B pad = PE row; fill_side 0 = A, 1 = B)
//                of tile fill_tile.
//   FILL_XPOSE   write fill_row as block fill_idx into the tile's transposer.
//   XPOSE_PAD    write the transposed column fill_idx of that transposer
//                into the pad, like FILL_PAD.
//   FILL_SCHED   a row of a tensor stored in scheduled form (values on
//                fill_row, movements fill_ms, lane flags fill_nz, advance
//                fill_as) goes through the decompressor; the dense rows it
//                releases are written to consecutive rows of the selected
//                pad, starting at the fill_addr given with dec_clear.
// No command may be issued while fill_ready is low (the decompressor is
// releasing the extra rows of a multi-row advance).
// Tiles 0..NUM_XPOSE-1 each own one transposer; the transposer commands to
// a tile without one are ignored.
//
// start (with nsteps, c_addr and acc_keep) launches the same operation in
// every tile; acc_keep continues the previous dot products instead of
// starting new ones, for reductions longer than one pad load;
// each tile runs at the pace its own data allows and done pulses once the
// last tile has written its results. busy is high in between (the top
// tracks the tiles through their done pulses; their busy outputs are unused).
// Read bus: rd_tile/rd_addr select a row of a tile's result pad (rd_row,
// combinational). Rows read with rd_valid high also pass through the zero
// monitor; layer_end closes the tensor and latches the monitor's decision.
// The tiles run sparse when cfg_auto ? monitor decision : cfg_td_en.
// bs_push hands the row on rd_row to the backside scheduler (when bs_ready),
// which returns the tensor in scheduled form on bs_valid/bs_v/bs_ms/bs_nz/
// bs_as, ready to be stored compressed and later read back with FILL_SCHED.
//
// Follows the paper: 16 tiles of 4x4 PEs with 16 FP32 MACs each (4096 MACs
// per cycle), 3-deep staging, 1 KB x 3-bank scratchpads, 15 transposers, the
// zero counter at a layer's output, and the two options for keeping tensors
// scheduled in memory (decompressor before the pads, backside scheduler at
// the output). This design's choices: the bus protocol, one transposer per
// tile for the first 15 tiles, one shared decompressor and backside
// scheduler, and the start/done scheme.
module tensordash_top
  import td_pkg::*;
#(
  parameter int NUM_TILES = 16,
  parameter int NUM_XPOSE = 15,
  parameter int ROWS      = 4,
  parameter int COLS      = 4,
  parameter int BANK_ROWS = 16,
  localparam int NROWS    = DEPTH * BANK_ROWS,
  localparam int AW       = $clog2(NROWS + 1),
  localparam int TW       = (NUM_TILES > 1) ? $clog2(NUM_TILES) : 1,
  localparam int PW       = (ROWS > COLS) ? $clog2(ROWS + 1) : $clog2(COLS + 1)
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_td_en,
  input  logic          cfg_auto,
  output logic          td_active,
  // fill bus
  input  logic          fill_valid,
  output logic          fill_ready,   // the bus may carry a command this cycle
  input  logic [1:0]    fill_cmd,     // 0 FILL_PAD, 1 FILL_XPOSE, 2 XPOSE_PAD, 3 FILL_SCHED
  input  logic [TW-1:0] fill_tile,
  input  logic          fill_side,
  input  logic [PW-1:0] fill_pad,
  input  logic [AW-1:0] fill_addr,
  input  logic [3:0]    fill_idx,
  input  row_t          fill_row,
  input  logic [LANES-1:0][MSW-1:0] fill_ms,  // FILL_SCHED: movement per lane
  input  lane_mask_t    fill_nz,      // FILL_SCHED: lane carries a value
  input  logic [ASW-1:0] fill_as,     // FILL_SCHED: dense rows advanced
  input  logic          dec_clear,    // new scheduled tensor, first row fill_addr
  // operation
  input  logic          start,
  input  logic          acc_keep,     // with start: accumulate onto the last results
  input  logic [AW-1:0] nsteps,
  input  logic [AW-1:0] c_addr,
  output logic          busy,
  output logic          done,
  output tile_stats_t   stats [NUM_TILES],
  // result read bus
  input  logic          rd_valid,
  input  logic [TW-1:0] rd_tile,
  input  logic [AW-1:0] rd_addr,
  output row_t          rd_row,
  input  logic          layer_end,
  output logic [31:0]   mon_zeros,    // zero values seen in the current tensor
  output logic [31:0]   mon_values,   // values seen in the current tensor
  // backside scheduler on the read bus
  input  logic          bs_push,      // schedule the row on rd_row
  input  logic          bs_in_last,   // ... and it is the tensor's last row
  output logic          bs_ready,
  output logic          bs_valid,     // scheduled row out (one cycle)
  output row_t          bs_v,
  output logic [LANES-1:0][MSW-1:0] bs_ms,
  output lane_mask_t    bs_nz,
  output logic [ASW-1:0] bs_as,
  output logic          bs_last
);
  localparam logic [1:0] FILL_PAD = 2'd0, FILL_XPOSE = 2'd1, XPOSE_PAD = 2'd2, FILL_SCHED = 2'd3;

  logic mon_en;
  logic [NUM_TILES-1:0] t_busy, t_done, fin_q;
  row_t c_rows [NUM_TILES];
  row_t xp_rows [NUM_TILES];
  fp32_t acc_unused [NUM_TILES][ROWS][COLS];
  logic running_q;

  assign td_active = cfg_auto ? mon_en : cfg_td_en;

  // Scheduled tensors are expanded on their way into a pad. The destination
  // is taken from the command while a row is accepted and held for the extra
  // rows a multi-row advance releases.
  logic           dec_in_valid, dec_in_ready, dec_out_valid;
  row_t           dec_row;
  logic [TW-1:0]  dtile_q, dtile;
  logic           dside_q, dside;
  logic [PW-1:0]  dpad_q, dpad;
  logic [AW-1:0]  daddr_q;

  assign dec_in_valid = fill_valid && fill_cmd == FILL_SCHED;
  assign fill_ready   = dec_in_ready;
  assign dtile        = dec_in_ready ? fill_tile : dtile_q;
  assign dside        = dec_in_ready ? fill_side : dside_q;
  assign dpad         = dec_in_ready ? fill_pad  : dpad_q;

  td_decompress u_dec (
    .clk, .rst_n, .clear(dec_clear), .in_valid(dec_in_valid), .in_ready(dec_in_ready),
    .in_v(fill_row), .in_ms(fill_ms), .in_nz(fill_nz), .in_as(fill_as),
    .out_valid(dec_out_valid), .out_row(dec_row));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dtile_q <= '0;
      dside_q <= 1'b0;
      dpad_q  <= '0;
      daddr_q <= '0;
    end else begin
      if (dec_in_valid && dec_in_ready) begin
        dtile_q <= fill_tile;
        dside_q <= fill_side;
        dpad_q  <= fill_pad;
      end
      if (dec_clear)          daddr_q <= fill_addr;
      else if (dec_out_valid) daddr_q <= daddr_q + 1'b1;
    end
  end

  for (genvar t = 0; t < NUM_TILES; t++) begin : g_tile
    logic sel_t, pad_wr, dec_wr, any_wr, wside;
    logic [PW-1:0] wpad;
    logic [AW-1:0] waddr;
    logic [COLS-1:0] a_we;
    logic [ROWS-1:0] b_we;
    row_t pad_row;

    assign sel_t = fill_valid && (int'(fill_tile) == t);

    if (t < NUM_XPOSE) begin : g_xp
      td_transposer u_xpose (
        .clk, .we(sel_t && fill_cmd == FILL_XPOSE), .widx(fill_idx), .wrow(fill_row),
        .ridx(fill_idx), .rrow(xp_rows[t]));
      assign pad_wr = sel_t && (fill_cmd == FILL_PAD || fill_cmd == XPOSE_PAD);
    end else begin : g_noxp
      assign xp_rows[t] = '0;
      assign pad_wr = sel_t && (fill_cmd == FILL_PAD);
    end
    // a row from the decompressor takes the pad write port of its tile
    assign dec_wr  = dec_out_valid && (int'(dtile) == t);
    assign any_wr  = pad_wr || dec_wr;
    assign wside   = dec_wr ? dside : fill_side;
    assign wpad    = dec_wr ? dpad : fill_pad;
    assign waddr   = dec_wr ? daddr_q : fill_addr;
    assign pad_row = dec_wr ? dec_row : (fill_cmd == XPOSE_PAD) ? xp_rows[t] : fill_row;

    always_comb begin
      for (int c = 0; c < COLS; c++) a_we[c] = any_wr && !wside && (int'(wpad) == c);
      for (int r = 0; r < ROWS; r++) b_we[r] = any_wr &&  wside && (int'(wpad) == r);
    end

    td_tile #(.ROWS(ROWS), .COLS(COLS), .BANK_ROWS(BANK_ROWS)) u_tile (
      .clk, .rst_n, .td_en(td_active),
      .a_we, .b_we, .pad_waddr(waddr), .pad_wrow(pad_row),
      .start(start && !running_q), .acc_keep, .nsteps, .c_addr,
      .busy(t_busy[t]), .done(t_done[t]), .stats(stats[t]),
      .c_raddr(rd_addr), .c_rrow(c_rows[t]), .acc(acc_unused[t]));
  end

  assign rd_row = c_rows[rd_tile];

  td_zero_monitor u_mon (
    .clk, .rst_n, .in_valid(rd_valid), .in_row(rd_row), .layer_end,
    .sparse_en(mon_en), .zeros(mon_zeros), .values(mon_values));

  td_backside_scheduler u_bs (
    .clk, .rst_n, .in_valid(bs_push), .in_ready(bs_ready), .in_row(rd_row), .in_last(bs_in_last),
    .out_valid(bs_valid), .out_v(bs_v), .out_ms(bs_ms), .out_nz(bs_nz), .out_as(bs_as),
    .out_last(bs_last));

  // operation bookkeeping: done once every tile has finished
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running_q <= 1'b0;
      fin_q     <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!running_q && start) begin
        running_q <= 1'b1;
        fin_q     <= '0;
      end else if (running_q) begin
        if ((fin_q | t_done) == '1) begin
          running_q <= 1'b0;
          done      <= 1'b1;
        end
        fin_q <= fin_q | t_done;
      end
    end
  end
  assign busy = running_q;
endmodule
