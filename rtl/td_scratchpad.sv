// td_scratchpad: a PE-side operand scratchpad of NBANKS banks, each holding
// BANK_ROWS rows of LANES FP32 values (1 KB per bank at the defaults).
//
// Rows are interleaved across the banks (row r lives in bank r mod NBANKS at
// index r div NBANKS), so any NBANKS consecutive rows sit in different banks
// and can be read in the same cycle. This is what lets the staging buffer
// refill up to three drained rows per cycle. One row can be written per
// cycle (we/waddr/wrow, registered). The read port returns rows raddr,
// raddr+1, ..., raddr+NBANKS-1 combinationally (register-file style); rows
// past the end read as zero.
//
// Paper: three 1 KB banks per scratchpad, banked so that three rows can be
// read per cycle. This design's choices: the interleaving, the asynchronous
// read and a single write port.
module td_scratchpad
  import td_pkg::*;
#(
  parameter int NBANKS    = 3,
  parameter int BANK_ROWS = 16,
  localparam int NROWS    = NBANKS * BANK_ROWS,
  localparam int AW       = $clog2(NROWS + 1)
)(
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  row_t          wrow,
  input  logic [AW-1:0] raddr,
  output row_t          rrow [NBANKS]
);
  row_t mem [NBANKS][BANK_ROWS];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < NROWS)
      mem[int'(waddr) % NBANKS][int'(waddr) / NBANKS] <= wrow;
  end

  always_comb begin
    for (int k = 0; k < NBANKS; k++) begin
      if (int'(raddr) + k < NROWS)
        rrow[k] = mem[(int'(raddr) + k) % NBANKS][(int'(raddr) + k) / NBANKS];
      else
        rrow[k] = '0;
    end
  end
endmodule
