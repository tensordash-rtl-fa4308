// td_transposer: a 16x16-value buffer that turns 16 blocks into 16 columns.
//
// Tensors are kept in memory as groups of 16x16 values: 16 blocks, each block
// 16 values consecutive along the channel dimension. A PE reads a block in
// one access. When a computation needs the other orientation (weights and
// gradients in the backward pass), a transposer sits between the on-chip
// memory banks and the tile scratchpads: it takes the 16 blocks one per cycle
// (we, widx = block number, wrow = the block) and then hands out, for any
// position k (ridx), the 16 values that sat at position k of their block,
// value j coming from block j. rrow is combinational from the buffer.
//
// Size (16x16 FP32 = 1 KB) and function follow the paper; the port protocol
// is this design's.
module td_transposer
  import td_pkg::*;
#(
  parameter int N = LANES,
  localparam int IW = $clog2(N)
)(
  input  logic          clk,
  input  logic          we,
  input  logic [IW-1:0] widx,
  input  row_t          wrow,
  input  logic [IW-1:0] ridx,
  output row_t          rrow
);
  row_t buf_q [N];

  always_ff @(posedge clk)
    if (we) buf_q[widx] <= wrow;

  always_comb begin
    rrow = '0;
    for (int j = 0; j < N; j++) rrow[j] = buf_q[j][ridx];
  end
endmodule
