// td_zero_monitor: measures the fraction of zeros in a layer's output tensor
// and decides whether zero skipping is worth enabling for the next layer.
//
// While in_valid is high, the number of zero values (+0 or -0) among the
// LANES values of in_row, and the number of values, are added to two
// counters. A pulse on layer_end latches the decision
//   sparse_en = zeros * 100 >= values * THRESH_PCT
// and clears the counters for the next tensor. sparse_en starts high after
// reset. zeros/values show the running counts.
//
// The paper proposes a counter per tensor at a layer's output whose zero
// fraction decides whether to enable the sparse mode for the next layer; the
// threshold and the counter widths are this design's choices.
module td_zero_monitor
  import td_pkg::*;
#(
  parameter int THRESH_PCT = 10,
  parameter int CW         = 32
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  row_t          in_row,
  input  logic          layer_end,
  output logic          sparse_en,
  output logic [CW-1:0] zeros,
  output logic [CW-1:0] values
);
  logic [$clog2(LANES+1)-1:0] nzero;

  always_comb begin
    nzero = '0;
    for (int l = 0; l < LANES; l++)
      if (fp_is_zero(in_row[l][30:0])) nzero = nzero + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zeros     <= '0;
      values    <= '0;
      sparse_en <= 1'b1;
    end else if (layer_end) begin
      sparse_en <= (64'(zeros) * 64'd100) >= (64'(values) * 64'(THRESH_PCT));
      zeros     <= '0;
      values    <= '0;
    end else if (in_valid) begin
      zeros  <= zeros + CW'(nzero);
      values <= values + CW'(LANES);
    end
  end
endmodule
