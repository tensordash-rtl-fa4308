// fp32_mul: IEEE-754 single-precision multiplier, one per PE lane.
//
// Purely combinational. The 24x24-bit significand product is normalised by at
// most one position and rounded to nearest, ties to even. Subnormal inputs are
// read as zero and results below the normal range are flushed to a signed
// zero; results above it become infinity. Any NaN input, or infinity times
// zero, yields the quiet NaN 0x7FC00000.
// The processing element is specified with FP32 multipliers; how they are
// built (rounding, subnormal handling, single cycle) is this design's choice.
module fp32_mul
  import td_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] fa, fb;
  logic        za, zb, ia, ib, na, nb;
  logic [47:0] prod;
  logic [23:0] mant;
  logic [24:0] mrnd;
  logic        guard, sticky, inc;
  logic signed [10:0] ey;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sy   = sa ^ sb;
    za   = (ea == 8'd0);
    zb   = (eb == 8'd0);
    ia   = (ea == 8'hFF) && (fa == 23'd0);
    ib   = (eb == 8'hFF) && (fb == 23'd0);
    na   = (ea == 8'hFF) && (fa != 23'd0);
    nb   = (eb == 8'hFF) && (fb != 23'd0);
    prod = {1'b1, fa} * {1'b1, fb};
    ey   = 11'(signed'({3'b0, ea})) + 11'(signed'({3'b0, eb})) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      ey     = ey + 11'sd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    inc  = guard && (sticky || mant[0]);
    mrnd = {1'b0, mant} + {24'd0, inc};
    if (mrnd[24]) begin
      ey   = ey + 11'sd1;
      mrnd = mrnd >> 1;
    end
    if (na || nb || (ia && zb) || (ib && za))
      y = 32'h7FC0_0000;
    else if (ia || ib || ey >= 11'sd255)
      y = {sy, 8'hFF, 23'd0};
    else if (za || zb || ey <= 11'sd0)
      y = {sy, 31'd0};
    else
      y = {sy, ey[7:0], mrnd[22:0]};
  end
endmodule
