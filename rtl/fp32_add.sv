// fp32_add: IEEE-754 single-precision adder for the PE adder tree and
// accumulator.
//
// Purely combinational. The smaller operand is aligned to the larger one with
// three extra bits (guard, round, sticky), the significands are added or
// subtracted, the sum is normalised and rounded to nearest, ties to even.
// Subnormal inputs are read as zero and subnormal results are flushed to a
// signed zero; an exact cancellation gives +0. Infinities and NaNs propagate
// (inf - inf gives the quiet NaN 0x7FC00000).
// The paper only names FP32 adders; all of the above is this design's choice.
module fp32_add
  import td_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        sx, sy_, sr;
  logic [7:0]  ex, ey_;
  logic [22:0] fx, fy;
  logic        zx, zy, ix, iy, nx, ny;
  logic [7:0]  d;
  logic [26:0] mx, my, sh;
  logic [27:0] sum;
  logic        stk;
  logic signed [10:0] er;
  logic [4:0]  lz;
  logic [24:0] mrnd;
  logic        inc;

  always_comb begin
    // order the operands so that |x| >= |y|
    if (a[30:0] >= b[30:0]) begin
      {sx, ex, fx} = a;
      {sy_, ey_, fy} = b;
    end else begin
      {sx, ex, fx} = b;
      {sy_, ey_, fy} = a;
    end
    zx = (ex == 8'd0);
    zy = (ey_ == 8'd0);
    ix = (ex == 8'hFF) && (fx == 23'd0);
    iy = (ey_ == 8'hFF) && (fy == 23'd0);
    nx = (ex == 8'hFF) && (fx != 23'd0);
    ny = (ey_ == 8'hFF) && (fy != 23'd0);

    mx = {1'b1, fx, 3'b000};
    my = zy ? 27'd0 : {1'b1, fy, 3'b000};
    d  = ex - ey_;
    lz = 5'd0;
    stk = 1'b0;
    if (d >= 8'd27) begin
      sh = {26'd0, |my};
    end else begin
      sh  = my >> d;
      stk = |(my & ((27'd1 << d) - 27'd1));
      sh[0] = sh[0] | stk;
    end
    stk = 1'b0;
    sr  = sx;
    er  = 11'(signed'({3'b0, ex}));
    if (sx == sy_) sum = {1'b0, mx} + {1'b0, sh};
    else           sum = {1'b0, mx} - {1'b0, sh};

    if (sum[27]) begin
      stk = sum[0];
      sum = sum >> 1;
      sum[0] = sum[0] | stk;
      er = er + 11'sd1;
    end else begin
      lz = 5'd27;
      for (int k = 0; k <= 26; k++)
        if (sum[k]) lz = 5'(26 - k);   // the highest set bit wins
      sum = sum << lz;
      er  = er - 11'(signed'({6'b0, lz}));
    end

    inc  = sum[2] && ((|sum[1:0]) || sum[3]);
    mrnd = {1'b0, sum[26:3]} + {24'd0, inc};
    if (mrnd[24]) begin
      mrnd = mrnd >> 1;
      er   = er + 11'sd1;
    end

    if (nx || ny || (ix && iy && (sx != sy_)))
      y = 32'h7FC0_0000;
    else if (ix)
      y = {sx, 8'hFF, 23'd0};
    else if (zx)
      y = (sx && sy_) ? 32'h8000_0000 : 32'h0000_0000;  // both operands zero
    else if (sum[26:0] == 27'd0)
      y = 32'h0000_0000;                                 // exact cancellation
    else if (er >= 11'sd255)
      y = {sr, 8'hFF, 23'd0};
    else if (er <= 11'sd0)
      y = {sr, 31'd0};
    else
      y = {sr, er[7:0], mrnd[22:0]};
  end
endmodule
