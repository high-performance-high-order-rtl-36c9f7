// fp32_add: combinational IEEE-754 single-precision adder.
//
// The operand of smaller magnitude is shifted right into three extra bits
// (guard, round, sticky), the significands are added or subtracted, the sum
// is renormalised with a leading-zero count and rounded to nearest, ties to
// even. Subnormal inputs are read as zero and results below the normal range
// are flushed to zero; an exact zero difference is +0. Overflow gives
// infinity, NaN or inf-inf gives the quiet NaN 0x7fc00000. Used by fp_mac.
module fp32_add
  import stencil_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        sx, sy_, ss;
  logic [7:0]  ex, ey;
  logic [22:0] fx, fy;
  logic        zx, zy, ix, iy, nx, ny;
  logic [7:0]  d;
  logic [26:0] mx, my, sh;
  logic        stk;
  logic [27:0] s;
  logic signed [10:0] e;
  int          lz;
  logic        up;
  logic [24:0] mr;

  always_comb begin
    lz = 0;
    // order operands so that x has the larger magnitude
    if (a[30:0] >= b[30:0]) begin
      {sx, ex, fx} = a;
      {sy_, ey, fy} = b;
    end else begin
      {sx, ex, fx} = b;
      {sy_, ey, fy} = a;
    end
    zx = (ex == 8'd0);
    zy = (ey == 8'd0);
    ix = (ex == 8'hff) && (fx == 23'd0);
    iy = (ey == 8'hff) && (fy == 23'd0);
    nx = (ex == 8'hff) && (fx != 23'd0);
    ny = (ey == 8'hff) && (fy != 23'd0);
    d  = ex - ey;
    mx = {1'b1, fx, 3'b000};
    my = zy ? 27'd0 : {1'b1, fy, 3'b000};
    if (d >= 8'd27) begin
      sh  = 27'd0;
      stk = (my != 27'd0);
    end else begin
      sh  = my >> d;
      stk = ((sh << d) != my);
    end
    sh[0] = sh[0] | stk;
    e  = 11'(ex);
    ss = sx;
    if (sx == sy_) begin
      s = {1'b0, mx} + {1'b0, sh};
      if (s[27]) begin
        s = {1'b0, s[27:2], s[1] | s[0]};
        e = e + 11'sd1;
      end
    end else begin
      s  = {1'b0, mx} - {1'b0, sh};
      lz = 27;
      for (int k = 0; k <= 26; k++)
        if (s[k]) lz = 26 - k;
      s = s << lz;
      e = e - 11'(lz);
    end
    up = s[2] & ((s[1] | s[0]) | s[3]);
    mr = {1'b0, s[26:3]} + 25'(up);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end
    if (nx || ny || (ix && iy && (sx != sy_)))
      y = 32'h7fc0_0000;
    else if (ix)
      y = {sx, 8'hff, 23'd0};
    else if (zx)
      y = 32'd0;                         // both operands zero or subnormal
    else if (s[26:0] == 27'd0 && mr == 25'd0)
      y = 32'd0;                         // exact cancellation
    else if (e >= 11'sd255)
      y = {ss, 8'hff, 23'd0};
    else if (e <= 11'sd0)
      y = {ss, 31'd0};
    else
      y = {ss, e[7:0], mr[22:0]};
  end
endmodule
