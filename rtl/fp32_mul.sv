// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// The 24x24-bit significand product is normalised by at most one position and
// rounded to nearest, ties to even. Subnormal inputs are read as zero and a
// result below the normal range is flushed to a signed zero, as FPGA hard
// floating-point DSPs do; overflow gives infinity, and NaN or 0*inf give the
// quiet NaN 0x7fc00000. Used by fp_mac; no clock, no state.
module fp32_mul
  import stencil_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] fa, fb;
  logic        za, zb, ia, ib, na, nb;
  logic [47:0] p;
  logic signed [10:0] e;
  logic [23:0] m;
  logic        g, st, up;
  logic [24:0] mr;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sy = sa ^ sb;
    za = (ea == 8'd0);          // zero or subnormal (flushed)
    zb = (eb == 8'd0);
    ia = (ea == 8'hff) && (fa == 23'd0);
    ib = (eb == 8'hff) && (fb == 23'd0);
    na = (ea == 8'hff) && (fa != 23'd0);
    nb = (eb == 8'hff) && (fb != 23'd0);
    p  = {1'b1, fa} * {1'b1, fb};
    e  = 11'(ea) + 11'(eb) - 11'sd127;
    if (p[47]) begin
      m  = p[47:24];
      g  = p[23];
      st = |p[22:0];
      e  = e + 11'sd1;
    end else begin
      m  = p[46:23];
      g  = p[22];
      st = |p[21:0];
    end
    up = g & (st | m[0]);
    mr = {1'b0, m} + 25'(up);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end
    if (na || nb || (ia && zb) || (ib && za))
      y = 32'h7fc0_0000;
    else if (ia || ib)
      y = {sy, 8'hff, 23'd0};
    else if (za || zb)
      y = {sy, 31'd0};
    else if (e >= 11'sd255)
      y = {sy, 8'hff, 23'd0};
    else if (e <= 11'sd0)
      y = {sy, 31'd0};
    else
      y = {sy, e[7:0], mr[22:0]};
  end
endmodule
