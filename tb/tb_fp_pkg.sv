// tb_fp_pkg: reference single-precision arithmetic for the testbenches.
//
// A product of two single-precision values is exact in double precision, and
// a sum of two single-precision values computed in double precision and then
// rounded to single precision gives the correctly rounded single-precision
// sum. So the reference computes each operation in `real` and rounds the
// result to single precision with to_f32 (nearest, ties to even; results
// below the normal range flush to zero, matching the RTL's convention).
package tb_fp_pkg;

  function automatic real to_real(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(f[30:23]) - 11'd127 + 11'd1023, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] to_f32(input real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] ref_mul(input logic [31:0] a, input logic [31:0] b);
    return to_f32(to_real(a) * to_real(b));
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] a, input logic [31:0] b);
    return to_f32(to_real(a) + to_real(b));
  endfunction

  // random normal value with exponent in [emin, emax] and random sign
  function automatic logic [31:0] rand_f32(input int emin, input int emax);
    int unsigned e;
    e = 32'(emin) + ($urandom % 32'(emax - emin + 1));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
