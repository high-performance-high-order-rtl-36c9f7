// tb_stencil_ref_pkg: reference model of one time step of the star stencil.
//
// The grid is a flat array, row-major (x fastest). A neighbour outside the
// grid is replaced by the border cell in its direction. The sum is evaluated
// in the order of eq. (1): cc*fc, then for i = 1..rad the terms w, e, s, n
// (and b, a in 3D), each product and each sum rounded to single precision.
package tb_stencil_ref_pkg;
  import tb_fp_pkg::*;

  typedef logic [31:0] f32_t;
  typedef f32_t grid_t[];

  function automatic int clampi(input int v, input int lo, input int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  // coefs: cc, cw, ce, cs, cn, cb, ca
  function automatic void ref_step(input int dim, input int rad, input int nx, input int ny,
                                   input int nz, input f32_t coefs[7],
                                   const ref grid_t src, ref grid_t dst);
    int nzz;
    nzz = (dim == 3) ? nz : 1;
    for (int z = 0; z < nzz; z++)
      for (int y = 0; y < ny; y++)
        for (int x = 0; x < nx; x++) begin
          f32_t acc;
          int   base;
          base = z * ny * nx;
          acc = ref_mul(coefs[0], src[base + y*nx + x]);
          for (int i = 1; i <= rad; i++) begin
            acc = ref_add(acc, ref_mul(coefs[1], src[base + y*nx + clampi(x-i, 0, nx-1)]));
            acc = ref_add(acc, ref_mul(coefs[2], src[base + y*nx + clampi(x+i, 0, nx-1)]));
            acc = ref_add(acc, ref_mul(coefs[3], src[base + clampi(y-i, 0, ny-1)*nx + x]));
            acc = ref_add(acc, ref_mul(coefs[4], src[base + clampi(y+i, 0, ny-1)*nx + x]));
            if (dim == 3) begin
              acc = ref_add(acc, ref_mul(coefs[5], src[clampi(z-i, 0, nz-1)*ny*nx + y*nx + x]));
              acc = ref_add(acc, ref_mul(coefs[6], src[clampi(z+i, 0, nz-1)*ny*nx + y*nx + x]));
            end
          end
          dst[base + y*nx + x] = acc;
        end
  endfunction
endpackage
