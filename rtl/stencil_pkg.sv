// stencil_pkg: types and helpers shared by the stencil accelerator.
//
// Cells are IEEE-754 single-precision words (fp32_t). A vector of PAR_VEC
// cells travels through the channels as one packed word, lane 0 in the low
// 32 bits and holding the lowest x coordinate. Grid sizes and the number of
// spatial blocks are run-time values carried in grid_cfg_t; they must be held
// stable while a pass runs. Addresses are cell indices into a row-major grid
// (x fastest, then y, then z) and are signed, because the first spatial block
// starts left of the grid (overlapped blocking) and its out-of-grid lanes
// carry a negative index with their lane-enable bit cleared.
package stencil_pkg;

  typedef logic [31:0] fp32_t;

  typedef struct packed {
    logic [31:0] nx;   // grid size in x (cells)
    logic [31:0] ny;   // grid size in y
    logic [31:0] nz;   // grid size in z (3D only; ignored in 2D)
    logic [31:0] nbx;  // number of spatial blocks along x
    logic [31:0] nby;  // number of spatial blocks along y (3D only)
  } grid_cfg_t;

  // Coefficients of the star stencil: center, west/east (x), south/north (y),
  // below/above (z). In 2D cb and ca are not used.
  typedef struct packed {
    fp32_t cc, cw, ce, cs, cn, cb, ca;
  } coef_t;

  function automatic logic [31:0] ceil_div(input logic [31:0] a, input int unsigned b);
    return (a + 32'(b) - 32'd1) / 32'(b);
  endfunction

  // Clamp a signed distance to the grid border into [0, hi].
  function automatic int unsigned clamp_dist(input int d, input int unsigned hi);
    int unsigned r;
    r = (d < 0) ? 0 : (d > int'(hi)) ? hi : int'(d);
    return r;
  endfunction

endpackage
