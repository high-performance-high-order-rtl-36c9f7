// fp_mac: one floating-point multiply-add term of a cell update, y = c + a*b.
//
// Each term of the stencil sum (eq. 1: a coefficient times a neighbour value,
// added to the running sum) maps to one hard floating-point DSP on the target
// FPGA. The paper states that one DSP performs one multiply-add and that
// 4*rad+1 (2D) or 6*rad+1 (3D) of them implement one cell update; the first
// term of the chain is a plain multiply (add_en = 0). How the DSP rounds is
// this design's choice: the product is rounded to single precision before the
// addition (two roundings, no fused rounding), round to nearest even, and
// subnormals are flushed to zero. Purely combinational; the PE registers its
// output.
module fp_mac
  import stencil_pkg::*;
(
  input  fp32_t a,       // coefficient
  input  fp32_t b,       // cell value
  input  fp32_t c,       // running sum
  input  logic  add_en,  // 0: y = a*b (first term of the chain)
  output fp32_t y
);
  fp32_t prod, sum;

  fp32_mul u_mul (.a(a), .b(b), .y(prod));
  fp32_add u_add (.a(prod), .b(c), .y(sum));

  assign y = add_en ? sum : prod;
endmodule
