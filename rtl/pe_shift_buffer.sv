// pe_shift_buffer: the on-chip shift register of one compute PE.
//
// Logically a shift register of DEPTH vectors (PAR_VEC cells each) that moves
// by one vector whenever shift_en is high. The PE sizes it, as the paper's
// eq. (7) does, at 2*rad*bsize_x + par_vec cells (2D) or
// 2*rad*bsize_x*bsize_y + par_vec cells (3D), i.e. 2*rad*plane/PAR_VEC + 1
// vectors, which is exactly the span from the farthest "below/south" to the
// farthest "above/north" neighbour of a vector of cells.
//
// It is built the way a Block RAM shift register is: a circular buffer with a
// write pointer, so nothing moves. Tap k returns the vector written TAPS[k]
// shifts earlier (0 = the vector written on that same shift); every tap is
// read while din is written and registered, so tap_q holds the window of the
// latest shift from the next cycle on and keeps it while shift_en is low.
// The storage is not reset; the PE reads only entries that it has written.
module pe_shift_buffer #(
  parameter int unsigned W     = 128,                       // bits per vector
  parameter int unsigned DEPTH = 8193,                      // vectors
  parameter int unsigned NTAP  = 3,
  parameter logic [NTAP*32-1:0] TAPS = {32'd8192, 32'd4096, 32'd0}
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         shift_en,
  input  logic [W-1:0] din,
  output logic [W-1:0] tap_q [NTAP]
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr;

  function automatic logic [AW-1:0] tap_addr(input logic [AW-1:0] p, input int unsigned d);
    // Both branches stay below DEPTH, so AW-bit wrap-around arithmetic is exact.
    return (32'(p) >= d) ? p - AW'(d) : p + AW'(DEPTH - d);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr <= '0;
    end else if (shift_en) begin
      wptr <= (32'(wptr) == DEPTH - 1) ? '0 : wptr + AW'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (shift_en) begin
      mem[wptr] <= din;
      for (int k = 0; k < int'(NTAP); k++) begin
        if (TAPS[k*32 +: 32] == 32'd0)
          tap_q[k] <= din;
        else
          tap_q[k] <= mem[tap_addr(wptr, TAPS[k*32 +: 32])];
      end
    end
  end

  initial begin
    for (int k = 0; k < int'(NTAP); k++)
      assert (TAPS[k*32 +: 32] < DEPTH) else $error("tap %0d beyond buffer depth", k);
  end
endmodule
