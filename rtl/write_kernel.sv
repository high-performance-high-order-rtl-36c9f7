// write_kernel: writes the result of the last PE back to external memory.
//
// It consumes the last PE's stream in the same block / streamed coordinate /
// row / x-vector order the read kernel produced, and writes only the cells of
// each vector that belong to the block's compute block (eq. 2: the central
// CX (x CY) cells, the PAR_TIME*RAD-wide halo on each side being redundant
// work of overlapped blocking) and that lie inside the grid. A vector with no
// such cell is dropped without a memory access. wr_addr is the row-major
// cell index of lane 0, wr_mask the lanes to write.
//
// The loop exit follows the paper's exit-condition optimisation: one global
// vector counter is compared with the total number of vectors of the pass
// (nbx * nby * NS * vectors per plane), computed once at start, instead of
// a chain of comparisons on the nested indices. done pulses for one cycle
// after the last write has been accepted. The write request is registered:
// in_ready = !wr_valid || wr_ready.
module write_kernel
  import stencil_pkg::*;
#(
  parameter int unsigned DIM      = 2,
  parameter int unsigned RAD      = 4,
  parameter int unsigned BSIZE_X  = 4096,
  parameter int unsigned BSIZE_Y  = 128,
  parameter int unsigned PAR_VEC  = 4,
  parameter int unsigned PAR_TIME = 22
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  grid_cfg_t               cfg,
  output logic                    busy,
  output logic                    done,
  // stream from the last PE
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [PAR_VEC*32-1:0]   in_data,
  // external memory write port
  output logic                    wr_valid,
  input  logic                    wr_ready,
  output logic signed [31:0]      wr_addr,
  output logic [PAR_VEC-1:0]      wr_mask,
  output logic [PAR_VEC*32-1:0]   wr_data
);
  localparam int unsigned RV   = BSIZE_X / PAR_VEC;
  localparam int unsigned YL   = (DIM == 3) ? BSIZE_Y : 1;
  localparam int unsigned HALO = PAR_TIME * RAD;
  localparam int unsigned CX   = BSIZE_X - 2 * HALO;
  localparam int unsigned CY   = (DIM == 3) ? BSIZE_Y - 2 * HALO : 1;

  logic [31:0] xv, yl, sc, bx, by, ns;
  logic [63:0] gidx, total;
  logic        take, last_x, last_y, last_s, last_bx;
  logic [PAR_VEC-1:0] mask;
  int          gx0, gy, gz;

  assign ns      = (DIM == 3) ? cfg.nz : cfg.ny;
  assign last_x  = (xv == 32'(RV - 1));
  assign last_y  = (yl == 32'(YL - 1));
  assign last_s  = (sc == ns - 32'd1);
  assign last_bx = (bx == cfg.nbx - 32'd1);
  assign in_ready = busy && (gidx != total) && (!wr_valid || wr_ready);
  assign take     = in_valid && in_ready;

  always_comb begin
    gx0 = int'(bx) * int'(CX) - int'(HALO) + int'(xv) * int'(PAR_VEC);
    gy  = (DIM == 3) ? int'(by) * int'(CY) - int'(HALO) + int'(yl) : int'(sc);
    gz  = (DIM == 3) ? int'(sc) : 0;
    for (int l = 0; l < int'(PAR_VEC); l++) begin
      mask[l] = (int'(xv) * int'(PAR_VEC) + l >= int'(HALO)) &&
                (int'(xv) * int'(PAR_VEC) + l <  int'(HALO + CX)) &&
                (gx0 + l < int'(cfg.nx));
      if (DIM == 3)
        mask[l] = mask[l] && (int'(yl) >= int'(HALO)) && (int'(yl) < int'(HALO + CY)) &&
                  (gy < int'(cfg.ny));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      wr_valid <= 1'b0;
      gidx <= '0; total <= '0;
      xv <= '0; yl <= '0; sc <= '0; bx <= '0; by <= '0;
    end else begin
      done <= 1'b0;
      if (wr_valid && wr_ready) wr_valid <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        gidx  <= '0;
        total <= 64'(cfg.nbx) * 64'((DIM == 3) ? cfg.nby : 32'd1) * 64'(ns) * 64'(RV * YL);
        xv <= '0; yl <= '0; sc <= '0; bx <= '0; by <= '0;
      end else if (busy && gidx == total && !wr_valid) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else if (take) begin
        gidx <= gidx + 64'd1;
        if (mask != '0) begin
          wr_valid <= 1'b1;
          wr_addr  <= (gz * int'(cfg.ny) + gy) * int'(cfg.nx) + gx0;
          wr_mask  <= mask;
          wr_data  <= in_data;
        end
        xv <= last_x ? '0 : xv + 32'd1;
        if (last_x) begin
          yl <= last_y ? '0 : yl + 32'd1;
          if (last_y) begin
            sc <= last_s ? '0 : sc + 32'd1;
            if (last_s) begin
              bx <= last_bx ? '0 : bx + 32'd1;
              if (last_bx) by <= by + 32'd1;
            end
          end
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           (wr_valid && !wr_ready) |=> (wr_valid && $stable(wr_addr) && $stable(wr_data)));
endmodule
