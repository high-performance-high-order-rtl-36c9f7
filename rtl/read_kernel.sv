// read_kernel: streams the grid from external memory into the first PE.
//
// For every spatial block it walks the streamed dimension (y in 2D, z in 3D),
// the rows of the block (3D) and the x vectors of a row, exactly the order
// the PEs consume. A block is BSIZE_X (x BSIZE_Y) cells wide and starts
// PAR_TIME*RAD cells before its compute block (overlapped blocking, eq. 2),
// so block b covers x from b*CX - HALO on. One memory read of PAR_VEC cells
// is issued per vector: rd_req_addr is the row-major cell index of lane 0
// (negative left of the grid) and rd_req_mask marks the lanes inside the
// grid. The memory answers in order on rd_resp_*, with no backpressure;
// unmasked lanes carry don't-care data that no valid update reads, because
// out-of-grid neighbours are clamped to the border.
//
// Responses land in an on-chip channel (channel_fifo) towards PE 0. A credit
// counter keeps requests in flight plus words in the channel at or below the
// channel depth, so a response always finds room. start latches nothing: cfg
// must be stable from start until done. done is high for one cycle when the
// last request has been accepted. The request sequence is the paper's read
// kernel; the memory interface signals are this design's choice.
module read_kernel
  import stencil_pkg::*;
#(
  parameter int unsigned DIM        = 2,
  parameter int unsigned RAD        = 4,
  parameter int unsigned BSIZE_X    = 4096,
  parameter int unsigned BSIZE_Y    = 128,
  parameter int unsigned PAR_VEC    = 4,
  parameter int unsigned PAR_TIME   = 22,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  grid_cfg_t               cfg,
  output logic                    busy,
  output logic                    done,
  // external memory read port
  output logic                    rd_req_valid,
  input  logic                    rd_req_ready,
  output logic signed [31:0]      rd_req_addr,
  output logic [PAR_VEC-1:0]      rd_req_mask,
  input  logic                    rd_resp_valid,
  input  logic [PAR_VEC*32-1:0]   rd_resp_data,
  // channel to PE 0
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [PAR_VEC*32-1:0]   out_data
);
  localparam int unsigned RV   = BSIZE_X / PAR_VEC;
  localparam int unsigned YL   = (DIM == 3) ? BSIZE_Y : 1;
  localparam int unsigned HALO = PAR_TIME * RAD;
  localparam int unsigned CX   = BSIZE_X - 2 * HALO;
  localparam int unsigned CY   = (DIM == 3) ? BSIZE_Y - 2 * HALO : 1;
  localparam int unsigned CW   = $clog2(FIFO_DEPTH + 1);

  logic [31:0] xv, yl, sc, bx, by, ns;
  logic        last_x, last_y, last_s, last_bx, last_by, issue;
  logic [CW-1:0] credits_used;
  logic        fifo_in_ready, pop;
  int          gx0, gy, gz;

  assign ns      = (DIM == 3) ? cfg.nz : cfg.ny;
  assign last_x  = (xv == 32'(RV - 1));
  assign last_y  = (yl == 32'(YL - 1));
  assign last_s  = (sc == ns - 32'd1);
  assign last_bx = (bx == cfg.nbx - 32'd1);
  assign last_by = (DIM == 2) || (by == cfg.nby - 32'd1);

  // coordinates and address of the current vector
  always_comb begin
    gx0 = int'(bx) * int'(CX) - int'(HALO) + int'(xv) * int'(PAR_VEC);
    gy  = (DIM == 3) ? int'(by) * int'(CY) - int'(HALO) + int'(yl) : int'(sc);
    gz  = (DIM == 3) ? int'(sc) : 0;
    rd_req_addr = (gz * int'(cfg.ny) + gy) * int'(cfg.nx) + gx0;
    for (int l = 0; l < int'(PAR_VEC); l++)
      rd_req_mask[l] = (gy >= 0) && (gy < int'(cfg.ny)) && (gx0 + l >= 0) && (gx0 + l < int'(cfg.nx));
  end

  assign rd_req_valid = busy && (32'(credits_used) < FIFO_DEPTH);
  assign issue        = rd_req_valid && rd_req_ready;
  assign pop          = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      xv <= '0; yl <= '0; sc <= '0; bx <= '0; by <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        xv <= '0; yl <= '0; sc <= '0; bx <= '0; by <= '0;
      end else if (issue) begin
        xv <= last_x ? '0 : xv + 32'd1;
        if (last_x) begin
          yl <= last_y ? '0 : yl + 32'd1;
          if (last_y) begin
            sc <= last_s ? '0 : sc + 32'd1;
            if (last_s) begin
              bx <= last_bx ? '0 : bx + 32'd1;
              if (last_bx) begin
                by <= last_by ? '0 : by + 32'd1;
                if (last_by) begin
                  busy <= 1'b0;
                  done <= 1'b1;
                end
              end
            end
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)
      credits_used <= '0;
    else
      credits_used <= credits_used + CW'(issue) - CW'(pop);
  end

  channel_fifo #(.W(PAR_VEC*32), .DEPTH(FIFO_DEPTH)) u_chan (
    .clk, .rst_n,
    .in_valid  (rd_resp_valid),
    .in_ready  (fifo_in_ready),
    .in_data   (rd_resp_data),
    .out_valid, .out_ready, .out_data
  );

  a_room: assert property (@(posedge clk) disable iff (!rst_n) rd_resp_valid |-> fifo_in_ready);
endmodule
