// stencil_accel: top of the stencil accelerator (paper Fig. 2).
//
// A read kernel streams overlapped spatial blocks of the grid from external
// memory through a linear chain of PAR_TIME compute PEs, each advancing the
// grid by one time step (temporal blocking), and a write kernel stores the
// valid central part of each block. Neighbouring stages are joined by
// on-chip channels. One pass (start .. done) therefore advances the whole
// grid by PAR_TIME time steps; the host runs further passes with the input
// and output buffers swapped.
//
// The defaults are the paper's second-to-fourth-order 2D configuration at
// radius 4 (Table III: bsize 4096, par_vec 4, par_time 22). DIM = 3 selects the
// 3D kernel (blocks BSIZE_X x BSIZE_Y, z streamed; e.g. RAD 4, 256x128,
// PAR_VEC 16, PAR_TIME 3). The grid size and the coefficients are run-time
// inputs and must be held from start until done; the number of blocks per
// dimension is derived from them at start. steps (1..PAR_TIME, 0 meaning
// PAR_TIME) sets how many time steps the pass applies: PEs from index steps
// on pass their data through, which lets a run end on an iteration count
// that is not a multiple of PAR_TIME.
//
// External memory is outside the design: the read port issues one request of
// PAR_VEC cells per cycle at most and takes in-order responses without
// backpressure; the write port is a valid/ready request with per-lane write
// enables. The paper keeps input and output in the two DDR banks; here the
// two ports are independent, and the memory behind them is the user's.
module stencil_accel
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
  input  logic [31:0]             nx,
  input  logic [31:0]             ny,
  input  logic [31:0]             nz,
  input  logic [31:0]             steps,
  input  coef_t                   coef,
  output logic                    busy,
  output logic                    done,
  output logic                    rd_req_valid,
  input  logic                    rd_req_ready,
  output logic signed [31:0]      rd_req_addr,
  output logic [PAR_VEC-1:0]      rd_req_mask,
  input  logic                    rd_resp_valid,
  input  logic [PAR_VEC*32-1:0]   rd_resp_data,
  output logic                    wr_valid,
  input  logic                    wr_ready,
  output logic signed [31:0]      wr_addr,
  output logic [PAR_VEC-1:0]      wr_mask,
  output logic [PAR_VEC*32-1:0]   wr_data
);
  localparam int unsigned VW   = PAR_VEC * 32;
  localparam int unsigned HALO = PAR_TIME * RAD;
  localparam int unsigned CX   = BSIZE_X - 2 * HALO;
  localparam int unsigned CY   = (DIM == 3) ? BSIZE_Y - 2 * HALO : 1;

  grid_cfg_t cfg;
  logic      start_q, rd_busy, wr_busy;
  logic [31:0] steps_q;

  // derive the block counts on start; the kernels start one cycle later
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg     <= '0;
      steps_q <= 32'(PAR_TIME);
      start_q <= 1'b0;
    end else begin
      start_q <= start;
      if (start) begin
        steps_q <= (steps == 32'd0 || steps > 32'(PAR_TIME)) ? 32'(PAR_TIME) : steps;
        cfg.nx  <= nx;
        cfg.ny  <= ny;
        cfg.nz  <= (DIM == 3) ? nz : 32'd1;
        cfg.nbx <= ceil_div(nx, CX);
        cfg.nby <= (DIM == 3) ? ceil_div(ny, CY) : 32'd1;
      end
    end
  end

  assign busy = rd_busy || wr_busy || start_q;

  logic          ch_valid [PAR_TIME+1];
  logic          ch_ready [PAR_TIME+1];
  logic [VW-1:0] ch_data  [PAR_TIME+1];

  read_kernel #(.DIM(DIM), .RAD(RAD), .BSIZE_X(BSIZE_X), .BSIZE_Y(BSIZE_Y), .PAR_VEC(PAR_VEC),
                .PAR_TIME(PAR_TIME), .FIFO_DEPTH(FIFO_DEPTH)) u_read (
    .clk, .rst_n, .start(start_q), .cfg,
    .busy(rd_busy), .done(),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_mask, .rd_resp_valid, .rd_resp_data,
    .out_valid(ch_valid[0]), .out_ready(ch_ready[0]), .out_data(ch_data[0])
  );

  for (genvar p = 0; p < PAR_TIME; p++) begin : g_pe
    logic          pe_valid, pe_ready;
    logic [VW-1:0] pe_data;

    stencil_pe #(.DIM(DIM), .RAD(RAD), .BSIZE_X(BSIZE_X), .BSIZE_Y(BSIZE_Y), .PAR_VEC(PAR_VEC),
                 .PAR_TIME(PAR_TIME)) u_pe (
      .clk, .rst_n, .start(start_q), .cfg, .coef,
      .bypass(32'(p) >= steps_q),
      .in_valid(ch_valid[p]), .in_ready(ch_ready[p]), .in_data(ch_data[p]),
      .out_valid(pe_valid), .out_ready(pe_ready), .out_data(pe_data)
    );

    channel_fifo #(.W(VW), .DEPTH(FIFO_DEPTH)) u_chan (
      .clk, .rst_n,
      .in_valid(pe_valid), .in_ready(pe_ready), .in_data(pe_data),
      .out_valid(ch_valid[p+1]), .out_ready(ch_ready[p+1]), .out_data(ch_data[p+1])
    );
  end

  write_kernel #(.DIM(DIM), .RAD(RAD), .BSIZE_X(BSIZE_X), .BSIZE_Y(BSIZE_Y), .PAR_VEC(PAR_VEC),
                 .PAR_TIME(PAR_TIME)) u_write (
    .clk, .rst_n, .start(start_q), .cfg,
    .busy(wr_busy), .done,
    .in_valid(ch_valid[PAR_TIME]), .in_ready(ch_ready[PAR_TIME]), .in_data(ch_data[PAR_TIME]),
    .wr_valid, .wr_ready, .wr_addr, .wr_mask, .wr_data
  );
endmodule
