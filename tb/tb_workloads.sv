// tb_workloads: two further configurations of the original evaluation, at
// their full parameter values but on small grids, each run end to end for
// one pass and checked bit for bit against the reference:
//   3D radius 4: blocks 256 x 128, 16 lanes, 3 PEs, grid 240 x 110 x 5
//                (2 x 2 overlapped blocks, compute block 232 x 104);
//   2D radius 1: blocks 4096, 8 lanes, 36 PEs, grid 4100 x 3
//                (2 overlapped blocks, compute block 4024).
// The default configuration (2D radius 4) is run by tb_stencil_accel_full.
module tb_workloads;
  import stencil_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  `define WL_PORTS(P, V) \
    logic P``rst_n, P``start, P``busy, P``done; \
    logic [31:0] P``nx, P``ny, P``nz, P``steps; coef_t P``coef; \
    logic P``rd_req_valid, P``rd_req_ready, P``rd_resp_valid; \
    logic signed [31:0] P``rd_req_addr; logic [V-1:0] P``rd_req_mask; \
    logic [V*32-1:0] P``rd_resp_data; \
    logic P``wr_valid, P``wr_ready; logic signed [31:0] P``wr_addr; \
    logic [V-1:0] P``wr_mask; logic [V*32-1:0] P``wr_data; \
    logic P``fin; int P``chk, P``err, P``rds, P``wrs, P``pw;

  `WL_PORTS(a_, 16)
  `WL_PORTS(b_, 8)

  `define WL_CONN(P) \
    .clk, .rst_n(P``rst_n), .start(P``start), .nx(P``nx), .ny(P``ny), .nz(P``nz), .steps(P``steps), \
    .coef(P``coef), .busy(P``busy), .done(P``done), \
    .rd_req_valid(P``rd_req_valid), .rd_req_ready(P``rd_req_ready), .rd_req_addr(P``rd_req_addr), \
    .rd_req_mask(P``rd_req_mask), .rd_resp_valid(P``rd_resp_valid), .rd_resp_data(P``rd_resp_data), \
    .wr_valid(P``wr_valid), .wr_ready(P``wr_ready), .wr_addr(P``wr_addr), .wr_mask(P``wr_mask), \
    .wr_data(P``wr_data)

  stencil_accel #(.DIM(3), .RAD(4), .BSIZE_X(256), .BSIZE_Y(128), .PAR_VEC(16), .PAR_TIME(3))
    dut_a (`WL_CONN(a_));
  accel_env #(.DIM(3), .RAD(4), .BSIZE_X(256), .BSIZE_Y(128), .PAR_VEC(16), .PAR_TIME(3),
              .NX(240), .NY(110), .NZ(5), .PASSES(1), .STALL(0), .LAT(6))
    env_a (`WL_CONN(a_), .finished(a_fin), .checks(a_chk), .failures(a_err),
           .rd_stalls(a_rds), .wr_stalls(a_wrs), .partial_writes(a_pw));

  stencil_accel #(.DIM(2), .RAD(1), .BSIZE_X(4096), .PAR_VEC(8), .PAR_TIME(36))
    dut_b (`WL_CONN(b_));
  accel_env #(.DIM(2), .RAD(1), .BSIZE_X(4096), .PAR_VEC(8), .PAR_TIME(36),
              .NX(4100), .NY(3), .PASSES(1), .STALL(0), .LAT(6))
    env_b (`WL_CONN(b_), .finished(b_fin), .checks(b_chk), .failures(b_err),
           .rd_stalls(b_rds), .wr_stalls(b_wrs), .partial_writes(b_pw));

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", a_chk + b_chk, a_err + b_err + 1);
    $finish;
  end

  initial begin
    #1;
    wait (a_fin && b_fin);
    $display("TB_RESULT checks=%0d failures=%0d", a_chk + b_chk, a_err + b_err);
    $finish;
  end
endmodule
