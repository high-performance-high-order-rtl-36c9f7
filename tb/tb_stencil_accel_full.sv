// tb_stencil_accel_full: one complete pass of the accelerator at its default
// parameters (2D, radius 4, 4096-cell blocks, 4 lanes, 22 PEs, i.e. 22 time
// steps per pass) over a 4020 x 4 grid, which takes two overlapped blocks
// (compute block 4096 - 2*22*4 = 3920 cells). The result is compared bit for
// bit with 22 reference time steps, each cell must be written exactly once,
// and the pass must end within the one-vector-per-cycle bound.
module tb_stencil_accel_full;
  import stencil_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, done;
  logic [31:0] nx, ny, nz, steps;
  coef_t coef;
  logic rd_req_valid, rd_req_ready, rd_resp_valid;
  logic signed [31:0] rd_req_addr;
  logic [3:0] rd_req_mask;
  logic [127:0] rd_resp_data;
  logic wr_valid, wr_ready;
  logic signed [31:0] wr_addr;
  logic [3:0] wr_mask;
  logic [127:0] wr_data;
  logic fin;
  int chk, err, rds, wrs, pw;

  stencil_accel dut (.*);

  accel_env #(.DIM(2), .RAD(4), .BSIZE_X(4096), .PAR_VEC(4), .PAR_TIME(22), .NX(4020), .NY(4),
              .PASSES(1), .STALL(0), .LAT(6))
    env (.*, .finished(fin), .checks(chk), .failures(err), .rd_stalls(rds), .wr_stalls(wrs),
         .partial_writes(pw));

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk, err + 1);
    $finish;
  end

  initial begin
    #1;
    wait (fin);
    $display("TB_RESULT checks=%0d failures=%0d", chk, err);
    $finish;
  end
endmodule
