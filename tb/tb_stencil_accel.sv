// tb_stencil_accel: end-to-end test of the accelerator at reduced sizes.
//
// Instance 2D: radius 2, 16-cell blocks, 4 lanes, 2 PEs, 21x6 grid (three
// overlapped blocks, the last one partly outside the grid), three passes, the
// last one applying a single time step (PE 1 in bypass).
// Instance 3D: radius 1, 8x8 blocks, 4 lanes, 2 PEs, 9x10x5 grid (3x3 blocks),
// two passes. Both check the final grid against the reference and count how
// often each mechanism of the design occurred; one that never occurs is a
// failure: memory read backpressure, read credit throttling, write
// backpressure, a PE pipeline stall, a channel running full, a vector of pure
// halo dropped by the write kernel, a partial-vector write, a PE in bypass,
// several blocks per pass and several passes.
module tb_stencil_accel;
  import stencil_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  `define ACCEL_PORTS(P) \
    logic P``rst_n, P``start, P``busy, P``done; \
    logic [31:0] P``nx, P``ny, P``nz, P``steps; coef_t P``coef; \
    logic P``rd_req_valid, P``rd_req_ready, P``rd_resp_valid; \
    logic signed [31:0] P``rd_req_addr; logic [3:0] P``rd_req_mask; \
    logic [127:0] P``rd_resp_data; \
    logic P``wr_valid, P``wr_ready; logic signed [31:0] P``wr_addr; \
    logic [3:0] P``wr_mask; logic [127:0] P``wr_data; \
    logic P``fin; int P``chk, P``err, P``rds, P``wrs, P``pw;

  `ACCEL_PORTS(a_)
  `ACCEL_PORTS(b_)

  `define ACCEL_CONN(P) \
    .clk, .rst_n(P``rst_n), .start(P``start), .nx(P``nx), .ny(P``ny), .nz(P``nz), .steps(P``steps), .coef(P``coef), \
    .busy(P``busy), .done(P``done), \
    .rd_req_valid(P``rd_req_valid), .rd_req_ready(P``rd_req_ready), .rd_req_addr(P``rd_req_addr), \
    .rd_req_mask(P``rd_req_mask), .rd_resp_valid(P``rd_resp_valid), .rd_resp_data(P``rd_resp_data), \
    .wr_valid(P``wr_valid), .wr_ready(P``wr_ready), .wr_addr(P``wr_addr), .wr_mask(P``wr_mask), \
    .wr_data(P``wr_data)

  stencil_accel #(.DIM(2), .RAD(2), .BSIZE_X(16), .PAR_VEC(4), .PAR_TIME(2), .FIFO_DEPTH(4))
    dut_a (`ACCEL_CONN(a_));
  accel_env #(.DIM(2), .RAD(2), .BSIZE_X(16), .PAR_VEC(4), .PAR_TIME(2), .NX(21), .NY(6),
              .PASSES(3), .STALL(1), .LAT(6), .LAST_STEPS(1))
    env_a (`ACCEL_CONN(a_), .finished(a_fin), .checks(a_chk), .failures(a_err),
           .rd_stalls(a_rds), .wr_stalls(a_wrs), .partial_writes(a_pw));

  stencil_accel #(.DIM(3), .RAD(1), .BSIZE_X(8), .BSIZE_Y(8), .PAR_VEC(4), .PAR_TIME(2), .FIFO_DEPTH(8))
    dut_b (`ACCEL_CONN(b_));
  accel_env #(.DIM(3), .RAD(1), .BSIZE_X(8), .BSIZE_Y(8), .PAR_VEC(4), .PAR_TIME(2), .NX(9), .NY(10),
              .NZ(5), .PASSES(2), .STALL(1), .LAT(6))
    env_b (`ACCEL_CONN(b_), .finished(b_fin), .checks(b_chk), .failures(b_err),
           .rd_stalls(b_rds), .wr_stalls(b_wrs), .partial_writes(b_pw));

  // internal mechanism counters
  int throttle = 0, pe_stall = 0, ch_full = 0, halo_drop = 0, bypassed = 0;
  always @(posedge clk) begin
    if (dut_a.u_read.busy && !dut_a.u_read.rd_req_valid) throttle++;
    if (dut_b.u_read.busy && !dut_b.u_read.rd_req_valid) throttle++;
    if (dut_a.g_pe[0].u_pe.out_valid && !dut_a.g_pe[0].u_pe.out_ready) pe_stall++;
    if (dut_b.g_pe[1].u_pe.out_valid && !dut_b.g_pe[1].u_pe.out_ready) pe_stall++;
    if (!dut_a.g_pe[1].u_chan.in_ready || !dut_b.g_pe[1].u_chan.in_ready) ch_full++;
    if (dut_a.u_write.in_valid && dut_a.u_write.in_ready && dut_a.u_write.mask == '0) halo_drop++;
    if (dut_a.g_pe[1].u_pe.bypass && dut_a.g_pe[1].u_pe.out_valid) bypassed++;
  end

  int checks, failures;
  task automatic need(input string what, input int n);
    checks++;
    $display("mechanism %-22s %0d", what, n);
    if (n == 0) begin failures++; $display("mechanism %s never happened", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", a_chk + b_chk, a_err + b_err + 1);
    $finish;
  end

  initial begin
    #1;
    wait (a_fin && b_fin);
    checks = a_chk + b_chk;
    failures = a_err + b_err;
    need("read backpressure", a_rds + b_rds);
    need("read credit throttle", throttle);
    need("write backpressure", a_wrs + b_wrs);
    need("PE pipeline stall", pe_stall);
    need("channel full", ch_full);
    need("halo vector dropped", halo_drop);
    need("partial vector write", a_pw + b_pw);
    need("PE bypass (short pass)", bypassed);
    need("multiple blocks", (dut_a.cfg.nbx > 1 && dut_b.cfg.nby > 1) ? 1 : 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
