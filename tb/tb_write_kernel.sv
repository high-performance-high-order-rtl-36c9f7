// tb_write_kernel: a 2D write kernel (radius 1, 8-cell blocks, 4 lanes, 2 PEs,
// 4-cell compute blocks) over a 10x3 grid. The stream carries, in every lane,
// a tag made of the vector number and the lane. Checks that every grid cell is
// written exactly once, with the tag of the lane that holds it inside its
// compute block, that nothing outside the grid is written, that random write
// backpressure loses nothing, and that done pulses once at the end.
module tb_write_kernel;
  import stencil_pkg::*;
  localparam int RAD = 1, BX = 8, PV = 4, PT = 2, NX = 10, NY = 3;
  localparam int HALO = PT * RAD, CX = BX - 2 * HALO, NBX = (NX + CX - 1) / CX, RV = BX / PV;
  localparam int NVEC = NBX * NY * RV;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  grid_cfg_t cfg;
  logic in_valid = 0, in_ready, wr_valid, wr_ready = 0;
  logic [PV*32-1:0] in_data = '0, wr_data;
  logic signed [31:0] wr_addr;
  logic [PV-1:0] wr_mask;
  logic [31:0] mem [NX*NY];
  int   cnt [NX*NY];
  int checks = 0, failures = 0, ndone = 0, sent = 0;

  write_kernel #(.DIM(2), .RAD(RAD), .BSIZE_X(BX), .PAR_VEC(PV), .PAR_TIME(PT)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (rst_n && wr_valid && wr_ready)
      for (int l = 0; l < PV; l++)
        if (wr_mask[l]) begin
          if (wr_addr + l < 0 || wr_addr + l >= NX * NY) begin
            failures++;
            $display("write outside grid: %0d", wr_addr + l);
          end else begin
            mem[wr_addr + l] = wr_data[l*32 +: 32];
            cnt[wr_addr + l]++;
          end
        end
    if (rst_n && done) ndone++;
  end

  always @(negedge clk) wr_ready <= ($urandom % 3) != 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (cnt[i]) begin cnt[i] = 0; mem[i] = '0; end
    cfg = '{nx: NX, ny: NY, nz: 1, nbx: NBX, nby: 1};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (sent < NVEC) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      for (int l = 0; l < PV; l++) in_data[l*32 +: 32] = 32'(sent * 16 + l);
      @(posedge clk);
      if (in_valid && in_ready) sent++;
    end
    @(negedge clk) in_valid = 0;
    repeat (30) @(posedge clk);
    for (int y = 0; y < NY; y++)
      for (int x = 0; x < NX; x++) begin
        int b, lx, k;
        b  = x / CX;
        lx = x - b * CX + HALO;
        k  = (b * NY + y) * RV + lx / PV;
        checks++;
        if (cnt[y*NX + x] != 1 || mem[y*NX + x] !== 32'(k * 16 + lx % PV)) begin
          failures++;
          $display("cell (%0d,%0d): %0d writes, value %0d expected %0d", x, y, cnt[y*NX + x],
                   mem[y*NX + x], k * 16 + lx % PV);
        end
      end
    checks += 2;
    if (ndone != 1) begin failures++; $display("done pulsed %0d times", ndone); end
    if (busy) begin failures++; $display("still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
