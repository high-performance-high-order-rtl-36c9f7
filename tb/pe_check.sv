// pe_check: test harness around one stencil_pe, used by tb_stencil_pe.
//
// It streams a random grid into the PE in the order the read kernel uses
// (zeros for cells outside the grid), collects the output stream, and
// compares every output cell whose one-step result is defined inside its
// spatial block against the reference model. Pass 0 inserts random input
// gaps and output backpressure; pass 1 runs without either and checks that
// the PE takes one vector per cycle (the pass must end within
// blocks*(NS+RAD)*plane/PAR_VEC + NT + 8 cycles); pass 2 repeats that with
// bypass set and expects every in-grid cell back unchanged.
module pe_check
  import stencil_pkg::*;
  import tb_fp_pkg::*;
  import tb_stencil_ref_pkg::*;
#(
  parameter int DIM = 2, parameter int RAD = 2, parameter int BSIZE_X = 16,
  parameter int BSIZE_Y = 8, parameter int PAR_VEC = 4, parameter int PAR_TIME = 2,
  parameter int NX = 20, parameter int NY = 7, parameter int NZ = 1
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   stalls
);
  localparam int RV = BSIZE_X / PAR_VEC, YL = (DIM == 3) ? BSIZE_Y : 1, PL = RV * YL;
  localparam int HALO = PAR_TIME * RAD, CX = BSIZE_X - 2 * HALO;
  localparam int CY = (DIM == 3) ? BSIZE_Y - 2 * HALO : 1;
  localparam int NBX = (NX + CX - 1) / CX, NBY = (DIM == 3) ? (NY + CY - 1) / CY : 1;
  localparam int NS = (DIM == 3) ? NZ : NY, NZZ = (DIM == 3) ? NZ : 1;
  localparam int NVEC = NBX * NBY * NS * PL;
  localparam int NT = 1 + 2 * DIM * RAD;

  logic rst_n = 0, start = 0, bypass = 0;
  grid_cfg_t cfg;
  coef_t coef;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [PAR_VEC*32-1:0] in_data = '0, out_data;
  grid_t src, dst;
  f32_t cf [7];
  logic [PAR_VEC*32-1:0] stim [];
  int   vx [], vy [], vz [];    // global coordinates of lane 0 of each vector
  logic stall_mode;

  stencil_pe #(.DIM(DIM), .RAD(RAD), .BSIZE_X(BSIZE_X), .BSIZE_Y(BSIZE_Y), .PAR_VEC(PAR_VEC),
               .PAR_TIME(PAR_TIME)) dut (.*);

  always @(posedge clk) if (stall_mode && out_valid && !out_ready) stalls++;

  initial begin
    int n, ncyc;
    finished = 0; checks = 0; failures = 0; stalls = 0; stall_mode = 1;
    src = new[NX*NY*NZZ];
    dst = new[NX*NY*NZZ];
    foreach (src[i]) src[i] = {1'b0, 8'd126 + 8'($urandom % 2), 23'($urandom)};
    for (int i = 0; i < 7; i++) cf[i] = {1'b0, 8'd122 + 8'($urandom % 3), 23'($urandom)};
    cf[0] = 32'hbf00_0000;   // -0.5: centre term makes sums change sign
    coef = {cf[0], cf[1], cf[2], cf[3], cf[4], cf[5], cf[6]};
    cfg = '{nx: NX, ny: NY, nz: NZZ, nbx: NBX, nby: NBY};
    ref_step(DIM, RAD, NX, NY, NZZ, cf, src, dst);
    // build the input stream
    stim = new[NVEC]; vx = new[NVEC]; vy = new[NVEC]; vz = new[NVEC];
    n = 0;
    for (int by = 0; by < NBY; by++)
      for (int bx = 0; bx < NBX; bx++)
        for (int s = 0; s < NS; s++)
          for (int yl = 0; yl < YL; yl++)
            for (int xv = 0; xv < RV; xv++) begin
              vx[n] = bx * CX - HALO + xv * PAR_VEC;
              vy[n] = (DIM == 3) ? by * CY - HALO + yl : s;
              vz[n] = (DIM == 3) ? s : 0;
              for (int l = 0; l < PAR_VEC; l++)
                if (vx[n] + l >= 0 && vx[n] + l < NX && vy[n] >= 0 && vy[n] < NY)
                  stim[n][l*32 +: 32] = src[(vz[n]*NY + vy[n])*NX + vx[n] + l];
                else
                  stim[n][l*32 +: 32] = '0;
              n++;
            end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 3; pass++) begin
      stall_mode = (pass == 0);
      bypass = (pass == 2);
      ncyc = 0;
      fork
        begin : drive
          int i;
          i = 0;
          while (i < NVEC) begin
            @(negedge clk);
            in_valid = stall_mode ? (($urandom % 4) != 0) : 1'b1;
            in_data  = stim[i];
            @(posedge clk);
            if (in_valid && in_ready) i++;
          end
          @(negedge clk) in_valid = 0;
        end
        begin : collect
          int k;
          k = 0;
          while (k < NVEC) begin
            @(negedge clk);
            out_ready = stall_mode ? (($urandom % 3) != 0) : 1'b1;
            @(posedge clk);
            ncyc++;
            if (out_valid && out_ready) begin
              for (int l = 0; l < PAR_VEC; l++) begin
                int gx, lo, hi, ylo, yhi;
                gx = vx[k] + l;
                lo = clampi(gx - RAD, 0, NX - 1);
                hi = clampi(gx + RAD, 0, NX - 1);
                ylo = clampi(vy[k] - RAD, 0, NY - 1);
                yhi = clampi(vy[k] + RAD, 0, NY - 1);
                if (gx >= 0 && gx < NX && vy[k] >= 0 && vy[k] < NY) begin
                  // block covering this vector spans [bx0, bx0 + BSIZE_X)
                  int bx0, by0;
                  bx0 = ((k / (NS * PL)) % NBX) * CX - HALO;
                  by0 = (k / (NBX * NS * PL)) * CY - HALO;
                  if (bypass) begin
                    checks++;
                    if (out_data[l*32 +: 32] !== src[(vz[k]*NY + vy[k])*NX + gx]) begin
                      failures++;
                      if (failures < 10) $display("PE%0dD bypass cell (%0d,%0d,%0d) changed", DIM, gx, vy[k], vz[k]);
                    end
                  end else if (lo >= bx0 && hi < bx0 + BSIZE_X &&
                      (DIM == 2 || (ylo >= by0 && yhi < by0 + BSIZE_Y))) begin
                    checks++;
                    if (out_data[l*32 +: 32] !== dst[(vz[k]*NY + vy[k])*NX + gx]) begin
                      failures++;
                      if (failures < 10)
                        $display("PE%0dD cell (%0d,%0d,%0d): got %h expected %h", DIM, gx, vy[k], vz[k],
                                 out_data[l*32 +: 32], dst[(vz[k]*NY + vy[k])*NX + gx]);
                    end
                  end
                end
              end
              k++;
            end
          end
          @(negedge clk) out_ready = 0;
        end
      join
      if (!stall_mode) begin
        checks++;
        if (ncyc > NBX * NBY * (NS + RAD) * PL + NT + 8) begin
          failures++;
          $display("PE%0dD pass took %0d cycles, bound %0d", DIM, ncyc, NBX * NBY * (NS + RAD) * PL + NT + 8);
        end
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no output stall happened"); end
    finished = 1;
  end
endmodule
