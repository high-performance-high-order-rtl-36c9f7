// accel_env: memory model, stimulus and checker around one stencil_accel.
//
// The model holds two grid buffers (the two DDR banks): each pass reads one
// and writes the other, then they swap, as the host does between passes.
// Reads answer in order after LAT cycles; in STALL mode the read request and
// write ports drop ready at random. After PASSES passes the grid must equal
// the reference time steps bit for bit (PAR_TIME per pass, LAST_STEPS in the
// last pass when it is set, the remaining PEs then passing data through), every grid cell must have
// been written exactly once per pass, and a pass without stalls must end
// within the cycle bound of a one-vector-per-cycle pipeline:
// blocks*(NS+RAD)*plane/PAR_VEC + PAR_TIME*(RAD*plane/PAR_VEC + NT + 8) + 64.
module accel_env
  import stencil_pkg::*;
  import tb_fp_pkg::*;
  import tb_stencil_ref_pkg::*;
#(
  parameter int DIM = 2, parameter int RAD = 2, parameter int BSIZE_X = 16,
  parameter int BSIZE_Y = 8, parameter int PAR_VEC = 4, parameter int PAR_TIME = 2,
  parameter int NX = 20, parameter int NY = 6, parameter int NZ = 1,
  parameter int PASSES = 2, parameter bit STALL = 1, parameter int LAT = 4,
  parameter int LAST_STEPS = 0          // time steps of the last pass, 0: PAR_TIME
) (
  input  logic                  clk,
  output logic                  rst_n,
  output logic                  start,
  output logic [31:0]           nx, ny, nz, steps,
  output coef_t                 coef,
  input  logic                  busy,
  input  logic                  done,
  input  logic                  rd_req_valid,
  output logic                  rd_req_ready,
  input  logic signed [31:0]    rd_req_addr,
  input  logic [PAR_VEC-1:0]    rd_req_mask,
  output logic                  rd_resp_valid,
  output logic [PAR_VEC*32-1:0] rd_resp_data,
  input  logic                  wr_valid,
  output logic                  wr_ready,
  input  logic signed [31:0]    wr_addr,
  input  logic [PAR_VEC-1:0]    wr_mask,
  input  logic [PAR_VEC*32-1:0] wr_data,
  output logic                  finished,
  output int                    checks,
  output int                    failures,
  output int                    rd_stalls,
  output int                    wr_stalls,
  output int                    partial_writes
);
  localparam int RV = BSIZE_X / PAR_VEC, YL = (DIM == 3) ? BSIZE_Y : 1, PL = RV * YL;
  localparam int HALO = PAR_TIME * RAD, CX = BSIZE_X - 2 * HALO;
  localparam int CY = (DIM == 3) ? BSIZE_Y - 2 * HALO : 1;
  localparam int NBX = (NX + CX - 1) / CX, NBY = (DIM == 3) ? (NY + CY - 1) / CY : 1;
  localparam int NS = (DIM == 3) ? NZ : NY, NZZ = (DIM == 3) ? NZ : 1;
  localparam int NT = 1 + 2 * DIM * RAD;
  localparam int NCELL = NX * NY * NZZ;

  grid_t buf0, buf1, refg, tmp;
  int    wcount [];
  f32_t  cf [7];
  logic  src_sel;                      // 0: read buf0, write buf1
  logic [PAR_VEC*32-1:0] pipe_d [LAT];
  logic                  pipe_v [LAT];
  logic                  stall_en;

  function automatic f32_t rd_cell(input int a);
    return src_sel ? buf1[a] : buf0[a];
  endfunction

  // read port: in-order, fixed latency
  always @(posedge clk) begin
    logic [PAR_VEC*32-1:0] d;
    d = '0;
    if (rd_req_valid && rd_req_ready)
      for (int l = 0; l < PAR_VEC; l++)
        if (rd_req_mask[l]) d[l*32 +: 32] = rd_cell(rd_req_addr + l);
    for (int i = LAT - 1; i > 0; i--) begin
      pipe_d[i] <= pipe_d[i-1];
      pipe_v[i] <= pipe_v[i-1];
    end
    pipe_d[0] <= d;
    pipe_v[0] <= rd_req_valid && rd_req_ready && rst_n;
    if (rst_n && rd_req_valid && !rd_req_ready) rd_stalls++;
    if (rst_n && wr_valid && !wr_ready) wr_stalls++;
  end
  assign rd_resp_valid = pipe_v[LAT-1];
  assign rd_resp_data  = pipe_d[LAT-1];

  // write port
  always @(posedge clk) begin
    if (rst_n && wr_valid && wr_ready) begin
      if (wr_mask != '1) partial_writes++;
      for (int l = 0; l < PAR_VEC; l++)
        if (wr_mask[l]) begin
          if (wr_addr + l < 0 || wr_addr + l >= NCELL) begin
            failures++;
            $display("write outside the grid at %0d", wr_addr + l);
          end else begin
            if (src_sel) buf0[wr_addr + l] = wr_data[l*32 +: 32];
            else         buf1[wr_addr + l] = wr_data[l*32 +: 32];
            wcount[wr_addr + l]++;
          end
        end
    end
  end

  always @(negedge clk) begin
    rd_req_ready <= stall_en ? (($urandom % 4) != 0) : 1'b1;
    wr_ready     <= stall_en ? (($urandom % 2) != 0) : 1'b1;
  end

  initial begin
    int ncyc, bound;
    finished = 0; checks = 0; failures = 0; rd_stalls = 0; wr_stalls = 0; partial_writes = 0;
    rst_n = 0; start = 0; src_sel = 0; stall_en = 0;
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 0; pipe_d[i] = '0; end
    buf0 = new[NCELL]; buf1 = new[NCELL]; refg = new[NCELL]; tmp = new[NCELL];
    wcount = new[NCELL];
    foreach (buf0[i]) buf0[i] = {1'b0, 8'd126 + 8'($urandom % 2), 23'($urandom)};
    foreach (buf1[i]) buf1[i] = '0;
    refg = buf0;
    for (int i = 0; i < 7; i++) cf[i] = {1'b0, 8'd121 + 8'($urandom % 3), 23'($urandom)};
    cf[0] = 32'h3f00_0000 | 32'($urandom % 1024);
    coef = {cf[0], cf[1], cf[2], cf[3], cf[4], cf[5], cf[6]};
    nx = NX; ny = NY; nz = NZZ;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int p = 0; p < PASSES; p++) begin
      stall_en = STALL && (p % 2 == 0);
      foreach (wcount[i]) wcount[i] = 0;
      steps = (p == PASSES - 1 && LAST_STEPS != 0) ? LAST_STEPS : 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      ncyc = 1;
      while (!done) begin
        @(posedge clk);
        ncyc++;
      end
      @(negedge clk);
      foreach (wcount[i]) begin
        checks++;
        if (wcount[i] != 1) begin
          failures++;
          if (failures < 10) $display("pass %0d: cell %0d written %0d times", p, i, wcount[i]);
        end
      end
      if (!stall_en) begin
        bound = NBX * NBY * (NS + RAD) * PL + PAR_TIME * (RAD * PL + NT + 8) + 64;
        checks++;
        if (ncyc > bound) begin
          failures++;
          $display("pass %0d took %0d cycles, bound %0d", p, ncyc, bound);
        end
        $display("%0dD pass %0d: %0d cycles (bound %0d)", DIM, p, ncyc, bound);
      end
      for (int t = 0; t < ((steps == 0) ? PAR_TIME : int'(steps)); t++) begin
        ref_step(DIM, RAD, NX, NY, NZZ, cf, refg, tmp);
        refg = tmp;
      end
      src_sel = !src_sel;
    end
    for (int i = 0; i < NCELL; i++) begin
      checks++;
      if (rd_cell(i) !== refg[i]) begin
        failures++;
        if (failures < 10) $display("%0dD cell %0d: got %h expected %h", DIM, i, rd_cell(i), refg[i]);
      end
    end
    finished = 1;
  end
endmodule
