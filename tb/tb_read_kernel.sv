// tb_read_kernel: a 2D read kernel (radius 1, 8-cell blocks, 4 lanes, 2 PEs,
// so 4-cell compute blocks) over a 10x3 grid, three blocks. The memory
// answers after 3 cycles with the cell index as data and drops ready at
// random; the consumer drops ready at random. Checks every request address
// and lane mask against the expected block walk, every vector delivered
// towards PE 0, the request count, the done pulse, and that requests plus
// buffered words never exceed the channel depth.
module tb_read_kernel;
  import stencil_pkg::*;
  localparam int RAD = 1, BX = 8, PV = 4, PT = 2, FD = 4, NX = 10, NY = 3, LAT = 3;
  localparam int HALO = PT * RAD, CX = BX - 2 * HALO, NBX = (NX + CX - 1) / CX, RV = BX / PV;
  localparam int NVEC = NBX * NY * RV;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  grid_cfg_t cfg;
  logic rd_req_valid, rd_req_ready = 0, rd_resp_valid;
  logic signed [31:0] rd_req_addr;
  logic [PV-1:0] rd_req_mask;
  logic [PV*32-1:0] rd_resp_data, out_data;
  logic out_valid, out_ready = 0;
  logic [PV*32-1:0] pd [LAT];
  logic pvld [LAT];
  int   exp_addr [NVEC];
  logic [PV-1:0] exp_mask [NVEC];
  int checks = 0, failures = 0, nreq = 0, nout = 0, ndone = 0, inflight = 0, maxfly = 0;

  read_kernel #(.DIM(2), .RAD(RAD), .BSIZE_X(BX), .PAR_VEC(PV), .PAR_TIME(PT), .FIFO_DEPTH(FD)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    logic [PV*32-1:0] d;
    d = '0;
    for (int l = 0; l < PV; l++) if (rd_req_mask[l]) d[l*32 +: 32] = 32'(rd_req_addr + l) | 32'h4000_0000;
    for (int i = LAT - 1; i > 0; i--) begin pd[i] <= pd[i-1]; pvld[i] <= pvld[i-1]; end
    pd[0] <= d;
    pvld[0] <= rst_n && rd_req_valid && rd_req_ready;
    if (rst_n && rd_req_valid && rd_req_ready) begin
      checks++;
      if (nreq >= NVEC || rd_req_addr !== exp_addr[nreq] || rd_req_mask !== exp_mask[nreq]) begin
        failures++;
        $display("request %0d: addr %0d mask %b", nreq, rd_req_addr, rd_req_mask);
      end
      nreq++;
    end
    if (rst_n && out_valid && out_ready) begin
      checks++;
      for (int l = 0; l < PV; l++)
        if (out_data[l*32 +: 32] !== (exp_mask[nout][l] ? (32'(exp_addr[nout] + l) | 32'h4000_0000) : 32'd0)) begin
          failures++;
          $display("vector %0d lane %0d: %h", nout, l, out_data[l*32 +: 32]);
        end
      nout++;
    end
    if (rst_n) inflight = inflight + int'(rd_req_valid && rd_req_ready) - int'(out_valid && out_ready);
    if (inflight > maxfly) maxfly = inflight;
    if (rst_n && done) ndone++;
  end
  assign rd_resp_valid = pvld[LAT-1];
  assign rd_resp_data  = pd[LAT-1];

  always @(negedge clk) begin
    rd_req_ready <= ($urandom % 3) != 0;
    out_ready    <= ($urandom % 3) != 0;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    n = 0;
    for (int b = 0; b < NBX; b++)
      for (int y = 0; y < NY; y++)
        for (int v = 0; v < RV; v++) begin
          int x0;
          x0 = b * CX - HALO + v * PV;
          exp_addr[n] = y * NX + x0;
          for (int l = 0; l < PV; l++) exp_mask[n][l] = (x0 + l >= 0) && (x0 + l < NX);
          n++;
        end
    for (int i = 0; i < LAT; i++) begin pvld[i] = 0; pd[i] = '0; end
    cfg = '{nx: NX, ny: NY, nz: 1, nbx: NBX, nby: 1};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (nout == NVEC);
    repeat (20) @(posedge clk);
    checks += 4;
    if (nreq != NVEC) begin failures++; $display("%0d requests", nreq); end
    if (ndone != 1) begin failures++; $display("done pulsed %0d times", ndone); end
    if (busy) begin failures++; $display("still busy"); end
    if (maxfly > FD) begin failures++; $display("%0d words in flight", maxfly); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
