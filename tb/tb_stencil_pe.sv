// tb_stencil_pe: runs pe_check on a 2D radius-2 PE (three blocks along x)
// and a 3D radius-1 PE (three by three blocks), both with two passes.
module tb_stencil_pe;
  logic clk = 0;
  logic f2, f3;
  int c2, c3, e2, e3, s2, s3;

  always #5 clk = ~clk;

  pe_check #(.DIM(2), .RAD(2), .BSIZE_X(16), .PAR_VEC(4), .PAR_TIME(2), .NX(20), .NY(7))
    u2 (.clk, .finished(f2), .checks(c2), .failures(e2), .stalls(s2));
  pe_check #(.DIM(3), .RAD(1), .BSIZE_X(8), .BSIZE_Y(8), .PAR_VEC(4), .PAR_TIME(2),
             .NX(10), .NY(9), .NZ(5))
    u3 (.clk, .finished(f3), .checks(c3), .failures(e3), .stalls(s3));

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c2 + c3, e2 + e3 + 1);
    $finish;
  end

  initial begin
    #1;
    wait (f2 && f3);
    $display("TB_RESULT checks=%0d failures=%0d", c2 + c3, e2 + e3);
    $finish;
  end
endmodule
