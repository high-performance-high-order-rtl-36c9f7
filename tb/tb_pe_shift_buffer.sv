// tb_pe_shift_buffer: drives random shift enables and data into a small
// buffer (depth 10, taps at 0, 3 and 9 shifts back) and compares every tap,
// after every shift, with a software history of the pushed words.
module tb_pe_shift_buffer;
  localparam int unsigned W = 32, DEPTH = 10, NTAP = 3;
  localparam logic [NTAP*32-1:0] TAPS = {32'd9, 32'd3, 32'd0};
  logic clk = 0, rst_n = 0, shift_en = 0;
  logic [W-1:0] din = 0;
  logic [W-1:0] tap_q [NTAP];
  logic [W-1:0] hist [$];
  int checks = 0, failures = 0, shifts = 0;

  pe_shift_buffer #(.W(W), .DEPTH(DEPTH), .NTAP(NTAP), .TAPS(TAPS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      shift_en = ($urandom % 3) != 0;
      din = $urandom;
      @(posedge clk);
      if (shift_en) begin
        hist.push_front(din);
        shifts++;
      end
      #1;
      for (int k = 0; k < int'(NTAP); k++) begin
        int d;
        d = int'(TAPS[k*32 +: 32]);
        if (hist.size() > d && shifts > 0) begin
          checks++;
          if (tap_q[k] !== hist[d]) begin
            failures++;
            if (failures < 10) $display("tap %0d: got %h expected %h", k, tap_q[k], hist[d]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
