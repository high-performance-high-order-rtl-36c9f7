// tb_fp_mac: checks fp_mac (multiply, then add) against double-precision
// reference arithmetic rounded to single precision, over random operands of
// wide and narrow exponent spread, exact cancellations, and the product-only
// mode. The unit is combinational, so each vector is checked after #1.
module tb_fp_mac;
  import tb_fp_pkg::*;
  logic [31:0] a, b, c, y, exp_y;
  logic add_en;
  int checks = 0, failures = 0;

  fp_mac dut (.a(a), .b(b), .c(c), .add_en(add_en), .y(y));

  task automatic check(input string what);
    #1;
    exp_y = add_en ? ref_add(ref_mul(a, b), c) : ref_mul(a, b);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH %s a=%h b=%h c=%h add=%0b y=%h exp=%h", what, a, b, c, add_en, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // random, similar magnitudes: many carries and cancellations
    for (int n = 0; n < 4000; n++) begin
      a = rand_f32(120, 134); b = rand_f32(120, 134); c = rand_f32(118, 136);
      add_en = 1'b1;
      check("near");
    end
    // random, wide exponent spread: alignment shifts and sticky bits
    for (int n = 0; n < 4000; n++) begin
      a = rand_f32(90, 160); b = rand_f32(90, 160); c = rand_f32(60, 190);
      add_en = 1'($urandom);
      check("wide");
    end
    // exact cancellation: c = -(a*b) gives +0
    for (int n = 0; n < 200; n++) begin
      a = rand_f32(120, 134); b = 32'h3f80_0000; c = a ^ 32'h8000_0000;
      add_en = 1'b1;
      check("cancel");
    end
    // adding zero
    a = 32'h4040_0000; b = 32'h3fc0_0000; c = 32'd0; add_en = 1'b1; check("zero");
    if (y !== 32'h4090_0000) begin failures++; $display("3*1.5 != 4.5: %h", y); end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
