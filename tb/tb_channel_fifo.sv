// tb_channel_fifo: random producer and consumer around a depth-4 channel.
// Checks order and content against a queue, that in_ready falls exactly when
// the channel is full, and that a full channel refuses words.
module tb_channel_fifo;
  localparam int unsigned W = 16, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = 0, out_data;
  logic [W-1:0] model [$];
  int checks = 0, failures = 0, fulls = 0;

  channel_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      in_valid  = ($urandom % 4) != 0;
      in_data   = 16'($urandom);
      out_ready = (n % 1000 < 500) ? (($urandom % 4) == 0) : (($urandom % 4) != 0);
      #1;
      checks++;
      if (in_ready !== (model.size() < DEPTH)) begin
        failures++;
        $display("in_ready=%0b with %0d words", in_ready, model.size());
      end
      if (model.size() == DEPTH) fulls++;
      checks++;
      if (out_valid !== (model.size() != 0)) begin
        failures++;
        $display("out_valid=%0b with %0d words", out_valid, model.size());
      end
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== model[0]) begin
          failures++;
          $display("data %h expected %h", out_data, model[0]);
        end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("channel never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
