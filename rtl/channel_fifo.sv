// channel_fifo: an on-chip channel between two kernels or two PEs.
//
// A first-word-fall-through FIFO of DEPTH words with a valid/ready handshake
// on both sides: a word moves when valid and ready are both high on a rising
// clock edge. in_ready depends only on the fill level, so a chain of PEs and
// channels has no combinational path from the end of the chain to its start.
// The channel depth is this design's choice; the paper only names channels.
module channel_fifo #(
  parameter int unsigned W     = 128,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rptr, wptr;
  logic [AW:0]   count;
  logic          push, pop;

  assign in_ready  = (32'(count) < DEPTH);
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rptr  <= '0;
      wptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (32'(wptr) == DEPTH - 1) ? '0 : wptr + AW'(1);
      if (pop)  rptr <= (32'(rptr) == DEPTH - 1) ? '0 : rptr + AW'(1);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  // a word offered to the consumer stays until it is taken
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (out_valid && !out_ready) |=> (out_valid && $stable(out_data));
  endproperty
  a_hold: assert property (p_hold);
endmodule
