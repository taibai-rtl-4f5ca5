// sync_fifo: single-clock first-in first-out buffer with valid/ready ports.
//
// Used as the neuron core's input events FIFO (depth 4, 36-bit entries of
// neuron id, axon id and data, as the paper gives them) and as the input
// buffer of each router port and of the scheduler (depths there are this
// design's choice).
//
// Interface: a word is written when in_valid && in_ready, and read when
// out_valid && out_ready. in_ready is low only when the FIFO is full; out_valid
// is high whenever it holds a word, and out_data is that oldest word. Both
// happen in the same cycle when the FIFO is full only if a read frees a slot
// (no write-through). count gives the occupancy. Synchronous active-high reset
// empties it.
module sync_fifo #(
  parameter int W     = 36,
  parameter int DEPTH = 4,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [AW:0]  count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rptr, wptr;
  logic          push, pop;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != 0);
  assign out_data  = mem[rptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      rptr  <= '0;
      wptr  <= '0;
      count <= '0;
    end else begin
      if (push) begin
        mem[wptr] <= in_data;
        wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      end
      if (pop) rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // occupancy never exceeds the depth
  assert property (@(posedge clk) disable iff (rst) count <= (AW+1)'(DEPTH));
endmodule
