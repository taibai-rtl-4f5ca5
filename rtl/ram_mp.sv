// ram_mp: synchronous RAM with NR read ports and NW write ports.
//
// Every memory of the chip is built from this module: the neuron core's
// instruction memory (1K x 16 bits, kept as 512 x 32-bit instructions) and
// unified data memory (8K x 16 bits), and the scheduler's four topology tables
// (fan-in 2K x 22 and 64K x 11, fan-out 2K x 24 and 8K x 32). The sizes come
// from the paper; the port count and the one-cycle read latency are this
// design's choice, since the paper shows only the memories themselves.
//
// Timing: a read issued with re[i] in cycle t returns mem[raddr[i]] in
// rdata[i] in cycle t+1 and holds it until the next read on that port. Reads
// see the contents before a write in the same cycle. Write port 0 wins over
// higher ports when two ports write one address in the same cycle.
// The array is not reset (its contents are loaded by configuration packets).
module ram_mp #(
  parameter int W     = 16,
  parameter int DEPTH = 1024,
  parameter int NR    = 2,
  parameter int NW    = 2,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                 clk,
  input  logic [NR-1:0]        re,
  input  logic [NR-1:0][AW-1:0] raddr,
  output logic [NR-1:0][W-1:0]  rdata,
  input  logic [NW-1:0]        we,
  input  logic [NW-1:0][AW-1:0] waddr,
  input  logic [NW-1:0][W-1:0]  wdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int i = 0; i < NR; i++)
      if (re[i]) rdata[i] <= mem[raddr[i]];
  end

  always_ff @(posedge clk) begin
    for (int i = NW - 1; i >= 0; i--)
      if (we[i]) mem[waddr[i]] <= wdata[i];
  end
endmodule
