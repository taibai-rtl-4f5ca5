// nc_out_events: the neuron core's output events memory.
//
// Holds what a neuron core produced in the FIRE stage until the scheduler's
// encoder turns it into packets: a fired-neuron bitmap (16 words x 16 bits, one
// bit per neuron of the 256 in the core), a neuron-type bitmap of the same
// shape whose bit marks a spike that must be sent as a delayed (skip-connection)
// spike, and 32 x 16-bit float data words sent as packet payload. The three
// memory sizes are the paper's; reading the id and type memories as bitmaps and
// indexing float data by neuron id modulo 32 are this design's reading of them.
//
// Core side: set_v records neuron set_nid as fired with type set_delay and
// stores set_data in float slot set_nid[4:0]. Scheduler side: rd_word selects
// one 16-bit word of both bitmaps (combinational read); clr_v clears bit
// clr_nid of both bitmaps; float_q returns float slot float_idx. A set and a
// clear of the same neuron in one cycle leaves the bit set. Reset clears both
// bitmaps and the float data.
module nc_out_events (
  input  logic        clk,
  input  logic        rst,
  input  logic        set_v,
  input  logic [7:0]  set_nid,
  input  logic        set_delay,
  input  logic [15:0] set_data,
  input  logic [3:0]  rd_word,
  output logic [15:0] fired_q,
  output logic [15:0] type_q,
  input  logic [4:0]  float_idx,
  output logic [15:0] float_q,
  input  logic        clr_v,
  input  logic [7:0]  clr_nid,
  output logic        any_fired
);
  logic [15:0][15:0] fired, ntype;
  logic [15:0]       float_mem [32];

  assign fired_q   = fired[rd_word];
  assign type_q    = ntype[rd_word];
  assign float_q   = float_mem[float_idx];
  assign any_fired = |fired;

  always_ff @(posedge clk) begin
    if (rst) begin
      fired <= '0;
      ntype <= '0;
      for (int i = 0; i < 32; i++) float_mem[i] <= '0;
    end else begin
      if (clr_v) begin
        fired[clr_nid[7:4]][clr_nid[3:0]] <= 1'b0;
        ntype[clr_nid[7:4]][clr_nid[3:0]] <= 1'b0;
      end
      if (set_v) begin
        fired[set_nid[7:4]][set_nid[3:0]] <= 1'b1;
        ntype[set_nid[7:4]][set_nid[3:0]] <= set_delay;
        float_mem[set_nid[4:0]] <= set_data;
      end
    end
  end
endmodule
