// nc_findidx: bitmap-based sparse weight lookup unit (FINDIDX instruction).
//
// A neuron's sparse incoming weights are stored as a connection bitmap (one
// bit per axon, 16 axons per data-memory word) followed by the non-zero
// weights in axon order. Given an axon id, the weight's position is the number
// of set bits below that axon's bit. The unit reads the bitmap words one per
// cycle from its own data-memory read port and counts set bits, so a lookup
// of axon a raises done floor(a/16) + 3 cycles after the cycle of start (an
// axon beyond the bitmap: the next cycle).
//
// Result: found = bitmap bit of the axon; idx = nwords + (set bits below the
// axon), i.e. the weight's offset from the bitmap base, or 16'hFFFF when the
// axon is not connected or lies beyond the bitmap. The paper gives the purpose
// of FINDIDX (a multi-cycle bitmap lookup) but not its insides; this
// word-serial counter and the result convention are this design's own.
//
// Interface: pulse start with base, nwords and axon; the unit is busy until it
// pulses done for one cycle with idx and found valid in that cycle.
module nc_findidx #(
  parameter int AW = 13
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [AW-1:0] base,
  input  logic [11:0]   nwords,
  input  logic [15:0]   axon,
  output logic          busy,
  output logic          done,
  output logic [15:0]   idx,
  output logic          found,
  // data-memory read port (one-cycle latency)
  output logic          mem_re,
  output logic [AW-1:0] mem_addr,
  input  logic [15:0]   mem_rdata
);
  logic [11:0]   issue_w;     // next word to read
  logic [11:0]   last_w;      // word holding the axon bit
  logic [3:0]    bitpos;
  logic [AW-1:0] base_q;
  logic [11:0]   nwords_q;
  logic          data_v;      // mem_rdata holds word data_w
  logic [11:0]   data_w;
  logic [15:0]   count;
  logic          issuing;
  logic          out_of_range;

  assign out_of_range = (axon[15:4] >= nwords);
  assign mem_re   = issuing;
  assign mem_addr = base_q + AW'(issue_w);

  function automatic logic [4:0] popcnt(logic [15:0] v);
    logic [4:0] n = '0;
    for (int k = 0; k < 16; k++) n += 5'(v[k]);
    return n;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      issuing <= 1'b0;
      data_v  <= 1'b0;
      idx     <= '0;
      found   <= 1'b0;
      count   <= '0;
      issue_w <= '0;
      last_w  <= '0;
      bitpos  <= '0;
      base_q  <= '0;
      nwords_q <= '0;
      data_w  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        if (out_of_range) begin
          done  <= 1'b1;
          found <= 1'b0;
          idx   <= 16'hFFFF;
        end else begin
          busy     <= 1'b1;
          issuing  <= 1'b1;
          issue_w  <= '0;
          last_w   <= axon[15:4];
          bitpos   <= axon[3:0];
          base_q   <= base;
          nwords_q <= nwords;
          count    <= '0;
          data_v   <= 1'b0;
        end
      end else if (busy) begin
        // issue side
        data_v <= issuing;
        data_w <= issue_w;
        if (issuing) begin
          if (issue_w == last_w) issuing <= 1'b0;
          else issue_w <= issue_w + 1'b1;
        end
        // count side
        if (data_v) begin
          if (data_w == last_w) begin
            logic [15:0] below;
            below = mem_rdata & ((16'd1 << bitpos) - 16'd1);
            busy   <= 1'b0;
            done   <= 1'b1;
            data_v <= 1'b0;
            found  <= mem_rdata[bitpos];
            idx    <= mem_rdata[bitpos] ? (16'(nwords_q) + count + 16'(popcnt(below))) : 16'hFFFF;
          end else begin
            count <= count + 16'(popcnt(mem_rdata));
          end
        end
      end
    end
  end
endmodule
