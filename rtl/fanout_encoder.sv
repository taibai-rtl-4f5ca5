// fanout_encoder: turns the neurons fired by the eight neuron cores into
// spike packets through the two-level fan-out topology table.
//
// While enabled (INTEG stage) the encoder sweeps the fired-neuron bitmaps of
// the cores, one 16-bit word per cycle. For the lowest set bit of a word it
// forms the fired neuron id {core[2:0], neuron[7:0]}, reads the first-level
// (directory) entry {addr, global axon id} at that id, and then walks the
// second-level (information) table from addr, one entry {end, dest, tag,
// index} per packet, until an entry with end set. A spike marked as delayed
// in the core's neuron-type bitmap walks the information table downwards
// (addr, addr-1, ...), a normal spike upwards: the two kinds share one
// directory table and one information table (skip connections, Fig. 8 of the
// paper). Each packet carries the tag and index that select the receiver's
// fan-in entry, the global axon id and the neuron's 16-bit float data word.
// The bit is cleared once its last packet has left.
//
// The routing mode is derived from the destination rectangle: a single node
// gives a point-to-point packet, the whole mesh a broadcast, anything else a
// regional multicast. The table organisation and the shared-table scheme for
// delayed spikes are the paper's; the bitmap sweep and the mode derivation
// are this design's.
//
// Interface: table read ports have one-cycle latency; the output is
// valid/ready. idle is high when the encoder is not working on a neuron and no
// core has a fired bit left (any_fired).
module fanout_encoder
  import taibai_pkg::*;
#(
  parameter int N_CORES = 8,
  parameter int MESH_X  = 11,
  parameter int MESH_Y  = 12
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     enable,
  // output events memories of the cores
  output logic [3:0]               oe_word,
  input  logic [N_CORES-1:0][15:0] oe_fired,
  input  logic [N_CORES-1:0][15:0] oe_type,
  output logic [4:0]               oe_float_idx,
  input  logic [N_CORES-1:0][15:0] oe_float,
  output logic [N_CORES-1:0]       oe_clr_v,
  output logic [7:0]               oe_clr_nid,
  input  logic [N_CORES-1:0]       any_fired,
  // fan-out tables
  output logic                     dt_re,
  output logic [10:0]              dt_addr,
  input  logic [23:0]              dt_q,
  output logic                     it_re,
  output logic [12:0]              it_addr,
  input  logic [31:0]              it_q,
  // generated packets
  output logic                     out_valid,
  input  logic                     out_ready,
  output packet_t                  out_pkt,
  output logic                     idle,
  output logic [15:0]              pkt_count
);
  typedef enum logic [1:0] {S_SCAN, S_DT, S_IE} state_e;
  localparam int CW = (N_CORES > 1) ? $clog2(N_CORES) : 1;

  state_e      st;
  logic [CW-1:0] core;
  logic [3:0]  word;
  logic [3:0]  bitn;
  logic        delayed;
  logic [12:0] ptr;
  logic [10:0] gaxon;
  logic [15:0] fdata;
  logic [15:0] cur_word;
  logic [3:0]  low;
  fout_de_t    de;
  fout_ie_t    ie;
  spike_body_t body;

  assign de       = fout_de_t'(dt_q);
  assign ie       = fout_ie_t'(it_q);
  assign oe_word  = word;
  assign cur_word = oe_fired[core];
  assign oe_float_idx = {word[0], bitn};
  assign idle     = (st == S_SCAN) && (any_fired == '0);

  always_comb begin
    low = '0;
    for (int k = 15; k >= 0; k--) if (cur_word[k]) low = 4'(k);
  end

  assign dt_re   = enable && (st == S_SCAN) && (cur_word != 0);
  assign dt_addr = 11'({core, word, low});

  always_comb begin
    it_re   = 1'b0;
    it_addr = ptr;
    if (st == S_DT) begin
      it_re   = 1'b1;
      it_addr = de.addr;
    end else if (st == S_IE && out_ready && !ie.last) begin
      it_re   = 1'b1;
      it_addr = delayed ? ptr - 1'b1 : ptr + 1'b1;
    end
  end

  // packet assembly
  always_comb begin
    body.tag   = ie.tag;
    body.index = ie.index;
    body.spare = 1'b0;
    body.gaxon = gaxon;
    body.data  = fdata;
    out_pkt.dest  = ie.dest;
    out_pkt.phase = PH_TRAVEL;
    out_pkt.body  = body;
    if (ie.dest.x0 == ie.dest.x1 && ie.dest.y0 == ie.dest.y1)
      out_pkt.ptype = PKT_UNICAST;
    else if (ie.dest.x0 == 0 && ie.dest.y0 == 0 &&
             int'(ie.dest.x1) == MESH_X - 1 && int'(ie.dest.y1) == MESH_Y - 1)
      out_pkt.ptype = PKT_BROADCAST;
    else
      out_pkt.ptype = PKT_MULTICAST;
  end
  assign out_valid = (st == S_IE);

  always_comb begin
    oe_clr_v   = '0;
    oe_clr_nid = {word, bitn};
    if (st == S_IE && out_ready && ie.last) oe_clr_v[core] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_SCAN;
      core <= '0; word <= '0; bitn <= '0; delayed <= 1'b0;
      ptr <= '0; gaxon <= '0; fdata <= '0; pkt_count <= '0;
    end else begin
      unique case (st)
        S_SCAN: if (enable) begin
          if (cur_word != 0) begin
            bitn    <= low;
            delayed <= oe_type[core][low];
            st      <= S_DT;
          end else begin
            word <= word + 1'b1;
            if (word == 4'hF) core <= (int'(core) == N_CORES - 1) ? '0 : core + 1'b1;
          end
        end
        S_DT: begin
          ptr   <= de.addr;
          gaxon <= de.gaxon;
          fdata <= oe_float[core];
          st    <= S_IE;
        end
        S_IE: if (out_ready) begin
          pkt_count <= pkt_count + 1'b1;
          if (ie.last) st <= S_SCAN;
          else ptr <= delayed ? ptr - 1'b1 : ptr + 1'b1;
        end
        default: st <= S_SCAN;
      endcase
    end
  end
endmodule
