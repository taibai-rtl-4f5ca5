// fanin_decoder: turns a spike packet into neuron-core events through the
// two-level fan-in topology table.
//
// The packet's index selects a first-level (directory) entry {tag, addr, type}.
// If the entry's tag differs from the packet's tag the packet was delivered to
// this column only because it lies inside a multicast rectangle, and it is
// dropped. Otherwise the second-level (information) table is walked from addr,
// one 11-bit word per cycle, according to the entry type:
//   type 0 (sparse, small table): N, then N neuron ids. Each id {nc[2:0],
//          neuron[7:0]} gets an event whose axon id is the packet's global
//          axon id; the core finds the weight itself (FINDIDX).
//   type 1 (sparse, fast): N, then N pairs {neuron id, local axon id}; the
//          event carries the local axon id, i.e. the weight address.
//   type 2 (full connection): coding, margin, nums, start id. Every core whose
//          bit is set in coding receives, in parallel, nums events for neurons
//          start, start+margin+1, ... with the global axon id (incremental
//          addressing and parallel sending).
//   type 3 (convolution): coding, N, then N pairs {neuron id, local axon id};
//          each pair goes in parallel to every core in coding with axon id
//          global * K2 + local, K2 being the square of the kernel size
//          (decoupled convolution weight addressing, equation (4) of the paper).
// Event data is the packet's 16-bit data field.
//
// The four entry types, their fields and the polynomial are the paper's
// (Figs. 4-7). Reading "margin" as the gap between successive neuron ids and
// "nums" as the number of neurons per core is this design's interpretation.
//
// Interface: packets arrive valid/ready (one is taken only when the decoder is
// free); the two table read ports have one-cycle latency; each core's event
// port is valid/ready and a parallel send completes when every addressed core
// has taken its copy. idle is high when no packet is being decoded.
module fanin_decoder
  import taibai_pkg::*;
#(
  parameter int N_CORES = 8
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [11:0]             k2,
  input  logic                    pkt_valid,
  output logic                    pkt_ready,
  input  packet_t                 pkt,
  output logic                    dt_re,
  output logic [10:0]             dt_addr,
  input  logic [21:0]             dt_q,
  output logic                    it_re,
  output logic [15:0]             it_addr,
  input  logic [10:0]             it_q,
  output logic [N_CORES-1:0]      ev_valid,
  input  logic [N_CORES-1:0]      ev_ready,
  output nc_event_t [N_CORES-1:0] ev_data,
  output logic                    idle,
  output logic [15:0]             drop_count
);
  typedef enum logic [3:0] {
    S_IDLE, S_DT, S_HDR0, S_HDR1, S_HDR2, S_HDR3, S_WORD_A, S_WORD_B, S_EMIT
  } state_e;

  state_e       st;
  spike_body_t  body;
  fin_de_t      de;
  logic [15:0]  ptr;
  logic [10:0]  cnt;       // remaining entries / neurons
  logic [7:0]   coding;
  logic [10:0]  margin, nid_cur;
  logic [10:0]  word_a;
  logic [N_CORES-1:0] pend;
  nc_event_t    ev;

  assign de        = fin_de_t'(dt_q);
  assign pkt_ready = (st == S_IDLE);
  assign idle      = (st == S_IDLE) && !pkt_valid;
  spike_body_t in_body;
  assign in_body   = spike_body_t'(pkt.body);
  assign dt_addr   = in_body.index;

  always_comb begin
    ev_valid = pend;
    for (int n = 0; n < N_CORES; n++) ev_data[n] = ev;
  end

  // table read requests
  always_comb begin
    dt_re   = (st == S_IDLE) && pkt_valid;
    it_re   = 1'b0;
    it_addr = ptr;
    unique case (st)
      S_DT: begin
        it_re   = (de.tag == body.tag);
        it_addr = de.addr;
      end
      S_HDR0, S_HDR1, S_HDR2, S_WORD_A: it_re = 1'b1;
      S_HDR3: it_re = (de.ietype != 2'd2);
      S_EMIT: it_re = ((pend & ~ev_ready) == '0) && (cnt != 11'd1) && (de.ietype != 2'd2);
      default: ;
    endcase
    if (st != S_DT) it_addr = ptr;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_IDLE;
      pend <= '0;
      drop_count <= '0;
      ptr <= '0; cnt <= '0; coding <= '0; margin <= '0; nid_cur <= '0; word_a <= '0;
      body <= '0; ev <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (pkt_valid) begin
          body <= in_body;
          st   <= S_DT;
        end
        S_DT: begin
          if (de.tag != body.tag) begin
            drop_count <= drop_count + 1'b1;
            st <= S_IDLE;
          end else begin
            ptr <= de.addr + 1'b1;
            st  <= S_HDR0;
          end
        end
        S_HDR0: begin           // word 0: N (types 0,1) or coding (types 2,3)
          ptr <= ptr + 1'b1;
          if (de.ietype[1]) begin
            coding <= it_q[7:0];
            st <= S_HDR1;
          end else begin
            cnt <= it_q;
            st  <= (it_q == 0) ? S_IDLE : S_WORD_A;
          end
        end
        S_HDR1: begin           // type 2: margin; type 3: N
          ptr <= ptr + 1'b1;
          if (de.ietype == 2'd2) begin
            margin <= it_q;
            st <= S_HDR2;
          end else begin
            cnt <= it_q;
            st  <= (it_q == 0) ? S_IDLE : S_WORD_A;
          end
        end
        S_HDR2: begin           // type 2: nums
          cnt <= it_q;
          st  <= S_HDR3;
        end
        S_HDR3: begin           // type 2: start id
          nid_cur <= it_q;
          if (cnt == 0) st <= S_IDLE;
          else begin
            ev.nid  <= it_q[7:0];
            ev.axon <= 12'(body.gaxon);
            ev.data <= body.data;
            pend    <= coding[N_CORES-1:0];
            st      <= S_EMIT;
          end
        end
        S_WORD_A: begin         // neuron id (all) - for types 1 and 3 fetch axon next
          if (de.ietype == 2'd0) begin
            ev.nid  <= it_q[7:0];
            ev.axon <= 12'(body.gaxon);
            ev.data <= body.data;
            pend    <= N_CORES'(1) << it_q[10:8];
            st      <= S_EMIT;
          end else begin
            word_a <= it_q;
            ptr    <= ptr + 1'b1;
            st     <= S_WORD_B;
          end
        end
        S_WORD_B: begin         // local axon id
          ev.data <= body.data;
          if (de.ietype == 2'd1) begin
            ev.nid  <= word_a[7:0];
            ev.axon <= 12'(it_q);
            pend    <= N_CORES'(1) << word_a[10:8];
          end else begin
            ev.nid  <= word_a[7:0];
            ev.axon <= 12'(32'(body.gaxon) * 32'(k2) + 32'(it_q));
            pend    <= coding[N_CORES-1:0];
          end
          st <= S_EMIT;
        end
        S_EMIT: begin
          pend <= pend & ~ev_ready;
          if ((pend & ~ev_ready) == '0) begin
            cnt <= cnt - 1'b1;
            if (cnt == 11'd1) st <= S_IDLE;
            else if (de.ietype == 2'd2) begin
              nid_cur <= nid_cur + margin + 1'b1;
              ev.nid  <= 8'(nid_cur + margin + 1'b1);
              pend    <= coding[N_CORES-1:0];
            end else begin
              ptr <= ptr + 1'b1;
              st  <= S_WORD_A;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
