// config_probe: executes memory-access packets inside a cortical column.
//
// The host configures the chip (INIT stage) by sending memory-access write
// packets that load the topology tables, the neuron cores' programs and data,
// and the column's registers; it watches a running model by sending read
// packets, answered with a response packet (allowed in any stage, the paper
// mentions the FIRE stage). This unit decodes both.
//
// A packet names a memory with sel, a 16-bit word address and 16-bit data:
//   sel 0  fan-in first-level table (22-bit entries)
//   sel 1  fan-in second-level table (11-bit entries)
//   sel 2  fan-out first-level table (24-bit entries)
//   sel 3  fan-out second-level table (32-bit entries)
//   sel 4  column registers: address 0 = K2 (square of the conv kernel size)
//   sel 8+n  neuron core n; alt = 1 selects its instruction memory (address =
//          16-bit word), alt = 0 its data memory
// Entries wider than 16 bits are written in two packets: alt = 0 stages the
// low 16 bits, alt = 1 supplies the high bits and writes the entry. A read
// with alt = 1 returns the high bits. A read request carries the destination
// of its response (dest_t) in its data field.
// The paper gives this unit's role; the packet layout is this design's.
//
// Timing: a write takes one cycle; a read issues the memory read, takes the
// data one cycle later and then offers the response packet (valid/ready).
module config_probe
  import taibai_pkg::*;
#(
  parameter int N_CORES = 8
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  pkt_valid,
  output logic                  pkt_ready,
  input  packet_t               pkt,
  // table ports: write, and one read port each
  output logic                  fin_dt_we,
  output logic                  fin_it_we,
  output logic                  fout_dt_we,
  output logic                  fout_it_we,
  output logic [15:0]           waddr,
  output logic [31:0]           wdata,
  output logic [3:0]            tbl_re,      // one per table, order as sel
  output logic [15:0]           raddr,
  input  logic [21:0]           fin_dt_q,
  input  logic [10:0]           fin_it_q,
  input  logic [23:0]           fout_dt_q,
  input  logic [31:0]           fout_it_q,
  // neuron cores
  output nc_cfg_t [N_CORES-1:0] nc_cfg,
  input  logic [N_CORES-1:0][15:0] nc_rdata,
  // registers
  output logic [11:0]           k2,
  // responses
  output logic                  resp_valid,
  input  logic                  resp_ready,
  output packet_t               resp_pkt,
  output logic                  idle
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_RESP} state_e;
  state_e    st;
  mem_body_t b, rq;
  logic [15:0] staged;
  logic [15:0] rdata16, resp_data;
  logic        is_wr, is_rd;

  assign b         = mem_body_t'(pkt.body);
  assign pkt_ready = (st == S_IDLE);
  assign is_wr     = pkt_valid && (st == S_IDLE) && (pkt.ptype == PKT_MEM_WR);
  assign is_rd     = pkt_valid && (st == S_IDLE) && (pkt.ptype == PKT_MEM_RD);
  assign idle      = (st == S_IDLE) && !pkt_valid;

  assign waddr = b.addr;
  assign raddr = b.addr;
  // entries above 16 bits: {high half from this packet, staged low half};
  // the 11-bit fan-in second-level entry takes the data of a single packet
  assign wdata = (b.sel == SEL_FIN_IT) ? 32'(b.data) : {b.data, staged};

  always_comb begin
    fin_dt_we  = is_wr && b.sel == SEL_FIN_DT  && b.alt;
    fin_it_we  = is_wr && b.sel == SEL_FIN_IT;
    fout_dt_we = is_wr && b.sel == SEL_FOUT_DT && b.alt;
    fout_it_we = is_wr && b.sel == SEL_FOUT_IT && b.alt;
    for (int t = 0; t < 4; t++) tbl_re[t] = is_rd && (b.sel == 4'(t));
    for (int n = 0; n < N_CORES; n++) begin
      nc_cfg[n].req   = (is_wr || is_rd) && (b.sel == SEL_NC0 + 4'(n));
      nc_cfg[n].we    = is_wr;
      nc_cfg[n].imem  = b.alt;
      nc_cfg[n].addr  = b.addr[12:0];
      nc_cfg[n].wdata = b.data;
    end
  end

  always_comb begin
    rdata16 = '0;
    unique case (rq.sel)
      SEL_FIN_DT:  rdata16 = rq.alt ? 16'(fin_dt_q[21:16]) : fin_dt_q[15:0];
      SEL_FIN_IT:  rdata16 = 16'(fin_it_q);
      SEL_FOUT_DT: rdata16 = rq.alt ? 16'(fout_dt_q[23:16]) : fout_dt_q[15:0];
      SEL_FOUT_IT: rdata16 = rq.alt ? fout_it_q[31:16] : fout_it_q[15:0];
      SEL_REG:     rdata16 = 16'(k2);
      default:     if (rq.sel[3] && int'(rq.sel[2:0]) < N_CORES)
                     rdata16 = nc_rdata[rq.sel[2:0]];
    endcase
  end

  always_comb begin
    mem_body_t rb;
    rb = rq;
    rb.data  = resp_data;
    rb.spare = '0;
    resp_pkt.ptype = PKT_RD_RESP;
    resp_pkt.phase = PH_TRAVEL;
    resp_pkt.dest  = dest_t'(rq.data);
    resp_pkt.body  = rb;
  end
  assign resp_valid = (st == S_RESP);

  always_ff @(posedge clk) begin
    if (rst) begin
      st     <= S_IDLE;
      staged <= '0;
      k2     <= 12'd9;
      rq     <= '0;
      resp_data <= '0;
    end else begin
      unique case (st)
        S_IDLE: begin
          if (is_wr) begin
            if (!b.alt) staged <= b.data;
            if (b.sel == SEL_REG && b.addr == 0) k2 <= b.data[11:0];
          end
          if (is_rd) begin
            rq <= b;
            st <= S_READ;
          end
        end
        S_READ: begin
          resp_data <= rdata16;
          st <= S_RESP;
        end
        S_RESP: if (resp_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
