// scheduler: the controller of a cortical column (CC).
//
// It sits between the column's router port and its eight neuron cores and
// owns the column's network topology: the fan-in tables (first level 2K x 22
// bits, second level 64K x 11 bits) and the fan-out tables (first level 2K x
// 24 bits, second level 8K x 32 bits), sizes as the paper gives them.
//   * Packets from the router enter a small FIFO. Spike packets go to the
//     decoder (fanin_decoder), which turns each into events for the cores;
//     memory-access packets go to the configuration and probe unit
//     (config_probe); a stray probe response is dropped.
//   * In the INTEG stage the encoder (fanout_encoder) turns the neurons that
//     fired in the previous FIRE stage into spike packets.
//   * Packets generated by the encoder and by the probe unit are merged onto
//     the router's local input, probe responses first.
// The split into controller, decoder, encoder and config & probe unit is the
// paper's (Fig. 4); the FIFO depth, the merge priority and the port counts of
// the tables are this design's.
//
// idle is high when no packet is buffered or being processed and no core has
// a fired neuron left to send.
module scheduler
  import taibai_pkg::*;
#(
  parameter int N_CORES      = 8,
  parameter int MESH_X       = 11,
  parameter int MESH_Y       = 12,
  parameter int FIN_DT_DEPTH  = 2048,
  parameter int FIN_IT_DEPTH  = 65536,
  parameter int FOUT_DT_DEPTH = 2048,
  parameter int FOUT_IT_DEPTH = 8192
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     integ,       // INTEG stage: encoder enabled
  // router local port
  input  logic                     rx_valid,
  output logic                     rx_ready,
  input  packet_t                  rx_pkt,
  output logic                     tx_valid,
  input  logic                     tx_ready,
  output packet_t                  tx_pkt,
  // neuron cores
  output logic      [N_CORES-1:0]  ev_valid,
  input  logic      [N_CORES-1:0]  ev_ready,
  output nc_event_t [N_CORES-1:0]  ev_data,
  output logic [3:0]               oe_word,
  input  logic [N_CORES-1:0][15:0] oe_fired,
  input  logic [N_CORES-1:0][15:0] oe_type,
  output logic [4:0]               oe_float_idx,
  input  logic [N_CORES-1:0][15:0] oe_float,
  output logic [N_CORES-1:0]       oe_clr_v,
  output logic [7:0]               oe_clr_nid,
  input  logic [N_CORES-1:0]       oe_any,
  output nc_cfg_t [N_CORES-1:0]    nc_cfg,
  input  logic [N_CORES-1:0][15:0] nc_rdata,
  output logic                     idle,
  output logic [15:0]              drop_count,
  output logic [15:0]              sent_count
);
  localparam int FIN_DT_AW  = $clog2(FIN_DT_DEPTH);
  localparam int FIN_IT_AW  = $clog2(FIN_IT_DEPTH);
  localparam int FOUT_DT_AW = $clog2(FOUT_DT_DEPTH);
  localparam int FOUT_IT_AW = $clog2(FOUT_IT_DEPTH);

  // ------------------------------------------------------------ input FIFO
  logic    q_valid, q_ready;
  packet_t q_pkt;
  sync_fifo #(.W($bits(packet_t)), .DEPTH(4)) u_rxq (
    .clk, .rst, .in_valid(rx_valid), .in_ready(rx_ready), .in_data(rx_pkt),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_pkt), .count());

  logic is_spike, is_mem;
  assign is_spike = q_pkt.ptype inside {PKT_UNICAST, PKT_MULTICAST, PKT_BROADCAST};
  assign is_mem   = q_pkt.ptype inside {PKT_MEM_WR, PKT_MEM_RD};

  logic dec_ready, cfg_ready;
  always_comb begin
    q_ready = 1'b1;                       // anything else is dropped
    if (is_spike) q_ready = dec_ready;
    if (is_mem)   q_ready = cfg_ready;
  end

  // ------------------------------------------------------------ tables
  logic [1:0]                  fin_dt_re;
  logic [1:0][FIN_DT_AW-1:0]   fin_dt_ra;
  logic [1:0][21:0]            fin_dt_q;
  logic [1:0]                  fin_it_re;
  logic [1:0][FIN_IT_AW-1:0]   fin_it_ra;
  logic [1:0][10:0]            fin_it_q;
  logic [1:0]                  fout_dt_re;
  logic [1:0][FOUT_DT_AW-1:0]  fout_dt_ra;
  logic [1:0][23:0]            fout_dt_q;
  logic [1:0]                  fout_it_re;
  logic [1:0][FOUT_IT_AW-1:0]  fout_it_ra;
  logic [1:0][31:0]            fout_it_q;

  logic        fin_dt_we, fin_it_we, fout_dt_we, fout_it_we;
  logic [15:0] cfg_waddr, cfg_raddr;
  logic [31:0] cfg_wdata;
  logic [3:0]  cfg_tbl_re;

  ram_mp #(.W(22), .DEPTH(FIN_DT_DEPTH), .NR(2), .NW(1)) u_fin_dt (
    .clk, .re(fin_dt_re), .raddr(fin_dt_ra), .rdata(fin_dt_q),
    .we(fin_dt_we), .waddr(FIN_DT_AW'(cfg_waddr)), .wdata(cfg_wdata[21:0]));
  ram_mp #(.W(11), .DEPTH(FIN_IT_DEPTH), .NR(2), .NW(1)) u_fin_it (
    .clk, .re(fin_it_re), .raddr(fin_it_ra), .rdata(fin_it_q),
    .we(fin_it_we), .waddr(FIN_IT_AW'(cfg_waddr)), .wdata(cfg_wdata[10:0]));
  ram_mp #(.W(24), .DEPTH(FOUT_DT_DEPTH), .NR(2), .NW(1)) u_fout_dt (
    .clk, .re(fout_dt_re), .raddr(fout_dt_ra), .rdata(fout_dt_q),
    .we(fout_dt_we), .waddr(FOUT_DT_AW'(cfg_waddr)), .wdata(cfg_wdata[23:0]));
  ram_mp #(.W(32), .DEPTH(FOUT_IT_DEPTH), .NR(2), .NW(1)) u_fout_it (
    .clk, .re(fout_it_re), .raddr(fout_it_ra), .rdata(fout_it_q),
    .we(fout_it_we), .waddr(FOUT_IT_AW'(cfg_waddr)), .wdata(cfg_wdata));

  // read port 1 of every table belongs to the probe unit
  assign fin_dt_re[1]  = cfg_tbl_re[0];
  assign fin_it_re[1]  = cfg_tbl_re[1];
  assign fout_dt_re[1] = cfg_tbl_re[2];
  assign fout_it_re[1] = cfg_tbl_re[3];
  assign fin_dt_ra[1]  = FIN_DT_AW'(cfg_raddr);
  assign fin_it_ra[1]  = FIN_IT_AW'(cfg_raddr);
  assign fout_dt_ra[1] = FOUT_DT_AW'(cfg_raddr);
  assign fout_it_ra[1] = FOUT_IT_AW'(cfg_raddr);

  // ------------------------------------------------------------ decoder
  logic [11:0] k2;
  logic        dec_idle;
  logic [10:0] dec_dt_addr;
  logic [15:0] dec_it_addr;
  fanin_decoder #(.N_CORES(N_CORES)) u_dec (
    .clk, .rst, .k2,
    .pkt_valid(q_valid && is_spike), .pkt_ready(dec_ready), .pkt(q_pkt),
    .dt_re(fin_dt_re[0]), .dt_addr(dec_dt_addr), .dt_q(fin_dt_q[0]),
    .it_re(fin_it_re[0]), .it_addr(dec_it_addr), .it_q(fin_it_q[0]),
    .ev_valid, .ev_ready, .ev_data,
    .idle(dec_idle), .drop_count);
  assign fin_dt_ra[0] = FIN_DT_AW'(dec_dt_addr);
  assign fin_it_ra[0] = FIN_IT_AW'(dec_it_addr);

  // ------------------------------------------------------------ encoder
  logic        enc_valid, enc_ready, enc_idle;
  packet_t     enc_pkt;
  logic [10:0] enc_dt_addr;
  logic [12:0] enc_it_addr;
  fanout_encoder #(.N_CORES(N_CORES), .MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_enc (
    .clk, .rst, .enable(integ),
    .oe_word, .oe_fired, .oe_type, .oe_float_idx, .oe_float, .oe_clr_v, .oe_clr_nid,
    .any_fired(oe_any),
    .dt_re(fout_dt_re[0]), .dt_addr(enc_dt_addr), .dt_q(fout_dt_q[0]),
    .it_re(fout_it_re[0]), .it_addr(enc_it_addr), .it_q(fout_it_q[0]),
    .out_valid(enc_valid), .out_ready(enc_ready), .out_pkt(enc_pkt),
    .idle(enc_idle), .pkt_count(sent_count));
  assign fout_dt_ra[0] = FOUT_DT_AW'(enc_dt_addr);
  assign fout_it_ra[0] = FOUT_IT_AW'(enc_it_addr);

  // ------------------------------------------------------------ config & probe
  logic    resp_valid, resp_ready, cfg_idle;
  packet_t resp_pkt;
  config_probe #(.N_CORES(N_CORES)) u_cfg (
    .clk, .rst,
    .pkt_valid(q_valid && is_mem), .pkt_ready(cfg_ready), .pkt(q_pkt),
    .fin_dt_we, .fin_it_we, .fout_dt_we, .fout_it_we,
    .waddr(cfg_waddr), .wdata(cfg_wdata), .tbl_re(cfg_tbl_re), .raddr(cfg_raddr),
    .fin_dt_q(fin_dt_q[1]), .fin_it_q(fin_it_q[1]),
    .fout_dt_q(fout_dt_q[1]), .fout_it_q(fout_it_q[1]),
    .nc_cfg, .nc_rdata, .k2,
    .resp_valid, .resp_ready, .resp_pkt, .idle(cfg_idle));

  // ------------------------------------------------------------ output merge
  always_comb begin
    tx_valid   = resp_valid || enc_valid;
    tx_pkt     = resp_valid ? resp_pkt : enc_pkt;
    resp_ready = tx_ready;
    enc_ready  = tx_ready && !resp_valid;
  end

  assign idle = !q_valid && dec_idle && enc_idle && cfg_idle && !resp_valid;
endmodule
