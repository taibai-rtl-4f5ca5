// cortical_column: one cortical column core (CC) of the chip.
//
// A CC is the chip's basic functional unit: a scheduler and eight neuron
// cores (the paper's Fig. 2(b); 132 CCs x 8 cores = 1056 cores). The
// scheduler decodes incoming spike packets into events for the cores, runs
// configuration and probe accesses, and encodes the neurons the cores fired
// into outgoing packets. The router is kept outside, in the mesh.
//
// Stage inputs: run is low in the INIT stage (cores held at PC 0), integ is
// high in the INTEG stage (the encoder sends the previous FIRE stage's
// spikes), fire_start pulses on entry to FIRE. Outputs: nc_idle when every
// core waits in RECV with nothing pending, sched_idle when the scheduler has
// nothing buffered or left to send.
module cortical_column
  import taibai_pkg::*;
#(
  parameter int N_CORES       = 8,
  parameter int MESH_X        = 11,
  parameter int MESH_Y        = 12,
  parameter int IMEM_WORDS    = 1024,
  parameter int DMEM_WORDS    = 8192,
  parameter int FIN_DT_DEPTH  = 2048,
  parameter int FIN_IT_DEPTH  = 65536,
  parameter int FOUT_DT_DEPTH = 2048,
  parameter int FOUT_IT_DEPTH = 8192
) (
  input  logic    clk,
  input  logic    rst,
  input  logic    run,
  input  logic    integ,
  input  logic    fire_start,
  input  logic    rx_valid,
  output logic    rx_ready,
  input  packet_t rx_pkt,
  output logic    tx_valid,
  input  logic    tx_ready,
  output packet_t tx_pkt,
  output logic    nc_idle,
  output logic    sched_idle
);
  logic      [N_CORES-1:0]      ev_valid, ev_ready;
  nc_event_t [N_CORES-1:0]      ev_data;
  logic [3:0]                   oe_word;
  logic [N_CORES-1:0][15:0]     oe_fired, oe_type, oe_float, nc_rdata;
  logic [4:0]                   oe_float_idx;
  logic [N_CORES-1:0]           oe_clr_v, oe_any, core_idle;
  logic [7:0]                   oe_clr_nid;
  nc_cfg_t [N_CORES-1:0]        nc_cfg;

  scheduler #(
    .N_CORES(N_CORES), .MESH_X(MESH_X), .MESH_Y(MESH_Y),
    .FIN_DT_DEPTH(FIN_DT_DEPTH), .FIN_IT_DEPTH(FIN_IT_DEPTH),
    .FOUT_DT_DEPTH(FOUT_DT_DEPTH), .FOUT_IT_DEPTH(FOUT_IT_DEPTH)
  ) u_sched (
    .clk, .rst, .integ,
    .rx_valid, .rx_ready, .rx_pkt, .tx_valid, .tx_ready, .tx_pkt,
    .ev_valid, .ev_ready, .ev_data,
    .oe_word, .oe_fired, .oe_type, .oe_float_idx, .oe_float, .oe_clr_v, .oe_clr_nid,
    .oe_any, .nc_cfg, .nc_rdata,
    .idle(sched_idle), .drop_count(), .sent_count());

  for (genvar n = 0; n < N_CORES; n++) begin : g_nc
    neuron_core #(.IMEM_WORDS(IMEM_WORDS), .DMEM_WORDS(DMEM_WORDS)) u_nc (
      .clk, .rst, .run, .fire_start,
      .ev_valid(ev_valid[n]), .ev_ready(ev_ready[n]), .ev_data(ev_data[n]),
      .oe_word, .oe_fired(oe_fired[n]), .oe_type(oe_type[n]),
      .oe_float_idx, .oe_float(oe_float[n]),
      .oe_clr_v(oe_clr_v[n]), .oe_clr_nid,
      .oe_any(oe_any[n]),
      .cfg(nc_cfg[n]), .cfg_rdata(nc_rdata[n]), .idle(core_idle[n]));
  end

  assign nc_idle = &core_idle;
endmodule
