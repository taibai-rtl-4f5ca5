// taibai_top: the TaiBai chip - a 2D mesh of cortical columns.
//
// MESH_X x MESH_Y (11 x 12 = 132) nodes, each a cortical column (scheduler
// plus eight neuron cores) with its five-port router. Routers link to their
// four neighbours; the links leaving the mesh on each side meet a proxy unit,
// which merges them into one off-chip link per side (index 0 north, 1 east,
// 2 south, 3 west). The off-chip links are the top's ports: the serial
// high-speed interface behind each proxy is not part of this RTL. A stage
// controller sequences INIT, INTEG and FIRE for all columns, using the
// network's idle flags to decide when INTEG may end.
//
// Node (x, y) is column x (0 = west) and row y (0 = south). Packets for the
// host are addressed to a coordinate outside the mesh (x or y = 4'hF means
// -1, i.e. west or south of the chip) and leave through that side's proxy.
//
// Usage: hold start low, send memory-access write packets in through any
// off-chip link to load the model, then pulse start; the chip runs
// `timesteps` timesteps (0 = forever) and pulses done. Spike packets sent in
// during INTEG stages act as the model's input; responses to probe packets
// and spikes addressed off-chip come out on the off-chip links.
module taibai_top
  import taibai_pkg::*;
#(
  parameter int MESH_X        = 11,
  parameter int MESH_Y        = 12,
  parameter int IMEM_WORDS    = 1024,
  parameter int DMEM_WORDS    = 8192,
  parameter int FIN_DT_DEPTH  = 2048,
  parameter int FIN_IT_DEPTH  = 65536,
  parameter int FOUT_DT_DEPTH = 2048,
  parameter int FOUT_IT_DEPTH = 8192
) (
  input  logic           clk,
  input  logic           rst,
  // control
  input  logic           start,
  input  logic [15:0]    timesteps,
  input  logic [15:0]    integ_cycles,
  input  logic [15:0]    fire_cycles,
  output stage_e         stage,
  output logic [15:0]    timestep,
  output logic           done,
  // off-chip links: 0 north, 1 east, 2 south, 3 west
  input  logic    [3:0]  ext_in_valid,
  output logic    [3:0]  ext_in_ready,
  input  packet_t [3:0]  ext_in_data,
  output logic    [3:0]  ext_out_valid,
  input  logic    [3:0]  ext_out_ready,
  output packet_t [3:0]  ext_out_data
);
  localparam int L = 0, N = 1, E = 2, S = 3, W = 4;

  // per-router port bundles [y][x][port]
  logic    [MESH_Y-1:0][MESH_X-1:0][4:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  packet_t [MESH_Y-1:0][MESH_X-1:0][4:0] r_in_data, r_out_data;
  logic    [MESH_Y-1:0][MESH_X-1:0]      r_idle, c_nc_idle, c_sched_idle;

  logic fire_start, run, integ, net_idle, cores_idle;

  stage_ctrl u_ctrl (
    .clk, .rst, .start, .timesteps, .integ_cycles, .fire_cycles,
    .net_idle, .cores_idle, .stage, .fire_start, .timestep, .done);

  assign run   = (stage != ST_INIT);
  assign integ = (stage == ST_INTEG);
  assign cores_idle = &c_nc_idle;
  assign net_idle   = (&r_idle) && (&c_sched_idle) && (&c_nc_idle);

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      noc_router #(.MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_router (
        .clk, .rst, .my_x(COORD_W'(x)), .my_y(COORD_W'(y)),
        .in_valid(r_in_valid[y][x]), .in_ready(r_in_ready[y][x]), .in_data(r_in_data[y][x]),
        .out_valid(r_out_valid[y][x]), .out_ready(r_out_ready[y][x]), .out_data(r_out_data[y][x]),
        .idle(r_idle[y][x]));

      cortical_column #(
        .MESH_X(MESH_X), .MESH_Y(MESH_Y), .IMEM_WORDS(IMEM_WORDS), .DMEM_WORDS(DMEM_WORDS),
        .FIN_DT_DEPTH(FIN_DT_DEPTH), .FIN_IT_DEPTH(FIN_IT_DEPTH),
        .FOUT_DT_DEPTH(FOUT_DT_DEPTH), .FOUT_IT_DEPTH(FOUT_IT_DEPTH)
      ) u_cc (
        .clk, .rst, .run, .integ, .fire_start,
        .rx_valid(r_out_valid[y][x][L]), .rx_ready(r_out_ready[y][x][L]), .rx_pkt(r_out_data[y][x][L]),
        .tx_valid(r_in_valid[y][x][L]), .tx_ready(r_in_ready[y][x][L]), .tx_pkt(r_in_data[y][x][L]),
        .nc_idle(c_nc_idle[y][x]), .sched_idle(c_sched_idle[y][x]));

      // links between neighbours (each router drives its own outputs)
      if (x < MESH_X - 1) begin : g_e
        assign r_in_valid[y][x+1][W]  = r_out_valid[y][x][E];
        assign r_in_data[y][x+1][W]   = r_out_data[y][x][E];
        assign r_out_ready[y][x][E]   = r_in_ready[y][x+1][W];
        assign r_in_valid[y][x][E]    = r_out_valid[y][x+1][W];
        assign r_in_data[y][x][E]     = r_out_data[y][x+1][W];
        assign r_out_ready[y][x+1][W] = r_in_ready[y][x][E];
      end
      if (y < MESH_Y - 1) begin : g_n
        assign r_in_valid[y+1][x][S]  = r_out_valid[y][x][N];
        assign r_in_data[y+1][x][S]   = r_out_data[y][x][N];
        assign r_out_ready[y][x][N]   = r_in_ready[y+1][x][S];
        assign r_in_valid[y][x][N]    = r_out_valid[y+1][x][S];
        assign r_in_data[y][x][N]     = r_out_data[y+1][x][S];
        assign r_out_ready[y+1][x][S] = r_in_ready[y][x][N];
      end
    end
  end

  // ---------------------------------------------------------------- proxies
  logic    [MESH_X-1:0] pn_in_v, pn_in_r, pn_out_v, pn_out_r, ps_in_v, ps_in_r, ps_out_v, ps_out_r;
  packet_t [MESH_X-1:0] pn_in_d, pn_out_d, ps_in_d, ps_out_d;
  logic    [MESH_Y-1:0] pe_in_v, pe_in_r, pe_out_v, pe_out_r, pw_in_v, pw_in_r, pw_out_v, pw_out_r;
  packet_t [MESH_Y-1:0] pe_in_d, pe_out_d, pw_in_d, pw_out_d;

  for (genvar x = 0; x < MESH_X; x++) begin : g_ns
    // north edge: routers of row MESH_Y-1
    assign pn_in_v[x] = r_out_valid[MESH_Y-1][x][N];
    assign pn_in_d[x] = r_out_data[MESH_Y-1][x][N];
    assign r_out_ready[MESH_Y-1][x][N] = pn_in_r[x];
    assign r_in_valid[MESH_Y-1][x][N]  = pn_out_v[x];
    assign r_in_data[MESH_Y-1][x][N]   = pn_out_d[x];
    assign pn_out_r[x] = r_in_ready[MESH_Y-1][x][N];
    // south edge: routers of row 0
    assign ps_in_v[x] = r_out_valid[0][x][S];
    assign ps_in_d[x] = r_out_data[0][x][S];
    assign r_out_ready[0][x][S] = ps_in_r[x];
    assign r_in_valid[0][x][S]  = ps_out_v[x];
    assign r_in_data[0][x][S]   = ps_out_d[x];
    assign ps_out_r[x] = r_in_ready[0][x][S];
  end
  for (genvar y = 0; y < MESH_Y; y++) begin : g_ew
    assign pe_in_v[y] = r_out_valid[y][MESH_X-1][E];
    assign pe_in_d[y] = r_out_data[y][MESH_X-1][E];
    assign r_out_ready[y][MESH_X-1][E] = pe_in_r[y];
    assign r_in_valid[y][MESH_X-1][E]  = pe_out_v[y];
    assign r_in_data[y][MESH_X-1][E]   = pe_out_d[y];
    assign pe_out_r[y] = r_in_ready[y][MESH_X-1][E];
    assign pw_in_v[y] = r_out_valid[y][0][W];
    assign pw_in_d[y] = r_out_data[y][0][W];
    assign r_out_ready[y][0][W] = pw_in_r[y];
    assign r_in_valid[y][0][W]  = pw_out_v[y];
    assign r_in_data[y][0][W]   = pw_out_d[y];
    assign pw_out_r[y] = r_in_ready[y][0][W];
  end

  proxy_unit #(.N(MESH_X), .VERTICAL(1'b0)) u_proxy_n (
    .clk, .rst,
    .edge_in_valid(pn_in_v), .edge_in_ready(pn_in_r), .edge_in_data(pn_in_d),
    .edge_out_valid(pn_out_v), .edge_out_ready(pn_out_r), .edge_out_data(pn_out_d),
    .ext_out_valid(ext_out_valid[0]), .ext_out_ready(ext_out_ready[0]), .ext_out_data(ext_out_data[0]),
    .ext_in_valid(ext_in_valid[0]), .ext_in_ready(ext_in_ready[0]), .ext_in_data(ext_in_data[0]));
  proxy_unit #(.N(MESH_Y), .VERTICAL(1'b1)) u_proxy_e (
    .clk, .rst,
    .edge_in_valid(pe_in_v), .edge_in_ready(pe_in_r), .edge_in_data(pe_in_d),
    .edge_out_valid(pe_out_v), .edge_out_ready(pe_out_r), .edge_out_data(pe_out_d),
    .ext_out_valid(ext_out_valid[1]), .ext_out_ready(ext_out_ready[1]), .ext_out_data(ext_out_data[1]),
    .ext_in_valid(ext_in_valid[1]), .ext_in_ready(ext_in_ready[1]), .ext_in_data(ext_in_data[1]));
  proxy_unit #(.N(MESH_X), .VERTICAL(1'b0)) u_proxy_s (
    .clk, .rst,
    .edge_in_valid(ps_in_v), .edge_in_ready(ps_in_r), .edge_in_data(ps_in_d),
    .edge_out_valid(ps_out_v), .edge_out_ready(ps_out_r), .edge_out_data(ps_out_d),
    .ext_out_valid(ext_out_valid[2]), .ext_out_ready(ext_out_ready[2]), .ext_out_data(ext_out_data[2]),
    .ext_in_valid(ext_in_valid[2]), .ext_in_ready(ext_in_ready[2]), .ext_in_data(ext_in_data[2]));
  proxy_unit #(.N(MESH_Y), .VERTICAL(1'b1)) u_proxy_w (
    .clk, .rst,
    .edge_in_valid(pw_in_v), .edge_in_ready(pw_in_r), .edge_in_data(pw_in_d),
    .edge_out_valid(pw_out_v), .edge_out_ready(pw_out_r), .edge_out_data(pw_out_d),
    .ext_out_valid(ext_out_valid[3]), .ext_out_ready(ext_out_ready[3]), .ext_out_data(ext_out_data[3]),
    .ext_in_valid(ext_in_valid[3]), .ext_in_ready(ext_in_ready[3]), .ext_in_data(ext_in_data[3]));
endmodule
