// noc_router: five-port router of the 2D-mesh network-on-chip.
//
// Each cortical column has one router with ports Local, North (y+1), East
// (x+1), South (y-1) and West (x-1). The router is destination driven and
// supports the three spike routing modes of the chip:
//   * point-to-point (and all memory-access packets): XY dimension-order
//     routing to (x0,y0);
//   * regional multicast to the rectangle x0..x1, y0..y1: the packet first
//     takes the shortest XY path to the nearest node of the rectangle (phase
//     TRAVEL); that node delivers it locally and spreads it along its row
//     (phase ROW) and up and down its column (phase COL); every node reached
//     in ROW phase also spreads it up and down its column. Every node of the
//     rectangle receives exactly one copy;
//   * broadcast: the same tree over the whole mesh.
// The three modes and "shortest path to the region, then a tree inside it"
// are the paper's; the particular tree (row first, then columns) and the use
// of the phase field to mark it are this design's reading.
//
// Coordinates are 4 bits; 4'hF means -1, so a packet addressed to x=-1 or
// y=-1 (or beyond MESH_X-1 / MESH_Y-1) leaves the mesh through the edge
// router towards the proxy on that side.
//
// Micro-architecture: a FIFO per input port (IN_DEPTH words). The head of each
// FIFO computes the set of outputs it needs; each output has a round-robin
// arbiter over the inputs that still need it. A head is popped once every
// output it needs has taken a copy, so a multicast copy may leave on different
// outputs in different cycles. The phase field is rewritten per output. One
// packet per output per cycle; links use valid/ready.
module noc_router
  import taibai_pkg::*;
#(
  parameter int MESH_X   = 11,
  parameter int MESH_Y   = 12,
  parameter int IN_DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic    [4:0]      in_valid,
  output logic    [4:0]      in_ready,
  input  packet_t [4:0]      in_data,
  output logic    [4:0]      out_valid,
  input  logic    [4:0]      out_ready,
  output packet_t [4:0]      out_data,
  output logic               idle
);
  localparam int L = 0, N = 1, E = 2, S = 3, W = 4;

  logic    [4:0]      hv;          // head valid
  packet_t [4:0]      hd;          // head data
  logic    [4:0]      hpop;
  logic    [4:0][4:0] need;        // need[i][o]
  logic    [4:0][4:0] done;        // copies already sent
  logic    [4:0][4:0] grant;       // grant[o][i]
  logic    [4:0][2:0] rr;          // round-robin pointer per output
  logic    [4:0][$clog2(IN_DEPTH):0] cnt;

  for (genvar i = 0; i < 5; i++) begin : g_in
    sync_fifo #(.W($bits(packet_t)), .DEPTH(IN_DEPTH)) u_fifo (
      .clk, .rst,
      .in_valid(in_valid[i]), .in_ready(in_ready[i]), .in_data(in_data[i]),
      .out_valid(hv[i]), .out_ready(hpop[i]), .out_data(hd[i]), .count(cnt[i]));
  end

  // ---------------------------------------------------------- route compute
  function automatic logic [4:0] route(packet_t p, int inport,
                                       int signed x, int signed y);
    logic [4:0] o;
    int signed x0, y0, x1, y1, tx, ty;
    o = '0;
    if (p.ptype == PKT_BROADCAST) begin
      x0 = 0; y0 = 0; x1 = MESH_X - 1; y1 = MESH_Y - 1;
    end else begin
      x0 = coord(p.dest.x0); y0 = coord(p.dest.y0);
      x1 = coord(p.dest.x1); y1 = coord(p.dest.y1);
    end
    if (!(p.ptype inside {PKT_MULTICAST, PKT_BROADCAST})) begin
      // XY routing
      if (x0 > x)      o[E] = 1'b1;
      else if (x0 < x) o[W] = 1'b1;
      else if (y0 > y) o[N] = 1'b1;
      else if (y0 < y) o[S] = 1'b1;
      else             o[L] = 1'b1;
    end else if (p.phase == PH_TRAVEL) begin
      tx = (x < x0) ? x0 : (x > x1) ? x1 : x;
      ty = (y < y0) ? y0 : (y > y1) ? y1 : y;
      if (tx > x)      o[E] = 1'b1;
      else if (tx < x) o[W] = 1'b1;
      else if (ty > y) o[N] = 1'b1;
      else if (ty < y) o[S] = 1'b1;
      else begin       // entry node of the region
        o[L] = 1'b1;
        o[E] = (x < x1); o[W] = (x > x0);
        o[N] = (y < y1); o[S] = (y > y0);
      end
    end else if (p.phase == PH_ROW) begin
      o[L] = 1'b1;
      if (inport == W) o[E] = (x < x1);
      if (inport == E) o[W] = (x > x0);
      o[N] = (y < y1); o[S] = (y > y0);
    end else begin     // PH_COL
      o[L] = 1'b1;
      if (inport == S) o[N] = (y < y1);
      if (inport == N) o[S] = (y > y0);
    end
    return o;
  endfunction

  always_comb begin
    for (int i = 0; i < 5; i++)
      need[i] = hv[i] ? route(hd[i], i, int'(my_x), int'(my_y)) : 5'b0;
  end

  // ---------------------------------------------------------- arbitration
  always_comb begin
    grant = '0;
    for (int o = 0; o < 5; o++) begin
      for (int k = 0; k < 5; k++) begin
        int i;
        i = (int'(rr[o]) + k) % 5;
        if (grant[o] == 0 && need[i][o] && !done[i][o]) grant[o][i] = 1'b1;
      end
    end
  end

  always_comb begin
    for (int o = 0; o < 5; o++) begin
      out_valid[o] = |grant[o];
      out_data[o]  = '0;
      for (int i = 0; i < 5; i++)
        if (grant[o][i]) out_data[o] = hd[i];
    end
    // phase rewrite: a copy leaving a node inside the region goes on as ROW
    // (east/west) or COL (north/south); a copy still travelling keeps TRAVEL.
    for (int o = 1; o < 5; o++) begin
      for (int i = 0; i < 5; i++) begin
        if (grant[o][i] && (hd[i].ptype inside {PKT_MULTICAST, PKT_BROADCAST}) && need[i][L])
          out_data[o].phase = (o == E || o == W) ? PH_ROW : PH_COL;
      end
    end
  end

  // ---------------------------------------------------------- bookkeeping
  logic [4:0][4:0] sent_now;   // sent_now[i][o]
  always_comb begin
    for (int i = 0; i < 5; i++)
      for (int o = 0; o < 5; o++)
        sent_now[i][o] = grant[o][i] && out_ready[o];
    for (int i = 0; i < 5; i++)
      hpop[i] = hv[i] && ((done[i] | sent_now[i]) == need[i]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      done <= '0;
      rr   <= '0;
    end else begin
      for (int i = 0; i < 5; i++)
        done[i] <= hpop[i] ? 5'b0 : (done[i] | sent_now[i]);
      for (int o = 0; o < 5; o++)
        for (int i = 0; i < 5; i++)
          if (grant[o][i] && out_ready[o]) rr[o] <= 3'((i + 1) % 5);
    end
  end

  assign idle = (hv == 5'b0);

  // a head never needs zero outputs
  assert property (@(posedge clk) disable iff (rst)
                   (hv[0] -> need[0] != 0) and (hv[1] -> need[1] != 0) and
                   (hv[2] -> need[2] != 0) and (hv[3] -> need[3] != 0) and
                   (hv[4] -> need[4] != 0));
endmodule
