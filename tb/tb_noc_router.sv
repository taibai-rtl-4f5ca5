// tb_noc_router: checks the router in a 4 x 3 mesh of routers (wired as in
// the chip top) with random traffic from every local port: unicast to random
// nodes and to coordinates off the mesh, regional multicast to random
// rectangles and chip-wide broadcast, with random back-pressure on the local
// outputs. Every packet carries a unique id. Checked: each node's local port
// receives exactly one copy of every packet whose destination covers it and
// nothing else; packets for off-mesh coordinates leave once through the
// correct side of the mesh; every packet is delivered (no loss, no deadlock);
// the routers go idle at the end.
`include "tb_check.svh"
module tb_noc_router;
  import taibai_pkg::*;
  `TB_COUNTERS
  localparam int MX = 4, MY = 3, NPKT = 1500;
  localparam int L = 0, N = 1, E = 2, S = 3, W = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic    [MY-1:0][MX-1:0][4:0] iv, ir, ov, orr;
  packet_t [MY-1:0][MX-1:0][4:0] id, od;
  logic    [MY-1:0][MX-1:0]      ridle;

  for (genvar y = 0; y < MY; y++) begin : g_y
    for (genvar x = 0; x < MX; x++) begin : g_x
      noc_router #(.MESH_X(MX), .MESH_Y(MY)) u_r (
        .clk, .rst, .my_x(4'(x)), .my_y(4'(y)),
        .in_valid(iv[y][x]), .in_ready(ir[y][x]), .in_data(id[y][x]),
        .out_valid(ov[y][x]), .out_ready(orr[y][x]), .out_data(od[y][x]), .idle(ridle[y][x]));
      if (x < MX - 1) begin : g_e
        assign iv[y][x+1][W] = ov[y][x][E];   assign id[y][x+1][W] = od[y][x][E];
        assign orr[y][x][E]  = ir[y][x+1][W];
        assign iv[y][x][E]   = ov[y][x+1][W]; assign id[y][x][E]   = od[y][x+1][W];
        assign orr[y][x+1][W] = ir[y][x][E];
      end else begin : g_ee
        assign iv[y][x][E] = 1'b0; assign id[y][x][E] = '0; assign orr[y][x][E] = 1'b1;
      end
      if (x == 0) begin : g_we
        assign iv[y][x][W] = 1'b0; assign id[y][x][W] = '0; assign orr[y][x][W] = 1'b1;
      end
      if (y < MY - 1) begin : g_n
        assign iv[y+1][x][S] = ov[y][x][N];   assign id[y+1][x][S] = od[y][x][N];
        assign orr[y][x][N]  = ir[y+1][x][S];
        assign iv[y][x][N]   = ov[y+1][x][S]; assign id[y][x][N]   = od[y+1][x][S];
        assign orr[y+1][x][S] = ir[y][x][N];
      end else begin : g_ne
        assign iv[y][x][N] = 1'b0; assign id[y][x][N] = '0; assign orr[y][x][N] = 1'b1;
      end
      if (y == 0) begin : g_se
        assign iv[y][x][S] = 1'b0; assign id[y][x][S] = '0; assign orr[y][x][S] = 1'b1;
      end
    end
  end

  // local ports driven by the testbench
  logic    [MY-1:0][MX-1:0] src_v, snk_r;
  packet_t [MY-1:0][MX-1:0] src_d;
  always_comb
    for (int y = 0; y < MY; y++)
      for (int x = 0; x < MX; x++) begin
        iv[y][x][L] = src_v[y][x]; id[y][x][L] = src_d[y][x]; orr[y][x][L] = snk_r[y][x];
      end

  `WATCHDOG(clk, 200000)

  // expected copies: exp_cnt[id][node] ; node MX*MY..+3 = off-mesh N,E,S,W
  int exp_cnt [NPKT][MX*MY+4];
  int got_cnt [NPKT][MX*MY+4];
  int n_uni = 0, n_multi = 0, n_bcast = 0, n_off = 0, n_bp = 0, delivered = 0, expected = 0;

  function automatic packet_t mk(int pid, int sx, int sy);
    packet_t p;
    int k, x0, y0, x1, y1;
    p = '0;
    p.body[31:0] = 32'(pid);
    k = $urandom % 10;
    if (k < 4) begin                          // unicast in mesh
      p.ptype = PKT_UNICAST;
      p.dest = {4'($urandom % MX), 4'($urandom % MY), 4'h0, 4'h0};
      exp_cnt[pid][int'(p.dest.y0) * MX + int'(p.dest.x0)] = 1;
      n_uni++;
    end else if (k < 5) begin                 // unicast off the mesh
      p.ptype = ($urandom % 2) ? PKT_RD_RESP : PKT_UNICAST;
      case ($urandom % 4)
        0: begin p.dest = {4'hF, 4'($urandom % MY), 8'h0}; exp_cnt[pid][MX*MY+3] = 1; end
        1: begin p.dest = {4'(MX), 4'($urandom % MY), 8'h0}; exp_cnt[pid][MX*MY+1] = 1; end
        2: begin p.dest = {4'($urandom % MX), 4'hF, 8'h0}; exp_cnt[pid][MX*MY+2] = 1; end
        default: begin p.dest = {4'($urandom % MX), 4'(MY), 8'h0}; exp_cnt[pid][MX*MY+0] = 1; end
      endcase
      n_off++;
    end else begin
      if (k < 9) begin
        p.ptype = PKT_MULTICAST;
        x0 = $urandom % MX; x1 = x0 + $urandom % (MX - x0);
        y0 = $urandom % MY; y1 = y0 + $urandom % (MY - y0);
        n_multi++;
      end else begin
        p.ptype = PKT_BROADCAST;
        x0 = 0; y0 = 0; x1 = MX - 1; y1 = MY - 1;
        n_bcast++;
      end
      p.dest = {4'(x0), 4'(y0), 4'(x1), 4'(y1)};
      for (int y = y0; y <= y1; y++) for (int x = x0; x <= x1; x++) exp_cnt[pid][y * MX + x] = 1;
    end
    return p;
  endfunction

  // sinks: local outputs with back-pressure, and the mesh edges
  always @(posedge clk) if (!rst) begin
    for (int y = 0; y < MY; y++)
      for (int x = 0; x < MX; x++) begin
        if (ov[y][x][L] && snk_r[y][x]) begin
          got_cnt[od[y][x][L].body[31:0]][y * MX + x]++;
          delivered++;
        end
        if (ov[y][x][L] && !snk_r[y][x]) n_bp++;
        if (y == MY - 1 && ov[y][x][N]) begin got_cnt[od[y][x][N].body[31:0]][MX*MY+0]++; delivered++; end
        if (x == MX - 1 && ov[y][x][E]) begin got_cnt[od[y][x][E].body[31:0]][MX*MY+1]++; delivered++; end
        if (y == 0      && ov[y][x][S]) begin got_cnt[od[y][x][S].body[31:0]][MX*MY+2]++; delivered++; end
        if (x == 0      && ov[y][x][W]) begin got_cnt[od[y][x][W].body[31:0]][MX*MY+3]++; delivered++; end
      end
  end
  always @(negedge clk)
    for (int y = 0; y < MY; y++) for (int x = 0; x < MX; x++) snk_r[y][x] = ($urandom % 4) != 0;

  initial begin
    int pid = 0;
    src_v = '0; src_d = '0;
    for (int i = 0; i < NPKT; i++) for (int j = 0; j < MX*MY+4; j++) begin exp_cnt[i][j] = 0; got_cnt[i][j] = 0; end
    repeat (3) @(posedge clk);
    rst = 0;
    while (pid < NPKT) begin
      @(negedge clk);
      for (int y = 0; y < MY; y++)
        for (int x = 0; x < MX; x++)
          if (!src_v[y][x] && pid < NPKT && ($urandom % 3) == 0) begin
            src_d[y][x] = mk(pid, x, y); src_v[y][x] = 1; pid++;
          end
      @(posedge clk); #1;
      for (int y = 0; y < MY; y++)
        for (int x = 0; x < MX; x++)
          if (src_v[y][x] && ir[y][x][L]) src_v[y][x] = 0;   // accepted at this edge
    end
    while (src_v != 0) begin
      @(posedge clk); #1;
      for (int y = 0; y < MY; y++) for (int x = 0; x < MX; x++) if (src_v[y][x] && ir[y][x][L]) src_v[y][x] = 0;
    end
    repeat (400) @(posedge clk);
    for (int i = 0; i < NPKT; i++) begin
      bit ok = 1;
      for (int j = 0; j < MX*MY+4; j++) begin
        if (got_cnt[i][j] != exp_cnt[i][j]) ok = 0;
        expected += exp_cnt[i][j];
      end
      `CHECK(ok, "packet delivered exactly to its destination set")
      if (!ok) for (int j = 0; j < MX*MY+4; j++) if (got_cnt[i][j] != exp_cnt[i][j])
        $display("  pkt %0d node %0d got %0d exp %0d", i, j, got_cnt[i][j], exp_cnt[i][j]);
    end
    `CHECK(delivered == expected, "total deliveries")
    `CHECK(&ridle, "routers idle at the end")
    $display("unicast=%0d offmesh=%0d multicast=%0d broadcast=%0d deliveries=%0d backpressure=%0d",
             n_uni, n_off, n_multi, n_bcast, delivered, n_bp);
    `CHECK(n_uni > 0 && n_off > 0 && n_multi > 0 && n_bcast > 0 && n_bp > 0, "mode coverage")
    `TB_FINISH
  end
endmodule
