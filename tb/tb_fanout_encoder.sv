// tb_fanout_encoder: checks the fan-out encoder with eight output events
// memories (nc_out_events, as in the cores) and table models.
// Each round marks random neurons of random cores as fired, some as delayed
// spikes, each with its own payload word; the directory entry of every fired
// neuron points into the information table, where a chain of 1..4 entries is
// laid out upwards (normal spike) or downwards (delayed spike) and ends with
// an entry whose end bit is set. Destinations are single nodes, rectangles
// and the whole mesh. With the encoder enabled and random back-pressure on
// its output, checked: the set of packets equals the model's (type derived
// from the destination, tag, index, global axon id and payload); every fired
// bit is cleared; the encoder is idle afterwards; nothing is sent while it is
// disabled.
`include "tb_check.svh"
module tb_fanout_encoder;
  import taibai_pkg::*;
  `TB_COUNTERS
  localparam int NC = 8, MX = 11, MY = 12;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic enable, dt_re, it_re, out_valid, out_ready, idle;
  logic [3:0] oe_word;
  logic [NC-1:0][15:0] oe_fired, oe_type, oe_float;
  logic [4:0] oe_float_idx;
  logic [NC-1:0] oe_clr_v, any_fired;
  logic [7:0] oe_clr_nid;
  logic [10:0] dt_addr;
  logic [23:0] dt_q;
  logic [12:0] it_addr;
  logic [31:0] it_q;
  packet_t out_pkt;
  logic [15:0] pkt_count;

  fanout_encoder #(.N_CORES(NC), .MESH_X(MX), .MESH_Y(MY)) dut (.*);
  `WATCHDOG(clk, 400000)

  logic [NC-1:0] set_v;
  logic [7:0] set_nid;
  logic set_delay;
  logic [15:0] set_data;
  for (genvar c = 0; c < NC; c++) begin : g_oe
    nc_out_events u_oe (
      .clk, .rst, .set_v(set_v[c]), .set_nid, .set_delay, .set_data,
      .rd_word(oe_word), .fired_q(oe_fired[c]), .type_q(oe_type[c]),
      .float_idx(oe_float_idx), .float_q(oe_float[c]),
      .clr_v(oe_clr_v[c]), .clr_nid(oe_clr_nid), .any_fired(any_fired[c]));
  end

  fout_de_t dt [2048];
  fout_ie_t it [8192];
  always_ff @(posedge clk) begin
    if (dt_re) dt_q <= dt[dt_addr];
    if (it_re) it_q <= it[it_addr];
  end

  int exp_pk [packet_t];
  int n_uni = 0, n_multi = 0, n_bc = 0, n_delayed = 0, n_bp = 0, n_pk = 0;

  always @(negedge clk) out_ready = ($urandom % 3) != 0;
  always @(posedge clk) if (!rst) begin
    if (out_valid && !enable) begin failures++; $display("FAIL: packet while disabled"); end
    if (out_valid && out_ready) begin
      checks++;
      n_pk++;
      if (exp_pk.exists(out_pkt) && exp_pk[out_pkt] > 0) begin
        exp_pk[out_pkt]--;
        case (out_pkt.ptype) PKT_UNICAST: n_uni++; PKT_MULTICAST: n_multi++; default: n_bc++; endcase
      end else begin
        failures++; $display("FAIL: unexpected packet %h", out_pkt);
      end
    end
    if (out_valid && !out_ready) n_bp++;
  end

  function automatic dest_t rnd_dest();
    int k, x0, y0;
    k = $urandom % 3;
    x0 = $urandom % MX; y0 = $urandom % MY;
    if (k == 0) return {4'(x0), 4'(y0), 4'(x0), 4'(y0)};
    if (k == 1) return {4'h0, 4'h0, 4'(MX - 1), 4'(MY - 1)};
    return {4'(x0), 4'(y0), 4'(x0 + $urandom % (MX - x0)), 4'(y0 + 1 + $urandom % (MY - y0))};
  endfunction

  initial begin
    int ptr = 16;
    enable = 0; set_v = 0; set_nid = 0; set_delay = 0; set_data = 0; dt_q = 0; it_q = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int round = 0; round < 8; round++) begin
      bit used [NC][256];
      for (int c = 0; c < NC; c++) for (int n = 0; n < 256; n++) used[c][n] = 0;
      ptr = 16;
      for (int k = 0; k < 30; k++) begin
        int c, n, len;
        bit dly;
        c = $urandom % NC; n = $urandom % 256;
        if (used[c][n] || used[c][n ^ 32] || used[c][n ^ 64] || used[c][n ^ 96]) continue;
        // neurons sharing a float slot (id mod 32) would overwrite each
        // other's payload; the test keeps one neuron per slot and core
        for (int m = n % 32; m < 256; m += 32) if (used[c][m]) dly = 0;
        begin
          bit clash = 0;
          for (int m = n % 32; m < 256; m += 32) if (used[c][m]) clash = 1;
          if (clash) continue;
        end
        used[c][n] = 1;
        dly = ($urandom % 3) == 0;
        len = 1 + $urandom % 4;
        @(negedge clk);
        set_v = NC'(1) << c; set_nid = 8'(n); set_delay = dly; set_data = 16'($urandom);
        dt[c * 256 + n].gaxon = 11'($urandom);
        if (dly) n_delayed++;
        dt[c * 256 + n].addr = 13'(dly ? ptr + len - 1 : ptr);
        for (int j = 0; j < len; j++) begin
          int a;
          packet_t p;
          spike_body_t b;
          a = dly ? ptr + len - 1 - j : ptr + j;
          it[a].last = (j == len - 1); it[a].dest = rnd_dest();
          it[a].tag = 4'($urandom); it[a].index = 11'($urandom);
          b.tag = it[a].tag; b.index = it[a].index; b.spare = 0;
          b.gaxon = dt[c * 256 + n].gaxon; b.data = set_data;
          p.dest = it[a].dest; p.phase = PH_TRAVEL; p.body = b;
          if (p.dest.x0 == p.dest.x1 && p.dest.y0 == p.dest.y1) p.ptype = PKT_UNICAST;
          else if (p.dest == {4'h0, 4'h0, 4'(MX - 1), 4'(MY - 1)}) p.ptype = PKT_BROADCAST;
          else p.ptype = PKT_MULTICAST;
          if (exp_pk.exists(p)) exp_pk[p]++; else exp_pk[p] = 1;
        end
        // a sentinel past either end that must never be sent
        it[dly ? ptr - 1 : ptr + len].last = 1;
        ptr += len + 2;
        @(negedge clk); set_v = 0;
      end
      repeat (20) @(negedge clk);
      `CHECK(idle == (any_fired == 0), "idle only when nothing fired")
      enable = 1;
      @(negedge clk);
      while (!idle) @(negedge clk);
      repeat (5) @(negedge clk);
      enable = 0;
      `CHECK(any_fired == 0, "fired bits cleared")
      begin
        int left = 0;
        foreach (exp_pk[p]) left += exp_pk[p];
        `CHECK(left == 0, "all expected packets sent")
      end
    end
    $display("packets=%0d unicast=%0d multicast=%0d broadcast=%0d delayed_neurons=%0d backpressure=%0d",
             n_pk, n_uni, n_multi, n_bc, n_delayed, n_bp);
    `CHECK(int'(pkt_count) == n_pk, "packet counter")
    `CHECK(n_uni > 0 && n_multi > 0 && n_bc > 0 && n_delayed > 0 && n_bp > 0, "coverage")
    `TB_FINISH
  end
endmodule
