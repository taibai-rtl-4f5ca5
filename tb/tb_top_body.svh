// tb_top_body.svh: end-to-end test of the chip, written to work at any mesh
// size of at least 3 x 2. The including module defines MX, MY,
// the clock clk, the reset rst and instantiates the top as `dut` with the
// signals declared here.
//
// A host on the west off-chip link loads a two-layer spiking network through
// memory-access packets, runs four timesteps and probes the result:
//   * column (0,0), core 0: four input neurons, each fed by one host spike
//     (fan-in type 1, weight 1.0) in timestep 0, so all four fire;
//   * neuron 0 multicasts to the rectangle x 1..2, y 0..1 (fan-in type 2:
//     full connection to cores 0 and 1, neurons 0, 2, 4);
//   * neuron 1 broadcasts; columns x = 2 accept it (fan-in type 3,
//     convolution weights at gaxon*K2 + local, K2 = 9 at (2,0) and 4 at (2,1)),
//     every other column drops it on a tag mismatch;
//   * neuron 2 sends a unicast to (1,1) (fan-in type 0 -> the cores look the
//     weight up with FINDIDX: one neuron connected with weight 1.0, one with
//     0.25, one not connected) and a unicast straight to the host;
//   * neuron 3 is a delayed (skip) spike: its fan-out chain is walked
//     downwards to (2,1) and (2,0) (a wrong, upward walk would hit a trap
//     entry that reports to the host).
// Every second-layer neuron that fires sends one spike packet to the host
// whose index encodes (x, y, core, neuron). The host checks the exact set of
// spikes it receives, reads a membrane potential and a table entry back with
// probe packets, and checks that every mechanism happened at least once:
// stall (back-pressure), unicast, multicast, broadcast, tag drop, the four
// fan-in types, FINDIDX, delayed spike, FIRE switch, probe.
`include "tb_lif_prog.svh"
`include "tb_pkt.svh"
localparam int W_BASE = 1024;
logic start, done;
logic [15:0] timesteps, integ_cycles, fire_cycles, timestep;
stage_e stage;
logic [3:0] ext_in_valid, ext_in_ready, ext_out_valid, ext_out_ready;
packet_t [3:0] ext_in_data, ext_out_data;

`WATCHDOG(clk, 2000000)

// ------------------------------------------------------------- monitors
int n_fire_sw = 0, n_stall = 0, n_uni = 0, n_multi = 0, n_bcast = 0, n_delayed = 0;
int n_fi = 0, n_drop = 0, n_probe = 0;
int n_ftype [4];
logic [MY-1:0][MX-1:0][15:0] drops;
logic [MY-1:0][MX-1:0] enc_v, enc_dly, dec_hit;
logic [MY-1:0][MX-1:0][2:0] enc_t;
logic [MY-1:0][MX-1:0][1:0] dec_t;
logic [MY-1:0][MX-1:0][7:0] fi_done;
for (genvar y = 0; y < MY; y++) begin : g_my
  for (genvar x = 0; x < MX; x++) begin : g_mx
    assign drops[y][x]   = dut.g_y[y].g_x[x].u_cc.u_sched.drop_count;
    assign enc_v[y][x]   = dut.g_y[y].g_x[x].u_cc.u_sched.u_enc.out_valid &&
                           dut.g_y[y].g_x[x].u_cc.u_sched.u_enc.out_ready;
    assign enc_dly[y][x] = dut.g_y[y].g_x[x].u_cc.u_sched.u_enc.delayed;
    assign enc_t[y][x]   = dut.g_y[y].g_x[x].u_cc.u_sched.u_enc.out_pkt.ptype;
    assign dec_hit[y][x] = (dut.g_y[y].g_x[x].u_cc.u_sched.u_dec.st == 1) &&
                           (dut.g_y[y].g_x[x].u_cc.u_sched.u_dec.de.tag ==
                            dut.g_y[y].g_x[x].u_cc.u_sched.u_dec.body.tag);
    assign dec_t[y][x]   = dut.g_y[y].g_x[x].u_cc.u_sched.u_dec.de.ietype;
    for (genvar c = 0; c < 8; c++) begin : g_mc
      assign fi_done[y][x][c] = dut.g_y[y].g_x[x].u_cc.g_nc[c].u_nc.fi_done;
    end
  end
end
int n_cyc = 0, n_sent = 0;
always @(posedge clk) if (!rst) begin
  n_cyc++;
  if (n_cyc % 100000 == 0) $display("cycle %0d: stage %0d timestep %0d host packets sent %0d net_idle %b cores_idle %b",
                                    n_cyc, stage, timestep, n_sent, dut.net_idle, dut.cores_idle);
  if (dut.fire_start) n_fire_sw++;
  for (int i = 0; i < 4; i++) if (ext_out_valid[i] && !ext_out_ready[i]) n_stall++;
  for (int y = 0; y < MY; y++)
    for (int x = 0; x < MX; x++) begin
      if (enc_v[y][x]) begin
        if (enc_t[y][x] == 3'(PKT_UNICAST)) n_uni++;
        if (enc_t[y][x] == 3'(PKT_MULTICAST)) n_multi++;
        if (enc_t[y][x] == 3'(PKT_BROADCAST)) n_bcast++;
        if (enc_dly[y][x]) n_delayed++;
      end
      if (dec_hit[y][x]) n_ftype[dec_t[y][x]]++;
      n_fi += $countones(fi_done[y][x]);
    end
end

// ------------------------------------------------------------- host link
packet_t host_q [$];
int got_spike [int];
packet_t resp_q [$];
always @(negedge clk) ext_out_ready = {1'(($urandom % 3) != 0), 3'b111};
always @(posedge clk) if (!rst) begin
  for (int i = 0; i < 3; i++) if (ext_out_valid[i]) begin
    failures++; $display("FAIL: packet left on link %0d", i);
  end
  if (ext_out_valid[3] && ext_out_ready[3]) begin
    if (ext_out_data[3].ptype == PKT_RD_RESP) begin resp_q.push_back(ext_out_data[3]); n_probe++; end
    else begin
      int idx;
      idx = int'(ext_out_data[3].body[38:28]);   // spike index field;
      if (got_spike.exists(idx)) got_spike[idx]++; else got_spike[idx] = 1;
    end
  end
end

task automatic host_send(packet_t p);
  @(negedge clk);
  ext_in_valid[3] = 1; ext_in_data[3] = p;
  forever begin
    #1;
    if (ext_in_ready[3]) break;
    @(negedge clk);
  end
  @(posedge clk);
  @(negedge clk);
  ext_in_valid[3] = 0;
  n_sent++;
endtask

function automatic int l2_index(int x, int y, int c, int n);
  return (x << 9) | (y << 8) | (c << 5) | n;
endfunction

// ------------------------------------------------------------- model load
task automatic load_all();
  packet_t q [$];
  instr_t prog [LIF_LEN];
  dest_t host;
  host = {4'hF, 4'h0, 4'hF, 4'h0};
  // every core outside the network idles: "RECV r1, 0" at PC 0
  for (int y = 0; y < MY; y++)
    for (int x = 0; x < MX; x++)
      for (int c = 0; c < 8; c++)
        if (x >= 3 || y >= 2 || (x == 0 && y == 0 && c != 0)) begin
          instr_t r;
          r = mk_instr(OP_RECV, 4'd1, 4'd0, 0, 1, 16'd0);
          cfg_word(q, node(x, y), SEL_NC0 + 4'(c), 1, 0, r[15:0]);
          cfg_word(q, node(x, y), SEL_NC0 + 4'(c), 1, 1, r[31:16]);
        end
  for (int y = 0; y < 2; y++)
    for (int x = 0; x < 3; x++) begin
      dest_t d;
      d = node(x, y);
      for (int c = 0; c < 8; c++) begin
        logic [3:0] sel;
        sel = SEL_NC0 + 4'(c);
        if (x == 0 && y == 0 && c == 0) lif_prog(prog, 4, 3); else lif_prog(prog, 8, 8);
        if (!(x == 0 && y == 0) || c == 0) begin
          for (int i = 0; i < 33; i++) begin
            cfg_word(q, d, sel, 1, 2 * i, prog[i][15:0]);
            cfg_word(q, d, sel, 1, 2 * i + 1, prog[i][31:16]);
          end
          cfg_word(q, d, sel, 0, LIF_DECAY, 16'h3800);
          cfg_word(q, d, sel, 0, LIF_VTH, 16'h3C00);
          cfg_word(q, d, sel, 0, LIF_MODE, (x == 1 && y == 1 && c == 3) ? 16'd1 : 16'd0);
        end
      end
      // fan-out trap at IE 0: any unconfigured neuron that fires reports 0x7FF
      cfg_wide(q, d, SEL_FOUT_IT, 0, {1'b1, host, 4'h0, 11'h7FF});
    end
  // ---- column (0,0): inputs and first-layer fan-out
  begin
    dest_t d;
    d = node(0, 0);
    for (int k = 0; k < 4; k++) begin
      cfg_wide(q, d, SEL_FIN_DT, k, 32'({4'h0, 16'(100 + 3 * k), 2'd1}));
      cfg_word(q, d, SEL_FIN_IT, 0, 100 + 3 * k, 16'd1);
      cfg_word(q, d, SEL_FIN_IT, 0, 101 + 3 * k, 16'(k));            // core 0, neuron k
      cfg_word(q, d, SEL_FIN_IT, 0, 102 + 3 * k, 16'(W_BASE + k));
      cfg_word(q, d, SEL_NC0, 0, W_BASE + k, 16'h3C00);
    end
    cfg_wide(q, d, SEL_FIN_DT, 9, 32'({4'h7, 16'd200, 2'd3}));    // broadcast not for us
    // n0: multicast; n1: broadcast; n2: unicast (1,1) then host; n3: delayed
    cfg_wide(q, d, SEL_FOUT_DT, 0, 32'({13'd10, 11'(W_BASE)}));
    cfg_wide(q, d, SEL_FOUT_IT, 10, {1'b1, 4'd1, 4'd0, 4'd2, 4'd1, 4'd1, 11'd0});
    cfg_wide(q, d, SEL_FOUT_DT, 1, 32'({13'd12, 11'd100}));
    cfg_wide(q, d, SEL_FOUT_IT, 12, {1'b1, 4'd0, 4'd0, 4'(MX - 1), 4'(MY - 1), 4'd2, 11'd9});
    cfg_wide(q, d, SEL_FOUT_DT, 2, 32'({13'd14, 11'd7}));
    cfg_wide(q, d, SEL_FOUT_IT, 14, {1'b0, node(1, 1), 4'd3, 11'd2});
    cfg_wide(q, d, SEL_FOUT_IT, 15, {1'b1, host, 4'd0, 11'd5});
    cfg_wide(q, d, SEL_FOUT_DT, 3, 32'({13'd20, 11'(W_BASE + 1)}));
    cfg_wide(q, d, SEL_FOUT_IT, 20, {1'b0, node(2, 1), 4'd4, 11'd3});
    cfg_wide(q, d, SEL_FOUT_IT, 19, {1'b1, node(2, 0), 4'd4, 11'd3});
    cfg_wide(q, d, SEL_FOUT_IT, 21, {1'b1, host, 4'd0, 11'h7FE});    // trap: wrong walk
  end
  // ---- second layer
  for (int y = 0; y < 2; y++)
    for (int x = 1; x < 3; x++) begin
      dest_t d;
      d = node(x, y);
      // multicast from (0,0) n0: type 2, cores 0 and 1, neurons 0,2,4
      cfg_wide(q, d, SEL_FIN_DT, 0, 32'({4'd1, 16'd100, 2'd2}));
      cfg_word(q, d, SEL_FIN_IT, 0, 100, 16'h0003);
      cfg_word(q, d, SEL_FIN_IT, 0, 101, 16'd1);
      cfg_word(q, d, SEL_FIN_IT, 0, 102, 16'd3);
      cfg_word(q, d, SEL_FIN_IT, 0, 103, 16'd0);
      for (int c = 0; c < 2; c++) cfg_word(q, d, SEL_NC0 + 4'(c), 0, W_BASE, 16'h3C00);
      // broadcast from n1 (gaxon 100): type 3 on x = 2, else tag mismatch
      if (x == 2) begin
        int k2v;
        k2v = (y == 0) ? 9 : 4;
        if (y == 1) cfg_word(q, d, SEL_REG, 0, 0, 16'd4);
        cfg_wide(q, d, SEL_FIN_DT, 9, 32'({4'd2, 16'd200, 2'd3}));
        cfg_word(q, d, SEL_FIN_IT, 0, 200, 16'h0004);
        cfg_word(q, d, SEL_FIN_IT, 0, 201, 16'd2);
        cfg_word(q, d, SEL_FIN_IT, 0, 202, 16'd0);
        cfg_word(q, d, SEL_FIN_IT, 0, 203, 16'd1);
        cfg_word(q, d, SEL_FIN_IT, 0, 204, 16'd1);
        cfg_word(q, d, SEL_FIN_IT, 0, 205, 16'd2);
        cfg_word(q, d, SEL_NC0 + 4'd2, 0, 100 * k2v + 1, 16'h3C00);
        cfg_word(q, d, SEL_NC0 + 4'd2, 0, 100 * k2v + 2, 16'h3C00);
        // delayed spike from n3: type 1 to core 4 neuron 1
        cfg_wide(q, d, SEL_FIN_DT, 3, 32'({4'd4, 16'd300, 2'd1}));
        cfg_word(q, d, SEL_FIN_IT, 0, 300, 16'd1);
        cfg_word(q, d, SEL_FIN_IT, 0, 301, 16'(4 * 256 + 1));
        cfg_word(q, d, SEL_FIN_IT, 0, 302, 16'(W_BASE + 7));
        cfg_word(q, d, SEL_NC0 + 4'd4, 0, W_BASE + 7, 16'h3C00);
      end else begin
        cfg_wide(q, d, SEL_FIN_DT, 9, 32'({4'd7, 16'd200, 2'd3}));
      end
      if (x == 1 && y == 1) begin
        // unicast from n2 (gaxon 7): type 0 list -> core 3 neurons 5, 6, 7 (FINDIDX)
        cfg_wide(q, d, SEL_FIN_DT, 2, 32'({4'd3, 16'd400, 2'd0}));
        cfg_word(q, d, SEL_FIN_IT, 0, 400, 16'd3);
        for (int n = 5; n < 8; n++) cfg_word(q, d, SEL_FIN_IT, 0, 400 + n - 4, 16'(3 * 256 + n));
        cfg_word(q, d, SEL_NC0 + 4'd3, 0, LIF_BM_BASE + 5 * LIF_BM_STRIDE, 16'h00A5);
        cfg_word(q, d, SEL_NC0 + 4'd3, 0, LIF_BM_BASE + 5 * LIF_BM_STRIDE + LIF_BM_NW + 3, 16'h3C00);
        cfg_word(q, d, SEL_NC0 + 4'd3, 0, LIF_BM_BASE + 6 * LIF_BM_STRIDE, 16'h0080);
        cfg_word(q, d, SEL_NC0 + 4'd3, 0, LIF_BM_BASE + 6 * LIF_BM_STRIDE + LIF_BM_NW, 16'h3400);
        cfg_word(q, d, SEL_NC0 + 4'd3, 0, LIF_BM_BASE + 7 * LIF_BM_STRIDE, 16'h0001);
      end
      // fan-out of every second-layer neuron expected to fire: one spike to the host
      for (int c = 0; c < 8; c++)
        for (int n = 0; n < 8; n++) begin
          cfg_wide(q, d, SEL_FOUT_DT, c * 256 + n, 32'({13'(16 + c * 8 + n), 11'd0}));
          cfg_wide(q, d, SEL_FOUT_IT, 16 + c * 8 + n, {1'b1, host, 4'd0, 11'(l2_index(x, y, c, n))});
        end
    end
  $display("loading %0d configuration packets", q.size());
  foreach (q[i]) host_send(q[i]);
endtask

initial begin
  int exp_spike [int];
  bit ok;
  for (int i = 0; i < 4; i++) n_ftype[i] = 0;
  start = 0; timesteps = 16'd4; integ_cycles = 16'd300; fire_cycles = 16'd4;
  ext_in_valid = '0; ext_in_data = '0;
  repeat (5) @(posedge clk);
  rst = 0;
  load_all();
  // run
  @(negedge clk); start = 1;
  @(negedge clk); start = 0;
  for (int k = 0; k < 4; k++) host_send(pk_spike(PKT_UNICAST, node(0, 0), 4'd0, k, 0, 16'h3C00));
  while (!done) @(negedge clk);
  repeat (50) @(negedge clk);
  // expected spikes at the host
  exp_spike[5] = 1;
  for (int y = 0; y < 2; y++) for (int x = 1; x < 3; x++)
    for (int c = 0; c < 2; c++) for (int n = 0; n < 6; n += 2) exp_spike[l2_index(x, y, c, n)] = 1;
  for (int y = 0; y < 2; y++) begin
    exp_spike[l2_index(2, y, 2, 0)] = 1; exp_spike[l2_index(2, y, 2, 1)] = 1;
    exp_spike[l2_index(2, y, 4, 1)] = 1;
  end
  exp_spike[l2_index(1, 1, 3, 5)] = 1;
  ok = (exp_spike.num() == got_spike.num());
  foreach (exp_spike[i]) if (!got_spike.exists(i) || got_spike[i] != 1) ok = 0;
  `CHECK(ok, "exact set of output spikes at the host")
  if (!ok) foreach (got_spike[i]) $display("  got index %h x%0d (expected %0d)", i, got_spike[i], exp_spike.exists(i));
  if (!ok) foreach (exp_spike[i]) if (!got_spike.exists(i)) $display("  missing index %h", i);
  // probes: membrane potential of (1,1) core 3 neuron 6 (0.25 after
  // timestep 1, halved in timesteps 2 and 3) and a fan-in table entry
  host_send(pk_mem(PKT_MEM_RD, node(1, 1), SEL_NC0 + 4'd3, 0, LIF_V_BASE + 6, 16'({4'hF, 4'h0, 4'hF, 4'h0})));
  host_send(pk_mem(PKT_MEM_RD, node(2, 1), SEL_FIN_DT, 0, 3, 16'({4'hF, 4'h0, 4'hF, 4'h0})));
  host_send(pk_mem(PKT_MEM_RD, node(2, 1), SEL_REG, 0, 0, 16'({4'hF, 4'h0, 4'hF, 4'h0})));
  repeat (100) @(negedge clk);
  `CHECK(resp_q.size() == 3, "three probe responses")
  if (resp_q.size() == 3) begin
    `CHECK(resp_q[0].body[21:6] == 16'h2C00, "probed membrane potential 0.0625")
    `CHECK(resp_q[1].body[21:6] == 16'({16'd300, 2'd1}), "probed table entry")
    `CHECK(resp_q[2].body[21:6] == 16'd4, "probed K2 register")
  end
  foreach (drops[y, x]) n_drop += int'(drops[y][x]);
  $display("fire_switch=%0d stall=%0d unicast=%0d multicast=%0d broadcast=%0d delayed=%0d",
           n_fire_sw, n_stall, n_uni, n_multi, n_bcast, n_delayed);
  $display("fanin types=%0d/%0d/%0d/%0d tag_drop=%0d findidx=%0d probe=%0d",
           n_ftype[0], n_ftype[1], n_ftype[2], n_ftype[3], n_drop, n_fi, n_probe);
  `CHECK(n_fire_sw == 4, "FIRE switch once per timestep")
  `CHECK(n_stall > 0, "mechanism: stall")
  `CHECK(n_uni > 0, "mechanism: unicast")
  `CHECK(n_multi > 0, "mechanism: multicast")
  `CHECK(n_bcast > 0, "mechanism: broadcast")
  `CHECK(n_delayed > 0, "mechanism: delayed spike")
  `CHECK(n_drop > 0, "mechanism: tag drop")
  `CHECK(n_ftype[0] > 0 && n_ftype[1] > 0 && n_ftype[2] > 0 && n_ftype[3] > 0, "mechanism: fan-in types 0-3")
  `CHECK(n_fi >= 3, "mechanism: FINDIDX")
  `CHECK(n_probe == 3, "mechanism: probe")
  `CHECK(stage == ST_INIT && timestep == 16'd4, "back in INIT after four timesteps")
  `TB_FINISH
end
