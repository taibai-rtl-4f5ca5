// tb_cortical_column: one cortical column (scheduler + eight neuron cores)
// driven through its router port. Packets load the LIF program
// (tb_lif_prog.svh) into every core, a type-1 fan-in entry per input index
// (core c, neuron k, weight 1.0 or 0.5) and a fan-out entry per neuron that
// sends one unicast packet whose index names the neuron. Over three timesteps
// random input spikes arrive in INTEG; after FIRE the column must send
// exactly the packets of the neurons that a real-number model says fire,
// with the right payload. A probe read of a membrane potential closes the
// test. Random back-pressure is applied on the column's output.
`include "tb_check.svh"
module tb_cortical_column;
  import taibai_pkg::*;
  `TB_COUNTERS
  `include "tb_lif_prog.svh"
  `include "tb_pkt.svh"
  localparam int W_BASE = 1024, NN = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic run, integ, fire_start, rx_valid, rx_ready, tx_valid, tx_ready, nc_idle, sched_idle;
  packet_t rx_pkt, tx_pkt;

  cortical_column #(.MESH_X(11), .MESH_Y(12), .IMEM_WORDS(128), .DMEM_WORDS(4096),
                    .FIN_DT_DEPTH(2048), .FIN_IT_DEPTH(2048), .FOUT_DT_DEPTH(2048),
                    .FOUT_IT_DEPTH(256)) dut (.*);
  `WATCHDOG(clk, 2000000)

  packet_t out_q [$];
  int n_bp = 0;
  always @(negedge clk) tx_ready = ($urandom % 3) != 0;
  always @(posedge clk) if (!rst) begin
    if (tx_valid && tx_ready) out_q.push_back(tx_pkt);
    if (tx_valid && !tx_ready) n_bp++;
  end

  task automatic send(packet_t p);
    @(negedge clk);
    rx_valid = 1; rx_pkt = p;
    forever begin #1; if (rx_ready) break; @(negedge clk); end
    @(posedge clk); @(negedge clk);
    rx_valid = 0;
  endtask

  real v_m [8][NN], cur_m [8][NN];
  logic [15:0] w [8][NN];

  initial begin
    packet_t q [$];
    instr_t prog [LIF_LEN];
    dest_t me;
    logic [15:0] d;
    int n_spk = 0;
    me = node(3, 4);
    run = 0; integ = 0; fire_start = 0; rx_valid = 0; rx_pkt = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    lif_prog(prog, NN, NN);
    for (int c = 0; c < 8; c++) begin
      for (int i = 0; i < 33; i++) begin
        cfg_word(q, me, SEL_NC0 + 4'(c), 1, 2 * i, prog[i][15:0]);
        cfg_word(q, me, SEL_NC0 + 4'(c), 1, 2 * i + 1, prog[i][31:16]);
      end
      cfg_word(q, me, SEL_NC0 + 4'(c), 0, LIF_DECAY, 16'h3800);
      cfg_word(q, me, SEL_NC0 + 4'(c), 0, LIF_VTH, 16'h3C00);
      for (int k = 0; k < NN; k++) begin
        int idx;
        idx = c * NN + k;
        w[c][k] = ($urandom % 2) ? 16'h3C00 : 16'h3800;
        v_m[c][k] = 0.0; cur_m[c][k] = 0.0;
        cfg_word(q, me, SEL_NC0 + 4'(c), 0, W_BASE + k, w[c][k]);
        cfg_wide(q, me, SEL_FIN_DT, idx, 32'({4'd5, 16'(3 * idx), 2'd1}));
        cfg_word(q, me, SEL_FIN_IT, 0, 3 * idx, 16'd1);
        cfg_word(q, me, SEL_FIN_IT, 0, 3 * idx + 1, 16'(c * 256 + k));
        cfg_word(q, me, SEL_FIN_IT, 0, 3 * idx + 2, 16'(W_BASE + k));
        cfg_wide(q, me, SEL_FOUT_DT, c * 256 + k, 32'({13'(idx), 11'(idx)}));
        cfg_wide(q, me, SEL_FOUT_IT, idx, {1'b1, node(1, 2), 4'd6, 11'(idx)});
      end
    end
    foreach (q[i]) send(q[i]);
    @(negedge clk); run = 1;
    for (int ts = 0; ts < 3; ts++) begin
      int exp_idx [int];
      bit ok;
      exp_idx.delete();   // static variable: empty it every timestep
      integ = 1;
      for (int e = 0; e < 20; e++) begin
        int c, k;
        c = $urandom % 8; k = $urandom % NN;
        cur_m[c][k] += lif_f2r(w[c][k]);
        send(pk_spike(PKT_UNICAST, me, 4'd5, c * NN + k, 0, 16'h3C00));
      end
      repeat (20) @(negedge clk);
      while (!(sched_idle && nc_idle)) @(negedge clk);
      // earlier timestep's spikes were sent during this INTEG
      integ = 0;
      @(negedge clk); fire_start = 1;
      @(negedge clk); fire_start = 0;
      repeat (3) @(negedge clk);
      while (!nc_idle) @(negedge clk);
      for (int c = 0; c < 8; c++) for (int k = 0; k < NN; k++) begin
        v_m[c][k] = 0.5 * v_m[c][k] + cur_m[c][k]; cur_m[c][k] = 0.0;
        if (!(v_m[c][k] < 1.0)) begin v_m[c][k] = 0.0; exp_idx[c * NN + k] = 1; end
      end
      out_q.delete();
      integ = 1;
      repeat (5) @(negedge clk);
      while (!sched_idle) @(negedge clk);
      repeat (5) @(negedge clk);
      integ = 0;
      ok = (out_q.size() == exp_idx.num());
      foreach (out_q[i]) begin
        int idx;
        idx = int'(out_q[i].body[38:28]);
        if (!exp_idx.exists(idx) || out_q[i].ptype != PKT_UNICAST || out_q[i].dest != node(1, 2) ||
            out_q[i].body[15:0] != 16'h3C00 || out_q[i].body[26:16] != 11'(idx)) ok = 0;
      end
      `CHECK(ok, "output spike packets match the model")
      if (!ok) begin
        foreach (out_q[i]) $display("  ts %0d got idx %0d type %0d", ts, out_q[i].body[38:28], out_q[i].ptype);
        foreach (exp_idx[i]) $display("  ts %0d exp idx %0d", ts, i);
      end
      n_spk += out_q.size();
      // probe every membrane potential
      for (int c = 0; c < 8; c++) for (int k = 0; k < NN; k++) begin
        out_q.delete();
        send(pk_mem(PKT_MEM_RD, me, SEL_NC0 + 4'(c), 0, LIF_V_BASE + k, 16'({4'hF, 4'h0, 4'hF, 4'h0})));
        repeat (20) @(negedge clk);
        `CHECK(out_q.size() == 1 && out_q[0].body[21:6] == lif_r2f(v_m[c][k]), "membrane potential")
        if (out_q.size() == 1 && out_q[0].body[21:6] != lif_r2f(v_m[c][k])) $display("  ts %0d c %0d k %0d v %h exp %h", ts, c, k, out_q[0].body[21:6], lif_r2f(v_m[c][k]));
      end
      out_q.delete();
    end
    // probe: membrane potential of core 5 neuron 3
    send(pk_mem(PKT_MEM_RD, me, SEL_NC0 + 4'd5, 0, LIF_V_BASE + 3, 16'({4'hF, 4'h0, 4'hF, 4'h0})));
    repeat (30) @(negedge clk);
    `CHECK(out_q.size() == 1 && out_q[0].ptype == PKT_RD_RESP && out_q[0].body[21:6] == lif_r2f(v_m[5][3]),
           "probe response with membrane potential")
    $display("output spikes=%0d backpressure=%0d", n_spk, n_bp);
    `CHECK(n_spk > 5 && n_bp > 0, "coverage")
    `TB_FINISH
  end
endmodule
