// tb_neuron_core: runs a leaky integrate-and-fire program (tb_lif_prog.svh)
// on one neuron core and checks it against a real-number model.
//
// The program and data are loaded through the configuration port with run
// low (INIT) and the instruction memory is read back. Then six timesteps run:
// in each INTEG phase random events (neuron id, axon id, data) are pushed
// into the event FIFO with random gaps, so that the FIFO sometimes fills and
// back-pressures; fire_start then starts the FIRE code. When the core is idle
// again the testbench reads the output events memory (fired and delayed
// bitmaps, payload) and clears it, and reads every membrane potential through
// the probe port. Timesteps 0-2 use dense weights (axon id = weight address),
// timesteps 3-5 sparse weights looked up with FINDIDX. All values are chosen
// exactly representable so the model's real arithmetic is exact.
`include "tb_check.svh"
module tb_neuron_core;
  import taibai_pkg::*;
  `TB_COUNTERS
  `include "tb_lif_prog.svh"
  localparam int NN = 40, DLY = 30, W_BASE = 1024, N_AX = 64;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic run, fire_start, ev_valid, ev_ready, oe_clr_v, oe_any, idle;
  nc_event_t ev_data;
  logic [3:0] oe_word;
  logic [15:0] oe_fired, oe_type, oe_float, cfg_rdata;
  logic [4:0] oe_float_idx;
  logic [7:0] oe_clr_nid;
  nc_cfg_t cfg;

  neuron_core dut (.*);
  `WATCHDOG(clk, 400000)

  real v_m [NN], cur_m [NN];
  logic [15:0] w_dense [N_AX];
  logic [LIF_BM_NW*16-1:0] bm [NN];
  logic [15:0] w_sparse [NN][LIF_BM_NW*16];

  task automatic cfg_wr(logic imem, int addr, logic [15:0] d);
    @(negedge clk);
    cfg = '0; cfg.req = 1; cfg.we = 1; cfg.imem = imem; cfg.addr = 13'(addr); cfg.wdata = d;
    @(negedge clk);
    cfg = '0;
  endtask
  task automatic cfg_rd(logic imem, int addr, output logic [15:0] d);
    @(negedge clk);
    cfg = '0; cfg.req = 1; cfg.imem = imem; cfg.addr = 13'(addr);
    @(negedge clk);
    cfg = '0;
    d = cfg_rdata;
  endtask

  function automatic logic [15:0] rnd_w();
    // multiples of 1/8 in [-0.5, 1.0)
    int k;
    k = int'($urandom % 13) - 4;
    return lif_r2f(real'(k) / 8.0);
  endfunction

  initial begin
    instr_t prog [LIF_LEN];
    logic [15:0] d;
    int n_stall = 0, n_fired = 0, n_delayed = 0, n_events = 0, n_unconn = 0;
    run = 0; fire_start = 0; ev_valid = 0; ev_data = '0; oe_word = 0; oe_float_idx = 0;
    oe_clr_v = 0; oe_clr_nid = 0; cfg = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    // ---------------- INIT: load
    lif_prog(prog, NN, DLY);
    for (int i = 0; i < LIF_LEN; i++) begin
      cfg_wr(1, 2 * i, prog[i][15:0]);
      cfg_wr(1, 2 * i + 1, prog[i][31:16]);
    end
    for (int i = 0; i < LIF_LEN; i++) begin
      logic [15:0] lo, hi;
      cfg_rd(1, 2 * i, lo); cfg_rd(1, 2 * i + 1, hi);
      `CHECK({hi, lo} == prog[i], "instruction memory read back")
    end
    cfg_wr(0, LIF_MODE, 16'd0);
    cfg_wr(0, LIF_DECAY, 16'h3800);   // 0.5
    cfg_wr(0, LIF_VTH, 16'h3C00);     // 1.0
    for (int n = 0; n < NN; n++) begin
      cfg_wr(0, LIF_V_BASE + n, 16'h0000); cfg_wr(0, LIF_CUR_BASE + n, 16'h0000);
      v_m[n] = 0.0; cur_m[n] = 0.0;
    end
    for (int a = 0; a < N_AX; a++) begin
      w_dense[a] = rnd_w();
      cfg_wr(0, W_BASE + a, w_dense[a]);
    end
    for (int n = 0; n < NN; n++) begin
      int k;
      bm[n] = {$urandom, $urandom};
      k = 0;
      for (int j = 0; j < LIF_BM_NW; j++) cfg_wr(0, LIF_BM_BASE + n * LIF_BM_STRIDE + j, bm[n][16*j +: 16]);
      for (int a = 0; a < LIF_BM_NW * 16; a++) if (bm[n][a] && k < LIF_BM_STRIDE - LIF_BM_NW) begin
        w_sparse[n][a] = rnd_w();
        cfg_wr(0, LIF_BM_BASE + n * LIF_BM_STRIDE + LIF_BM_NW + k, w_sparse[n][a]);
        k++;
      end else bm[n][a] = (k >= LIF_BM_STRIDE - LIF_BM_NW) ? 1'b0 : bm[n][a];
      // rewrite bitmap in case it was truncated to the weight space
      for (int j = 0; j < LIF_BM_NW; j++) cfg_wr(0, LIF_BM_BASE + n * LIF_BM_STRIDE + j, bm[n][16*j +: 16]);
    end
    @(negedge clk); run = 1;
    repeat (5) @(negedge clk);
    `CHECK(idle, "idle in RECV with no events")

    for (int ts = 0; ts < 6; ts++) begin
      int nev;
      if (ts == 3) cfg_wr(0, LIF_MODE, 16'd1);
      // ---------------- INTEG: events
      nev = 20 + $urandom % 40;
      for (int e = 0; e < nev; e++) begin
        nc_event_t ev;
        real w;
        bit conn;
        ev.nid  = 8'($urandom % NN);
        ev.data = ($urandom % 2) ? 16'h3C00 : 16'h3800;   // 1.0 or 0.5
        if (ts < 3) begin
          ev.axon = 12'(W_BASE + $urandom % N_AX);
          w = lif_f2r(w_dense[ev.axon - W_BASE]); conn = 1;
        end else begin
          ev.axon = 12'($urandom % (LIF_BM_NW * 16));
          conn = bm[ev.nid][ev.axon];
          w = conn ? lif_f2r(w_sparse[ev.nid][ev.axon]) : 0.0;
          if (!conn) n_unconn++;
        end
        if (conn) cur_m[ev.nid] += w * lif_f2r(ev.data);
        @(negedge clk);
        ev_valid = 1; ev_data = ev;
        #1;
        while (!ev_ready) begin n_stall++; @(negedge clk); #1; end
        @(negedge clk);
        ev_valid = 0;
        n_events++;
        if (($urandom % 4) == 0) repeat ($urandom % 30) @(negedge clk);
      end
      // wait for the core to drain its events
      while (!idle) @(negedge clk);
      // ---------------- FIRE
      @(negedge clk); fire_start = 1;
      @(negedge clk); fire_start = 0;
      @(negedge clk);
      `CHECK(!idle, "busy in FIRE")
      while (!idle) @(negedge clk);
      // model
      for (int n = 0; n < NN; n++) begin
        bit f;
        v_m[n] = 0.5 * v_m[n] + cur_m[n];
        cur_m[n] = 0.0;
        f = !(v_m[n] < 1.0);
        if (f) v_m[n] = 0.0;
        oe_word = 4'(n / 16); oe_float_idx = 5'(n % 32);
        #1;
        `CHECK(oe_fired[n % 16] == f, "fired bitmap")
        if (f) begin
          `CHECK(oe_type[n % 16] == (n >= DLY), "delayed-spike flag")
          `CHECK(oe_float == 16'h3C00, "spike payload")
          n_fired++;
          if (n >= DLY) n_delayed++;
        end
      end
      for (int n = NN; n < 256; n++) begin
        oe_word = 4'(n / 16); #1;
        `CHECK(!oe_fired[n % 16], "no spike from unused neurons")
      end
      // clear output events
      for (int n = 0; n < NN; n++) begin
        @(negedge clk); oe_clr_v = 1; oe_clr_nid = 8'(n);
      end
      @(negedge clk); oe_clr_v = 0;
      @(negedge clk);
      `CHECK(!oe_any, "output events cleared")
      for (int n = 0; n < NN; n++) begin
        cfg_rd(0, LIF_V_BASE + n, d);
        `CHECK(d == lif_r2f(v_m[n]), "membrane potential")
        if (d != lif_r2f(v_m[n])) $display("  ts %0d n %0d v=%h exp %h", ts, n, d, lif_r2f(v_m[n]));
        cfg_rd(0, LIF_CUR_BASE + n, d);
        `CHECK(d == 16'h0000, "current cleared")
      end
    end
    $display("events=%0d stalls=%0d fired=%0d delayed=%0d unconnected=%0d", n_events, n_stall, n_fired, n_delayed, n_unconn);
    `CHECK(n_stall > 0 && n_fired > 10 && n_delayed > 0 && n_unconn > 0, "mechanism coverage")
    `TB_FINISH
  end
endmodule
