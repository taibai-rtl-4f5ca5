// tb_stage_ctrl: drives the stage controller through several runs with
// random minimum stage lengths and random idle inputs, and checks against a
// cycle model: INIT -> INTEG on start, INTEG -> FIRE only when at least
// integ_cycles have passed and net_idle, FIRE -> INTEG/INIT only after
// fire_cycles and cores_idle, fire_start on FIRE entry, timestep count, done
// after the last timestep, and free running when timesteps = 0.
`include "tb_check.svh"
module tb_stage_ctrl;
  import taibai_pkg::*;
  `TB_COUNTERS
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic start, net_idle, cores_idle, fire_start, done;
  logic [15:0] timesteps, integ_cycles, fire_cycles, timestep;
  stage_e stage;

  stage_ctrl dut (.*);
  `WATCHDOG(clk, 400000)

  initial begin
    int n_held_integ = 0, n_held_fire = 0, n_fire = 0;
    start = 0; net_idle = 0; cores_idle = 0; timesteps = 0; integ_cycles = 0; fire_cycles = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int run = 0; run < 12; run++) begin
      stage_e m_stage;
      int m_cyc, m_ts, fs_seen, ts_target;
      ts_target    = (run == 11) ? 0 : 1 + $urandom % 5;
      timesteps    = 16'(ts_target);
      integ_cycles = 16'($urandom % 12);
      fire_cycles  = 16'($urandom % 12);
      @(negedge clk);
      `CHECK(stage == ST_INIT, "idle in INIT")
      start = 1;
      @(negedge clk); start = 0;
      m_stage = ST_INTEG; m_cyc = 0; m_ts = 0;
      for (int c = 0; c < 600; c++) begin
        bit fire_entry, d;
        `CHECK(stage == m_stage, "stage")
        `CHECK(int'(timestep) == m_ts, "timestep")
        net_idle = ($urandom % 4) == 0; cores_idle = ($urandom % 3) == 0;
        // model of the next cycle
        fire_entry = 0; d = 0;
        m_cyc++;
        if (m_stage == ST_INTEG) begin
          if (m_cyc >= int'(integ_cycles) && m_cyc >= 2 && net_idle) begin
            m_stage = ST_FIRE; m_cyc = 0; fire_entry = 1; n_fire++;
          end else if (m_cyc >= int'(integ_cycles) && m_cyc >= 2) n_held_integ++;
        end else if (m_stage == ST_FIRE) begin
          if (m_cyc >= int'(fire_cycles) && m_cyc >= 2 && cores_idle) begin
            m_cyc = 0; m_ts++;
            if (ts_target != 0 && m_ts == ts_target) begin m_stage = ST_INIT; d = 1; end
            else m_stage = ST_INTEG;
          end else if (m_cyc >= int'(fire_cycles) && m_cyc >= 2) n_held_fire++;
        end
        @(negedge clk);
        `CHECK(fire_start == fire_entry, "fire_start pulse")
        `CHECK(done == d, "done pulse")
        if (m_stage == ST_INIT) break;
      end
      if (ts_target == 0) begin
        `CHECK(m_ts > 5 && stage != ST_INIT, "free running with timesteps = 0")
        rst = 1; @(negedge clk); rst = 0;
      end
    end
    `CHECK(n_held_integ > 10 && n_held_fire > 10 && n_fire > 20, "stage waits on idle flags")
    `TB_FINISH
  end
endmodule
