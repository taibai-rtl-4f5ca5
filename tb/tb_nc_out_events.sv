// tb_nc_out_events: random sets and clears of the output events memory
// against a bitmap model: fired and type bitmaps per word, float slot
// (neuron id mod 32), any_fired, and set winning over a clear of the same
// neuron in the same cycle.
`include "tb_check.svh"
module tb_nc_out_events;
  `TB_COUNTERS
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic set_v, set_delay, clr_v, any_fired;
  logic [7:0] set_nid, clr_nid;
  logic [15:0] set_data, fired_q, type_q, float_q;
  logic [3:0] rd_word;
  logic [4:0] float_idx;
  logic [255:0] m_fired, m_type;
  logic [15:0] m_float [32];

  nc_out_events dut (.*);
  `WATCHDOG(clk, 100000)

  initial begin
    int collide = 0;
    set_v = 0; clr_v = 0; set_nid = 0; clr_nid = 0; set_delay = 0; set_data = 0;
    rd_word = 0; float_idx = 0;
    m_fired = '0; m_type = '0;
    for (int i = 0; i < 32; i++) m_float[i] = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      set_v = ($urandom % 3) == 0; clr_v = ($urandom % 2) == 0;
      set_nid = 8'($urandom); clr_nid = 8'($urandom);
      if (t % 10 == 0) begin clr_nid = set_nid; set_v = 1; clr_v = 1; collide++; end
      set_delay = 1'($urandom); set_data = 16'($urandom);
      rd_word = 4'($urandom); float_idx = 5'($urandom);
      #1;
      `CHECK(fired_q == m_fired[rd_word*16 +: 16], "fired word")
      `CHECK(type_q == m_type[rd_word*16 +: 16], "type word")
      `CHECK(float_q == m_float[float_idx], "float slot")
      `CHECK(any_fired == (m_fired != 0), "any_fired")
      @(posedge clk);
      if (clr_v) begin m_fired[clr_nid] = 0; m_type[clr_nid] = 0; end
      if (set_v) begin m_fired[set_nid] = 1; m_type[set_nid] = set_delay; m_float[set_nid[4:0]] = set_data; end
    end
    // clear everything and check any_fired drops
    for (int n = 0; n < 256; n++) begin
      @(negedge clk); set_v = 0; clr_v = 1; clr_nid = 8'(n);
    end
    @(negedge clk); clr_v = 0; #1;
    `CHECK(!any_fired, "all cleared")
    `TB_FINISH
  end
endmodule
