// tb_sync_fifo: random push/pop against a queue model at depth 4: order,
// in_ready low exactly when four words are held, count.
`include "tb_check.svh"
module tb_sync_fifo;
  `TB_COUNTERS
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [35:0] in_data, out_data;
  logic [2:0] count;
  logic [35:0] q[$];
  int full_seen = 0;

  sync_fifo #(.W(36), .DEPTH(4)) dut (.*);
  `WATCHDOG(clk, 20000)

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      out_ready = ($urandom % 2) != 0;
      in_data   = {$urandom, 4'($urandom)};
      #1;
      `CHECK(in_ready == (q.size() < 4), "in_ready vs occupancy")
      `CHECK(out_valid == (q.size() > 0), "out_valid vs occupancy")
      `CHECK(int'(count) == q.size(), "count")
      if (out_valid && q.size() > 0) `CHECK(out_data == q[0], "FIFO order")
      if (q.size() == 4) full_seen++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    `CHECK(full_seen > 0, "FIFO became full")
    `TB_FINISH
  end
endmodule
