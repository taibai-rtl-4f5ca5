// tb_proxy_unit: checks a vertical proxy (one per west/east side, 12 edge
// links). Outbound: random traffic on the edge links with random back-pressure
// must leave on the off-chip link with nothing lost or duplicated, in order
// per edge link, and no link starved (round robin). Inbound: packets go to
// the edge link of their destination row, clamped to the mesh (y = -1 and
// y beyond the mesh included).
`include "tb_check.svh"
module tb_proxy_unit;
  import taibai_pkg::*;
  `TB_COUNTERS
  localparam int N = 12;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [N-1:0] edge_in_valid, edge_in_ready, edge_out_valid, edge_out_ready;
  packet_t [N-1:0] edge_in_data, edge_out_data;
  logic ext_out_valid, ext_out_ready, ext_in_valid, ext_in_ready;
  packet_t ext_out_data, ext_in_data;
  packet_t q [N][$];
  int sent [N], got [N];

  proxy_unit #(.N(N), .VERTICAL(1'b1)) dut (.*);
  `WATCHDOG(clk, 100000)

  function automatic packet_t rnd_pkt(int src);
    packet_t p;
    p = {$urandom, $urandom};
    p.body[42:39] = 4'(src);
    return p;
  endfunction

  initial begin
    edge_in_valid = 0; edge_out_ready = 0; ext_out_ready = 0; ext_in_valid = 0;
    ext_in_data = 0;
    for (int i = 0; i < N; i++) begin edge_in_data[i] = rnd_pkt(i); sent[i] = 0; got[i] = 0; end
    repeat (2) @(posedge clk);
    rst = 0;
    // outbound, all links busy most of the time
    for (int t = 0; t < 3000; t++) begin
      logic [N-1:0] acc;
      @(negedge clk);
      for (int i = 0; i < N; i++)
        if (!edge_in_valid[i] && ($urandom % 4) != 0 && t < 2700) edge_in_valid[i] = 1;
      ext_out_ready = ($urandom % 4) != 0;
      #1;
      if (ext_out_valid && ext_out_ready) begin
        int s;
        s = int'(ext_out_data.body[42:39]);
        `CHECK(s < N && q[s].size() == 0 && ext_out_data == edge_in_data[s] && edge_in_ready[s], "outbound packet is the accepted edge head")
        got[s]++;
      end
      `CHECK($countones(edge_in_ready) <= 1, "one edge link served per cycle")
      acc = edge_in_valid & edge_in_ready;
      @(posedge clk); #1;
      for (int i = 0; i < N; i++)
        if (acc[i]) begin
          sent[i]++;
          edge_in_valid[i] = 0;
          edge_in_data[i] = rnd_pkt(i);
        end
    end
    for (int i = 0; i < N; i++) begin
      `CHECK(sent[i] == got[i], "outbound count per link")
      `CHECK(got[i] > 100, "no edge link starved")
      $display("link %0d: %0d packets", i, got[i]);
    end
    // inbound routing by destination row
    for (int t = 0; t < 500; t++) begin
      logic [3:0] y;
      int exp_i;
      @(negedge clk);
      ext_out_ready = 0;
      ext_in_data = {$urandom, $urandom};
      y = 4'($urandom);
      ext_in_data.dest.y0 = y;
      exp_i = (y == 4'hF) ? 0 : (int'(y) > N - 1) ? N - 1 : int'(y);
      ext_in_valid = 1;
      edge_out_ready = N'($urandom);
      #1;
      `CHECK(edge_out_valid == (N'(1) << exp_i), "inbound link select")
      `CHECK(edge_out_data[exp_i] == ext_in_data, "inbound data")
      `CHECK(ext_in_ready == edge_out_ready[exp_i], "inbound ready")
    end
    `TB_FINISH
  end
endmodule
