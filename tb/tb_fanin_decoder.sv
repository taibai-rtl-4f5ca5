// tb_fanin_decoder: checks the fan-in decoder with table models.
// The first-level (directory) and second-level (information) tables are
// testbench arrays with one-cycle read latency, filled with random entries of
// all four types: sparse neuron-id lists (type 0), {neuron, local axon} pairs
// (type 1), full connection with coding/margin/nums/start (type 2) and
// convolution pairs sent to several cores with axon = gaxon*K2 + local
// (type 3). Random spike packets, some with a wrong tag, are decoded while the
// cores' event ports apply random back-pressure. Checked: the event stream of
// every core equals the model's, in order; wrong-tag packets are dropped and
// counted; parallel sends reach all cores of the coding mask.
`include "tb_check.svh"
module tb_fanin_decoder;
  import taibai_pkg::*;
  `TB_COUNTERS
  localparam int NC = 8, NDE = 64;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [11:0] k2;
  logic pkt_valid, pkt_ready, dt_re, it_re, idle;
  packet_t pkt;
  logic [10:0] dt_addr;
  logic [21:0] dt_q;
  logic [15:0] it_addr, drop_count;
  logic [10:0] it_q;
  logic [NC-1:0] ev_valid, ev_ready;
  nc_event_t [NC-1:0] ev_data;

  fanin_decoder #(.N_CORES(NC)) dut (.*);
  `WATCHDOG(clk, 400000)

  fin_de_t     dt [2048];
  logic [10:0] it [4096];
  always_ff @(posedge clk) begin
    if (dt_re) dt_q <= dt[dt_addr];
    if (it_re) it_q <= it[it_addr[11:0]];
  end

  nc_event_t exp_q [NC][$];
  int n_type [4], n_drop_exp = 0, n_multi_core = 0, n_bp = 0, n_ev = 0;

  always @(negedge clk) ev_ready = NC'($urandom);
  always @(posedge clk) if (!rst)
    for (int c = 0; c < NC; c++) begin
      if (ev_valid[c] && ev_ready[c]) begin
        n_ev++;
        if (exp_q[c].size() == 0) begin failures++; checks++; $display("FAIL: unexpected event core %0d", c); end
        else begin
          nc_event_t e;
          e = exp_q[c].pop_front();
          `CHECK(ev_data[c] == e, "event content and order")
          if (ev_data[c] != e) $display("  core %0d got %h exp %h", c, ev_data[c], e);
        end
      end
      if (ev_valid[c] && !ev_ready[c]) n_bp++;
    end

  initial begin
    int p = 0;
    pkt_valid = 0; pkt = '0; k2 = 12'd9; dt_q = '0; it_q = '0;
    for (int i = 0; i < 4; i++) n_type[i] = 0;
    // build tables
    for (int i = 0; i < NDE; i++) begin
      int t, n;
      dt[i].tag = 4'($urandom); dt[i].addr = 16'(p); t = i % 4; dt[i].ietype = 2'(t);
      n = 1 + $urandom % 5;
      case (t)
        0: begin it[p++] = 11'(n); for (int j = 0; j < n; j++) it[p++] = 11'($urandom); end
        1: begin it[p++] = 11'(n); for (int j = 0; j < n; j++) begin it[p++] = 11'($urandom); it[p++] = 11'($urandom % 64); end end
        2: begin it[p++] = 11'($urandom % 256); it[p++] = 11'($urandom % 3); it[p++] = 11'(n); it[p++] = 11'($urandom % 64); end
        default: begin it[p++] = 11'($urandom % 256); it[p++] = 11'(n);
                   for (int j = 0; j < n; j++) begin it[p++] = 11'($urandom % 256); it[p++] = 11'($urandom % 9); end end
      endcase
    end
    repeat (3) @(posedge clk);
    rst = 0;
    for (int k = 0; k < 400; k++) begin
      spike_body_t b;
      fin_de_t de;
      int a;
      b.index = 11'($urandom % NDE); b.gaxon = 11'($urandom % 200); b.data = 16'($urandom); b.spare = 0;
      de = dt[b.index];
      b.tag = (($urandom % 6) == 0) ? de.tag + 4'd1 : de.tag;
      if (k == 200) begin k2 = 12'd25; end
      // model
      a = int'(de.addr);
      if (b.tag != de.tag) n_drop_exp++;
      else begin
        n_type[de.ietype]++;
        case (de.ietype)
          0: for (int j = 0; j < int'(it[a]); j++) begin
               logic [10:0] w; w = it[a + 1 + j];
               exp_q[w[10:8]].push_back({w[7:0], 12'(b.gaxon), b.data});
             end
          1: for (int j = 0; j < int'(it[a]); j++) begin
               logic [10:0] w; w = it[a + 1 + 2*j];
               exp_q[w[10:8]].push_back({w[7:0], 12'(it[a + 2 + 2*j]), b.data});
             end
          2: for (int j = 0; j < int'(it[a + 2]); j++)
               for (int c = 0; c < NC; c++) if (it[a][c]) begin
                 exp_q[c].push_back({8'(int'(it[a + 3]) + j * (int'(it[a + 1]) + 1)), 12'(b.gaxon), b.data});
                 if (c == 7) n_multi_core++;
               end
          default: for (int j = 0; j < int'(it[a + 1]); j++)
               for (int c = 0; c < NC; c++) if (it[a][c])
                 exp_q[c].push_back({8'(it[a + 2 + 2*j]), 12'(int'(b.gaxon) * int'(k2) + int'(it[a + 3 + 2*j])), b.data});
        endcase
      end
      @(negedge clk);
      pkt = '0; pkt.ptype = PKT_MULTICAST; pkt.body = b; pkt_valid = 1;
      @(posedge clk); #1;
      while (!pkt_ready) begin @(posedge clk); #1; end
      // wait until taken (ready was seen with valid at the edge just before)
      @(negedge clk); pkt_valid = 0;
      // k2 changes only between packets
      while (!idle) @(negedge clk);
    end
    repeat (50) @(posedge clk);
    for (int c = 0; c < NC; c++) `CHECK(exp_q[c].size() == 0, "all expected events delivered")
    `CHECK(int'(drop_count) == n_drop_exp, "tag mismatch drops counted")
    $display("types=%0d/%0d/%0d/%0d drops=%0d parallel=%0d events=%0d backpressure=%0d",
             n_type[0], n_type[1], n_type[2], n_type[3], n_drop_exp, n_multi_core, n_ev, n_bp);
    `CHECK(n_type[0] > 0 && n_type[1] > 0 && n_type[2] > 0 && n_type[3] > 0 && n_drop_exp > 0 && n_bp > 0, "coverage")
    `TB_FINISH
  end
endmodule
