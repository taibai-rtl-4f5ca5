// tb_config_probe: checks the configuration and probe unit with table and
// core memory models in the testbench. Random write packets (two-packet
// writes for entries wider than 16 bits, single packets for the fan-in
// second-level table, the K2 register and core memories) update the models
// through the unit's write strobes; random read packets must come back as a
// probe-response packet addressed to the requested destination, carrying the
// addressed half of the entry. The response port applies random
// back-pressure.
`include "tb_check.svh"
module tb_config_probe;
  import taibai_pkg::*;
  `TB_COUNTERS
  localparam int NC = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic pkt_valid, pkt_ready, fin_dt_we, fin_it_we, fout_dt_we, fout_it_we;
  packet_t pkt, resp_pkt;
  logic [15:0] waddr, raddr;
  logic [31:0] wdata;
  logic [3:0] tbl_re;
  logic [21:0] fin_dt_q;
  logic [10:0] fin_it_q;
  logic [23:0] fout_dt_q;
  logic [31:0] fout_it_q;
  nc_cfg_t [NC-1:0] nc_cfg;
  logic [NC-1:0][15:0] nc_rdata;
  logic [11:0] k2;
  logic resp_valid, resp_ready, idle;

  config_probe #(.N_CORES(NC)) dut (.*);
  `WATCHDOG(clk, 200000)

  localparam int D = 64;
  logic [31:0] tbl [4][D];
  logic [15:0] ncm [NC][2][D];
  always_ff @(posedge clk) begin
    if (fin_dt_we)  tbl[0][waddr[5:0]] <= 32'(wdata[21:0]);
    if (fin_it_we)  tbl[1][waddr[5:0]] <= 32'(wdata[10:0]);
    if (fout_dt_we) tbl[2][waddr[5:0]] <= 32'(wdata[23:0]);
    if (fout_it_we) tbl[3][waddr[5:0]] <= wdata;
    if (tbl_re[0]) fin_dt_q  <= tbl[0][raddr[5:0]][21:0];
    if (tbl_re[1]) fin_it_q  <= tbl[1][raddr[5:0]][10:0];
    if (tbl_re[2]) fout_dt_q <= tbl[2][raddr[5:0]][23:0];
    if (tbl_re[3]) fout_it_q <= tbl[3][raddr[5:0]];
    for (int n = 0; n < NC; n++) if (nc_cfg[n].req) begin
      if (nc_cfg[n].we) ncm[n][nc_cfg[n].imem][nc_cfg[n].addr[5:0]] <= nc_cfg[n].wdata;
      else nc_rdata[n] <= ncm[n][nc_cfg[n].imem][nc_cfg[n].addr[5:0]];
    end
  end
  always @(negedge clk) resp_ready = ($urandom % 3) != 0;

  logic [31:0] m_tbl [4][D];
  logic [15:0] m_nc [NC][2][D];

  task automatic send(packet_t p);
    @(negedge clk);
    pkt = p; pkt_valid = 1;
    @(posedge clk); #1;
    while (!(dut.st != 0 || p.ptype == PKT_MEM_WR)) begin @(posedge clk); #1; end
    @(negedge clk); pkt_valid = 0;
  endtask

  function automatic packet_t mkp(pkt_type_e t, logic [3:0] sel, logic alt, int addr, logic [15:0] d);
    packet_t p;
    mem_body_t b;
    b.sel = sel; b.alt = alt; b.addr = 16'(addr); b.data = d; b.spare = 0;
    p.ptype = t; p.phase = PH_TRAVEL; p.dest = 16'h1234; p.body = b;
    return p;
  endfunction

  initial begin
    int n_rd = 0, n_wr = 0, n_bp = 0;
    pkt_valid = 0; pkt = '0; fin_dt_q = 0; fin_it_q = 0; fout_dt_q = 0; fout_it_q = 0; nc_rdata = '0;
    for (int t = 0; t < 4; t++) for (int a = 0; a < D; a++) begin tbl[t][a] = 0; m_tbl[t][a] = 0; end
    for (int n = 0; n < NC; n++) for (int a = 0; a < D; a++) begin
      ncm[n][0][a] = 0; ncm[n][1][a] = 0; m_nc[n][0][a] = 0; m_nc[n][1][a] = 0; end
    repeat (3) @(posedge clk);
    rst = 0;
    `CHECK(k2 == 12'd9, "K2 reset value")
    for (int k = 0; k < 1500; k++) begin
      int s, a;
      logic [31:0] v;
      s = $urandom % 6; a = $urandom % D; v = $urandom;
      if ($urandom % 2) begin               // write
        n_wr++;
        case (s)
          0, 2, 3: begin
            send(mkp(PKT_MEM_WR, 4'(s), 0, a, v[15:0]));
            send(mkp(PKT_MEM_WR, 4'(s), 1, a, v[31:16]));
            m_tbl[s][a] = (s == 0) ? 32'(v[21:0]) : (s == 2) ? 32'(v[23:0]) : v;
          end
          1: begin send(mkp(PKT_MEM_WR, SEL_FIN_IT, 0, a, v[15:0])); m_tbl[1][a] = 32'(v[10:0]); end
          4: begin
            send(mkp(PKT_MEM_WR, SEL_REG, 0, 0, v[15:0]));
            @(negedge clk); `CHECK(k2 == v[11:0], "K2 register write")
          end
          default: begin
            int n; logic im;
            n = $urandom % NC; im = 1'($urandom);
            send(mkp(PKT_MEM_WR, SEL_NC0 + 4'(n), im, a, v[15:0]));
            m_nc[n][im][a] = v[15:0];
          end
        endcase
      end else if (s != 4) begin             // read
        packet_t rq;
        logic alt;
        logic [15:0] expd;
        dest_t rd_dest;
        int n;
        alt = 1'($urandom); n = $urandom % NC;
        rd_dest = dest_t'(16'($urandom));
        rq = mkp(PKT_MEM_RD, (s == 5) ? SEL_NC0 + 4'(n) : 4'(s), alt, a, rd_dest);
        case (s)
          0: expd = alt ? 16'(m_tbl[0][a][21:16]) : m_tbl[0][a][15:0];
          1: expd = m_tbl[1][a][15:0];
          2: expd = alt ? 16'(m_tbl[2][a][23:16]) : m_tbl[2][a][15:0];
          3: expd = alt ? m_tbl[3][a][31:16] : m_tbl[3][a][15:0];
          default: expd = m_nc[n][alt][a];
        endcase
        send(rq);
        forever begin
          @(negedge clk); #1;
          if (resp_valid && resp_ready) break;
          if (resp_valid) n_bp++;
        end
        begin
          mem_body_t rb;
          rb = mem_body_t'(resp_pkt.body);
          `CHECK(resp_pkt.ptype == PKT_RD_RESP && resp_pkt.dest == rd_dest, "response header")
          `CHECK(rb.data == expd && rb.sel == rq.body[42:39] && rb.addr == 16'(a), "response data")
          if (rb.data != expd) $display("  sel %0d alt %0d got %h exp %h", s, alt, rb.data, expd);
        end
        n_rd++;
        @(negedge clk);
      end
    end
    `CHECK(idle, "idle at end")
    $display("writes=%0d reads=%0d backpressure=%0d", n_wr, n_rd, n_bp);
    `CHECK(n_bp > 0, "response back-pressure exercised")
    `TB_FINISH
  end
endmodule
