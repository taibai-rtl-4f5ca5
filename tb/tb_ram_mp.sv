// tb_ram_mp: checks the multi-port RAM against an array model: random writes
// on both write ports (port 0 winning a collision), reads with one-cycle
// latency on both read ports, and the read data holding while no read is
// issued.
`include "tb_check.svh"
module tb_ram_mp;
  `TB_COUNTERS
  localparam int W = 16, DEPTH = 64, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [1:0] re, we;
  logic [1:0][AW-1:0] raddr, waddr;
  logic [1:0][W-1:0] rdata, wdata;
  logic [W-1:0] model [DEPTH];

  ram_mp #(.W(W), .DEPTH(DEPTH), .NR(2), .NW(2)) dut (.*);
  `WATCHDOG(clk, 20000)

  initial begin
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 2'b01; waddr[0] = AW'(a); wdata[0] = W'($urandom); model[a] = wdata[0];
    end
    @(negedge clk); we = 0;
    // random traffic
    for (int t = 0; t < 2000; t++) begin
      logic [1:0][W-1:0] exp_q;
      logic [1:0] did_re;
      @(negedge clk);
      re = 2'($urandom); we = 2'($urandom);
      for (int p = 0; p < 2; p++) begin
        raddr[p] = AW'($urandom); waddr[p] = AW'($urandom); wdata[p] = W'($urandom);
        exp_q[p] = model[raddr[p]];
      end
      if (($urandom % 8) == 0) waddr[1] = waddr[0];
      did_re = re;
      @(posedge clk); #1;
      for (int p = 1; p >= 0; p--) if (we[p]) model[waddr[p]] = wdata[p];
      for (int p = 0; p < 2; p++) if (did_re[p]) `CHECK(rdata[p] == exp_q[p], "read data")
      // hold check: next cycle without read keeps the value
      @(negedge clk); re = 0; we = 0;
      begin
        logic [1:0][W-1:0] held;
        held = rdata;
        @(posedge clk); #1;
        `CHECK(rdata == held, "read data holds")
      end
    end
    `TB_FINISH
  end
endmodule
