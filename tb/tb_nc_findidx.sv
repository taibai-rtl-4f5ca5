// tb_nc_findidx: checks the bitmap lookup unit against a software popcount.
// A small data memory model (registered read) holds random connection bitmaps
// of 1..16 words at random bases; random axon ids, including ones beyond the
// bitmap, are looked up. Checked: found, idx (= nwords + set bits below the
// axon, or FFFF) and the latency floor(axon/16) + 3 cycles (1 when out of
// range).
`include "tb_check.svh"
module tb_nc_findidx;
  `TB_COUNTERS
  localparam int AW = 10;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic start, busy, done, found, mem_re;
  logic [AW-1:0] base, mem_addr;
  logic [11:0] nwords;
  logic [15:0] axon, idx, mem_rdata;
  logic [15:0] mem [1 << AW];

  nc_findidx #(.AW(AW)) dut (.*);
  `WATCHDOG(clk, 200000)

  always_ff @(posedge clk) if (mem_re) mem_rdata <= mem[mem_addr];

  initial begin
    int n_found = 0, n_miss = 0, n_oor = 0;
    start = 0; base = 0; nwords = 0; axon = 0; mem_rdata = 0;
    for (int i = 0; i < (1 << AW); i++) mem[i] = 16'($urandom);
    repeat (2) @(posedge clk);
    rst = 0;
    for (int t = 0; t < 1500; t++) begin
      int cyc, exp_cyc, below;
      bit exp_found;
      logic [15:0] exp_idx;
      logic [15:0] w;
      @(negedge clk);
      nwords = 12'(1 + $urandom % 16);
      base   = AW'($urandom % ((1 << AW) - 16));
      // vary density: sparse bitmaps for some lookups
      if (t % 3 == 0) for (int k = 0; k < int'(nwords); k++) mem[int'(base) + k] = 16'($urandom & $urandom & $urandom);
      axon   = 16'($urandom % (int'(nwords) * 16 + 20));
      below = 0;
      for (int k = 0; k < int'(axon) / 16 && k < int'(nwords); k++)
        for (int j = 0; j < 16; j++) below += mem[int'(base) + k][j];
      if (int'(axon) / 16 < int'(nwords)) begin
        w = mem[int'(base) + int'(axon) / 16];
        for (int j = 0; j < int'(axon) % 16; j++) below += w[j];
        exp_found = w[axon % 16];
        exp_cyc = int'(axon) / 16 + 3;
      end else begin
        exp_found = 0;
        exp_cyc = 1;
        n_oor++;
      end
      exp_idx = exp_found ? 16'(int'(nwords) + below) : 16'hFFFF;
      start = 1;
      @(posedge clk); #1;
      start = 0;
      cyc = 1;
      while (!done) begin @(posedge clk); #1; cyc++; end
      `CHECK(cyc == exp_cyc, "latency")
      if (cyc != exp_cyc) $display("  axon=%0d nwords=%0d cyc=%0d exp=%0d", axon, nwords, cyc, exp_cyc);
      `CHECK(found == exp_found, "found")
      `CHECK(idx == exp_idx, "idx")
      if (exp_found) n_found++; else n_miss++;
      @(posedge clk); #1;
      `CHECK(!done && !busy, "done is a single pulse")
    end
    `CHECK(n_found > 100 && n_miss > 100 && n_oor > 20, "coverage of hit, miss, out of range")
    `TB_FINISH
  end
endmodule
