// tb_nc_alu: checks the neuron-core ALU in both formats with random operands.
// INT16 results are compared with SystemVerilog integer arithmetic. FP16
// results are compared with an independent reference that converts the
// operands to real, computes exactly in double precision and converts back
// with the ALU's rounding convention (truncation toward zero, results below
// the normal range flushed to zero, results of 65536 or more become infinity).
// Operands are normal numbers; a few infinity/NaN cases are checked apart.
`include "tb_check.svh"
module tb_nc_alu;
  import taibai_pkg::*;
  `TB_COUNTERS
  logic clk = 0;
  always #5 clk = ~clk;
  opcode_e op;
  logic fp;
  logic [3:0] cond;
  logic [15:0] a, b, c, m, result;
  logic cmp_flag;
  nc_alu dut (.*);
  `WATCHDOG(clk, 100000)

  function automatic real f2r(logic [15:0] h);
    real v;
    v = 1.0 + real'(h[9:0]) / 1024.0;
    for (int k = 15; k < int'(h[14:10]); k++) v = v * 2.0;
    for (int k = int'(h[14:10]); k < 15; k++) v = v / 2.0;
    if (h[14:10] == 0) v = 0.0;
    return h[15] ? -v : v;
  endfunction

  function automatic logic [15:0] r2f(real r);
    real x;
    int  e;
    logic s;
    s = (r < 0.0);
    x = s ? -r : r;
    if (x < 1.0 / 16384.0) return 16'h0000;
    if (x >= 65536.0) return {s, 15'h7C00};
    e = 0;
    while (x >= 2.0) begin x = x / 2.0; e++; end
    while (x < 1.0)  begin x = x * 2.0; e--; end
    return {s, 5'(e + 15), 10'($rtoi((x - 1.0) * 1024.0))};
  endfunction

  function automatic logic [15:0] rnd_fp();
    logic [4:0] e;
    e = 5'(3 + ($urandom % 26));   // 3..28, normal
    return {1'($urandom), e, 10'($urandom)};
  endfunction

  function automatic bit same(logic [15:0] x, logic [15:0] y);
    if (x[14:0] == 0 && y[14:0] == 0) return 1;   // +0 == -0
    return x == y;
  endfunction

  task automatic apply(opcode_e o, logic f, logic [3:0] cc);
    op = o; fp = f; cond = cc; #1;
  endtask

  initial begin
    int n_fp = 0;
    a = 0; b = 0; c = 0; m = 0; op = OP_NOP; fp = 0; cond = 0;
    for (int t = 0; t < 4000; t++) begin
      real ra, rb, rc, rm;
      logic [15:0] expv;
      // ---- integer
      a = 16'($urandom); b = 16'($urandom); c = 16'($urandom); m = 16'($urandom);
      apply(OP_ADD, 0, 0);    `CHECK(result == 16'(a + b), "int ADD")
      apply(OP_SUBC, 0, 0);   `CHECK(result == 16'(a - b), "int SUB")
      apply(OP_MUL, 0, 0);    `CHECK(result == 16'(a * b), "int MUL")
      apply(OP_AND, 0, 0);    `CHECK(result == (a & b), "AND")
      apply(OP_OR, 1, 0);     `CHECK(result == (a | b), "OR")
      apply(OP_XOR, 0, 0);    `CHECK(result == (a ^ b), "XOR")
      apply(OP_MOV, 0, 0);    `CHECK(result == b, "MOV")
      apply(OP_LD, 0, 0);     `CHECK(result == m, "LD")
      apply(OP_LOCACC, 0, 0); `CHECK(result == 16'(m + c), "int LOCACC")
      apply(OP_DIFF, 0, 0);   `CHECK(result == 16'(b * c + m), "int DIFF")
      if (t % 4 == 0) b = a;
      apply(OP_CMP, 0, CC_EQ); `CHECK(cmp_flag == (a == b), "int EQ")
      apply(OP_CMP, 0, CC_NE); `CHECK(cmp_flag == (a != b), "int NE")
      apply(OP_CMP, 0, CC_LT); `CHECK(cmp_flag == ($signed(a) <  $signed(b)), "int LT")
      apply(OP_CMP, 0, CC_GE); `CHECK(cmp_flag == ($signed(a) >= $signed(b)), "int GE")
      apply(OP_CMP, 0, CC_GT); `CHECK(cmp_flag == ($signed(a) >  $signed(b)), "int GT")
      apply(OP_CMP, 0, CC_LE); `CHECK(cmp_flag == ($signed(a) <= $signed(b)), "int LE")
      // ---- FP16
      a = rnd_fp(); b = rnd_fp(); c = rnd_fp(); m = rnd_fp();
      if (t % 5 == 0) b = {~a[15], a[14:10], 10'($urandom)};   // near cancellation
      if (t % 7 == 0) b = {a[15], a[14:0]};
      ra = f2r(a); rb = f2r(b); rc = f2r(c); rm = f2r(m);
      apply(OP_ADD, 1, 0);
      expv = r2f(ra + rb);
      `CHECK(same(result, expv), "fp ADD")
      if (!same(result, expv)) $display("  a=%h b=%h got=%h exp=%h", a, b, result, expv);
      apply(OP_SUB, 1, 0);    `CHECK(same(result, r2f(ra - rb)), "fp SUB")
      apply(OP_MULC, 1, 0);
      expv = r2f(ra * rb);
      `CHECK(same(result, expv), "fp MUL")
      if (!same(result, expv)) $display("  a=%h b=%h got=%h exp=%h", a, b, result, expv);
      apply(OP_LOCACC, 1, 0); `CHECK(same(result, r2f(rm + rc)), "fp LOCACC")
      apply(OP_DIFF, 1, 0);
      expv = r2f(rb * rc);
      if (expv[14:10] == 5'h1F) expv = {expv[15] ^ 1'b0, 15'h7C00};   // inf + finite = inf
      else expv = r2f(f2r(expv) + rm);
      `CHECK(same(result, expv), "fp DIFF")
      if (!same(result, expv)) $display("  b=%h c=%h m=%h got=%h exp=%h", b, c, m, result, expv);
      apply(OP_CMP, 1, CC_LT); `CHECK(cmp_flag == (ra <  rb), "fp LT")
      apply(OP_CMP, 1, CC_GE); `CHECK(cmp_flag == (ra >= rb), "fp GE")
      apply(OP_CMP, 1, CC_EQ); `CHECK(cmp_flag == (ra == rb), "fp EQ")
      apply(OP_CMP, 1, CC_GT); `CHECK(cmp_flag == (ra >  rb), "fp GT")
      apply(OP_CMP, 1, CC_LE); `CHECK(cmp_flag == (ra <= rb), "fp LE")
      n_fp++;
    end
    // special values
    a = 16'h7C00; b = 16'h3C00;            // inf + 1 = inf
    apply(OP_ADD, 1, 0); `CHECK(result == 16'h7C00, "inf + 1")
    b = 16'hFC00;                          // inf + -inf = NaN
    apply(OP_ADD, 1, 0); `CHECK(result[14:10] == 5'h1F && result[9:0] != 0, "inf - inf is NaN")
    a = 16'h7E00; b = 16'h3C00;            // NaN compares unordered
    apply(OP_CMP, 1, CC_EQ); `CHECK(!cmp_flag, "NaN == 1 false")
    apply(OP_CMP, 1, CC_NE); `CHECK(!cmp_flag, "NaN != 1 false (unordered)")
    apply(OP_CMP, 1, CC_LT); `CHECK(!cmp_flag, "NaN < 1 false")
    a = 16'h7BFF; b = 16'h7BFF;            // 65504 + 65504 overflows
    apply(OP_ADD, 1, 0); `CHECK(result == 16'h7C00, "overflow to inf")
    a = 16'h0400; b = 16'h3800;            // 2^-14 * 0.5 underflows
    apply(OP_MUL, 1, 0); `CHECK(result[14:0] == 0, "underflow flushed")
    a = 16'h0000; b = 16'h8000;
    apply(OP_CMP, 1, CC_EQ); `CHECK(cmp_flag, "+0 == -0")
    `TB_FINISH
  end
endmodule
