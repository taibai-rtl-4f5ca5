// fp16_pkg: IEEE 754 binary16 arithmetic used by the neuron-core execute stage.
//
// The neuron core works on 16-bit floating point as well as 16-bit integers.
// The paper names the FP16 format but not its rounding; this design keeps the
// arithmetic small: results are truncated (rounded toward zero), subnormal
// inputs and results are flushed to zero, overflow saturates to infinity and
// NaN inputs give the canonical quiet NaN 16'h7E00. All functions are
// combinational and synthesizable.
package fp16_pkg;

  localparam logic [15:0] FP16_QNAN = 16'h7E00;

  function automatic logic is_nan(logic [15:0] a);
    return (a[14:10] == 5'h1F) && (a[9:0] != 0);
  endfunction

  function automatic logic is_inf(logic [15:0] a);
    return (a[14:10] == 5'h1F) && (a[9:0] == 0);
  endfunction

  // Pack sign, unbiased-plus-15 exponent and a 22-bit mantissa whose leading
  // one sits at bit 21 (or below, for results that must be normalised left).
  function automatic logic [15:0] pack(logic s, int e, logic [21:0] m);
    int ee;
    logic [21:0] mm;
    ee = e;
    mm = m;
    if (mm == 0) return {s, 15'd0};
    for (int k = 0; k < 22; k++) begin
      if (!mm[21]) begin
        mm = mm << 1;
        ee = ee - 1;
      end
    end
    if (ee >= 31) return {s, 5'h1F, 10'd0};   // overflow -> infinity
    if (ee <= 0)  return {s, 15'd0};          // underflow -> zero
    return {s, ee[4:0], mm[20:11]};           // truncate
  endfunction

  function automatic logic [15:0] fp16_add(logic [15:0] a, logic [15:0] b);
    logic        sa, sb, sr;
    int          ea, eb, d;
    logic [21:0] ma, mb, mr;
    logic [22:0] sum;
    logic        sticky;
    if (is_nan(a) || is_nan(b)) return FP16_QNAN;
    if (is_inf(a) && is_inf(b) && (a[15] != b[15])) return FP16_QNAN;
    if (is_inf(a)) return a;
    if (is_inf(b)) return b;
    sa = a[15]; sb = b[15];
    ea = int'(a[14:10]); eb = int'(b[14:10]);
    // flush subnormals to zero
    ma = (ea == 0) ? 22'd0 : {1'b1, a[9:0], 11'd0};
    mb = (eb == 0) ? 22'd0 : {1'b1, b[9:0], 11'd0};
    if (ma == 0 && mb == 0) return {sa & sb, 15'd0};
    if (ma == 0) return {sb, b[14:0]};
    if (mb == 0) return {sa, a[14:0]};
    // order so that a has the larger magnitude
    if ((eb > ea) || ((eb == ea) && (mb > ma))) begin
      {sa, sb} = {sb, sa};
      {ea, eb} = {eb, ea};
      {ma, mb} = {mb, ma};
    end
    d = ea - eb;
    // sticky: bits of the smaller operand shifted out below the guard bits
    sticky = (d > 21) ? 1'b1 : ((mb & ((22'd1 << d) - 22'd1)) != 0);
    mb = (d > 21) ? 22'd0 : (mb >> d);
    sr = sa;
    if (sa == sb) begin
      sum = {1'b0, ma} + {1'b0, mb};
      if (sum[22]) return pack(sr, ea + 1, sum[22:1]);
      return pack(sr, ea, sum[21:0]);
    end
    // truncation toward zero: a discarded part of the subtrahend lowers the
    // exact difference below the grid value, so step down one guard unit
    mr = ma - mb - 22'(sticky);
    if (mr == 0) return 16'd0;
    return pack(sr, ea, mr);
  endfunction

  function automatic logic [15:0] fp16_neg(logic [15:0] a);
    return is_nan(a) ? a : {~a[15], a[14:0]};
  endfunction

  function automatic logic [15:0] fp16_sub(logic [15:0] a, logic [15:0] b);
    return fp16_add(a, fp16_neg(b));
  endfunction

  function automatic logic [15:0] fp16_mul(logic [15:0] a, logic [15:0] b);
    logic        s;
    int          ea, eb;
    logic [21:0] p;
    s  = a[15] ^ b[15];
    ea = int'(a[14:10]); eb = int'(b[14:10]);
    if (is_nan(a) || is_nan(b)) return FP16_QNAN;
    if (is_inf(a) || is_inf(b)) begin
      if ((!is_inf(a) && ea == 0) || (!is_inf(b) && eb == 0)) return FP16_QNAN; // inf * 0
      return {s, 5'h1F, 10'd0};
    end
    if (ea == 0 || eb == 0) return {s, 15'd0};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};       // 22-bit product, leading one at 21 or 20
    return pack(s, ea + eb - 15 + 1, p);
  endfunction

  // Signed comparison: returns -1, 0 or +1 (NaN compares as unordered -> 2)
  function automatic int fp16_cmp(logic [15:0] a, logic [15:0] b);
    logic [15:0] aa, bb;
    if (is_nan(a) || is_nan(b)) return 2;
    aa = (a[14:10] == 0) ? 16'd0 : a;   // flush subnormals, -0 == +0
    bb = (b[14:10] == 0) ? 16'd0 : b;
    if (aa == bb) return 0;
    if (aa[15] != bb[15]) return aa[15] ? -1 : 1;
    if (!aa[15]) return (aa[14:0] < bb[14:0]) ? -1 : 1;
    return (aa[14:0] > bb[14:0]) ? -1 : 1;
  endfunction

endpackage
