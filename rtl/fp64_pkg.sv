// Synthesizable IEEE 754 double precision add and multiply.
//
// The advection stages perform double precision arithmetic (21 operations
// per field per cell). These functions give each operation as combinational
// logic; the advect stage registers every result, one operation per stage.
// Rounding is round-to-nearest-even, as IEEE 754 prescribes by default.
// Subnormal inputs are read as zero and subnormal results are flushed to a
// signed zero, the usual choice in FPGA floating point cores; infinities and
// NaNs are propagated (any NaN result is the canonical quiet NaN).
package fp64_pkg;

  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;

  function automatic logic [63:0] fp64_add(input logic [63:0] a, input logic [63:0] b);
    logic        sa, sb, sr, swap;
    logic [10:0] ea, eb;
    logic [51:0] fa, fb;
    logic [55:0] ma, mb, mbs;      // 1.f with guard, round and sticky bits
    logic [56:0] sum;
    logic [11:0] d, er;
    logic [52:0] mant;
    logic        g, rest, rnd;
    logic [53:0] mr;
    int          lz;
    sa = a[63]; ea = a[62:52]; fa = a[51:0];
    sb = b[63]; eb = b[62:52]; fb = b[51:0];
    // special values
    if ((ea == 11'h7FF && fa != 0) || (eb == 11'h7FF && fb != 0)) return QNAN;
    if (ea == 11'h7FF && eb == 11'h7FF) return (sa == sb) ? a : QNAN;
    if (ea == 11'h7FF) return a;
    if (eb == 11'h7FF) return b;
    // zeros (subnormals read as zero)
    if (ea == 0 && eb == 0) return {sa & sb, 63'd0};
    if (ea == 0) return b;
    if (eb == 0) return a;
    // order by magnitude
    swap = {eb, fb} > {ea, fa};
    if (swap) begin
      {sa, ea, fa, sb, eb, fb} = {sb, eb, fb, sa, ea, fa};
    end
    sr = sa;
    ma = {1'b1, fa, 3'b000};
    mb = {1'b1, fb, 3'b000};
    d  = {1'b0, ea} - {1'b0, eb};
    if (d > 12'd55) mbs = 56'd1;
    else begin
      mbs = mb >> d;
      if ((mb & ((56'd1 << d) - 56'd1)) != 0) mbs[0] = 1'b1;
    end
    er = {1'b0, ea};
    if (sa == sb) begin
      sum = {1'b0, ma} + {1'b0, mbs};
      if (sum[56]) begin
        sum = {1'b0, sum[56:2], sum[1] | sum[0]};
        er  = er + 12'd1;
      end
    end else begin
      sum = {1'b0, ma} - {1'b0, mbs};
      if (sum == 0) return 64'd0;
      lz = 0;
      for (int i = 55; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      if ({1'b0, er} <= 13'(lz)) return {sr, 63'd0};
      er = er - 12'(lz);
    end
    mant = sum[55:3];
    g    = sum[2];
    rest = sum[1] | sum[0];
    rnd  = g & (rest | mant[0]);
    mr   = {1'b0, mant} + 54'(rnd);
    if (mr[53]) begin
      mr = mr >> 1;
      er = er + 12'd1;
    end
    if (er >= 12'd2047) return {sr, 11'h7FF, 52'd0};
    return {sr, er[10:0], mr[51:0]};
  endfunction

  function automatic logic [63:0] fp64_sub(input logic [63:0] a, input logic [63:0] b);
    return fp64_add(a, {~b[63], b[62:0]});
  endfunction

  function automatic logic [63:0] fp64_mul(input logic [63:0] a, input logic [63:0] b);
    logic         sr;
    logic [10:0]  ea, eb;
    logic [51:0]  fa, fb;
    logic [105:0] p;
    logic [52:0]  mant;
    logic         g, rest, rnd;
    logic [53:0]  mr;
    logic signed [13:0] er;
    sr = a[63] ^ b[63];
    ea = a[62:52]; fa = a[51:0];
    eb = b[62:52]; fb = b[51:0];
    if ((ea == 11'h7FF && fa != 0) || (eb == 11'h7FF && fb != 0)) return QNAN;
    if (ea == 11'h7FF || eb == 11'h7FF) begin
      if (ea == 0 || eb == 0) return QNAN;          // infinity times zero
      return {sr, 11'h7FF, 52'd0};
    end
    if (ea == 0 || eb == 0) return {sr, 63'd0};
    p  = {1'b1, fa} * {1'b1, fb};
    er = 14'(ea) + 14'(eb) - 14'sd1023;
    if (p[105]) begin
      mant = p[105:53];
      g    = p[52];
      rest = |p[51:0];
      er   = er + 14'sd1;
    end else begin
      mant = p[104:52];
      g    = p[51];
      rest = |p[50:0];
    end
    rnd = g & (rest | mant[0]);
    mr  = {1'b0, mant} + 54'(rnd);
    if (mr[53]) begin
      mr = mr >> 1;
      er = er + 14'sd1;
    end
    if (er >= 14'sd2047) return {sr, 11'h7FF, 52'd0};
    if (er <= 14'sd0) return {sr, 63'd0};
    return {sr, er[10:0], mr[51:0]};
  endfunction

endpackage
