// fp32_pkg: single-precision floating-point operators used by the stencil
// engines (the paper's main configuration is 32-bit float).
//
// Each function is purely combinational and synthesizable. They follow IEEE-754
// binary32 with round-to-nearest-even, except that subnormal inputs and results
// are flushed to zero and NaN is not produced (0/0 and inf-inf give +inf or 0).
// These simplifications are this design's own choice; the paper says only that
// the kernels run in single (and half) precision.
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3f80_0000;
  localparam fp32_t FP_INF  = 32'h7f80_0000;

  // Pack sign, biased exponent and 27-bit mantissa (hidden bit at [26], guard,
  // round, sticky in [2:0]) with rounding, overflow to inf and flush to zero.
  function automatic fp32_t fp_round_pack(input logic s, input int e, input logic [26:0] m);
    logic [24:0] r;
    int          ee;
    ee = e;
    r  = {1'b0, m[26:3]};
    if (m[2] && (m[1] || m[0] || m[3])) r = r + 25'd1;
    if (r[24]) begin
      r  = r >> 1;
      ee = ee + 1;
    end
    if (ee >= 255) return {s, 8'hff, 23'd0};
    if (ee <= 0)   return {s, 31'd0};
    return {s, ee[7:0], r[22:0]};
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    logic [26:0] mx, my;
    logic [27:0] sum;
    int          d, ex, lz;
    logic        st;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? FP_ZERO : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:23] == 8'hff) return a;
    if (b[30:23] == 8'hff) return b;
    // x holds the larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    ex = int'(x[30:23]);
    d  = ex - int'(y[30:23]);
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    if (d >= 27) begin
      my = 27'd1;  // only sticky remains
    end else if (d > 0) begin
      st = 1'b0;
      for (int i = 0; i < 27; i++) if (i < d && my[i]) st = 1'b1;
      my = (my >> d) | {26'd0, st};
    end
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        ex  = ex + 1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == 28'd0) return FP_ZERO;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      ex  = ex - lz;
    end
    return fp_round_pack(x[31], ex, sum[26:0]);
  endfunction

  function automatic fp32_t fp_neg(input fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  function automatic fp32_t fp_sub(input fp32_t a, input fp32_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [47:0] p;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    if (a[30:23] == 8'hff || b[30:23] == 8'hff) return {s, 8'hff, 23'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      e = e + 1;
      return fp_round_pack(s, e, {p[47:22], |p[21:0]});
    end
    return fp_round_pack(s, e, {p[46:21], |p[20:0]});
  endfunction

  function automatic fp32_t fp_div(input fp32_t a, input fp32_t b);
    logic        s;
    logic [50:0] n, q;
    logic [23:0] db;
    logic        st;
    int          e;
    s = a[31] ^ b[31];
    if (b[30:23] == 8'd0 || a[30:23] == 8'hff) return {s, 8'hff, 23'd0};
    if (a[30:23] == 8'd0 || b[30:23] == 8'hff) return {s, 31'd0};
    db = {1'b1, b[22:0]};
    n  = {1'b1, a[22:0], 27'd0};          // ma * 2^27
    q  = n / {27'd0, db};                 // 27 or 28 significant bits
    st = (n % {27'd0, db}) != 51'd0;
    e  = int'(a[30:23]) - int'(b[30:23]) + 127;
    if (q[27]) return fp_round_pack(s, e, {q[27:2], q[1] | q[0] | st});
    return fp_round_pack(s, e - 1, {q[26:1], q[0] | st});
  endfunction

  // Multiply by 4 is an exponent increment (used by the Laplacian).
  function automatic fp32_t fp_mul4(input fp32_t a);
    if (a[30:23] == 8'd0) return a;
    if (a[30:23] >= 8'd253) return {a[31], 8'hff, 23'd0};
    return {a[31], a[30:23] + 8'd2, a[22:0]};
  endfunction

endpackage
