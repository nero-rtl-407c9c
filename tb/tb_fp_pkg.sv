// tb_fp_pkg: testbench helpers that convert between float32 bit patterns and
// real numbers, used to build reference results independently of fp32_pkg.
package tb_fp_pkg;

  function automatic real fp2r(input logic [31:0] b);
    real m;
    int  e;
    if (b[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    e = int'(b[30:23]) - 127;
    m = m * (2.0 ** e);
    return b[31] ? -m : m;
  endfunction

  // round-to-nearest-even conversion of a real to float32 (no subnormals)
  function automatic logic [31:0] r2fp(input real x);
    logic [63:0] d;
    logic [52:0] f;
    logic [23:0] m;
    int          e;
    d = $realtobits(x);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    f = {1'b1, d[51:0]};
    m = f[52:29];
    if (f[28] && (f[27:0] != 0 || m[0])) m = m + 24'd1;
    if (m == 24'd0) begin m = 24'h800000; e = e + 1; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], e[7:0], m[22:0]};
  endfunction

  function automatic bit close(input real got, input real ref_v, input real tol);
    real diff, mag;
    diff = (got > ref_v) ? got - ref_v : ref_v - got;
    mag  = (ref_v < 0.0) ? -ref_v : ref_v;
    return diff <= tol * (1.0 + mag);
  endfunction

  // uniform real in [lo, hi)
  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * (real'($urandom % 1000000) / 1000000.0);
  endfunction

endpackage
