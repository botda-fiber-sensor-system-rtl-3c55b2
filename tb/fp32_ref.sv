// fp32_ref: testbench-only reference arithmetic for single precision,
// computed through double precision. A float converts to double exactly; a
// double product of two floats is exact and a double sum is correctly
// rounded, so rounding that double once more to float (nearest, ties to
// even) gives the correctly rounded single-precision result. Subnormal
// results are flushed to zero, as in the hardware.
package fp32_ref;
  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:29]};
    g = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) begin
      m = m + 24'd1;
      if (m == 24'd0) begin m = 24'h800000; e++; end
    end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fmul(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fadd(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // equal as numbers: +0 and -0 match
  function automatic bit same(logic [31:0] a, logic [31:0] b);
    if (a[30:0] == 31'd0 && b[30:0] == 31'd0) return 1'b1;
    return a == b;
  endfunction

  // a normal float of about the given magnitude range, random sign if signed_
  function automatic logic [31:0] rnd(int emin, int emax, bit signed_);
    logic [31:0] f;
    f[31]    = signed_ ? 1'($urandom) : 1'b0;
    f[30:23] = 8'(emin + int'($urandom % 32'(emax - emin + 1)));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction
endpackage
