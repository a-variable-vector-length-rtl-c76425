// fp_ref_pkg: reference single-precision arithmetic for the testbenches.
// Operands are widened exactly to double precision, the operation is done in
// double precision and the result is rounded once to single precision
// (nearest-even). For +, -, * and / of single-precision operands this gives
// the correctly rounded single-precision result. Like the datapath, results
// below the normal range are flushed to zero and NaNs become 0x7FC00000.
// Double-precision references use the simulator's real arithmetic directly,
// with the same flush-to-zero and canonical-NaN conventions (d_fix).
package fp_ref_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) d = {f[31], 63'd0};
    else if (f[30:23] == 8'hFF) d = {f[31], 11'h7FF, (f[22:0] != 0) ? 52'h8_0000_0000_0000 : 52'd0};
    else d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic        s, g, st;
    int          fe;
    logic [24:0] m;
    d  = $realtobits(r);
    s  = d[63];
    if (d[62:52] == 11'h7FF) return (d[51:0] != 0) ? 32'h7FC0_0000 : {s, 8'hFF, 23'd0};
    if (d[62:0] == 63'd0) return {s, 31'd0};
    fe = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = d[27:0] != 0;
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m  = m >> 1;
      fe = fe + 1;
    end
    if (fe <= 0) return {s, 31'd0};
    if (fe >= 255) return {s, 8'hFF, 23'd0};
    return {s, 8'(fe), m[22:0]};
  endfunction

  function automatic logic [31:0] f_add(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction
  function automatic logic [31:0] f_sub(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) - f2r(b));
  endfunction
  function automatic logic [31:0] f_mul(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction
  function automatic logic [31:0] f_div(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) / f2r(b));
  endfunction

  // A random normal single-precision number with exponent in [lo, hi].
  function automatic logic [31:0] rand_f(int lo, int hi);
    logic [31:0] r;
    r = $urandom;
    r[30:23] = 8'(lo + ($urandom % (hi - lo + 1)));
    return r;
  endfunction

  // Double precision: apply flush-to-zero and the canonical NaN to a result.
  function automatic logic [63:0] d_fix(real r);
    logic [63:0] d;
    d = $realtobits(r);
    if (d[62:52] == 11'h7FF && d[51:0] != 0) return 64'h7FF8_0000_0000_0000;
    if (d[62:52] == 11'd0) return {d[63], 63'd0};
    return d;
  endfunction
  // Double-precision operand: subnormal inputs are taken as zero.
  function automatic real d_in(logic [63:0] d);
    if (d[62:52] == 11'd0) return $bitstoreal({d[63], 63'd0});
    return $bitstoreal(d);
  endfunction
  function automatic logic [63:0] d_add(logic [63:0] a, logic [63:0] b, logic sub);
    return d_fix(sub ? d_in(a) - d_in(b) : d_in(a) + d_in(b));
  endfunction
  function automatic logic [63:0] d_mul(logic [63:0] a, logic [63:0] b);
    return d_fix(d_in(a) * d_in(b));
  endfunction
  function automatic logic [63:0] d_div(logic [63:0] a, logic [63:0] b);
    return d_fix(d_in(a) / d_in(b));
  endfunction

  // A random normal double-precision number with biased exponent in [lo, hi].
  function automatic logic [63:0] rand_d(int lo, int hi);
    logic [63:0] r;
    r = {$urandom, $urandom};
    r[62:52] = 11'(lo + ($urandom % (hi - lo + 1)));
    return r;
  endfunction

endpackage
