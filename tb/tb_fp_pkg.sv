// tb_fp_pkg -- reference floating-point helpers for the testbenches.
//
// Reference values are computed in double precision (`real`) and rounded to
// single precision here, bit by bit, with round-to-nearest-even and the same
// flush-to-zero rule as the hardware (results below the smallest normal
// become zero). A product of two singles is exact in double, so
// to_f32(from_f32(a) * from_f32(b)) is the correctly rounded product; a sum
// is exact in double whenever the exponents differ by less than 29.
package tb_fp_pkg;

  function automatic real from_f32(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return f[31] ? -0.0 : 0.0;
    if (f[30:23] == 8'hff) begin
      d = {f[31], 11'h7ff, f[22:0], 29'd0};
      return $bitstoreal(d);
    end
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] to_f32(real r);
    logic [63:0] d;
    logic        s, g, st;
    int          e;
    logic [23:0] m;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'h7ff) return (d[51:0] != 0) ? 32'h7fc00000 : {s, 31'h7f800000};
    if (d[62:52] == 11'd0)   return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b0, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 1;
    if (m[23]) begin m = 0; e = e + 1; end
    if (e >= 255) return {s, 31'h7f800000};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), m[22:0]};
  endfunction

  // Round a double to the nearest single and back.
  function automatic real rnd(real r);
    return from_f32(to_f32(r));
  endfunction

  // Random normal single with exponent in [emin, emax] and random sign.
  function automatic logic [31:0] rand_f32(int emin, int emax);
    int e;
    e = emin + int'($urandom_range(emax - emin));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  // Random single uniformly in [lo, hi).
  function automatic logic [31:0] rand_uniform(real lo, real hi);
    real u;
    u = real'($urandom) / 4294967296.0;
    return to_f32(lo + (hi - lo) * u);
  endfunction

  function automatic real absr(real x);
    return (x < 0.0) ? -x : x;
  endfunction

endpackage
