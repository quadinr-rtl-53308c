// tb_fp_pkg: FP32 reference arithmetic for the testbenches.
//
// Each operation is computed in double precision and rounded once to FP32,
// round to nearest even, with the same conventions as the hardware: results
// whose exponent (before rounding) is below the normal range become signed
// zero, subnormal inputs read as zero, overflow gives infinity. A product of
// two FP32 values is exact in double precision, and so is a sum whose
// exponents differ by less than 29; for larger differences the FP32 result
// is the larger operand either way, so one rounding gives the correct result.
package tb_fp_pkg;

  typedef logic [31:0] f32;

  function automatic real to_real(input f32 a);
    logic [63:0] d;
    if (a[30:23] == 8'd0) return $bitstoreal({a[31], 63'd0});
    d = {a[31], 11'(int'(a[30:23]) - 127 + 1023), a[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic f32 to_f32(input real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    if (e <= 0) return {d[63], 31'd0};
    m = {2'b01, d[51:29]};
    if (d[28] && ((|d[27:0]) || m[0])) m = m + 25'd1;
    if (m[24]) begin
      e = e + 1;
      m = m >> 1;
    end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic f32 fmul(input f32 a, input f32 b);
    return to_f32(to_real(a) * to_real(b));
  endfunction

  function automatic f32 fadd(input f32 a, input f32 b);
    return to_f32(to_real(a) + to_real(b));
  endfunction

  // x mod 4 folded into [-2, 2), exact.
  function automatic f32 wrap4(input f32 x);
    real r, k;
    r = to_real(x);
    k = $floor(r / 4.0 + 0.5);
    return to_f32(r - 4.0 * k);
  endfunction

  // Reference quadratic activation: +-r*r + 2r, r = x mod 4.
  function automatic f32 phi(input f32 x, input bit periodic = 1'b1);
    f32 r, sq, c;
    r  = periodic ? wrap4(x) : x;
    sq = fmul(r, r);
    if (!r[31] && r[30:0] != 31'd0) sq[31] = ~sq[31];
    c  = fmul(r, 32'h4000_0000);
    return fadd(sq, c);
  endfunction

  // Random normal FP32 with unbiased exponent in [emin, emax].
  function automatic f32 rand_f32(input int emin, input int emax);
    int e;
    e = emin + int'($urandom % 32'(emax - emin + 1));
    return {1'($urandom), 8'(e + 127), 23'($urandom)};
  endfunction

  // Random value uniform in [-scale, scale), rounded to FP32.
  function automatic f32 rand_uni(input real scale);
    real u;
    u = (real'($urandom % 32'd2000001) - 1000000.0) / 1000000.0;
    return to_f32(u * scale);
  endfunction

endpackage
