// fp16_ref_pkg -- reference FP16 arithmetic for the testbenches.
//
// Works on SystemVerilog reals (binary64), independently of the RTL: FP16 is
// decoded to a real, the fused multiply-add is computed in binary64 and the
// result is rounded to FP16 to nearest, ties to even, with the same
// flush-to-zero rule as the RTL (a value whose exponent before rounding is
// below -14 becomes +0). Testbenches keep operand exponents in a band where
// the binary64 sum is exact, so the reference is exactly rounded.
package fp16_ref_pkg;

  function automatic real fp16_to_real(logic [15:0] h);
    real m;
    int  e;
    if (h[14:10] == 5'd0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    e = int'(h[14:10]) - 15;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real_to_fp16(real x);
    logic s;
    real  m, fl, fr;
    int   e;
    longint unsigned mi;
    if (x == 0.0) return 16'h0000;
    s = (x < 0.0);
    m = s ? -x : x;
    e = 0;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    if (e < -14) return 16'h0000;
    m  = m * 1024.0;            // 1024 <= m < 2048
    mi = longint'($floor(m));
    fr = m - real'(mi);
    if (fr > 0.5 || (fr == 0.5 && mi[0])) mi++;
    if (mi == 2048) begin mi = 1024; e++; end
    if (e > 15) return {s, 5'd31, 10'd0};
    return {s, 5'(e + 15), 10'(mi - 1024)};
  endfunction

  function automatic logic [15:0] ref_fma(logic [15:0] a, logic [15:0] b, logic [15:0] c);
    return real_to_fp16(fp16_to_real(c) + fp16_to_real(a) * fp16_to_real(b));
  endfunction

  // Random normal FP16 with biased exponent in [elo, ehi].
  function automatic logic [15:0] rand_fp16(int elo, int ehi);
    int e;
    e = elo + int'($urandom_range(ehi - elo));
    return {1'($urandom), 5'(e), 10'($urandom)};
  endfunction

endpackage
