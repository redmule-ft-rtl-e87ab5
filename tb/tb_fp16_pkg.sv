// tb_fp16_pkg: reference FP16 arithmetic for the testbenches, written with
// SystemVerilog reals (IEEE double) so that it is independent of the RTL.
// fma_ref is exact as long as a*b + c fits in a double's 53-bit significand,
// which holds for the operand ranges the testbenches draw (rand_fp16 keeps
// exponents within a window); results are then rounded once to nearest-even.
package tb_fp16_pkg;

  function automatic real fp16_to_real(input logic [15:0] h);
    int e = int'(h[14:10]);
    real m = real'(h[9:0]);
    real v;
    if (e == 0) v = m * (2.0 ** -24);
    else        v = (1024.0 + m) * (2.0 ** (e - 25));
    return h[15] ? -v : v;
  endfunction

  function automatic bit is_nan(input logic [15:0] h);
    return (h[14:10] == 5'h1f) && (h[9:0] != 0);
  endfunction

  // Round a real to FP16, nearest-even; overflow to infinity.
  function automatic logic [15:0] real_to_fp16(input real r);
    logic s = (r < 0.0);
    real a = s ? -r : r;
    int e;
    real m, fl, fr;
    int unsigned mi;
    if (a == 0.0) return {s, 15'h0};
    // Find e with 2^e <= a < 2^(e+1).
    e = 0;
    while (a >= (2.0 ** (e + 1))) e++;
    while (a < (2.0 ** e)) e--;
    if (e < -14) e = -14;                     // subnormal quantum 2^-24
    m  = a / (2.0 ** (e - 10));               // exact scaling by a power of two
    fl = $floor(m);
    fr = m - fl;
    mi = int'(fl);
    if (fr > 0.5 || (fr == 0.5 && mi[0])) mi++;
    if (mi >= 2048) begin mi = mi / 2; e++; end
    if (e > 15) return {s, 15'h7c00};
    if (mi < 1024) return {s, 5'd0, mi[9:0]};
    return {s, 5'(e + 15), mi[9:0]};
  endfunction

  function automatic logic [15:0] fma_ref(input logic [15:0] a, b, c);
    real r;
    if (is_nan(a) || is_nan(b) || is_nan(c)) return 16'h7e00;
    r = fp16_to_real(a) * fp16_to_real(b) + fp16_to_real(c);
    if (r == 0.0) begin
      // Exact zero: -0 only if product and addend are both negative zeros.
      logic sp = a[15] ^ b[15];
      return {(sp & c[15]), 15'h0};
    end
    return real_to_fp16(r);
  endfunction

  // Random finite FP16 value with biased exponent in [elo, ehi].
  function automatic logic [15:0] rand_fp16(input int elo, input int ehi);
    logic [15:0] h;
    h[15]    = 1'($urandom);
    h[14:10] = 5'(elo + int'($urandom % (ehi - elo + 1)));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

endpackage
