// tb_bn_pkg: reference arithmetic for the testbenches, written with wide
// integer operators and independent of the word-serial hardware.
//
// The BN-curve prime comes from the curve parameter t = 2^62 - 2^54 + 2^44:
//   p(t) = 36 t^4 + 36 t^3 + 24 t^2 + 6 t + 1   (254 bits)
// Montgomery constants: R = 2^256, p' = -p^-1 mod 2^32 (Newton iteration),
// RedFp = 5 R mod p (the constant that multiplies by -beta = 5).
package tb_bn_pkg;

  typedef logic [255:0] fe_t;

  function automatic fe_t bn_p();
    logic [319:0] t, p;
    t = (320'd1 << 62) - (320'd1 << 54) + (320'd1 << 44);
    p = 36 * t * t * t * t + 36 * t * t * t + 24 * t * t + 6 * t + 1;
    return p[255:0];
  endfunction

  // -p^-1 mod 2^32 for odd p0
  function automatic logic [31:0] neg_inv32(input logic [31:0] p0);
    logic [31:0] x;
    x = 32'd1;
    for (int k = 0; k < 6; k++) x = x * (32'd2 - p0 * x);
    return -x;
  endfunction

  function automatic fe_t mod_p(input logic [767:0] x, input fe_t p);
    logic [767:0] r;
    r = x % {512'd0, p};
    return r[255:0];
  endfunction

  function automatic fe_t r_mod_p(input fe_t p);
    return mod_p(768'd1 << 256, p);
  endfunction

  function automatic fe_t mul_mod(input fe_t a, input fe_t b, input fe_t p);
    return mod_p({512'd0, a} * {512'd0, b}, p);
  endfunction

  function automatic fe_t add_mod(input fe_t a, input fe_t b, input fe_t p);
    return mod_p({512'd0, a} + {512'd0, b}, p);
  endfunction

  function automatic fe_t sub_mod(input fe_t a, input fe_t b, input fe_t p);
    return mod_p({512'd0, a} + {512'd0, p} - {512'd0, b}, p);
  endfunction

  // Montgomery check: s is Mont(a,b) iff s < p and s*R = a*b (mod p)
  function automatic bit is_mont(input fe_t s, input fe_t a, input fe_t b, input fe_t p);
    return (s < p) && (mul_mod(s, r_mod_p(p), p) == mul_mod(a, b, p));
  endfunction

  // x^e mod p by square-and-multiply
  function automatic fe_t pow_mod(input fe_t x, input fe_t e, input fe_t p);
    fe_t r;
    r = 1;
    for (int k = 255; k >= 0; k--) begin
      r = mul_mod(r, r, p);
      if (e[k]) r = mul_mod(r, x, p);
    end
    return r;
  endfunction

  // R^-1 mod p by Fermat's little theorem (p prime)
  function automatic fe_t rinv_mod_p(input fe_t p);
    return pow_mod(r_mod_p(p), p - 2, p);
  endfunction

  function automatic fe_t rand_fe(input fe_t p);
    logic [511:0] x;
    for (int k = 0; k < 16; k++) x[k*32 +: 32] = $urandom;
    return mod_p({256'd0, x}, p);
  endfunction

endpackage
