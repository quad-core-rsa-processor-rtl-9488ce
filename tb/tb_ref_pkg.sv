// tb_ref_pkg: reference arithmetic for the testbenches, written without any
// of the design's structure: plain radix-2 (bit-serial) Montgomery
// multiplication, modular multiplication with a wide % operator, and
// square-and-multiply exponentiation. All values are MAXN bits wide; the
// operand width n (n <= MAXN) is an argument.
package tb_ref_pkg;
  parameter int MAXN = 1024;
  typedef logic [MAXN-1:0]   num_t;
  typedef logic [2*MAXN:0]   wide_t;

  // Z = X * Y * 2^-n mod M, radix-2, one multiplier bit per step.
  function automatic num_t mont_ref(num_t x, num_t y, num_t m, int n);
    logic [MAXN+1:0] s;
    s = '0;
    for (int i = 0; i < n; i++) begin
      if (x[i]) s = s + (MAXN+2)'(y);
      if (s[0]) s = s + (MAXN+2)'(m);
      s = s >> 1;
    end
    if (s >= (MAXN+2)'(m)) s = s - (MAXN+2)'(m);
    return s[MAXN-1:0];
  endfunction

  function automatic num_t modmul(num_t a, num_t b, num_t m);
    wide_t p;
    p = wide_t'(a) * wide_t'(b);
    return num_t'(p % wide_t'(m));
  endfunction

  // b^e mod m, e has n bits.
  function automatic num_t modexp(num_t b, num_t e, num_t m, int n);
    num_t r, p;
    r = num_t'(1) % m;
    p = b % m;
    for (int i = 0; i < n; i++) begin
      if (e[i]) r = modmul(r, p, m);
      p = modmul(p, p, m);
    end
    return r;
  endfunction

  // 2^(2n) mod m
  function automatic num_t r2_mod(num_t m, int n);
    wide_t one;
    one = wide_t'(1) << (2 * n);
    return num_t'(one % wide_t'(m));
  endfunction

  // Random odd n-bit modulus with the top bit set.
  function automatic num_t rand_modulus(int n);
    num_t m;
    for (int w = 0; w < MAXN / 32; w++) m[32*w +: 32] = $urandom;
    if (n < MAXN) m = m & ((num_t'(1) << n) - 1);
    m[n-1] = 1'b1;
    m[0]   = 1'b1;
    return m;
  endfunction

  // Random value below m.
  function automatic num_t rand_below(num_t m, int n);
    num_t v;
    for (int w = 0; w < MAXN / 32; w++) v[32*w +: 32] = $urandom;
    if (n < MAXN) v = v & ((num_t'(1) << n) - 1);
    return v % m;
  endfunction

  // Random n-bit value.
  function automatic num_t rand_bits(int n);
    num_t v;
    for (int w = 0; w < MAXN / 32; w++) v[32*w +: 32] = $urandom;
    if (n < MAXN) v = v & ((num_t'(1) << n) - 1);
    return v;
  endfunction
endpackage
