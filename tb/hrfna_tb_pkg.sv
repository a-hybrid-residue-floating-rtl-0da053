// hrfna_tb_pkg -- reference arithmetic for the HRFNA testbenches.
//
// Independent of the RTL helpers: residues are formed with the % operator on
// 128-bit integers and CRT reconstruction uses modular inverses found by
// exhaustive search.  Values are signed integers in [-M/2, M/2).
package hrfna_tb_pkg;
  import hrfna_pkg::*;

  typedef logic signed [127:0] big_t;

  function automatic big_t ref_M();
    big_t p = 1;
    for (int i = 0; i < K; i++) p = p * big_t'(MODULI[i]);
    return p;
  endfunction

  function automatic rvec_t enc(input big_t n);
    rvec_t r;
    big_t  m, t;
    for (int i = 0; i < K; i++) begin
      m = big_t'(MODULI[i]);
      t = n % m;
      if (t < 0) t = t + m;
      r[i] = res_t'(t);
    end
    return r;
  endfunction

  function automatic big_t dec(input rvec_t r);
    big_t M, Mi, acc, inv;
    M   = ref_M();
    acc = 0;
    for (int i = 0; i < K; i++) begin
      Mi  = M / big_t'(MODULI[i]);
      inv = 0;
      for (int c = 1; c < int'(MODULI[i]); c++)
        if (((Mi % big_t'(MODULI[i])) * big_t'(c)) % big_t'(MODULI[i]) == 1) begin
          inv = big_t'(c);
          break;
        end
      acc = (acc + big_t'(r[i]) * Mi * inv) % M;
    end
    if (acc >= M / 2) acc = acc - M;
    return acc;
  endfunction

  // floor(n / 2^s)
  function automatic big_t floor_shift(input big_t n, input int s);
    return n >>> s;
  endfunction

  // random signed integer with about 'bits' bits of magnitude
  function automatic big_t rand_big(input int bits);
    big_t v;
    v = {$urandom, $urandom, $urandom, $urandom};
    if (bits < 127) v = v & ((big_t'(1) <<< bits) - 1);
    if ($urandom_range(1, 0) == 1) v = -v;
    return v;
  endfunction

  function automatic real big_to_real(input big_t v);
    real r;
    big_t a;
    a = (v < 0) ? -v : v;
    r = real'(a[127:96]) * (2.0 ** 96) + real'(a[95:64]) * (2.0 ** 64) +
        real'(a[63:32]) * (2.0 ** 32) + real'(a[31:0]);
    return (v < 0) ? -r : r;
  endfunction

  function automatic real fpm_to_real(input fpm_t x);
    real v;
    int  sh;
    if (x.e == 0) return 0.0;
    v  = real'(x.m);
    sh = int'(x.e) - FW - MANT_W;
    while (sh < 0) begin v = v / 2.0; sh++; end
    while (sh > 0) begin v = v * 2.0; sh--; end
    return v;
  endfunction

endpackage
