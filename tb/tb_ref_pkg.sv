// tb_ref_pkg -- reference arithmetic for the testbenches, written
// independently of the design's own constant functions: the SIKE prime
// p = f*2^a*3^b - 1, its odd part m3 = f*3^b, the Barrett shift
// k = 2*bitlen(p) - a and the Barrett factor x = floor(2^k / m3), all on
// 2048-bit integers with the language's own * and / operators.
package tb_ref_pkg;
  typedef logic [2047:0] big_t;

  function automatic big_t ref_m3(int unsigned f, int unsigned b);
    big_t v = big_t'(f);
    repeat (b) v = v * 3;
    return v;
  endfunction

  function automatic big_t ref_p(int unsigned f, int unsigned a, int unsigned b);
    return ref_m3(f, b) * (big_t'(1) << a) - 1;
  endfunction

  function automatic int unsigned ref_bitlen(big_t v);
    int unsigned n = 0;
    while (v != 0) begin v = v >> 1; n++; end
    return n;
  endfunction

  function automatic int unsigned ref_k(int unsigned f, int unsigned a, int unsigned b);
    return 2 * ref_bitlen(ref_p(f, a, b)) - a;
  endfunction

  function automatic big_t ref_x(int unsigned f, int unsigned a, int unsigned b);
    return (big_t'(1) << ref_k(f, a, b)) / ref_m3(f, b);
  endfunction

  // random value below the limit, built from 32-bit pieces
  function automatic big_t rand_below(big_t lim);
    big_t r = '0;
    for (int i = 0; i < 64; i++) r = (r << 32) | big_t'($urandom);
    return r % lim;
  endfunction
endpackage
