// hdc_ref_pkg: reference models used by the testbenches only.
//
// They are written independently of the RTL: Murmur3 works on a byte string
// exactly as the public C reference does, the range reduction is written as a
// division, and the sigmoid reference evaluates the PLAN segments with real
// arithmetic and converts to fixed point at the end.
package hdc_ref_pkg;

  function automatic logic [31:0] rl(logic [31:0] x, int r);
    return (x << r) | (x >> (32 - r));
  endfunction

  // Murmur3 x86_32 of a 4-byte little-endian key.
  function automatic logic [31:0] mm3_word(logic [31:0] key, logic [31:0] seed);
    byte unsigned b[4];
    logic [31:0] h, k;
    b[0] = key[7:0]; b[1] = key[15:8]; b[2] = key[23:16]; b[3] = key[31:24];
    h = seed;
    k = {b[3], b[2], b[1], b[0]};
    k = k * 32'hcc9e2d51; k = rl(k, 15); k = k * 32'h1b873593;
    h = h ^ k; h = rl(h, 13); h = h * 5 + 32'he6546b64;
    h = h ^ 32'd4;
    h = h ^ (h >> 16); h = h * 32'h85ebca6b;
    h = h ^ (h >> 13); h = h * 32'hc2b2ae35;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Coordinate within a partition of n coordinates: floor(h * n / 2^32).
  function automatic int unsigned bucket(logic [31:0] h, int unsigned n);
    longint unsigned num;
    num = longint'(h) * longint'(n);
    return int'(num / 64'h1_0000_0000);
  endfunction

  // PLAN sigmoid, fixed point with frac fractional bits; truncating shifts
  // are reproduced with floor() on the magnitude.
  function automatic longint sigmoid_fx(longint x, int frac);
    longint one, ax, y;
    one = longint'(1) << frac;
    ax = (x < 0) ? -x : x;
    if (ax >= 5 * one)                 y = one;
    else if (ax * 8 >= 19 * one)       y = ax / 32 + (27 * one) / 32;
    else if (ax >= one)                y = ax / 8 + (5 * one) / 8;
    else                               y = ax / 4 + one / 2;
    return (x < 0) ? one - y : y;
  endfunction

endpackage
