// emoma_tb_pkg -- reference functions for the EMOMA testbenches.
//
// A second, separately written model of the hash functions (splitmix64 finaliser with
// the two seeds), of the bucket layout and of the Bloom-filter test, used by the
// testbenches to compute expected results without the RTL.
package emoma_tb_pkg;

  localparam longint unsigned S1 = 64'h9E3779B97F4A7C15;
  localparam longint unsigned S2 = 64'hD1B54A32D192ED03;

  function automatic longint unsigned ref_mix(longint unsigned v);
    longint unsigned a, b;
    a = v ^ (v >> 30);
    a = a * 64'hBF58476D1CE4E5B9;
    b = a ^ (a >> 27);
    b = b * 64'h94D049BB133111EB;
    return b ^ (b >> 31);
  endfunction

  function automatic int unsigned ref_h1(longint unsigned key, int unsigned aw);
    return int'(ref_mix(key ^ S1) & ((64'd1 << aw) - 1));
  endfunction

  function automatic int unsigned ref_h2(longint unsigned key, int unsigned aw);
    return int'(ref_mix(key ^ S2) & ((64'd1 << aw) - 1));
  endfunction

  // i-th bit position (0-based) inside a 16-bit block: nibble 15-i of the first mix
  function automatic int unsigned ref_g(longint unsigned key, int unsigned i);
    return int'((ref_mix(key ^ S1) >> (60 - 4*i)) & 64'hF);
  endfunction

  // mask of the k bits of key in its block
  function automatic int unsigned ref_gmask(longint unsigned key, int unsigned k);
    int unsigned m = 0;
    for (int unsigned i = 0; i < k; i++) m |= (1 << ref_g(key, i));
    return m;
  endfunction

endpackage
