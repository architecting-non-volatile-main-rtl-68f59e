// tb_ref_pkg: reference cipher used by the testbenches. It stands in for the
// DES/AES/RSA engines, which are outside the design: a keyed, invertible
// word transform that differs per algorithm and per direction, enough to
// tell ciphertext from plaintext and to catch a wrong key, algorithm or
// direction. Latencies in cycles per word follow the figures quoted for the
// three algorithms (DES 7-10, AES 12-15, RSA 24-30).
package tb_ref_pkg;
  import snvm_pkg::*;

  function automatic logic [63:0] fold_key(logic [520:0] key, level_e alg);
    logic [63:0] k = 64'h9e37_79b9_7f4a_7c15 * (64'(alg) + 1);
    for (int i = 0; i < 9; i++) k ^= 64'(key >> (64 * i));
    return k;
  endfunction

  function automatic logic [63:0] rotl(logic [63:0] d, int r);
    return (d << r) | (d >> (64 - r));
  endfunction

  function automatic logic [63:0] cipher_word(logic [63:0] d, logic [520:0] key,
                                              level_e alg, logic enc);
    int r = 8 * int'(alg) + 3;
    logic [63:0] k = fold_key(key, alg);
    if (alg == LVL_NONE) return d;
    if (enc) return rotl(d ^ k, r) + k;
    return rotl(d - k, 64 - r) ^ k;
  endfunction

  function automatic logic [511:0] cipher_line(logic [511:0] l, logic [520:0] key,
                                               level_e alg, logic enc);
    logic [511:0] o;
    for (int w = 0; w < 8; w++) o[64*w +: 64] = cipher_word(l[64*w +: 64], key, alg, enc);
    return o;
  endfunction

  function automatic int min_lat(level_e alg);
    case (alg) LVL_DES: return 7; LVL_AES: return 12; LVL_RSA: return 24; default: return 0; endcase
  endfunction
  function automatic int max_lat(level_e alg);
    case (alg) LVL_DES: return 10; LVL_AES: return 15; LVL_RSA: return 30; default: return 0; endcase
  endfunction

  function automatic logic [511:0] rand_line();
    logic [511:0] l;
    for (int i = 0; i < 16; i++) l[32*i +: 32] = $urandom;
    return l;
  endfunction
endpackage
