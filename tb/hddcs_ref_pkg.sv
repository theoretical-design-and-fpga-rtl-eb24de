// hddcs_ref_pkg -- reference model used by the testbenches.
//
// Independent, bit-by-bit software form of the 3D digital chaotic system:
// for every bit j, x'_j = F_j if s_j = 1, else x_j, with
//   F1 = NOT x XOR (1 << (z mod 32)), F2 = NOT y XOR (1 << (x mod 32)),
//   F3 = NOT z XOR (1 << (y mod 32)).
// Also a pixel pattern generator for the image tests.
package hddcs_ref_pkg;
  import hddcs_pkg::*;

  typedef struct {
    word_t x, y, z;
  } state_t;

  function automatic word_t ref_f(word_t own, word_t drive);
    word_t f;
    int unsigned k;
    k = drive % 32;
    for (int j = 0; j < 32; j++) f[j] = (j == k) ? own[j] : !own[j];
    return f;
  endfunction

  function automatic word_t ref_pick(word_t old, word_t f, word_t sel);
    word_t r;
    for (int j = 0; j < 32; j++) r[j] = sel[j] ? f[j] : old[j];
    return r;
  endfunction

  function automatic state_t ref_step(state_t st, word_t s, word_t u, word_t v);
    state_t n;
    n.x = ref_pick(st.x, ref_f(st.x, st.z), s);
    n.y = ref_pick(st.y, ref_f(st.y, st.x), u);
    n.z = ref_pick(st.z, ref_f(st.z, st.y), v);
    return n;
  endfunction

  // XOR of a pixel with the low 8 bits of the three state words
  function automatic rgb_t ref_xor(rgb_t p, state_t st);
    rgb_t r;
    r.r = p.r ^ st.x[7:0];
    r.g = p.g ^ st.y[7:0];
    r.b = p.b ^ st.z[7:0];
    return r;
  endfunction

  // test picture: a smooth gradient with a bright square, as a function of (x, y)
  function automatic rgb_t test_pixel(int unsigned x, int unsigned y);
    rgb_t p;
    p.r = 8'(x);
    p.g = 8'(y * 2);
    p.b = ((x % 64) < 32 && (y % 64) < 32) ? 8'hF0 : 8'(x + y);
    return p;
  endfunction
endpackage
