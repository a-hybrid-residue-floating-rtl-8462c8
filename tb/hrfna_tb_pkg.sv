// hrfna_tb_pkg - reference arithmetic for the HRFNA testbenches.
//
// Works on plain 64-bit integers, independently of the RTL's folding,
// Euclid and fixed-point tricks: residues by the % operator, CRT inverses by
// exhaustive search, reconstruction by the textbook CRT sum.
package hrfna_tb_pkg;
  import hrfna_pkg::*;

  localparam longint MODS [3] = '{4093, 4095, 4091};

  function automatic longint ref_M();
    return MODS[0] * MODS[1] * MODS[2];
  endfunction

  // residues of a signed integer (negative N encoded as M + N)
  function automatic res_vec_t ref_encode(longint n);
    res_vec_t r;
    for (int i = 0; i < 3; i++) r[i] = residue_t'(((n % MODS[i]) + MODS[i]) % MODS[i]);
    return r;
  endfunction

  function automatic longint ref_inverse(longint a, longint m);
    for (longint y = 1; y < m; y++) if ((a * y) % m == 1) return y;
    return 0;
  endfunction

  // unsigned CRT value X in [0, M)
  function automatic longint ref_crt(res_vec_t r);
    longint M = ref_M(), acc = 0;
    for (int i = 0; i < 3; i++) begin
      longint Mi = M / MODS[i];
      longint yi = ref_inverse(Mi % MODS[i], MODS[i]);
      acc = (acc + (longint'(r[i]) * yi % MODS[i]) * Mi) % M;
    end
    return acc;
  endfunction

  // signed N
  function automatic longint ref_decode(res_vec_t r);
    longint x = ref_crt(r);
    return (x > (ref_M() - 1) / 2) ? x - ref_M() : x;
  endfunction

  // round(N / 2^k), ties upward
  function automatic longint ref_scale(longint n, int k);
    if (k == 0) return n;
    return (n + (longint'(1) << (k - 1))) >>> k;
  endfunction

  // random signed integer with |n| < lim
  function automatic longint rand_int(longint lim);
    longint u = {$urandom, $urandom};
    if (u < 0) u = -u;
    u = u % lim;
    return ($urandom_range(0, 1) == 1) ? -u : u;
  endfunction
endpackage
