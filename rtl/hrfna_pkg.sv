// hrfna_pkg - shared types, constants and helper functions of the hybrid
// residue-floating (HRFNA) datapath.
//
// A hybrid number is an integer N held as three residues r_i = N mod m_i
// plus a signed power-of-two exponent f, meaning N * 2^f. The moduli
// {4093, 4095, 4091} follow the paper; each fits in 12 bits, they are
// pairwise coprime and their product M = 68,568,575,985 (36 bits) is the
// dynamic range of N. Negative N is stored as M + N (M is odd, so the
// signed range is -(M-1)/2 .. (M-1)/2); signed encoding is this design's
// choice, the paper only writes |N| >= tau.
//
// The CRT constants (M_i = M/m_i, y_i = M_i^-1 mod m_i) and the magnitude
// estimator constants K_i = ceil(2^EST_F / m_i) are computed by constant
// functions below, so changing a modulus updates every table.
//
// Every modulus must lie in (2^RES_W - 8, 2^RES_W]: reduction folds
// x = hi*2^RES_W + lo into hi*c_i + lo with c_i = 2^RES_W - m_i, which is
// this design's choice of the "comparison-subtraction" reduction.
package hrfna_pkg;

  localparam int NUM_CH = 3;                 // residue channels (paper: 3)
  localparam int RES_W  = 12;                // residue width (paper: 12 bits)
  localparam int EXP_W  = 10;                // exponent width (paper: "10-bit exponent")
  localparam int N_W    = 37;                // signed reconstructed integer width
  localparam int M_W    = 36;                // width of M
  localparam int EST_F  = 48;                // fraction bits of the magnitude estimate
  localparam int K_W    = 6;                 // width of the scaling shift k

  typedef logic [RES_W-1:0]           residue_t;
  typedef residue_t [NUM_CH-1:0]      res_vec_t;
  typedef logic signed [EXP_W-1:0]    exp_t;
  typedef logic [M_W-1:0]             crt_t;       // reconstructed X in [0, M)
  typedef logic signed [N_W-1:0]      nint_t;      // signed N
  typedef logic [EST_F-1:0]           frac_t;      // fraction of M, units 2^-EST_F

  localparam logic [RES_W-1:0] MODULI [NUM_CH] = '{12'd4093, 12'd4095, 12'd4091};

  typedef enum logic {OP_MUL = 1'b0, OP_ADD = 1'b1} op_e;

  typedef struct packed {
    res_vec_t r;
    exp_t     f;
  } hybrid_t;

  typedef struct packed {
    op_e     op;
    hybrid_t x;
    hybrid_t y;
  } hrfna_req_t;

  typedef struct packed {
    logic normalized;   // result went through the normalization engine
    logic exp_ovf;      // exponent saturated high
    logic exp_unf;      // exponent saturated low
  } hrfna_flags_t;

  // ---------------------------------------------------------------------
  // constant functions
  // ---------------------------------------------------------------------
  function automatic longint unsigned modulus_product();
    longint unsigned p = 1;
    for (int i = 0; i < NUM_CH; i++) p = p * longint'(MODULI[i]);
    return p;
  endfunction

  localparam longint unsigned M_TOTAL = modulus_product();
  localparam longint unsigned M_HALF  = (M_TOTAL - 1) / 2;

  // inverse of a modulo m by the extended Euclidean algorithm
  function automatic longint unsigned mod_inverse(longint unsigned a, longint unsigned m);
    longint signed t = 0, newt = 1, r = longint'(m), newr = longint'(a % m), q, tmp;
    for (int it = 0; it < 64; it++) begin
      if (newr != 0) begin
        q    = r / newr;
        tmp  = t - q * newt; t = newt; newt = tmp;
        tmp  = r - q * newr; r = newr; newr = tmp;
      end
    end
    if (t < 0) t = t + longint'(m);
    return longint'(t);
  endfunction

  function automatic longint unsigned crt_mi(int i);
    return M_TOTAL / longint'(MODULI[i]);
  endfunction

  function automatic longint unsigned crt_yi(int i);
    return mod_inverse(crt_mi(i) % longint'(MODULI[i]), longint'(MODULI[i]));
  endfunction

  // K_i = ceil(2^EST_F / m_i): X/M = frac(sum t_i / m_i) ~ frac(sum t_i*K_i / 2^EST_F)
  function automatic longint unsigned est_ki(int i);
    return ((64'd1 << EST_F) + longint'(MODULI[i]) - 1) / longint'(MODULI[i]);
  endfunction

  // fold constant c_i = 2^RES_W - m_i
  function automatic logic [3:0] fold_c(logic [RES_W-1:0] m);
    logic [RES_W:0] c;
    c = (RES_W+1)'(1 << RES_W) - {1'b0, m};
    return c[3:0];
  endfunction

  // x mod m for x < 2^64 by repeated folding; m in (2^RES_W-8, 2^RES_W]
  function automatic residue_t fold_mod(logic [63:0] x, logic [RES_W-1:0] m);
    logic [63:0] v;
    v = x;
    for (int it = 0; it < 7; it++)
      v = (v >> RES_W) * 64'(fold_c(m)) + (v & 64'((1 << RES_W) - 1));
    // v < 2^RES_W + 8*8 < 2m now
    if (v >= 64'(m)) v = v - 64'(m);
    return residue_t'(v);
  endfunction

endpackage
