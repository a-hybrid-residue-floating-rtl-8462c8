// alignment_logic - operand alignment for hybrid additions (mixed operations).
//
// The paper defines X + Y = 2^min(fx,fy) * (Nx*2^(fx-min) + Ny*2^(fy-min))
// and gives the scheduler an "alignment logic" block for such operations.
// This block prepares the residue-channel operands so that every channel
// computes (a*b + addend) mod m_i:
//   multiply:  a = x.r, b = y.r,                addend = 0
//   add:       the operand with the larger exponent is shifted left by
//              d = |fx - fy| by multiplying its residues with 2^d mod m_i,
//              the other operand is the addend
// A left shift in the residue domain is an exact multiplication, so no
// reconstruction is needed. The paper instead speaks of reconstructing,
// shifting and re-encoding one operand; the residue multiplication by 2^d
// is this design's choice. The result exponent (min) is formed by the
// exponent unit.
//
// Caller rule (not checked in hardware): |N|*2^d must stay below (M-1)/2,
// otherwise the sum wraps modulo M. A shift of D_MAX or more is flagged by
// align_ovf and its residues are not meaningful.
//
// Purely combinational; it sits in the operand-fetch stage in front of the
// residue pipeline's operand registers.
module alignment_logic
  import hrfna_pkg::*;
#(
  parameter int D_MAX = 36
) (
  input  op_e      op,
  input  hybrid_t  x,
  input  hybrid_t  y,
  output res_vec_t a,
  output res_vec_t b,
  output res_vec_t addend,
  output logic     mixed,      // addition with unequal exponents
  output logic     align_ovf   // shift distance D_MAX or more
);
  // 2^d mod m_i, d = 0 .. D_MAX-1, a constant table built at elaboration
  function automatic residue_t pow2_mod(int i, int d);
    longint unsigned p = 1;
    for (int j = 0; j < d; j++) p = (p * 2) % longint'(MODULI[i]);
    return residue_t'(p);
  endfunction

  residue_t pow2 [NUM_CH][D_MAX];
  for (genvar i = 0; i < NUM_CH; i++) begin : g_ch
    for (genvar d = 0; d < D_MAX; d++) begin : g_d
      assign pow2[i][d] = pow2_mod(i, d);
    end
  end

  logic signed [EXP_W:0] diff;
  logic                  x_big;
  logic [EXP_W:0]        gap;
  int unsigned           idx;

  always_comb begin
    diff      = (EXP_W+1)'(x.f) - (EXP_W+1)'(y.f);
    x_big     = !diff[EXP_W];                    // fx >= fy
    gap       = x_big ? diff : -diff;
    align_ovf = (op == OP_ADD) && (gap >= (EXP_W+1)'(D_MAX));
    mixed     = (op == OP_ADD) && (gap != '0);
    idx       = align_ovf ? 0 : int'(gap);
    if (op == OP_ADD) begin
      a      = x_big ? x.r : y.r;
      addend = x_big ? y.r : x.r;
      for (int i = 0; i < NUM_CH; i++) b[i] = pow2[i][idx];
    end else begin
      a      = x.r;
      b      = y.r;
      addend = '0;
    end
  end
endmodule
