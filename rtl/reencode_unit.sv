// reencode_unit - re-encoding of a signed integer into residues.
//
// Returns r_i = N mod m_i (in [0, m_i)) for the signed scaled integer N
// from the scaling unit: the magnitude |N| is reduced by folding
// (|N| = sum of 12-bit digits d_j*2^(12j), congruent to sum d_j*c_i^j with
// c_i = 2^12 - m_i, repeated until below 2*m_i, then one conditional
// subtraction), and for negative N the residue is m_i - (|N| mod m_i). The
// paper calls this a "compact modular reduction network"; the folding is
// this design's choice.
//
// One register stage (latency 1, II = 1), valid-only with stall 'en'.
module reencode_unit
  import hrfna_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  logic     in_valid,
  input  nint_t    n,
  output logic     out_valid,
  output res_vec_t r
);
  logic [63:0] mag;
  res_vec_t    r_c;
  always_comb begin
    mag = n[N_W-1] ? 64'(-n) : 64'(n);
    for (int i = 0; i < NUM_CH; i++) begin
      residue_t rm;
      rm     = fold_mod(mag, MODULI[i]);
      r_c[i] = (n[N_W-1] && rm != '0) ? MODULI[i] - rm : rm;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; r <= '0;
    end else if (en) begin
      out_valid <= in_valid;
      r         <= r_c;
    end
  end
endmodule
