// threshold_detect - branching and threshold detection.
//
// Decides from the residues alone whether the encoded signed integer N has
// reached the normalization threshold, |N| >= tau = alpha * M (paper,
// Sec. IV). The paper describes this unit only as "magnitude estimators
// derived from modular bounds"; this design uses the fractional form of
// the CRT:
//     X / M = frac( sum_i t_i / m_i ),   t_i = (r_i * y_i) mod m_i
// approximated in EST_F-bit fixed point with K_i = ceil(2^EST_F / m_i):
//     est = ( sum_i t_i * K_i ) mod 2^EST_F
// est over-estimates X/M by less than 3*2^RES_W / 2^EST_F (about 3 units of
// N at the default sizes), so the decision is exact to a few units of N.
// With the signed encoding (negative N stored as M+N) the trigger is
//     est >= alpha  and  (1 - est) >= alpha
// where alpha is given in units of 2^-EST_F by the configuration registers.
//
// Stages 1-3 are one mod_mult per channel (t_i); stage 4 forms est and
// registers the decision together with the residues. Latency 4, II = 1,
// valid-only with global stall 'en'. No reconstruction is done here.
module threshold_detect
  import hrfna_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  logic     in_valid,
  input  res_vec_t r_in,
  input  frac_t    alpha,
  output logic     out_valid,
  output res_vec_t r_out,
  output logic     over,       // |N| >= tau: normalization needed
  output frac_t    est         // estimate of X/M
);
  res_vec_t t;
  logic [NUM_CH-1:0] t_v;
  res_vec_t r_d [3];

  for (genvar i = 0; i < NUM_CH; i++) begin : g_t
    mod_mult #(.MODULUS(MODULI[i])) u_mm (
      .clk, .rst_n, .en,
      .in_valid (in_valid),
      .a        (r_in[i]),
      .b        (residue_t'(crt_yi(i))),
      .addend   ('0),
      .out_valid(t_v[i]),
      .r        (t[i])
    );
  end

  // residues travel beside the t_i computation
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_d[0] <= '0; r_d[1] <= '0; r_d[2] <= '0;
    end else if (en) begin
      r_d[0] <= r_in; r_d[1] <= r_d[0]; r_d[2] <= r_d[1];
    end
  end

  logic [EST_F+3:0] acc;
  frac_t            e_c, neg_c;
  always_comb begin
    acc = '0;
    for (int i = 0; i < NUM_CH; i++)
      acc = acc + (EST_F+4)'(t[i]) * (EST_F+4)'(est_ki(i));
    e_c   = acc[EST_F-1:0];
    neg_c = frac_t'(-e_c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; r_out <= '0; over <= 1'b0; est <= '0;
    end else if (en) begin
      out_valid <= t_v[0];
      r_out     <= r_d[2];
      est       <= e_c;
      over      <= (e_c != '0) && (e_c >= alpha) && (neg_c >= alpha);
    end
  end
endmodule
