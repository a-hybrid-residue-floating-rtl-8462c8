// crt_engine - CRT reconstruction engine.
//
// Turns the residues (r_1, r_2, r_3) back into the integer
//     X = ( sum_i r_i * M_i * y_i ) mod M,   M_i = M/m_i, y_i = M_i^-1 mod m_i
// as in the paper's CRT figure: precomputed constants, modular multipliers,
// partial sum, modulo reduction, output register. To keep the adder narrow
// the product r_i*y_i is first reduced mod m_i (t_i < m_i), so each partial
// term t_i*M_i is below M and their sum below 3M; the final reduction is
// then two compare-subtract steps. The constants are elaboration-time
// constants (LUT ROM). The paper places them in LUT ROM in the CRT section
// and in BRAM elsewhere; LUT ROM is followed here.
//
//   stages 1-3  t_i = (r_i * y_i) mod m_i     (mod_mult per lane)
//   stage 4     X = reduce(sum t_i*M_i)       (output register X)
//
// The paper's control FSM of this engine is reduced to the valid pipeline
// that stages operands and validates the output. Latency 4, II = 1,
// valid-only with stall input 'en'. Output X is in [0, M).
module crt_engine
  import hrfna_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  logic     in_valid,
  input  res_vec_t r,
  output logic     out_valid,
  output crt_t     x
);
  localparam logic [M_W+1:0] M_L  = (M_W+2)'(M_TOTAL);
  localparam logic [M_W+1:0] M_L2 = (M_W+2)'(2 * M_TOTAL);

  res_vec_t t;
  logic [NUM_CH-1:0] t_v;

  for (genvar i = 0; i < NUM_CH; i++) begin : g_lane
    mod_mult #(.MODULUS(MODULI[i])) u_mm (
      .clk, .rst_n, .en,
      .in_valid (in_valid),
      .a        (r[i]),
      .b        (residue_t'(crt_yi(i))),
      .addend   ('0),
      .out_valid(t_v[i]),
      .r        (t[i])
    );
  end

  logic [M_W+1:0] psum, red;
  always_comb begin
    psum = '0;
    for (int i = 0; i < NUM_CH; i++)
      psum = psum + (M_W+2)'(t[i]) * (M_W+2)'(crt_mi(i));
    if (psum >= M_L2)     red = psum - M_L2;
    else if (psum >= M_L) red = psum - M_L;
    else                  red = psum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; x <= '0;
    end else if (en) begin
      out_valid <= t_v[0];
      x         <= crt_t'(red);
    end
  end
endmodule
