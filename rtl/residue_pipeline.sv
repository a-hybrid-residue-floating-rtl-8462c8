// residue_pipeline - the three-channel residue arithmetic pipeline.
//
// One channel per modulus m_i, each built as in the paper's top-level
// figure: operand register -> DSP multiply -> modular reduction, here
// operand register (1) + mod_mult (3) + output register (1) = 5 stages, the
// residue pipeline depth given in the paper's pipeline-depth table. The
// channels share no signals, so there is no carry between them.
//
// Channel i returns (a_i * b_i + addend_i) mod m_i. For a hybrid
// multiplication a = x, b = y, addend = 0; for an aligned addition the
// alignment logic supplies a = operand to shift, b = 2^d mod m_i and
// addend = the other operand (this design's way of doing the paper's
// "mixed operations").
//
// Interface: valid-only, global stall 'en'. Latency 5, II = 1.
module residue_pipeline
  import hrfna_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  logic     in_valid,
  input  res_vec_t a,
  input  res_vec_t b,
  input  res_vec_t addend,
  output logic     out_valid,
  output res_vec_t r
);
  res_vec_t a_q, b_q, c_q, mm_r;
  logic     v_q, out_v_q;
  logic [NUM_CH-1:0] mm_v;

  // stage 1: operand registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; a_q <= '0; b_q <= '0; c_q <= '0;
    end else if (en) begin
      v_q <= in_valid; a_q <= a; b_q <= b; c_q <= addend;
    end
  end

  // stages 2-4: one modular multiplier per channel
  for (genvar i = 0; i < NUM_CH; i++) begin : g_ch
    mod_mult #(.MODULUS(MODULI[i])) u_mm (
      .clk, .rst_n, .en,
      .in_valid (v_q),
      .a        (a_q[i]),
      .b        (b_q[i]),
      .addend   (c_q[i]),
      .out_valid(mm_v[i]),
      .r        (mm_r[i])
    );
  end

  // stage 5: output registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_v_q <= 1'b0; r <= '0;
    end else if (en) begin
      out_v_q <= mm_v[0]; r <= mm_r;
    end
  end
  assign out_valid = out_v_q;
endmodule
