// scaling_unit - power-of-two down-scaling of a reconstructed integer.
//
// Takes the CRT output X in [0, M), reads it as the signed integer
// N = X (X <= (M-1)/2) or X - M (otherwise), and returns
//     N' = round(N / 2^k) = (N + 2^(k-1)) >>> k     (k > 0; N' = N for k = 0)
// together with the exponent f' = f + k, which keeps N*2^f = N'*2^f'
// up to the rounding. The paper specifies the binary right shift by k and
// the exponent increase by k; the signed reading of X, the
// round-half-up rule and the saturating exponent add are this design's
// choices. The paper performs the exponent increase "in the exponent
// pipeline"; here the adder sits beside the shifter so that the normalized
// exponent leaves the engine with its residues.
//
// One register stage (latency 1, II = 1), valid-only with stall 'en'.
module scaling_unit
  import hrfna_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic           in_valid,
  input  crt_t           x,
  input  exp_t           f,
  input  logic [K_W-1:0] k,
  output logic           out_valid,
  output nint_t          n,
  output exp_t           f_out,
  output logic           exp_ovf
);
  localparam exp_t EXP_MAX = exp_t'((1 << (EXP_W-1)) - 1);

  nint_t                 n_in, rnd, n_c;
  logic signed [EXP_W:0] fsum;

  always_comb begin
    n_in = (64'(x) > M_HALF) ? nint_t'(64'(x) - M_TOTAL) : nint_t'(x);
    rnd  = (k == '0) ? '0 : nint_t'(64'd1 << (k - 1));
    n_c  = (n_in + rnd) >>> k;
    fsum = (EXP_W+1)'(f) + (EXP_W+1)'(k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; n <= '0; f_out <= '0; exp_ovf <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid;
      n         <= n_c;
      if (fsum > (EXP_W+1)'(EXP_MAX)) begin
        f_out <= EXP_MAX; exp_ovf <= 1'b1;
      end else begin
        f_out <= exp_t'(fsum); exp_ovf <= 1'b0;
      end
    end
  end
endmodule
