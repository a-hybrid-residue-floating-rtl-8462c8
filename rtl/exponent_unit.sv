// exponent_unit - the floating-point scaling (exponent update) pipeline.
//
// Produces the exponent of a hybrid result in four register stages, the
// exponent pipeline depth of the paper's pipeline-depth table (Align -> Add
// -> Normalize -> Output register) and the blocks of its exponent-unit
// figure:
//   stage 1  exponent input registers
//   stage 2  exponent alignment + first rounding/exception unit:
//              multiply: operands (f_x, f_y - bias)   (bias correction)
//              add:      operands (min(f_x, f_y), 0)  (aligned exponent)
//            an input already at the saturation limits marks the result
//            as saturated in the same direction (sticky)
//   stage 3  add & normalize: wide sum of the two aligned operands
//   stage 4  second rounding/exception unit + output register f_z:
//            saturates to the EXP_W-bit signed range and flags it
// For a multiplication f_z = f_x + f_y - bias; the bias is the exponent
// offset register of the configuration interface (0 = plain two's
// complement exponents). The bias meaning of that offset, the min() rule for
// additions (from the paper's addition formula) and saturation instead of
// wrap-around are this design's choices.
//
// Interface: valid-only, global stall 'en'. Latency 4, II = 1.
module exponent_unit
  import hrfna_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic in_valid,
  input  op_e  op,
  input  exp_t fx,
  input  exp_t fy,
  input  exp_t bias,
  output logic out_valid,
  output exp_t fz,
  output logic ovf,
  output logic unf
);
  localparam int WW = EXP_W + 2;
  localparam exp_t EXP_MAX = exp_t'((1 << (EXP_W-1)) - 1);
  localparam exp_t EXP_MIN = exp_t'(-(1 << (EXP_W-1)));

  typedef logic signed [WW-1:0] wexp_t;

  // stage 1
  logic v1; op_e op1; exp_t fx1, fy1, bias1;
  // stage 2
  logic v2; wexp_t a2, b2; logic sat_hi2, sat_lo2;
  // stage 3
  logic v3; wexp_t s3; logic sat_hi3, sat_lo3;
  // stage 4
  logic v4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; op1 <= OP_MUL; fx1 <= '0; fy1 <= '0; bias1 <= '0;
      v2 <= 1'b0; a2 <= '0; b2 <= '0; sat_hi2 <= 1'b0; sat_lo2 <= 1'b0;
      v3 <= 1'b0; s3 <= '0; sat_hi3 <= 1'b0; sat_lo3 <= 1'b0;
      v4 <= 1'b0; fz <= '0; ovf <= 1'b0; unf <= 1'b0;
    end else if (en) begin
      // stage 1: exponent input registers
      v1 <= in_valid; op1 <= op; fx1 <= fx; fy1 <= fy; bias1 <= bias;
      // stage 2: alignment and first exception check
      v2 <= v1;
      if (op1 == OP_ADD) begin
        a2 <= (fx1 < fy1) ? WW'(fx1) : WW'(fy1);
        b2 <= '0;
      end else begin
        a2 <= WW'(fx1);
        b2 <= WW'(fy1) - WW'(bias1);
      end
      sat_hi2 <= (fx1 == EXP_MAX) || (fy1 == EXP_MAX);
      sat_lo2 <= (fx1 == EXP_MIN) || (fy1 == EXP_MIN);
      // stage 3: exponent add & normalize
      v3 <= v2; s3 <= a2 + b2; sat_hi3 <= sat_hi2; sat_lo3 <= sat_lo2;
      // stage 4: rounding/exception and output register
      v4 <= v3;
      if (sat_hi3 && !sat_lo3 || s3 > WW'(EXP_MAX)) begin
        fz <= EXP_MAX; ovf <= 1'b1; unf <= 1'b0;
      end else if (sat_lo3 && !sat_hi3 || s3 < WW'(EXP_MIN)) begin
        fz <= EXP_MIN; ovf <= 1'b0; unf <= 1'b1;
      end else begin
        fz <= exp_t'(s3); ovf <= 1'b0; unf <= 1'b0;
      end
    end
  end
  assign out_valid = v4;
endmodule
