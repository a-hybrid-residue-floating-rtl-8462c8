// mod_mult - pipelined modular multiplier of one residue channel.
//
// Computes r = (a * b + addend) mod MODULUS in three register stages,
// following the three pipeline stages of the paper's modular multiplier:
//   stage 1  multiplier:      P  = a*b + addend (one DSP-sized 12x12 product)
//   stage 2  reduction prep:  r' = fold(fold(P)), r' < 2*MODULUS
//   stage 3  subtractor:      r  = (r' >= MODULUS) ? r' - MODULUS : r'
// The fold uses MODULUS = 2^RES_W - c with small c: P = hi*2^RES_W + lo is
// congruent to hi*c + lo. The paper says only that stage 2 "prepares" the
// value with a coarse comparison and stage 3 subtracts the modulus or passes
// the value; the folding is this design's choice. The addend input (0 for a
// plain product) lets the same channel do an aligned residue addition; it is
// also this design's addition.
//
// Interface: valid-only, no backpressure. 'en' low freezes every stage
// (global stall from the scheduler). Latency 3 cycles, one new operand pair
// per enabled cycle (II = 1).
module mod_mult
  import hrfna_pkg::*;
#(
  parameter logic [RES_W-1:0] MODULUS = 12'd4093
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  logic     in_valid,
  input  residue_t a,
  input  residue_t b,
  input  residue_t addend,
  output logic     out_valid,
  output residue_t r
);
  localparam logic [3:0] C = fold_c(MODULUS);

  logic [2*RES_W-1:0] p_q;       // stage 1
  logic [RES_W:0]     rp_q;      // stage 2, < 2*MODULUS
  logic [2:0]         v_q;
  logic [RES_W+3:0]   fold1;
  logic [RES_W:0]     fold2;

  // reduction prep: two folds of the 24-bit product
  always_comb begin
    fold1 = (RES_W+4)'(p_q[2*RES_W-1:RES_W]) * (RES_W+4)'(C) + (RES_W+4)'(p_q[RES_W-1:0]);
    fold2 = (RES_W+1)'(fold1[RES_W+3:RES_W]) * (RES_W+1)'(C) + (RES_W+1)'(fold1[RES_W-1:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q  <= '0;
      p_q  <= '0;
      rp_q <= '0;
      r    <= '0;
    end else if (en) begin
      v_q  <= {v_q[1:0], in_valid};
      p_q  <= (2*RES_W)'(a) * (2*RES_W)'(b) + (2*RES_W)'(addend);
      rp_q <= fold2;
      r    <= (rp_q >= (RES_W+1)'(MODULUS)) ? RES_W'(rp_q - (RES_W+1)'(MODULUS)) : rp_q[RES_W-1:0];
    end
  end

  assign out_valid = v_q[2];

  // the fold constant must be small enough for two folds to reach < 2*MODULUS
  initial assert (MODULUS > (1 << RES_W) - 8) else $error("mod_mult: modulus too far from 2^RES_W");
endmodule
