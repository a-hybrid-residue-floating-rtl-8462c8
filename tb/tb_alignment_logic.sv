// tb_alignment_logic - self-checking testbench of alignment_logic.
// For multiplications the operands must pass straight through with a zero
// addend. For additions the channel arithmetic (a*b + addend) mod m_i is
// evaluated on the outputs and must equal the residues of
// Nx*2^(fx-min) + Ny*2^(fy-min), computed with plain integers; the
// mixed and align_ovf flags are checked too.
module tb_alignment_logic;
  import hrfna_pkg::*;
  import hrfna_tb_pkg::*;

  op_e      op;
  hybrid_t  x, y;
  res_vec_t a, b, c;
  logic     mixed, aovf;
  int checks = 0, failures = 0, n_mixed = 0;

  alignment_logic dut (.op, .x, .y, .a, .b, .addend(c), .mixed, .align_ovf(aovf));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 4000; n++) begin
      longint nx, ny, sum; int fx, fy, g, mn;
      nx = rand_int(1 << 12); ny = rand_int(1 << 12);
      fx = $urandom_range(0, 60) - 30;
      fy = (n % 4 == 0) ? fx : fx + $urandom_range(0, 20) - 10;
      if (n % 97 == 0) fy = fx - 40;                       // gap beyond D_MAX
      op = (n % 3 == 0) ? OP_MUL : OP_ADD;
      x.r = ref_encode(nx); x.f = exp_t'(fx);
      y.r = ref_encode(ny); y.f = exp_t'(fy);
      #1;
      g  = (fx > fy) ? fx - fy : fy - fx;
      mn = (fx < fy) ? fx : fy;
      if (op == OP_MUL) begin
        checks += 2;
        if (a !== x.r || b !== y.r || c !== '0) begin failures++; $display("FAIL mul pass-through"); end
        if (mixed || aovf) begin failures++; $display("FAIL mul flags"); end
      end else begin
        checks += 2;
        if (mixed !== (g != 0)) begin failures++; $display("FAIL mixed flag"); end
        if (aovf !== (g >= 36)) begin failures++; $display("FAIL align_ovf flag"); end
        n_mixed += int'(mixed);
        if (g < 36) begin
          res_vec_t e;
          sum = nx * (longint'(1) << (fx - mn)) + ny * (longint'(1) << (fy - mn));
          e = ref_encode(sum);
          for (int i = 0; i < 3; i++) begin
            checks++;
            if (residue_t'((longint'(a[i]) * longint'(b[i]) + longint'(c[i])) % MODS[i]) !== e[i]) begin
              failures++; $display("FAIL add ch%0d nx=%0d ny=%0d fx=%0d fy=%0d", i, nx, ny, fx, fy);
            end
          end
        end
      end
    end
    checks++;
    if (n_mixed == 0) begin failures++; $display("FAIL no mixed operation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
