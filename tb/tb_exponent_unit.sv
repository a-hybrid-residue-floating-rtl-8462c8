// tb_exponent_unit - self-checking testbench of exponent_unit.
// Random exponent pairs, both operations, random bias and stalls. The
// reference is the saturating sum fx + fy - bias (multiply) or min(fx, fy)
// (add), with inputs at the limits propagating saturation; flags and the
// 4-cycle latency are checked.
module tb_exponent_unit;
  import hrfna_pkg::*;

  logic clk = 0, rst_n = 0, en = 1, vin = 0, vout, ovf, unf;
  op_e  op;
  exp_t fx, fy, bias, fz;
  int checks = 0, failures = 0, cycle = 0;
  int n_ovf = 0, n_unf = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && en) cycle <= cycle + 1;

  exponent_unit dut (.clk, .rst_n, .en, .in_valid(vin), .op, .fx, .fy, .bias, .out_valid(vout), .fz, .ovf, .unf);

  int expf [$], expo [$], expu [$], tin [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && en && vout) begin
    int ef, eo, eu, t0;
    ef = expf.pop_front(); eo = expo.pop_front(); eu = expu.pop_front(); t0 = tin.pop_front();
    checks += 4;
    if (int'(fz) != ef) begin failures++; $display("FAIL fz %0d exp %0d", fz, ef); end
    if (int'(ovf) != eo) begin failures++; $display("FAIL ovf"); end
    if (int'(unf) != eu) begin failures++; $display("FAIL unf"); end
    if (cycle - t0 != 4) begin failures++; $display("FAIL latency %0d", cycle - t0); end
    n_ovf += int'(ovf); n_unf += int'(unf);
  end

  initial begin
    op = OP_MUL; fx = '0; fy = '0; bias = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      en = ($urandom_range(0, 7) != 0);
      if (en) begin
        int s, e, o, u, sx, sy;
        vin  = 1;
        op   = ($urandom_range(0, 2) == 0) ? OP_ADD : OP_MUL;
        fx   = exp_t'($urandom_range(0, 1023));
        fy   = (n % 3 == 0) ? exp_t'(int'(fx) / 2) : exp_t'($urandom_range(0, 1023));
        bias = (n % 4 == 0) ? exp_t'($urandom_range(0, 1023)) : '0;
        sx = int'(fx); sy = int'(fy);
        s  = (op == OP_ADD) ? ((sx < sy) ? sx : sy) : sx + sy - int'(bias);
        o = 0; u = 0; e = s;
        if ((sx == 511 || sy == 511) && !(sx == -512 || sy == -512)) begin e = 511; o = 1; end
        else if ((sx == -512 || sy == -512) && !(sx == 511 || sy == 511)) begin e = -512; u = 1; end
        else if (s > 511)  begin e = 511;  o = 1; end
        else if (s < -512) begin e = -512; u = 1; end
        expf.push_back(e); expo.push_back(o); expu.push_back(u); tin.push_back(cycle);
      end else vin = 0;
    end
    @(negedge clk); vin = 0; en = 1;
    repeat (8) @(posedge clk);
    checks += 3;
    if (expf.size() != 0) begin failures++; $display("FAIL results missing"); end
    if (n_ovf == 0) begin failures++; $display("FAIL no overflow case"); end
    if (n_unf == 0) begin failures++; $display("FAIL no underflow case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
