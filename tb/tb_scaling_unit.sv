// tb_scaling_unit - self-checking testbench of scaling_unit.
// Random CRT values X in [0, M) (read as signed N), exponents and shifts k
// in 0..36; expects round(N/2^k) with ties upward, f + k saturated at the
// exponent maximum with its flag, one cycle later.
module tb_scaling_unit;
  import hrfna_pkg::*;
  import hrfna_tb_pkg::*;

  logic clk = 0, rst_n = 0, en = 1, vin = 0, vout, eovf;
  crt_t x;
  exp_t f, fo;
  logic [K_W-1:0] k;
  nint_t nout;
  int checks = 0, failures = 0, n_sat = 0;

  always #5 clk = ~clk;

  scaling_unit dut (.clk, .rst_n, .en, .in_valid(vin), .x, .f, .k, .out_valid(vout), .n(nout), .f_out(fo), .exp_ovf(eovf));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic longint M = ref_M();
    x = '0; f = '0; k = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      longint xv, nv, en_; int fe, oe;
      @(negedge clk);
      xv = {$urandom, $urandom}; if (xv < 0) xv = -xv; xv = xv % M;
      if (n % 10 == 0) xv = (M - 1) / 2 + (n % 20 == 0 ? 0 : 1);
      x = crt_t'(xv); k = K_W'($urandom_range(0, 36));
      f = exp_t'($urandom_range(0, 1023));
      vin = 1;
      nv  = (xv > (M - 1) / 2) ? xv - M : xv;
      en_ = ref_scale(nv, int'(k));
      fe  = int'(f) + int'(k); oe = 0;
      if (fe > 511) begin fe = 511; oe = 1; end
      @(posedge clk); #1;
      checks += 4;
      if (!vout) begin failures++; $display("FAIL valid"); end
      if (longint'(nout) != en_) begin failures++; $display("FAIL n got %0d exp %0d (N=%0d k=%0d)", nout, en_, nv, k); end
      if (int'(fo) != fe) begin failures++; $display("FAIL f got %0d exp %0d", fo, fe); end
      if (int'(eovf) != oe) begin failures++; $display("FAIL ovf"); end
      n_sat += oe;
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
