// tb_threshold_detect - self-checking testbench of threshold_detect.
// Signed integers are drawn on both sides of tau = alpha*M, many of them
// within a few hundred units of it, for the default alpha = 2^29 (units of
// 2^-48) and for random alphas. The flag must equal |N|*2^48 >= alpha*M,
// computed exactly in 128 bits; values within 4 units of tau are not
// judged (the estimator's stated tolerance). Residues must pass through
// unchanged and the latency must be 4 enabled cycles.
module tb_threshold_detect;
  import hrfna_pkg::*;
  import hrfna_tb_pkg::*;

  logic clk = 0, rst_n = 0, en = 1, vin = 0, vout, over;
  res_vec_t r_in, r_out;
  frac_t alpha, est;
  int checks = 0, failures = 0, cycle = 0, n_over = 0, n_under = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && en) cycle <= cycle + 1;

  threshold_detect dut (.clk, .rst_n, .en, .in_valid(vin), .r_in, .alpha, .out_valid(vout), .r_out, .over, .est);

  typedef struct { res_vec_t r; int o; int t; } exp_s;
  exp_s expq [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && en && vout) begin
    exp_s e;
    e = expq.pop_front();
    checks += 2;
    if (r_out !== e.r) begin failures++; $display("FAIL residues"); end
    if (cycle - e.t != 4) begin failures++; $display("FAIL latency %0d", cycle - e.t); end
    if (e.o >= 0) begin
      checks++;
      if (int'(over) != e.o) begin failures++; $display("FAIL over=%0d exp %0d", over, e.o); end
      if (over) n_over++; else n_under++;
    end
  end

  initial begin
    automatic longint M = ref_M();
    alpha = frac_t'(1) << 29;
    r_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      en = ($urandom_range(0, 7) != 0);
      if (n == 2000) begin   // change alpha with the pipeline drained
        vin = 0; en = 1;
        repeat (6) @(negedge clk);
        alpha = frac_t'({$urandom, $urandom}) >> 18;    // alpha < 2^30
      end
      if (en) begin
        longint v, tau_i; logic [127:0] lhs, rhs; exp_s e;
        tau_i = longint'((128'(alpha) * 128'(M)) >> 48);
        vin = 1;
        case (n % 4)
          0: v = rand_int((M - 1) / 2);
          1: v = rand_int(2 * tau_i + 1);
          default: v = tau_i + rand_int(300);
        endcase
        if (n % 8 == 1) v = -v;
        r_in = ref_encode(v);
        lhs = 128'(longint'((v < 0) ? -v : v)) << 48;
        rhs = 128'(alpha) * 128'(M);
        e.r = r_in; e.t = cycle;
        // undecided band of 4 units of N around tau
        if (lhs + (128'(4) << 48) < rhs)      e.o = 0;
        else if (lhs >= rhs + (128'(4) << 48)) e.o = 1;
        else                                  e.o = -1;
        expq.push_back(e);
      end else vin = 0;
    end
    @(negedge clk); vin = 0; en = 1;
    repeat (8) @(posedge clk);
    checks += 3;
    if (expq.size() != 0) begin failures++; $display("FAIL results missing"); end
    if (n_over == 0 || n_under == 0) begin failures++; $display("FAIL one side never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
