// tb_mod_mult - self-checking testbench of mod_mult.
// Drives random operand triples into the 4091 and 4095 channels (the
// moduli with the largest and smallest fold constants), compares each
// result with (a*b + addend) % m, checks the 3-cycle latency and that a
// stall ('en' low) freezes the pipeline.
module tb_mod_mult;
  import hrfna_pkg::*;

  logic clk = 0, rst_n = 0, en = 1, vin = 0;
  residue_t a, b, c;
  logic v1, v2;
  residue_t r1, r2;
  int checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && en) cycle <= cycle + 1;   // enabled cycles

  mod_mult #(.MODULUS(12'd4091)) dut1 (.clk, .rst_n, .en, .in_valid(vin), .a, .b, .addend(c), .out_valid(v1), .r(r1));
  mod_mult #(.MODULUS(12'd4095)) dut2 (.clk, .rst_n, .en, .in_valid(vin), .a, .b, .addend(c), .out_valid(v2), .r(r2));

  longint exp1 [$], exp2 [$];
  int     tin [$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard
  always @(posedge clk) if (rst_n && en && v1) begin
    longint e1, e2; int t0;
    e1 = exp1.pop_front(); e2 = exp2.pop_front(); t0 = tin.pop_front();
    checks += 3;
    if (r1 !== residue_t'(e1)) begin failures++; $display("FAIL m=4091 got %0d exp %0d", r1, e1); end
    if (r2 !== residue_t'(e2)) begin failures++; $display("FAIL m=4095 got %0d exp %0d", r2, e2); end
    if (cycle - t0 != 3) begin failures++; $display("FAIL latency %0d", cycle - t0); end
  end

  initial begin
    a = 0; b = 0; c = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // occasional stall cycle
      en = ($urandom_range(0, 9) != 0);
      if (en) begin
        automatic int mode = $urandom_range(0, 3);
        vin = 1;
        if (mode == 0) begin a = 12'd4090; b = 12'd4090; c = 12'd4090; end   // extremes
        else begin
          a = residue_t'($urandom_range(0, 4090));
          b = residue_t'($urandom_range(0, 4090));
          c = (mode == 1) ? residue_t'($urandom_range(0, 4090)) : '0;
        end
        exp1.push_back((longint'(a) * longint'(b) + longint'(c)) % 4091);
        exp2.push_back((longint'(a) * longint'(b) + longint'(c)) % 4095);
        tin.push_back(cycle);
      end else vin = 0;
    end
    @(negedge clk); vin = 0; en = 1;
    repeat (6) @(posedge clk);
    checks++;
    if (exp1.size() != 0) begin failures++; $display("FAIL %0d results missing", exp1.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
