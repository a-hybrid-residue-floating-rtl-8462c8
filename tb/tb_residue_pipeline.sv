// tb_residue_pipeline - self-checking testbench of residue_pipeline.
// Random residue triples (plus extremes) go into all three channels, with
// random stall cycles. Each channel result is compared with
// (a_i*b_i + addend_i) % m_i; the latency must be 5 enabled cycles and a
// new input is accepted every enabled cycle.
module tb_residue_pipeline;
  import hrfna_pkg::*;
  import hrfna_tb_pkg::*;

  logic clk = 0, rst_n = 0, en = 1, vin = 0, vout;
  res_vec_t a, b, c, r;
  int checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && en) cycle <= cycle + 1;

  residue_pipeline dut (.clk, .rst_n, .en, .in_valid(vin), .a, .b, .addend(c), .out_valid(vout), .r);

  res_vec_t expq [$];
  int       tin  [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && en && vout) begin
    res_vec_t e; int t0;
    e = expq.pop_front(); t0 = tin.pop_front();
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (r[i] !== e[i]) begin failures++; $display("FAIL ch%0d got %0d exp %0d", i, r[i], e[i]); end
    end
    checks++;
    if (cycle - t0 != 5) begin failures++; $display("FAIL latency %0d", cycle - t0); end
  end

  initial begin
    a = '0; b = '0; c = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      en = ($urandom_range(0, 7) != 0);
      if (en) begin
        res_vec_t e;
        vin = ($urandom_range(0, 5) != 0);
        for (int i = 0; i < 3; i++) begin
          if (n % 50 == 0) begin a[i] = residue_t'(MODS[i] - 1); b[i] = a[i]; c[i] = a[i]; end
          else begin
            a[i] = residue_t'($urandom_range(0, int'(MODS[i]) - 1));
            b[i] = residue_t'($urandom_range(0, int'(MODS[i]) - 1));
            c[i] = (n % 2 == 0) ? residue_t'($urandom_range(0, int'(MODS[i]) - 1)) : '0;
          end
          e[i] = residue_t'((longint'(a[i]) * longint'(b[i]) + longint'(c[i])) % MODS[i]);
        end
        if (vin) begin expq.push_back(e); tin.push_back(cycle); end
      end else vin = 0;
    end
    @(negedge clk); vin = 0; en = 1;
    repeat (8) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
