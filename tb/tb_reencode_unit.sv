// tb_reencode_unit - self-checking testbench of reencode_unit.
// Random signed integers up to the full 37-bit range (and 0, +-1, +-m_i
// multiples) must come back as their residues N mod m_i in [0, m_i) one
// cycle later.
module tb_reencode_unit;
  import hrfna_pkg::*;
  import hrfna_tb_pkg::*;

  logic clk = 0, rst_n = 0, en = 1, vin = 0, vout;
  nint_t n;
  res_vec_t r;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  reencode_unit dut (.clk, .rst_n, .en, .in_valid(vin), .n, .out_valid(vout), .r);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    n = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      longint v; res_vec_t e;
      @(negedge clk);
      case (it % 50)
        0: v = 0; 1: v = 1; 2: v = -1; 3: v = 4095 * 7; 4: v = -4093 * 5; 5: v = -4091;
        default: v = rand_int(longint'(1) << (1 + it % 36));
      endcase
      n = nint_t'(v); vin = 1;
      e = ref_encode(v);
      @(posedge clk); #1;
      checks += 2;
      if (!vout) begin failures++; $display("FAIL valid"); end
      if (r !== e) begin failures++; $display("FAIL n=%0d got %h exp %h", v, r, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
