// tb_crt_engine - self-checking testbench of crt_engine.
// Random signed integers over the whole range (and the ends 0, 1, M-1, the
// midpoint) are encoded with %, streamed in at one per cycle with gaps and
// stalls, and the output must equal N mod M after 4 enabled cycles.
module tb_crt_engine;
  import hrfna_pkg::*;
  import hrfna_tb_pkg::*;

  logic clk = 0, rst_n = 0, en = 1, vin = 0, vout;
  res_vec_t r;
  crt_t x;
  int checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && en) cycle <= cycle + 1;

  crt_engine dut (.clk, .rst_n, .en, .in_valid(vin), .r, .out_valid(vout), .x);

  longint expq [$];
  int     tin  [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && en && vout) begin
    longint e; int t0;
    e = expq.pop_front(); t0 = tin.pop_front();
    checks += 2;
    if (longint'(x) != e) begin failures++; $display("FAIL got %0d exp %0d", x, e); end
    if (cycle - t0 != 4) begin failures++; $display("FAIL latency %0d", cycle - t0); end
  end

  initial begin
    automatic longint M = ref_M();
    r = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      en = ($urandom_range(0, 7) != 0);
      if (en) begin
        longint v;
        vin = ($urandom_range(0, 5) != 0);
        case (n % 100)
          0: v = 0;  1: v = 1;  2: v = -1;  3: v = (M - 1) / 2;  4: v = -(M - 1) / 2;
          default: v = rand_int((M - 1) / 2);
        endcase
        r = ref_encode(v);
        if (vin) begin expq.push_back(((v % M) + M) % M); tin.push_back(cycle); end
      end else vin = 0;
    end
    @(negedge clk); vin = 0; en = 1;
    repeat (8) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
