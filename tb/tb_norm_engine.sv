// tb_norm_engine - self-checking testbench of norm_engine.
// Each round starts the engine with a random signed integer (encoded as
// residues), an exponent and a shift k, and expects after exactly 6 cycles
// the residues of round(N/2^k) and the exponent f + k. The acknowledge is
// delayed at random: the result must stay put and 'stall_req' must stay
// high until 'ack'; 'resume' must pulse with 'ack'.
module tb_norm_engine;
  import hrfna_pkg::*;
  import hrfna_tb_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, ack = 0;
  res_vec_t r_in, r_out;
  exp_t f_in, f_out;
  logic [K_W-1:0] k;
  logic ready, done, eovf, stall_req, resume;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  norm_engine dut (.clk, .rst_n, .start, .r_in, .f_in, .k, .ack, .ready, .done, .r_out, .f_out,
                   .exp_ovf(eovf), .stall_req, .resume);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic longint M = ref_M();
    r_in = '0; f_in = '0; k = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 1500; it++) begin
      longint v, sv; res_vec_t er; int ef, lat, hold;
      @(negedge clk);
      checks++;
      if (!ready || stall_req) begin failures++; $display("FAIL not idle"); end
      v  = rand_int((M - 1) / 2);
      if (it % 3 == 0) v = rand_int(longint'(1) << 20);
      r_in = ref_encode(v); f_in = exp_t'($urandom_range(0, 1023)); k = K_W'($urandom_range(0, 36));
      sv = ref_scale(v, int'(k)); er = ref_encode(sv);
      ef = int'(f_in) + int'(k); if (ef > 511) ef = 511;
      start = 1;
      @(negedge clk); start = 0;
      r_in = ~r_in; k = ~k;          // inputs are only sampled with start
      lat = 1;
      while (!done && lat < 20) begin @(negedge clk); lat++; end
      checks += 3;
      if (lat != 6) begin failures++; $display("FAIL latency %0d", lat); end
      if (r_out !== er) begin failures++; $display("FAIL residues N=%0d k=%0d", v, k); end
      if (int'(f_out) != ef) begin failures++; $display("FAIL exponent %0d exp %0d", f_out, ef); end
      hold = $urandom_range(0, 3);
      repeat (hold) begin
        @(negedge clk);
        checks += 2;
        if (!done || r_out !== er) begin failures++; $display("FAIL result not held"); end
        if (!stall_req || ready) begin failures++; $display("FAIL stall_req dropped"); end
      end
      ack = 1;
      #1;
      checks++;
      if (!resume) begin failures++; $display("FAIL no resume"); end
      @(negedge clk); ack = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
