// tb_output_merge - self-checking testbench of output_merge.
// Random loads from the normal or the normalized path (never both, as the
// scheduler guarantees) are offered only when 'ok' is high; the sink's
// ready toggles at random. Every word must come out once, in order, with
// its flags, and 'ok' must be low exactly when a word waits on a not-ready
// sink.
module tb_output_merge;
  import hrfna_pkg::*;

  logic clk = 0, rst_n = 0, ln = 0, lz = 0, ok, mv, mr = 0;
  hybrid_t nz, zz, md;
  hrfna_flags_t nf, zf, mf;
  int checks = 0, failures = 0, sent = 0, got = 0;

  always #5 clk = ~clk;

  output_merge dut (.clk, .rst_n, .load_normal(ln), .normal_z(nz), .normal_flags(nf),
                    .load_norm(lz), .norm_z(zz), .norm_flags(zf), .ok, .m_valid(mv),
                    .m_ready(mr), .m_data(md), .m_flags(mf));

  typedef struct { hybrid_t z; hrfna_flags_t f; } item_s;
  item_s q [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (ok !== (!mv || mr)) begin failures++; $display("FAIL ok"); end
    if (mv && mr) begin
      item_s e;
      e = q.pop_front();
      checks += 2; got++;
      if (md !== e.z) begin failures++; $display("FAIL data"); end
      if (mf !== e.f) begin failures++; $display("FAIL flags"); end
    end
    if (ok && (ln || lz)) begin
      item_s e;
      e.z = lz ? zz : nz; e.f = lz ? zf : nf;
      q.push_back(e); sent++;
    end
  end

  initial begin
    nz = '0; zz = '0; nf = '0; zf = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      mr = ($urandom_range(0, 2) != 0);
      nz = hybrid_t'({$urandom, $urandom}); zz = hybrid_t'({$urandom, $urandom});
      nf = hrfna_flags_t'($urandom_range(0, 7)); zf = hrfna_flags_t'($urandom_range(0, 7));
      #1;
      ln = 0; lz = 0;
      if (ok) case ($urandom_range(0, 3)) 0: ln = 1; 1: lz = 1; 2: ln = 1; default: ; endcase
    end
    @(negedge clk); ln = 0; lz = 0; mr = 1;
    repeat (4) @(posedge clk);
    checks++;
    if (got != sent || q.size() != 0) begin failures++; $display("FAIL sent %0d got %0d", sent, got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
