// tb_hrfna_chain - workload testbench of the HRFNA core: chained computation.
//
// The core testbench checks single operations from random operands. This
// one runs the two kinds of kernel the architecture is meant for, with
// every result fed back as an operand of a later operation:
//   A  iterative multiplication: 8 independent chains x <- x * c_j,
//      200 steps each (one wave = one step of all chains, issued back to
//      back so the pipeline stays busy)
//   B  an 8x8 matrix product C = A*B: one wave of 512 products, then a
//      three-level tree of aligned additions (256, 128, 64 sums)
// All at the core's default configuration (alpha = 2^29, k = 18, bias 0).
//
// Each operation is checked bit-exactly against the integer reference
// model (as in the core testbench). In addition, every value is followed
// in double-precision real arithmetic with an error bound: a
// normalization adds at most half a unit in the last place, 2^(f'-1), of
// its result, and the bounds of the operands propagate through products
// (relative) and sums (absolute). The decoded hardware value must stay
// within that bound of the exact real result. The worst relative errors
// are printed; they show how much precision the fixed shift k costs.
// Mechanisms counted (a failure if one never happened): normalizations,
// multiplications not normalized, additions with unequal exponents.
module tb_hrfna_chain;
  import hrfna_pkg::*;
  import hrfna_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  hrfna_req_t   s_data;
  logic         s_valid = 0, s_ready;
  hybrid_t      m_data;
  hrfna_flags_t m_user;
  logic         m_valid, m_aovf;
  logic         m_ready = 1;
  logic         awready, wready, bvalid, arready, rvalid;
  logic [31:0]  rdata;
  logic [1:0]   bresp, rresp, sstate;
  logic         ev_norm, ev_mixed;

  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  hrfna_top dut (
    .clk, .rst_n,
    .s_axis_tdata(s_data), .s_axis_tvalid(s_valid), .s_axis_tready(s_ready),
    .m_axis_tdata(m_data), .m_axis_tuser(m_user), .m_axis_tvalid(m_valid), .m_axis_tready(m_ready),
    .m_axis_talign_ovf(m_aovf),
    .s_axil_awaddr(5'd0), .s_axil_awvalid(1'b0), .s_axil_awready(awready),
    .s_axil_wdata(32'd0), .s_axil_wstrb(4'd0), .s_axil_wvalid(1'b0), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(1'b1),
    .s_axil_araddr(5'd0), .s_axil_arvalid(1'b0), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(1'b1),
    .sched_state(sstate), .ev_norm_start(ev_norm), .ev_mixed_op(ev_mixed));

  localparam longint ALPHA = longint'(1) << 29;
  localparam int     K     = 18;

  // ---------------- integer reference model (per operation) ----------------
  typedef struct {
    longint n;  int f;  int norm;                // norm: 0 no, 1 yes, -1 either
    longint n2; int f2;                          // the normalized alternative
  } exp_s;
  exp_s expq [$];

  typedef struct {
    longint n; int f; bit norm;
  } res_s;
  res_s gotq [$];

  function automatic exp_s predict(op_e op, longint nx, int fx, longint ny, int fy);
    exp_s e; longint n; int f; logic [127:0] lhs, rhs, band;
    if (op == OP_MUL) begin
      n = nx * ny;
      f = fx + fy;
    end else begin
      int m = (fx < fy) ? fx : fy;
      n = nx * (longint'(1) << (fx - m)) + ny * (longint'(1) << (fy - m));
      f = m;
    end
    lhs  = 128'(longint'((n < 0) ? -n : n)) << 48;
    rhs  = 128'(ALPHA) * 128'(ref_M());
    band = 128'(4) << 48;
    e.n2 = ref_scale(n, K);
    e.f2 = f + K;
    if (lhs + band < rhs)       begin e.norm = 0; e.n = n;    e.f = f;    end
    else if (lhs >= rhs + band) begin e.norm = 1; e.n = e.n2; e.f = e.f2; end
    else                        begin e.norm = -1; e.n = n;   e.f = f;    end
    return e;
  endfunction

  // ---------------- scoreboard: check and hand results back ----------------
  int n_norm = 0, n_mul_plain = 0, n_mixed = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_norm)  n_norm++;
    if (ev_mixed) n_mixed++;
  end

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    exp_s e; res_s r;
    r.n    = ref_decode(m_data.r);
    r.f    = int'(m_data.f);
    r.norm = m_user.normalized;
    if (expq.size() == 0) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      e = expq.pop_front();
      if (e.norm == -1 && r.norm) begin e.n = e.n2; e.f = e.f2; end
      checks += 3;
      if (r.n != e.n) begin failures++; $display("FAIL N got %0d exp %0d", r.n, e.n); end
      if (r.f != e.f) begin failures++; $display("FAIL f got %0d exp %0d", r.f, e.f); end
      if (e.norm != -1 && int'(r.norm) != e.norm) begin
        failures++; $display("FAIL normalized flag %0d", r.norm);
      end
      if (m_aovf || m_user.exp_ovf || m_user.exp_unf) begin
        failures++; $display("FAIL unexpected alignment or exponent flag");
      end
    end
    gotq.push_back(r);
  end

  // ---------------- driver: one wave of independent operations ----------------
  typedef struct {
    op_e op; longint nx; int fx; longint ny; int fy;
  } req_s;

  // offer one operand pair; taken at the first rising edge with s_ready
  task automatic offer(req_s q);
    logic ok;
    s_data.op  = q.op;
    s_data.x.r = ref_encode(q.nx); s_data.x.f = exp_t'(q.fx);
    s_data.y.r = ref_encode(q.ny); s_data.y.f = exp_t'(q.fy);
    s_valid = 1;
    forever begin
      #3 ok = s_ready;
      if (ok) expq.push_back(predict(q.op, q.nx, q.fx, q.ny, q.fy));
      @(posedge clk); #1;
      if (ok) break;
    end
    s_valid = 0;
  endtask

  // issue all requests back to back and wait for all results, in order
  int wave_cycles = 0, wave_ops = 0;
  task automatic run_wave(input req_s reqs [$], output res_s res [$]);
    int t0 = cyc, guard = 0;
    gotq.delete();
    foreach (reqs[i]) offer(reqs[i]);
    while (gotq.size() < reqs.size() && guard < 5000) begin @(posedge clk); guard++; end
    #1;
    if (gotq.size() != reqs.size()) begin
      failures++; $display("FAIL wave: %0d of %0d results", gotq.size(), reqs.size());
    end
    res = gotq;
    wave_cycles += cyc - t0;
    wave_ops    += reqs.size();
  endtask

  // ---------------- real-valued reference ----------------
  function automatic real p2(int e);
    real v = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) v = v * 2.0;
    else        for (int i = 0; i < -e; i++) v = v / 2.0;
    return v;
  endfunction

  function automatic real value(longint n, int f);
    return $itor(n) * p2(f);
  endfunction

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // error added by the operation that produced r: half an ulp if normalized
  function automatic real round_err(res_s r);
    return r.norm ? p2(r.f - 1) : 0.0;
  endfunction

  // exact value, error bound and worst observed relative error
  real worst_rel_a = 0.0, worst_rel_b = 0.0;

  task automatic check_bound(string what, real hw, real exact, real bound);
    checks++;
    if (rabs(hw - exact) > bound * 1.000001 + rabs(exact) * 1.0e-12) begin
      failures++;
      $display("FAIL %s: hw %e exact %e bound %e", what, hw, exact, bound);
    end
  endtask

  // ---------------- workload A: iterative multiplication chains ----------------
  localparam int CH = 8, STEPS = 200;

  task automatic workload_a();
    longint xn [CH]; int xf [CH]; longint cn [CH]; int cf [CH];
    real xr [CH], eb [CH];                 // exact value, relative error bound
    req_s reqs [$]; res_s res [$];
    for (int j = 0; j < CH; j++) begin
      xn[j] = longint'($urandom_range(65536, 131071)) * (($urandom_range(0, 1) != 0) ? 1 : -1);
      xf[j] = -16;
      cn[j] = longint'($urandom_range(65536, 130000));
      cf[j] = -17;                        // c in (0.5, 1)
      xr[j] = value(xn[j], xf[j]);
      eb[j] = 0.0;
    end
    for (int s = 0; s < STEPS; s++) begin
      reqs.delete();
      for (int j = 0; j < CH; j++) reqs.push_back('{OP_MUL, xn[j], xf[j], cn[j], cf[j]});
      run_wave(reqs, res);
      if (res.size() != CH) return;
      for (int j = 0; j < CH; j++) begin
        real hw, rel;
        xr[j] = xr[j] * value(cn[j], cf[j]);
        // relative bound: (1+e_old)(1+e_new) - 1 with e_new = (ulp/2) over
        // the unrounded result, whose size is at least |N'| - 1/2 ulp
        if (res[j].norm) eb[j] = (1.0 + eb[j]) * (1.0 + 0.5 / (rabs($itor(res[j].n)) - 0.5)) - 1.0;
        else             n_mul_plain++;
        hw = value(res[j].n, res[j].f);
        check_bound("chain", hw, xr[j], rabs(xr[j]) * eb[j]);
        rel = rabs(hw - xr[j]) / rabs(xr[j]);
        if (rel > worst_rel_a) worst_rel_a = rel;
        xn[j] = res[j].n; xf[j] = res[j].f;
      end
    end
  endtask

  // ---------------- workload B: 8x8 matrix product ----------------
  localparam int D = 8;

  task automatic workload_b();
    longint an [D][D], bn [D][D]; int af [D][D], bf [D][D];
    real    vr [$], ve [$];               // exact values and absolute bounds
    res_s   vh [$];                       // hardware values
    req_s   reqs [$]; res_s res [$];
    for (int i = 0; i < D; i++)
      for (int j = 0; j < D; j++) begin
        an[i][j] = longint'($urandom_range(32768, 65535)) * (($urandom_range(0, 1) != 0) ? 1 : -1);
        bn[i][j] = longint'($urandom_range(32768, 65535)) * (($urandom_range(0, 1) != 0) ? 1 : -1);
        af[i][j] = -20 + int'($urandom_range(0, 4));
        bf[i][j] = -20 + int'($urandom_range(0, 4));
      end
    // products: entry (i,j) uses slots (i*D + j)*D + k
    for (int i = 0; i < D; i++)
      for (int j = 0; j < D; j++)
        for (int k = 0; k < D; k++)
          reqs.push_back('{OP_MUL, an[i][k], af[i][k], bn[k][j], bf[k][j]});
    run_wave(reqs, res);
    if (res.size() != D*D*D) return;
    for (int i = 0; i < D; i++)
      for (int j = 0; j < D; j++)
        for (int k = 0; k < D; k++) begin
          int s = (i*D + j)*D + k;
          vr.push_back(value(an[i][k], af[i][k]) * value(bn[k][j], bf[k][j]));
          ve.push_back(round_err(res[s]));
          vh.push_back(res[s]);
          check_bound("product", value(res[s].n, res[s].f), vr[s], ve[s]);
        end
    // addition tree: pairs (2t, 2t+1) of each level
    for (int lvl = D / 2; lvl >= 1; lvl = lvl / 2) begin
      real nr [$], ne [$]; res_s nh [$];
      reqs.delete();
      for (int t = 0; t < vh.size() / 2; t++)
        reqs.push_back('{OP_ADD, vh[2*t].n, vh[2*t].f, vh[2*t+1].n, vh[2*t+1].f});
      run_wave(reqs, res);
      if (res.size() != vh.size() / 2) return;
      for (int t = 0; t < res.size(); t++) begin
        nr.push_back(vr[2*t] + vr[2*t+1]);
        ne.push_back(ve[2*t] + ve[2*t+1] + round_err(res[t]));
        nh.push_back(res[t]);
        check_bound("sum", value(res[t].n, res[t].f), nr[t], ne[t]);
      end
      vr = nr; ve = ne; vh = nh;
    end
    // relative error of each C entry against the size of its terms
    for (int e = 0; e < D*D; e++) begin
      real mag = 0.0, rel;
      int i = e / D, j = e % D;
      for (int k = 0; k < D; k++)
        mag += rabs(value(an[i][k], af[i][k]) * value(bn[k][j], bf[k][j]));
      rel = rabs(value(vh[e].n, vh[e].f) - vr[e]) / mag;
      if (rel > worst_rel_b) worst_rel_b = rel;
    end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog state=%0d q=%0d", sstate, expq.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s_data = '0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk); #1;

    workload_a();
    $display("workload A: %0d chains x %0d steps, worst relative error %e", CH, STEPS, worst_rel_a);
    workload_b();
    $display("workload B: %0dx%0d matrix product, worst error relative to sum |a*b| %e", D, D, worst_rel_b);
    $display("waves: %0d operations in %0d cycles; normalizations %0d, plain products %0d, mixed additions %0d",
             wave_ops, wave_cycles, n_norm, n_mul_plain, n_mixed);

    checks += 3;
    if (n_norm == 0)      begin failures++; $display("FAIL no normalization happened"); end
    if (n_mul_plain == 0) begin failures++; $display("FAIL no product stayed below the threshold"); end
    if (n_mixed == 0)     begin failures++; $display("FAIL no addition with unequal exponents"); end
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
