// tb_hrfna_top - end-to-end testbench of the HRFNA core at its default
// parameters (the top has none to override).
//
// A reference model in plain 64-bit integers predicts every result:
//   multiply  N = Nx*Ny, f = fx + fy - bias (saturated)
//   add       N = Nx*2^(fx-m) + Ny*2^(fy-m), f = m = min(fx, fy)
//   if |N| >= tau = alpha*M: N = round(N/2^k), f = f + k, flag normalized
// Results are decoded from their residues and compared in order.
// Phases:
//   1  fast path: 200 back-to-back multiplications below the threshold;
//      every latency must be 10 cycles and the input must take one pair
//      per cycle (II = 1)
//   2  one normalizing multiplication alone: latency 10 + 6 = 16 cycles
//   3  mixed random traffic with additions (aligned and with exponent
//      gaps), normalizations, exponent overflow and random output
//      backpressure, under the default and a changed configuration
//      (alpha, k, bias written over AXI4-Lite), plus a disable/enable
//   4  the status counters are read back over AXI4-Lite
// Every mechanism (normalization, stall, mixed addition, backpressure,
// each scheduler state, exponent saturation, reconfiguration) is counted
// and a failure is counted for any that never happened.
module tb_hrfna_top;
  import hrfna_pkg::*;
  import hrfna_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  hrfna_req_t   s_data;
  logic         s_valid = 0, s_ready;
  hybrid_t      m_data;
  hrfna_flags_t m_user;
  logic         m_valid, m_ready = 1, m_aovf;
  logic [4:0]   awaddr = 0, araddr = 0;
  logic         awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic         awready, wready, bvalid, arready, rvalid;
  logic [31:0]  wdata = 0, rdata;
  logic [3:0]   wstrb = 4'hF;
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
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .sched_state(sstate), .ev_norm_start(ev_norm), .ev_mixed_op(ev_mixed));

  // ---------------- configuration mirror ----------------
  longint cfg_alpha = longint'(1) << 29;
  int     cfg_k = 18, cfg_bias = 0;

  // ---------------- reference model ----------------
  typedef struct {
    longint n;  int f;  int norm;  int ovf;      // norm: 0 no, 1 yes, -1 either
    longint n2; int f2;                          // the normalized alternative
    int t_in;
  } exp_s;
  exp_s expq [$];

  function automatic int sat(int v, output int o);
    o = 0;
    if (v > 511) begin o = 1; return 511; end
    if (v < -512) return -512;
    return v;
  endfunction

  function automatic exp_s predict(op_e op, longint nx, int fx, longint ny, int fy);
    exp_s e; longint n; int f, o, o2; logic [127:0] lhs, rhs, band;
    if (op == OP_MUL) begin
      n = nx * ny;
      f = sat(fx + fy - cfg_bias, o);
    end else begin
      int m = (fx < fy) ? fx : fy;
      n = nx * (longint'(1) << (fx - m)) + ny * (longint'(1) << (fy - m));
      f = m; o = 0;
    end
    lhs  = 128'(longint'((n < 0) ? -n : n)) << 48;
    rhs  = 128'(cfg_alpha) * 128'(ref_M());
    band = 128'(4) << 48;
    e.n2 = ref_scale(n, cfg_k);
    e.f2 = sat(f + cfg_k, o2);
    if (lhs + band < rhs)       begin e.norm = 0; e.n = n; e.f = f; e.ovf = o; end
    else if (lhs >= rhs + band) begin e.norm = 1; e.n = e.n2; e.f = e.f2; e.ovf = o2; end
    else                        begin e.norm = -1; e.n = n; e.f = f; e.ovf = o; end
    return e;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_norm = 0, n_norm_out = 0, n_stall = 0, n_mixed = 0, n_bp = 0, n_ovf_out = 0;
  int n_state [4] = '{0, 0, 0, 0};
  int n_reconf = 0, n_disable = 0, n_out = 0, n_in = 0;
  int lat_fixed = -1;            // when >= 0, every latency must equal it

  always @(posedge clk) if (rst_n) begin
    n_state[sstate]++;
    if (ev_norm) n_norm++;
    if (ev_mixed) n_mixed++;
    if (s_valid && !s_ready) n_stall++;
    if (m_valid && !m_ready) n_bp++;
  end

  // ---------------- output scoreboard ----------------
  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    exp_s e; longint got; int nrm;
    n_out++;
    if (expq.size() == 0) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      e   = expq.pop_front();
      got = ref_decode(m_data.r);
      nrm = int'(m_user.normalized);
      if (e.norm == -1 && nrm == 1) begin e.n = e.n2; e.f = e.f2; end
      checks += 4;
      if (got != e.n) begin failures++; $display("FAIL N got %0d exp %0d", got, e.n); end
      if (int'(m_data.f) != e.f) begin failures++; $display("FAIL f got %0d exp %0d", m_data.f, e.f); end
      if (e.norm != -1 && nrm != e.norm) begin failures++; $display("FAIL normalized flag %0d", nrm); end
      if (e.norm != -1 && int'(m_user.exp_ovf) != e.ovf) begin failures++; $display("FAIL exp_ovf flag"); end
      if (nrm == 1) n_norm_out++;
      if (m_user.exp_ovf) n_ovf_out++;
      if (lat_fixed >= 0) begin
        checks++;
        if (cyc - e.t_in != lat_fixed) begin
          failures++; $display("FAIL latency %0d exp %0d", cyc - e.t_in, lat_fixed);
        end
      end
    end
  end

  // ---------------- drivers ----------------
  // the result sink: ready at random while bp_mode is set
  int bp_mode = 0;
  always @(posedge clk) #1 m_ready = (bp_mode != 0) ? ($urandom_range(0, 3) != 0) : 1'b1;

  // offer one operand pair; it is taken at the first rising edge with
  // s_ready high, which is sampled late in the cycle before that edge
  task automatic offer(op_e op, longint nx, int fx, longint ny, int fy);
    logic ok;
    s_data.op  = op;
    s_data.x.r = ref_encode(nx); s_data.x.f = exp_t'(fx);
    s_data.y.r = ref_encode(ny); s_data.y.f = exp_t'(fy);
    s_valid = 1;
    forever begin
      #3 ok = s_ready;
      if (ok) begin
        exp_s e;
        e = predict(op, nx, fx, ny, fy);
        e.t_in = cyc;
        expq.push_back(e);
        n_in++;
      end
      @(posedge clk); #1;
      if (ok) break;
    end
    s_valid = 0;
  endtask

  task automatic drain();
    int guard = 0;
    while ((expq.size() != 0 || sstate != 2'd0) && guard < 2000) begin @(posedge clk); guard++; end
    #1;
  endtask

  task automatic axil_write(logic [4:0] a, logic [31:0] d);
    @(negedge clk);
    awaddr = a; awvalid = 1; wdata = d; wvalid = 1; bready = 1;
    #1;
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    @(negedge clk); bready = 0;
  endtask

  task automatic axil_read(logic [4:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 0;
    #1;
    while (!arready) @(negedge clk);
    @(negedge clk);
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata; rready = 1;
    @(negedge clk); rready = 0;
  endtask

  task automatic random_traffic(int count, int bp);
    bp_mode = bp;
    for (int i = 0; i < count; i++) begin
      int sel = $urandom_range(0, 9);
      if (sel < 5)       offer(OP_MUL, rand_int(300), $urandom_range(0, 100) - 50, rand_int(300), $urandom_range(0, 100) - 50);
      else if (sel < 7)  offer(OP_MUL, rand_int(130000), $urandom_range(0, 60) - 30, rand_int(130000), $urandom_range(0, 60) - 30);
      else if (sel < 9) begin
        int fx = $urandom_range(0, 40) - 20;
        int fy = (sel == 7) ? fx : fx + $urandom_range(0, 12) - 6;
        offer(OP_ADD, rand_int(4000), fx, rand_int(4000), fy);
      end else           offer(OP_MUL, rand_int(1000), 300, rand_int(1000), 250);   // exponent overflow
      if ($urandom_range(0, 4) == 0) begin @(negedge clk); end                       // input gap
    end
    bp_mode = 0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog state=%0d n_in=%0d n_out=%0d q=%0d s_valid=%0d m_valid=%0d m_ready=%0d", sstate, n_in, n_out, expq.size(), s_valid, m_valid, m_ready);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    s_data = '0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk); #1;
    n_reconf = 0;

    // phase 1: fast path, back-to-back, fixed latency 10, II = 1
    lat_fixed = 10;
    begin
      int t0, t1;
      @(negedge clk);
      t0 = cyc;
      for (int i = 0; i < 200; i++)
        offer(OP_MUL, rand_int(300), $urandom_range(0, 40) - 20, rand_int(300), $urandom_range(0, 40) - 20);
      t1 = cyc;
      checks++;
      // one cycle for Idle -> Execute, then one pair per cycle
      if (t1 - t0 > 202) begin failures++; $display("FAIL II: 200 pairs took %0d cycles", t1 - t0); end
    end
    drain();

    // phase 2: a single normalizing multiplication, latency 10 + 6
    lat_fixed = 16;
    offer(OP_MUL, 100000, 3, -90000, 4);
    drain();
    lat_fixed = -1;

    // phase 3a: random traffic, default configuration, with backpressure
    random_traffic(1500, 1);
    drain();

    // reconfigure: alpha = 2^27 (tau = M/2^21), k = 12, bias = 5
    axil_write(5'h04, 32'h0800_0000); cfg_alpha = longint'(1) << 27;
    axil_write(5'h0C, 32'd12);        cfg_k = 12;
    axil_write(5'h10, 32'd5);         cfg_bias = 5;
    n_reconf++;
    random_traffic(1000, 1);
    drain();

    // disable: the input must not be taken; enable again
    axil_write(5'h00, 32'd0);
    begin
      automatic int taken = n_in;
      @(negedge clk);
      s_data = '0; s_valid = 1;
      repeat (20) begin
        @(posedge clk); #1;
        if (s_ready) taken = -1;
      end
      s_valid = 0;
      checks++;
      if (taken < 0) begin failures++; $display("FAIL input ready while disabled"); end
      n_disable++;
    end
    axil_write(5'h00, 32'd1);
    random_traffic(300, 0);
    drain();

    // phase 4: status counters
    axil_read(5'h14, rd);
    checks++;
    if (int'(rd) != n_norm_out) begin failures++; $display("FAIL NORM_COUNT %0d exp %0d", rd, n_norm_out); end
    axil_read(5'h18, rd);
    checks++;
    if (int'(rd) != n_out) begin failures++; $display("FAIL OP_COUNT %0d exp %0d", rd, n_out); end

    // every mechanism must have happened
    checks += 10;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    if (n_norm == 0 || n_norm != n_norm_out) begin failures++; $display("FAIL normalizations %0d/%0d", n_norm, n_norm_out); end
    if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    if (n_mixed == 0) begin failures++; $display("FAIL no mixed addition"); end
    if (n_bp == 0) begin failures++; $display("FAIL no backpressure"); end
    if (n_ovf_out == 0) begin failures++; $display("FAIL no exponent saturation"); end
    if (n_state[0] == 0 || n_state[1] == 0) begin failures++; $display("FAIL idle/execute never seen"); end
    if (n_state[2] == 0 || n_state[3] == 0) begin failures++; $display("FAIL normalize/resume never seen"); end
    if (n_reconf == 0 || n_disable == 0) begin failures++; $display("FAIL no reconfiguration"); end
    if (n_out != n_in) begin failures++; $display("FAIL in %0d out %0d", n_in, n_out); end
    $display("ops=%0d normalizations=%0d stall_cycles=%0d mixed_adds=%0d backpressure_cycles=%0d exp_saturations=%0d states=%0d/%0d/%0d/%0d",
             n_out, n_norm, n_stall, n_mixed, n_bp, n_ovf_out, n_state[0], n_state[1], n_state[2], n_state[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
