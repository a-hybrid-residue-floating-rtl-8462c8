// hrfna_top - hybrid residue-floating numerical accelerator (HRFNA core).
//
// Streams pairs of hybrid numbers X = (r_X, f_X), Y = (r_Y, f_Y) in on an
// AXI4-Stream slave and returns Z = X*Y (or X+Y) on an AXI4-Stream master,
// one operation per cycle. Configuration and status sit behind an AXI4-Lite
// slave. The block structure is the paper's top-level RTL architecture:
//
//   s_axis -> alignment logic -> residue pipeline (3 channels, 5 stages)
//                             -> offset register + exponent pipeline (1+4)
//          -> branching & threshold detection (4 stages)
//          -> normal path ---------------------------------> output merge -> m_axis
//          -> overflow: hybrid normalization engine (6) ---> output merge
//   global pipeline scheduler (Idle/Execute/Normalize/Resume), AXI-Lite config
//
// Timing: a result leaves the output register 10 cycles after its operands
// were accepted (paper: end-to-end latency 10 cycles) when it needs no
// normalization. The residue pipeline has 5 stages and the exponent
// pipeline 4, so one offset register (d = L_R - L_E = 1) sits in front of
// the exponent pipeline, as the paper prescribes. When the threshold stage
// flags |N| >= tau, the scheduler freezes all pipelines and the input,
// runs the normalization engine (6 cycles) and resumes; that result leaves
// 16 cycles after its acceptance and order is preserved. Output
// backpressure (m_axis_tready low) stalls the whole core.
//
// Data formats are in hrfna_pkg: tdata of the input is hrfna_req_t
// {op, x, y}, of the output hybrid_t; m_axis_tuser carries hrfna_flags_t.
// An addition whose exponent gap is too large for the alignment logic is
// marked on m_axis_talign_ovf beside the result.
module hrfna_top
  import hrfna_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // AXI4-Stream operand input
  input  hrfna_req_t   s_axis_tdata,
  input  logic         s_axis_tvalid,
  output logic         s_axis_tready,
  // AXI4-Stream result output
  output hybrid_t      m_axis_tdata,
  output hrfna_flags_t m_axis_tuser,
  output logic         m_axis_tvalid,
  input  logic         m_axis_tready,
  output logic         m_axis_talign_ovf,
  // AXI4-Lite configuration
  input  logic [4:0]   s_axil_awaddr,
  input  logic         s_axil_awvalid,
  output logic         s_axil_awready,
  input  logic [31:0]  s_axil_wdata,
  input  logic [3:0]   s_axil_wstrb,
  input  logic         s_axil_wvalid,
  output logic         s_axil_wready,
  output logic [1:0]   s_axil_bresp,
  output logic         s_axil_bvalid,
  input  logic         s_axil_bready,
  input  logic [4:0]   s_axil_araddr,
  input  logic         s_axil_arvalid,
  output logic         s_axil_arready,
  output logic [31:0]  s_axil_rdata,
  output logic [1:0]   s_axil_rresp,
  output logic         s_axil_rvalid,
  input  logic         s_axil_rready,
  // event strobes (scheduler state and mechanisms, for monitoring)
  output logic [1:0]   sched_state,
  output logic         ev_norm_start,
  output logic         ev_mixed_op
);
  // configuration
  logic           cfg_enable;
  frac_t          cfg_alpha;
  logic [K_W-1:0] cfg_k;
  exp_t           cfg_bias;

  // scheduler
  logic adv, s_ready, load_normal, norm_start, norm_ack, busy, out_ok;
  logic in_fire;

  assign s_axis_tready = s_ready;
  assign in_fire       = s_axis_tvalid && s_ready;

  // ---------------- alignment logic (operand fetch) ----------------
  res_vec_t al_a, al_b, al_c;
  logic     al_mixed, al_ovf;
  alignment_logic u_align (
    .op       (s_axis_tdata.op),
    .x        (s_axis_tdata.x),
    .y        (s_axis_tdata.y),
    .a        (al_a),
    .b        (al_b),
    .addend   (al_c),
    .mixed    (al_mixed),
    .align_ovf(al_ovf)
  );
  assign ev_mixed_op = in_fire && al_mixed;

  // ---------------- residue arithmetic pipeline (5) ----------------
  logic     rp_v;
  res_vec_t rp_r;
  residue_pipeline u_res (
    .clk, .rst_n, .en(adv),
    .in_valid (in_fire),
    .a        (al_a),
    .b        (al_b),
    .addend   (al_c),
    .out_valid(rp_v),
    .r        (rp_r)
  );

  // ---------------- exponent pipeline: offset d = 1, then 4 --------
  logic ev_q;
  op_e  eop_q;
  exp_t efx_q, efy_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ev_q <= 1'b0; eop_q <= OP_MUL; efx_q <= '0; efy_q <= '0;
    end else if (adv) begin
      ev_q  <= in_fire;
      eop_q <= s_axis_tdata.op;
      efx_q <= s_axis_tdata.x.f;
      efy_q <= s_axis_tdata.y.f;
    end
  end

  logic eu_v, eu_ovf, eu_unf;
  exp_t eu_f;
  exponent_unit u_exp (
    .clk, .rst_n, .en(adv),
    .in_valid (ev_q),
    .op       (eop_q),
    .fx       (efx_q),
    .fy       (efy_q),
    .bias     (cfg_bias),
    .out_valid(eu_v),
    .fz       (eu_f),
    .ovf      (eu_ovf),
    .unf      (eu_unf)
  );

  // alignment overflow flag travels with the residues (5 stages)
  logic rp_align_ovf;
  pipe_delay #(.W(1), .DEPTH(5)) u_dly_al (
    .clk, .rst_n, .en(adv), .d(al_ovf), .q(rp_align_ovf));

  // ---------------- branching & threshold detection (4) ------------
  logic     td_v, td_over;
  res_vec_t td_r;
  frac_t    td_est;
  threshold_detect u_thr (
    .clk, .rst_n, .en(adv),
    .in_valid (rp_v),
    .r_in     (rp_r),
    .alpha    (cfg_alpha),
    .out_valid(td_v),
    .r_out    (td_r),
    .over     (td_over),
    .est      (td_est)
  );

  // exponent and flags beside the threshold stage
  logic [EXP_W+2:0] td_side;
  exp_t td_f;
  logic td_ovf, td_unf, td_align_ovf;
  pipe_delay #(.W(EXP_W+3), .DEPTH(4)) u_dly_thr (
    .clk, .rst_n, .en(adv),
    .d({eu_f, eu_ovf, eu_unf, rp_align_ovf}),
    .q(td_side));
  assign {td_f, td_ovf, td_unf, td_align_ovf} = td_side;

  // ---------------- hybrid normalization engine (6) ----------------
  logic     ne_ready, ne_done, ne_ovf, ne_stall, ne_resume;
  res_vec_t ne_r;
  exp_t     ne_f;
  norm_engine u_norm (
    .clk, .rst_n,
    .start    (norm_start),
    .r_in     (td_r),
    .f_in     (td_f),
    .k        (cfg_k),
    .ack      (norm_ack),
    .ready    (ne_ready),
    .done     (ne_done),
    .r_out    (ne_r),
    .f_out    (ne_f),
    .exp_ovf  (ne_ovf),
    .stall_req(ne_stall),
    .resume   (ne_resume)
  );

  // the alignment flag of the item being normalized
  logic ne_align_ovf, ne_unf;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ne_align_ovf <= 1'b0; ne_unf <= 1'b0;
    end else if (norm_start) begin
      ne_align_ovf <= td_align_ovf; ne_unf <= td_unf;
    end
  end

  // ---------------- output merge ----------------
  logic align_ovf_q;
  output_merge u_merge (
    .clk, .rst_n,
    .load_normal (load_normal),
    .normal_z    ('{r: td_r, f: td_f}),
    .normal_flags('{normalized: 1'b0, exp_ovf: td_ovf, exp_unf: td_unf}),
    .load_norm   (norm_ack),
    .norm_z      ('{r: ne_r, f: ne_f}),
    .norm_flags  ('{normalized: 1'b1, exp_ovf: ne_ovf, exp_unf: ne_unf && !ne_ovf}),
    .ok          (out_ok),
    .m_valid     (m_axis_tvalid),
    .m_ready     (m_axis_tready),
    .m_data      (m_axis_tdata),
    .m_flags     (m_axis_tuser)
  );
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      align_ovf_q <= 1'b0;
    else if (out_ok) align_ovf_q <= norm_ack ? ne_align_ovf : td_align_ovf;
  end
  assign m_axis_talign_ovf = align_ovf_q;

  // ---------------- global pipeline scheduler ----------------
  // anything in flight: operand/offset stage, residue pipeline, threshold
  // stage or the engine
  logic [8:0] inflight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   inflight <= '0;
    else if (adv) inflight <= {inflight[7:0], in_fire};
  end
  assign busy = (|inflight) || td_v || ne_stall;

  pipeline_scheduler u_sched (
    .clk, .rst_n,
    .enable     (cfg_enable),
    .s_valid    (s_axis_tvalid),
    .busy       (busy),
    .td_valid   (td_v),
    .td_over    (td_over),
    .out_ok     (out_ok),
    .norm_done  (ne_done),
    .adv        (adv),
    .s_ready    (s_ready),
    .load_normal(load_normal),
    .norm_start (norm_start),
    .norm_ack   (norm_ack),
    .state_o    (sched_state)
  );
  assign ev_norm_start = norm_start;

  // ---------------- counters and configuration ----------------
  logic [31:0] norm_count, op_count;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      norm_count <= '0; op_count <= '0;
    end else begin
      if (ne_resume)                      norm_count <= norm_count + 1;
      if (m_axis_tvalid && m_axis_tready) op_count   <= op_count + 1;
    end
  end

  axi_lite_config u_cfg (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .cfg_enable, .cfg_alpha, .cfg_k, .cfg_bias,
    .st_norm_count(norm_count),
    .st_op_count  (op_count),
    .st_state     (sched_state),
    .st_norm_busy (ne_stall)
  );

  // residue and exponent pipelines retire in lock-step (offset d = 1)
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) eu_v == rp_v)
    else $error("hrfna_top: residue and exponent pipelines out of step");
  // the engine is only started when it is free
  a_engine_free: assert property (@(posedge clk) disable iff (!rst_n)
                                  norm_start |-> ne_ready)
    else $error("hrfna_top: normalization engine busy at start");
endmodule
