// norm_engine - hybrid normalization engine.
//
// Brings a hybrid number whose integer part reached the threshold back into
// range: N*2^f  ->  round(N/2^k) * 2^(f+k). As in the paper it is a chain of
//   CRT reconstruction (crt_engine, 4 cycles)
//   scaling by 2^-k    (scaling_unit, 1 cycle)
//   re-encoding        (reencode_unit, 1 cycle)
// giving the paper's normalization latency of 6 cycles from 'start' to
// 'done'. The paper's three phases (partial CRT decode, scaling,
// re-encoding) are kept; how the 6 cycles split between them is this
// design's choice.
//
// Normalization control FSM (IDLE -> BUSY -> DONE -> IDLE): 'start' is
// taken in IDLE ('ready' high) together with the residues, exponent and k.
// In DONE the result is held with 'done' high until 'ack'. 'stall_req' is
// high while the engine holds work; 'resume' pulses on the 'ack' cycle.
// These are the stall/resume signals handed to the pipeline scheduler.
module norm_engine
  import hrfna_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  res_vec_t       r_in,
  input  exp_t           f_in,
  input  logic [K_W-1:0] k,
  input  logic           ack,
  output logic           ready,
  output logic           done,
  output res_vec_t       r_out,
  output exp_t           f_out,
  output logic           exp_ovf,
  output logic           stall_req,
  output logic           resume
);
  typedef enum logic [1:0] {N_IDLE, N_BUSY, N_DONE} nstate_e;
  nstate_e state;

  logic [K_W-1:0] k_q;
  exp_t           f_q;
  logic           crt_v, sc_v, re_v, re_en;
  crt_t           crt_x;
  nint_t          sc_n;
  exp_t           sc_f;
  logic           sc_ovf;
  logic           take;

  assign ready = (state == N_IDLE);
  assign take  = ready && start;
  // the last stage holds its result while DONE waits for ack
  assign re_en = (state != N_DONE) || ack;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= N_IDLE; k_q <= '0; f_q <= '0;
      f_out <= '0; exp_ovf <= 1'b0;
    end else begin
      case (state)
        N_IDLE: if (start) begin
          state <= N_BUSY; k_q <= k; f_q <= f_in;
        end
        N_BUSY: if (sc_v) begin
          state <= N_DONE; f_out <= sc_f; exp_ovf <= sc_ovf;
        end
        N_DONE: if (ack) state <= N_IDLE;
        default: state <= N_IDLE;
      endcase
    end
  end

  crt_engine u_crt (
    .clk, .rst_n, .en(1'b1),
    .in_valid (take),
    .r        (r_in),
    .out_valid(crt_v),
    .x        (crt_x)
  );

  scaling_unit u_scale (
    .clk, .rst_n, .en(1'b1),
    .in_valid (crt_v),
    .x        (crt_x),
    .f        (f_q),
    .k        (k_q),
    .out_valid(sc_v),
    .n        (sc_n),
    .f_out    (sc_f),
    .exp_ovf  (sc_ovf)
  );

  reencode_unit u_reenc (
    .clk, .rst_n, .en(re_en),
    .in_valid (sc_v),
    .n        (sc_n),
    .out_valid(re_v),
    .r        (r_out)
  );

  assign done      = (state == N_DONE) && re_v;
  assign stall_req = (state != N_IDLE);
  assign resume    = done && ack;

  // the engine takes one number at a time
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                    start |-> ready)
    else $error("norm_engine: start while busy");
endmodule
