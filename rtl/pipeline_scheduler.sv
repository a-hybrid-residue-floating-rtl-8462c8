// pipeline_scheduler - global pipeline scheduler of the HRFNA core.
//
// A four-state FSM, Idle -> Execute -> Normalize -> Resume, as named in the
// paper. It drives one global advance signal 'adv' that enables every
// pipeline register of the residue, exponent and threshold pipelines, and
// the AXI4-Stream input ready.
//   IDLE       no work in flight; moves to EXECUTE when an operand pair is
//              offered and the core is enabled
//   EXECUTE    everything advances each cycle (II = 1) unless the output
//              is blocked; when the threshold stage holds a result that
//              must be normalized, the pipeline is stalled, the
//              normalization engine is started and the FSM enters NORMALIZE
//   NORMALIZE  pipeline frozen (stall), input not ready; when the engine is
//              done and the output merge can take a result, the normalized
//              result is acknowledged and the FSM enters RESUME
//   RESUME     the stall is released: the pipeline advances one cycle,
//              which retires the normalized item from the threshold stage
//              (it is not forwarded again), then EXECUTE
// EXECUTE returns to IDLE when nothing is in flight and no input is offered.
// The paper asserts stall "only during normalization cycles"; it also says
// the stream handshake stays asserted during normalization (Fig. 9
// caption and text). This design follows the first statement: s_ready is
// low while NORMALIZE lasts. Output backpressure (m_ready low with a result
// waiting) also holds 'adv' low; that part is this design's choice.
module pipeline_scheduler (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable,       // configuration: core enabled
  input  logic       s_valid,      // operand pair offered
  input  logic       busy,         // any valid item in flight
  input  logic       td_valid,     // threshold stage holds an item
  input  logic       td_over,      // ... which needs normalization
  input  logic       out_ok,       // output merge register can be loaded
  input  logic       norm_done,    // engine result waiting
  output logic       adv,          // global pipeline enable
  output logic       s_ready,      // AXI4-Stream input ready
  output logic       load_normal,  // merge takes the threshold-stage item
  output logic       norm_start,   // start the normalization engine
  output logic       norm_ack,     // merge takes the engine result
  output logic [1:0] state_o
);
  typedef enum logic [1:0] {S_IDLE = 2'd0, S_EXECUTE = 2'd1,
                            S_NORMALIZE = 2'd2, S_RESUME = 2'd3} sched_e;
  sched_e state, nxt;

  always_comb begin
    nxt         = state;
    adv         = 1'b0;
    s_ready     = 1'b0;
    load_normal = 1'b0;
    norm_start  = 1'b0;
    norm_ack    = 1'b0;
    case (state)
      S_IDLE: begin
        adv = 1'b1;
        if (enable && s_valid) nxt = S_EXECUTE;
      end
      S_EXECUTE: begin
        if (td_valid && td_over) begin
          norm_start = 1'b1;
          nxt        = S_NORMALIZE;
        end else begin
          adv         = out_ok;
          s_ready     = out_ok && enable;
          load_normal = out_ok && td_valid;
          if (!busy && !(enable && s_valid)) nxt = S_IDLE;
        end
      end
      S_NORMALIZE: begin
        if (norm_done && out_ok) begin
          norm_ack = 1'b1;
          nxt      = S_RESUME;
        end
      end
      S_RESUME: begin
        adv     = out_ok;
        s_ready = out_ok && enable;
        if (out_ok) nxt = S_EXECUTE;
      end
      default: nxt = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else        state <= nxt;
  end

  assign state_o = state;

  // a normalization is only started from EXECUTE with a flagged item
  a_start_ok: assert property (@(posedge clk) disable iff (!rst_n)
                               norm_start |-> (td_valid && td_over))
    else $error("pipeline_scheduler: start without overflow");
endmodule
