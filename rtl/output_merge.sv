// output_merge - output merge and AXI4-Stream output register.
//
// Joins the normal path (results that did not reach the threshold) and the
// normalized path (results from the normalization engine) into one output
// register that drives an AXI4-Stream master. At most one of the two loads
// is asserted per cycle (the scheduler guarantees it); the register holds
// its content while m_ready is low. 'ok' tells the scheduler that the
// register can be loaded this cycle (empty, or being read).
// The paper names this unit ("Normal + Normalized"); the register and
// handshake details are this design's choice.
module output_merge
  import hrfna_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load_normal,
  input  hybrid_t      normal_z,
  input  hrfna_flags_t normal_flags,
  input  logic         load_norm,
  input  hybrid_t      norm_z,
  input  hrfna_flags_t norm_flags,
  output logic         ok,
  output logic         m_valid,
  input  logic         m_ready,
  output hybrid_t      m_data,
  output hrfna_flags_t m_flags
);
  assign ok = !m_valid || m_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0; m_data <= '0; m_flags <= '0;
    end else if (ok) begin
      m_valid <= load_normal || load_norm;
      if (load_norm) begin
        m_data <= norm_z;   m_flags <= norm_flags;
      end else if (load_normal) begin
        m_data <= normal_z; m_flags <= normal_flags;
      end
    end
  end

  a_one_load: assert property (@(posedge clk) disable iff (!rst_n)
                               !(load_normal && load_norm))
    else $error("output_merge: two loads in one cycle");
  // AXI4-Stream: data stays put while the slave is not ready
  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                (m_valid && !m_ready) |=> (m_valid && $stable(m_data)))
    else $error("output_merge: output changed while stalled");
endmodule
