// tb_pipeline_scheduler - self-checking testbench of pipeline_scheduler.
// Walks the FSM through Idle -> Execute -> Normalize -> Resume -> Execute
// -> Idle with directed stimulus and checks, in every state, the global
// advance, the input ready, the merge load and the engine start and
// acknowledge against the rules listed in the module header. Then a random
// phase checks the same rules cycle by cycle against a reference model.
module tb_pipeline_scheduler;
  logic clk = 0, rst_n = 0;
  logic enable = 1, s_valid = 0, busy = 0, td_valid = 0, td_over = 0, out_ok = 1, norm_done = 0;
  logic adv, s_ready, load_normal, norm_start, norm_ack;
  logic [1:0] st;
  int checks = 0, failures = 0;
  int seen [4] = '{0, 0, 0, 0};
  logic [1:0] mst;     // reference state

  always #5 clk = ~clk;

  pipeline_scheduler dut (.clk, .rst_n, .enable, .s_valid, .busy, .td_valid, .td_over, .out_ok,
                          .norm_done, .adv, .s_ready, .load_normal, .norm_start, .norm_ack,
                          .state_o(st));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model, evaluated just before each rising edge
  always @(posedge clk) if (rst_n) begin
    logic e_adv, e_srdy, e_ln, e_ns, e_na; logic [1:0] nxt;
    e_adv = 0; e_srdy = 0; e_ln = 0; e_ns = 0; e_na = 0; nxt = mst;
    case (mst)
      2'd0: begin e_adv = 1; if (enable && s_valid) nxt = 2'd1; end
      2'd1: if (td_valid && td_over) begin e_ns = 1; nxt = 2'd2; end
            else begin
              e_adv = out_ok; e_srdy = out_ok && enable; e_ln = out_ok && td_valid;
              if (!busy && !(enable && s_valid)) nxt = 2'd0;
            end
      2'd2: if (norm_done && out_ok) begin e_na = 1; nxt = 2'd3; end
      default: begin e_adv = out_ok; e_srdy = out_ok && enable; if (out_ok) nxt = 2'd1; end
    endcase
    checks += 6;
    if (st !== mst) begin failures++; $display("FAIL state %0d exp %0d", st, mst); end
    if (adv !== e_adv) begin failures++; $display("FAIL adv in %0d", mst); end
    if (s_ready !== e_srdy) begin failures++; $display("FAIL s_ready in %0d", mst); end
    if (load_normal !== e_ln) begin failures++; $display("FAIL load_normal in %0d", mst); end
    if (norm_start !== e_ns) begin failures++; $display("FAIL norm_start in %0d", mst); end
    if (norm_ack !== e_na) begin failures++; $display("FAIL norm_ack in %0d", mst); end
    seen[mst]++;
    mst <= nxt;
  end

  task automatic step(input logic sv, input logic b, input logic tv, input logic to,
                      input logic ok, input logic nd);
    @(negedge clk);
    s_valid = sv; busy = b; td_valid = tv; td_over = to; out_ok = ok; norm_done = nd;
  endtask

  initial begin
    mst = 2'd0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed walk through the four states
    step(0, 0, 0, 0, 1, 0);            // idle
    step(1, 0, 0, 0, 1, 0);            // -> execute
    step(1, 1, 0, 0, 1, 0);            // execute, streaming
    step(1, 1, 1, 0, 0, 0);            // output blocked: no advance
    step(1, 1, 1, 1, 1, 0);            // overflow -> normalize
    step(1, 1, 1, 1, 1, 0);            // normalizing
    step(1, 1, 1, 1, 0, 1);            // done but output blocked
    step(1, 1, 1, 1, 1, 1);            // ack -> resume
    step(1, 1, 1, 1, 1, 0);            // resume -> execute
    step(0, 0, 0, 0, 1, 0);            // drained -> idle
    step(0, 0, 0, 0, 1, 0);
    // random phase
    for (int it = 0; it < 5000; it++)
      step(1'($urandom_range(0, 1)), $urandom_range(0, 3) != 0, 1'($urandom_range(0, 1)),
           $urandom_range(0, 7) == 0, $urandom_range(0, 3) != 0, 1'($urandom_range(0, 1)));
    @(negedge clk);
    checks++;
    if (seen[0] == 0 || seen[1] == 0 || seen[2] == 0 || seen[3] == 0) begin
      failures++; $display("FAIL a state was never visited");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
