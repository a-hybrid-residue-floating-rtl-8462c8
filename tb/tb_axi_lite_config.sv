// tb_axi_lite_config - self-checking testbench of axi_lite_config.
// Reads the reset values, writes every register (whole words and single
// bytes through WSTRB), reads them back, checks the configuration outputs,
// the read-only status registers, unmapped addresses and a delayed
// BREADY/RREADY, then 600 random reads and writes (random strobes and
// addresses) against a register model.
module tb_axi_lite_config;
  import hrfna_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [4:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [3:0] wstrb = 0;
  logic [1:0] bresp, rresp;
  logic cfg_enable; frac_t cfg_alpha; logic [K_W-1:0] cfg_k; exp_t cfg_bias;
  logic [31:0] st_nc = 32'h1234_5678, st_oc = 32'h0bad_cafe;
  logic [1:0] st_state = 2'd2; logic st_busy = 1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  axi_lite_config dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .cfg_enable, .cfg_alpha, .cfg_k, .cfg_bias,
    .st_norm_count(st_nc), .st_op_count(st_oc), .st_state, .st_norm_busy(st_busy));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [4:0] a, input logic [31:0] d, input logic [3:0] s);
    @(negedge clk);
    awaddr = a; awvalid = 1; wdata = d; wstrb = s; wvalid = 1; bready = 0;
    #1;
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    repeat ($urandom_range(0, 2)) begin
      @(negedge clk);
      checks++;
      if (!bvalid) begin failures++; $display("FAIL bvalid dropped"); end
    end
    bready = 1;
    @(negedge clk); bready = 0;
    checks++;
    if (bresp != 2'b00) begin failures++; $display("FAIL bresp"); end
  endtask

  task automatic rd_check(input logic [4:0] a, input logic [31:0] e);
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 0;
    #1;
    while (!arready) @(negedge clk);
    @(negedge clk);
    arvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    checks++;
    if (!rvalid || rdata !== e) begin failures++; $display("FAIL read %h got %h exp %h", a, rdata, e); end
    rready = 1;
    @(negedge clk); rready = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset values
    rd_check(5'h00, 32'd1);
    rd_check(5'h04, 32'h2000_0000);
    rd_check(5'h08, 32'd0);
    rd_check(5'h0C, 32'd18);
    rd_check(5'h10, 32'd0);
    checks += 4;
    if (cfg_enable !== 1'b1) begin failures++; $display("FAIL enable reset"); end
    if (cfg_alpha !== (frac_t'(1) << 29)) begin failures++; $display("FAIL alpha reset"); end
    if (cfg_k !== 6'd18) begin failures++; $display("FAIL k reset"); end
    if (cfg_bias !== '0) begin failures++; $display("FAIL bias reset"); end
    // status
    rd_check(5'h14, 32'h1234_5678);
    rd_check(5'h18, 32'h0bad_cafe);
    rd_check(5'h1C, 32'd6);
    // writes
    wr(5'h00, 32'd0, 4'hF);
    wr(5'h04, 32'hdead_beef, 4'hF);
    wr(5'h08, 32'h0000_abcd, 4'hF);
    wr(5'h0C, 32'd7, 4'hF);
    wr(5'h10, 32'h0000_03f0, 4'hF);
    rd_check(5'h04, 32'hdead_beef);
    checks += 4;
    if (cfg_enable !== 1'b0) begin failures++; $display("FAIL enable"); end
    if (cfg_alpha !== 48'habcd_dead_beef) begin failures++; $display("FAIL alpha %h", cfg_alpha); end
    if (cfg_k !== 6'd7) begin failures++; $display("FAIL k"); end
    if (cfg_bias !== exp_t'(-16)) begin failures++; $display("FAIL bias %0d", cfg_bias); end
    // byte strobes
    wr(5'h04, 32'h1122_3344, 4'b0100);
    rd_check(5'h04, 32'hde22_beef);
    // unmapped and read-only addresses ignore writes
    wr(5'h14, 32'hffff_ffff, 4'hF);
    rd_check(5'h14, 32'h1234_5678);
    wr(5'h1C, 32'hffff_ffff, 4'hF);
    rd_check(5'h00, 32'd0);
    // random phase: writes with random strobes and reads of random
    // addresses against a register model; the outputs follow each write
    begin
      logic [31:0] m [5];
      m[0] = 32'd0; m[1] = 32'hde22_beef; m[2] = 32'h0000_abcd; m[3] = 32'd7; m[4] = 32'h0000_03f0;
      for (int it = 0; it < 600; it++) begin
        automatic logic [4:0] a = 5'($urandom_range(0, 31));
        automatic int w = int'(a[4:2]);
        if ($urandom_range(0, 1) != 0) begin
          automatic logic [31:0] d = $urandom();
          automatic logic [3:0]  s = 4'($urandom_range(0, 15));
          wr(a, d, s);
          if (w < 5)
            for (int b = 0; b < 4; b++) if (s[b]) m[w][8*b +: 8] = d[8*b +: 8];
          checks += 4;
          if (cfg_enable !== m[0][0]) begin failures++; $display("FAIL enable model"); end
          if (cfg_alpha !== {m[2][15:0], m[1]}) begin failures++; $display("FAIL alpha model"); end
          if (cfg_k !== m[3][5:0]) begin failures++; $display("FAIL k model"); end
          if (cfg_bias !== exp_t'(m[4][9:0])) begin failures++; $display("FAIL bias model"); end
        end else begin
          st_nc = $urandom(); st_oc = $urandom();
          st_state = 2'($urandom_range(0, 3)); st_busy = 1'($urandom_range(0, 1));
          case (w)
            0, 1, 2, 3, 4: rd_check(a, m[w]);
            5:             rd_check(a, st_nc);
            6:             rd_check(a, st_oc);
            default:       rd_check(a, {29'd0, st_busy, st_state});
          endcase
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
