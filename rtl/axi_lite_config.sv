// axi_lite_config - AXI4-Lite configuration and status registers.
//
// The paper's configuration interface supplies "module parameters,
// adjustable threshold settings, exponent offsets, and the scaling constant
// k"; the register map below, the reset values and the status registers
// are this design's choices.
//
//   0x00 CTRL       rw  [0] enable (reset 1)
//   0x04 ALPHA_LO   rw  threshold alpha, bits 31:0  (alpha in units of 2^-48 of M)
//   0x08 ALPHA_HI   rw  threshold alpha, bits 47:32 (reset alpha = 2^29, tau = M/2^19)
//   0x0C SCALE_K    rw  [5:0] scaling shift k (reset 18)
//   0x10 EXP_BIAS   rw  [9:0] signed exponent offset (reset 0)
//   0x14 NORM_COUNT ro  normalization events
//   0x18 OP_COUNT   ro  results delivered on the output stream
//   0x1C STATUS     ro  [1:0] scheduler state, [2] normalization engine busy
//
// Write: address and data are taken together in one cycle when both
// AWVALID and WVALID are high and no response is pending; BRESP is OKAY.
// Read: ARREADY is high while no read data is pending; RDATA is registered.
// Unmapped addresses read 0 and ignore writes. WSTRB is honoured per byte.
module axi_lite_config
  import hrfna_pkg::*;
#(
  parameter int ADDR_W = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [ADDR_W-1:0] s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  // configuration outputs
  output logic              cfg_enable,
  output frac_t             cfg_alpha,
  output logic [K_W-1:0]    cfg_k,
  output exp_t              cfg_bias,
  // status inputs
  input  logic [31:0]       st_norm_count,
  input  logic [31:0]       st_op_count,
  input  logic [1:0]        st_state,
  input  logic              st_norm_busy
);
  localparam frac_t          ALPHA_RST = frac_t'(1) << 29;
  localparam logic [K_W-1:0] K_RST     = K_W'(18);

  logic [31:0] regs [5];    // CTRL, ALPHA_LO, ALPHA_HI, SCALE_K, EXP_BIAS
  logic        wr;
  logic [2:0]  widx, ridx;

  assign wr             = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr;
  assign s_axil_wready  = wr;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign s_axil_arready = !s_axil_rvalid;
  assign widx           = s_axil_awaddr[4:2];
  assign ridx           = s_axil_araddr[4:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs[0] <= 32'd1;
      regs[1] <= ALPHA_RST[31:0];
      regs[2] <= 32'(ALPHA_RST[EST_F-1:32]);
      regs[3] <= 32'(K_RST);
      regs[4] <= 32'd0;
      s_axil_bvalid <= 1'b0;
    end else begin
      if (wr) begin
        if (widx < 3'd5)
          for (int b = 0; b < 4; b++)
            if (s_axil_wstrb[b]) regs[widx][8*b +: 8] <= s_axil_wdata[8*b +: 8];
        s_axil_bvalid <= 1'b1;
      end else if (s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else if (s_axil_arvalid && s_axil_arready) begin
      s_axil_rvalid <= 1'b1;
      case (ridx)
        3'd0, 3'd1, 3'd2, 3'd3, 3'd4: s_axil_rdata <= regs[ridx];
        3'd5:    s_axil_rdata <= st_norm_count;
        3'd6:    s_axil_rdata <= st_op_count;
        default: s_axil_rdata <= {29'd0, st_norm_busy, st_state};
      endcase
    end else if (s_axil_rready) begin
      s_axil_rvalid <= 1'b0;
    end
  end

  assign cfg_enable = regs[0][0];
  assign cfg_alpha  = {regs[2][EST_F-33:0], regs[1]};
  assign cfg_k      = regs[3][K_W-1:0];
  assign cfg_bias   = exp_t'(regs[4][EXP_W-1:0]);

  // AXI4-Lite: a response stays valid until taken
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             (s_axil_bvalid && !s_axil_bready) |=> s_axil_bvalid)
    else $error("axi_lite_config: BVALID dropped");
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             (s_axil_rvalid && !s_axil_rready) |=> (s_axil_rvalid && $stable(s_axil_rdata)))
    else $error("axi_lite_config: read data changed while pending");
endmodule
