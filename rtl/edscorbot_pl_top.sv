// edscorbot_pl_top: programmable-logic side of the single-chip ED-Scorbot controller.
//
// Six spike-based PID joint controllers (spid_joint), configured by the processor
// through an AXI4-Lite register file (axi_lite_regs), all clocked at 50 MHz derived
// from the board's 200 MHz clock (clk_div). Register j*6+k is register k of joint j
// (see scorbot_pkg::reg_off_e); bits 31:16 of each joint's REF register read back that
// joint's 16-bit position counter. The AXI port runs in the 50 MHz domain, which is
// exported on clk_50 for the processor's interconnect. rst_n is asserted
// asynchronously and released through a two-flop synchronizer on clk_50. The blocks
// and their connections follow the original platform's block diagrams; the clocking of the AXI
// port, the reset synchronizer and the register layout are this design's choice.
module edscorbot_pl_top
  import scorbot_pkg::*;
#(
  parameter int unsigned CLK_DIV = 4
) (
  input  logic                 clk_200,
  input  logic                 rst_n,
  output logic                 clk_50,
  // AXI4-Lite slave
  input  logic [7:0]           s_axi_awaddr,
  input  logic                 s_axi_awvalid,
  output logic                 s_axi_awready,
  input  logic [31:0]          s_axi_wdata,
  input  logic [3:0]           s_axi_wstrb,
  input  logic                 s_axi_wvalid,
  output logic                 s_axi_wready,
  output logic [1:0]           s_axi_bresp,
  output logic                 s_axi_bvalid,
  input  logic                 s_axi_bready,
  input  logic [7:0]           s_axi_araddr,
  input  logic                 s_axi_arvalid,
  output logic                 s_axi_arready,
  output logic [31:0]          s_axi_rdata,
  output logic [1:0]           s_axi_rresp,
  output logic                 s_axi_rvalid,
  input  logic                 s_axi_rready,
  // robot
  input  logic [N_JOINTS-1:0]  enc_a,
  input  logic [N_JOINTS-1:0]  enc_b,
  output logic [N_JOINTS-1:0]  pfm_fwd,
  output logic [N_JOINTS-1:0]  pfm_rev
);

  function automatic logic [N_REGS-1:0][REG_W-1:0] ro_mask_f();
    logic [N_REGS-1:0][REG_W-1:0] m = '0;
    for (int j = 0; j < N_JOINTS; j++) m[j*REGS_PER_JOINT + int'(R_REF)] = 32'hFFFF_0000;
    return m;
  endfunction
  localparam logic [N_REGS-1:0][REG_W-1:0] RO_MASK = ro_mask_f();

  logic [1:0] rst_sync;
  logic       rst50_n;
  logic [N_REGS-1:0][REG_W-1:0] regs, ro;
  logic [N_JOINTS-1:0][POS_W-1:0] pos;

  clk_div #(.DIV(CLK_DIV)) u_clk (.clk_in(clk_200), .rst_n, .clk_out(clk_50));

  always_ff @(posedge clk_50 or negedge rst_n) begin
    if (!rst_n) rst_sync <= '0;
    else        rst_sync <= {rst_sync[0], 1'b1};
  end
  assign rst50_n = rst_sync[1];

  axi_lite_regs #(.N_REGS(N_REGS), .DATA_W(REG_W), .ADDR_W(8), .RO_MASK(RO_MASK)) u_regs (
    .clk(clk_50), .rst_n(rst50_n),
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .regs_o(regs), .ro_i(ro)
  );

  always_comb begin
    ro = '0;
    for (int j = 0; j < N_JOINTS; j++) ro[j*REGS_PER_JOINT + int'(R_REF)] = {pos[j], 16'h0000};
  end

  for (genvar j = 0; j < N_JOINTS; j++) begin : g_joint
    spid_joint u_spid (
      .clk     (clk_50),
      .rst_n   (rst50_n),
      .cfg     (regs[j*REGS_PER_JOINT +: REGS_PER_JOINT]),
      .enc_a   (enc_a[j]),
      .enc_b   (enc_b[j]),
      .pfm_fwd (pfm_fwd[j]),
      .pfm_rev (pfm_rev[j]),
      .pos     (pos[j])
    );
  end

endmodule
