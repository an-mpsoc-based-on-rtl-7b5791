// axi_lite_regs: AXI4-Lite slave with the controllers' register file.
//
// N_REGS registers of DATA_W bits at byte addresses 4*i. The processor writes the
// configuration of the joint controllers here and reads it back. Bits set in the
// parameter RO_MASK are read-only: a read returns ro_i in those bits (used for the
// joints' position counters) and writes to them are ignored.
// Write channel: AWREADY and WREADY rise together, for one cycle, when both AWVALID and
// WVALID are high and no response is pending; the register changes on that edge (with
// WSTRB byte enables) and BVALID rises on the next cycle with OKAY. Read channel:
// ARREADY is high when no read data is pending; RDATA/RVALID follow one cycle after
// the address handshake. Addresses beyond the file read 0 and ignore writes, still
// answered OKAY. Registers reset to 0. One transaction of each kind is in flight at a
// time. The count and width of the registers follow the original platform's description; the protocol timing,
// the address decoding and the read-only bits are this design's choice.
module axi_lite_regs #(
  parameter int unsigned N_REGS = 36,
  parameter int unsigned DATA_W = 32,
  parameter int unsigned ADDR_W = 8,
  parameter logic [N_REGS-1:0][DATA_W-1:0] RO_MASK = '0
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // write address
  input  logic [ADDR_W-1:0]             s_axi_awaddr,
  input  logic                          s_axi_awvalid,
  output logic                          s_axi_awready,
  // write data
  input  logic [DATA_W-1:0]             s_axi_wdata,
  input  logic [DATA_W/8-1:0]           s_axi_wstrb,
  input  logic                          s_axi_wvalid,
  output logic                          s_axi_wready,
  // write response
  output logic [1:0]                    s_axi_bresp,
  output logic                          s_axi_bvalid,
  input  logic                          s_axi_bready,
  // read address
  input  logic [ADDR_W-1:0]             s_axi_araddr,
  input  logic                          s_axi_arvalid,
  output logic                          s_axi_arready,
  // read data
  output logic [DATA_W-1:0]             s_axi_rdata,
  output logic [1:0]                    s_axi_rresp,
  output logic                          s_axi_rvalid,
  input  logic                          s_axi_rready,
  // register file
  output logic [N_REGS-1:0][DATA_W-1:0] regs_o,
  input  logic [N_REGS-1:0][DATA_W-1:0] ro_i
);

  localparam int unsigned IW = $clog2(N_REGS);
  localparam logic [1:0]  OKAY = 2'b00;

  logic                 wr_go, rd_go;
  logic [ADDR_W-3:0]    wr_word, rd_word;
  logic [DATA_W-1:0]    rd_val;

  assign wr_go   = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid && !s_axi_awready;
  assign rd_go   = s_axi_arvalid && s_axi_arready;
  assign wr_word = s_axi_awaddr[ADDR_W-1:2];
  assign rd_word = s_axi_araddr[ADDR_W-1:2];

  assign s_axi_arready = !s_axi_rvalid;
  assign s_axi_bresp   = OKAY;
  assign s_axi_rresp   = OKAY;
  assign s_axi_wready  = s_axi_awready;

  always_comb begin
    rd_val = '0;
    if (32'(rd_word) < N_REGS)
      rd_val = (regs_o[rd_word[IW-1:0]] & ~RO_MASK[rd_word[IW-1:0]])
             | (ro_i[rd_word[IW-1:0]] & RO_MASK[rd_word[IW-1:0]]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs_o        <= '0;
      s_axi_awready <= 1'b0;
      s_axi_bvalid  <= 1'b0;
      s_axi_rvalid  <= 1'b0;
      s_axi_rdata   <= '0;
    end else begin
      // write
      s_axi_awready <= wr_go;
      if (wr_go && 32'(wr_word) < N_REGS) begin
        for (int b = 0; b < DATA_W / 8; b++)
          if (s_axi_wstrb[b])
            for (int k = 0; k < 8; k++)
              if (!RO_MASK[wr_word[IW-1:0]][8*b+k])
                regs_o[wr_word[IW-1:0]][8*b+k] <= s_axi_wdata[8*b+k];
      end
      if (s_axi_awready)                    s_axi_bvalid <= 1'b1;
      else if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      // read
      if (rd_go) begin
        s_axi_rvalid <= 1'b1;
        s_axi_rdata  <= rd_val;
      end else if (s_axi_rvalid && s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a VALID, once raised, stays high with stable payload until READY.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));

endmodule
