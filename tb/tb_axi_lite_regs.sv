// tb_axi_lite_regs: self-checking test of the AXI4-Lite register file.
// Writes every register with random data, reads all back, checks byte strobes,
// read-only bits (which return ro_i and ignore writes), out-of-range addresses, the
// register outputs, and the one-cycle response timing. A master that delays BREADY and
// RREADY at random exercises the hold rules of the response channels.
module tb_axi_lite_regs;
  localparam int N = 36;
  localparam logic [N-1:0][31:0] MASK = {{(N-1){32'h0}}, 32'hFFFF_0000};

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        arvalid, arready, rvalid, rready;
  logic [N-1:0][31:0] regs, ro;
  logic [N-1:0][31:0] model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  axi_lite_regs #(.N_REGS(N), .DATA_W(32), .ADDR_W(8), .RO_MASK(MASK)) dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .regs_o(regs), .ro_i(ro)
  );

  initial begin
    repeat (50_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic axi_write(input int idx, input logic [31:0] d, input logic [3:0] s);
    int lat = 0;
    awaddr = 8'(idx * 4); wdata = d; wstrb = s; awvalid = 1; wvalid = 1;
    do begin @(posedge clk); lat++; end while (!(awready && wready));
    #1 awvalid = 0; wvalid = 0;
    repeat ($urandom_range(0, 3)) @(posedge clk);
    #1 bready = 1;
    do @(posedge clk); while (!bvalid);
    check(bresp == 2'b00, "bresp OKAY");
    #1 bready = 0;
    check(lat == 2, $sformatf("write address accepted after %0d cycles", lat));
  endtask

  task automatic axi_read(input int idx, output logic [31:0] d);
    araddr = 8'(idx * 4); arvalid = 1;
    do @(posedge clk); while (!arready);
    #1 arvalid = 0;
    check(rvalid, "rvalid one cycle after the address handshake");
    repeat ($urandom_range(0, 3)) @(posedge clk);
    #1 rready = 1;
    do @(posedge clk); while (!rvalid);
    d = rdata;
    check(rresp == 2'b00, "rresp OKAY");
    #1 rready = 0;
  endtask

  initial begin
    logic [31:0] d, v;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0; wstrb = 0;
    for (int i = 0; i < N; i++) ro[i] = $urandom;
    model = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    check(regs == '0, "registers reset to 0");
    for (int i = 0; i < N; i++) begin
      d = $urandom;
      axi_write(i, d, 4'hF);
      model[i] = (d & ~MASK[i]);
    end
    // Byte strobes.
    axi_write(7, 32'hA5A5_A5A5, 4'b0101);
    model[7] = {model[7][31:24], 8'hA5, model[7][15:8], 8'hA5};
    check(regs == model, "register outputs match writes");
    for (int i = 0; i < N; i++) begin
      axi_read(i, v);
      d = (model[i] & ~MASK[i]) | (ro[i] & MASK[i]);
      check(v == d, $sformatf("read reg %0d = %08h, expected %08h", i, v, d));
    end
    // Out of range.
    axi_write(40, 32'hFFFF_FFFF, 4'hF);
    check(regs == model, "out-of-range write changes nothing");
    axi_read(40, v);
    check(v == 0, "out-of-range read gives 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
