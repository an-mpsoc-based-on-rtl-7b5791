// tb_joint_bounds: drives joints 1 to 4 of the full design to the limits of their
// travel, expressed in spiking-input (SI) units, with each joint's SI-to-position
// constant set through the ratio of its two spike-generator dividers:
//   position - 32768 = SI * (IG_FD + 1) / (REF_FD + 1),  1/k = (IG_FD + 1)/(REF_FD + 1)
//   joint:        J1      J2      J3      J4
//   k (SI/count): 0.0247  0.0677  0.0239  0.218
//   limit (SI):   +487    -750    +383    -1585
//   deg/count:    7.98e-3 7.67e-3 7.05e-3 1.24e-2
//   limit (deg):  155     85      112.5   90
// The position reached must match SI/k within 1 % and, converted to degrees, the
// joint's angular limit within 3 %. The motor models move one encoder step per cycle
// of drive so that the long travels fit in a short simulation.
module tb_joint_bounds;
  import scorbot_pkg::*;

  logic clk_200 = 0, rst_n = 1, clk_50;
  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        arvalid, arready, rvalid, rready;
  logic [N_JOINTS-1:0] enc_a, enc_b, fwd, rev;
  int steps [N_JOINTS];
  int checks = 0, failures = 0;


  always #2.5 clk_200 = ~clk_200;
  initial #1 rst_n = 0;

  edscorbot_pl_top dut (
    .clk_200, .rst_n, .clk_50,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .enc_a, .enc_b, .pfm_fwd(fwd), .pfm_rev(rev)
  );

  for (genvar j = 0; j < N_JOINTS; j++) begin : g_motor
    dc_motor_model #(.CYCLES_PER_STEP(1)) m (
      .clk(clk_50), .fwd(fwd[j]), .rev(rev[j]), .enc_a(enc_a[j]), .enc_b(enc_b[j]),
      .steps(steps[j]));
  end

  initial begin
    repeat (12_000_000) @(posedge clk_200);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic axi_write(input int idx, input logic [31:0] d);
    @(posedge clk_50); #1;
    awaddr = 8'(idx * 4); wdata = d; wstrb = 4'hF; awvalid = 1; wvalid = 1; bready = 1;
    do @(posedge clk_50); while (!(awready && wready));
    #1 awvalid = 0; wvalid = 0;
    do @(posedge clk_50); while (!bvalid);
    #1 bready = 0;
  endtask

  task automatic axi_read(input int idx, output logic [31:0] d);
    @(posedge clk_50); #1;
    araddr = 8'(idx * 4); arvalid = 1; rready = 1;
    do @(posedge clk_50); while (!arready);
    #1 arvalid = 0;
    do @(posedge clk_50); while (!rvalid);
    d = rdata;
    #1 rready = 0;
  endtask

  localparam int  SI     [4] = '{487, -750, 383, -1585};
  localparam int  REF_FD [4] = '{1, 12, 5, 16};
  localparam int  IG_FD  [4] = '{80, 191, 250, 77};
  localparam real K      [4] = '{0.0247, 0.0677, 0.0239, 0.218};
  localparam real DEG    [4] = '{7.98e-3, 7.67e-3, 7.05e-3, 1.24e-2};
  localparam real LIMDEG [4] = '{155.0, 85.0, 112.5, 90.0};

  initial begin
    logic [31:0] d;
    real want, got, deg;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0; wstrb = 0;
    repeat (4) @(posedge clk_200);
    #1 rst_n = 1;
    repeat (4) @(posedge clk_50);
    for (int j = 0; j < 4; j++) begin
      axi_write(j * 6 + int'(R_REF_FD), 32'(REF_FD[j]));
      axi_write(j * 6 + int'(R_IG_FD), 32'(IG_FD[j]));
      axi_write(j * 6 + int'(R_KP), 64);
      axi_write(j * 6 + int'(R_REF), 32'(SI[j]) & 32'h0000_FFFF);
    end
    repeat (1_000_000) @(posedge clk_50);
    for (int j = 0; j < 4; j++) begin
      axi_read(j * 6 + int'(R_REF), d);
      got  = real'(int'(d[31:16]) - 32768);
      want = real'(SI[j]) / K[j];
      deg  = DEG[j] * got;
      $display("J%0d: SI %0d -> position %0d (SI/k = %0.0f), %0.1f degrees", j + 1, SI[j],
               int'(got), want, deg);
      check(got > 0.99 * want - 1 && got < 1.01 * want + 1 || got < 0.99 * want + 1 && got > 1.01 * want - 1,
            $sformatf("J%0d position %0d, SI/k %0.0f", j + 1, int'(got), want));
      check((deg < 0 ? -deg : deg) > 0.97 * LIMDEG[j] && (deg < 0 ? -deg : deg) < 1.03 * LIMDEG[j],
            $sformatf("J%0d angle %0.1f, limit %0.1f", j + 1, deg, LIMDEG[j]));
      check(int'(dut.pos[j]) - 32768 - steps[j] <= 4 && steps[j] - int'(dut.pos[j]) + 32768 <= 4,
            $sformatf("J%0d counter %0d follows the encoder (%0d steps; the counter trails the shaft by up to 4 steps)", j + 1,
                      int'(dut.pos[j]) - 32768, steps[j]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
