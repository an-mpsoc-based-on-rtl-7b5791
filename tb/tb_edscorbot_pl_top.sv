// tb_edscorbot_pl_top: end-to-end test of the whole programmable-logic design at its
// default parameters. A processor model writes the six joints' registers over AXI4-Lite,
// six motor-and-encoder models close the loops, and the processor reads the position
// counters back over AXI. References are the joint limits of the arm's first four
// joints in spiking-input units (487, -750, 383, -1585) plus two small ones; joint 5
// runs with the integral term and joint 6 with the derivative term. With both dividers
// at 0 each joint must settle at position 32768 + REF. Joint 1 is then sent to a new
// reference of the other sign. Every mechanism built (reference spikes of both signs,
// encoder spikes of both signs, forward and reverse drive, the I and D terms,
// cancellation of opposite spikes in the subtractor, AXI
// writes, reads and position read-back) is counted and must occur.
module tb_edscorbot_pl_top;
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

  // mechanism counters
  int n_fwd = 0, n_rev = 0, n_ref_p = 0, n_ref_n = 0, n_enc_p = 0, n_enc_n = 0;
  int n_wr = 0, n_rd = 0, n_pos_rd = 0, n_int = 0, n_der = 0, n_cancel = 0;

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
    dc_motor_model #(.CYCLES_PER_STEP(16)) m (
      .clk(clk_50), .fwd(fwd[j]), .rev(rev[j]), .enc_a(enc_a[j]), .enc_b(enc_b[j]),
      .steps(steps[j]));
  end

  function automatic int hf_cancel(input logic signed [3:0] st, input spike_t a, input spike_t b);
    logic up, dn;
    up = a.p || b.n;
    dn = a.n || b.p;
    return int'((up && dn) || (st > 0 && dn) || (st < 0 && up));
  endfunction

  // Mechanism monitors (sampled on the falling edge, away from register updates).
  always @(negedge clk_50) begin
    n_fwd   += $countones(fwd);
    n_rev   += $countones(rev);
    n_ref_p += int'(dut.g_joint[0].u_spid.ref_spk.p) + int'(dut.g_joint[2].u_spid.ref_spk.p);
    n_ref_n += int'(dut.g_joint[1].u_spid.ref_spk.n) + int'(dut.g_joint[3].u_spid.ref_spk.n);
    n_enc_p += int'(dut.g_joint[0].u_spid.enc_spk.p);
    n_enc_n += int'(dut.g_joint[1].u_spid.enc_spk.n);
    n_int   += int'(dut.g_joint[4].u_spid.u_id.i_spk.p || dut.g_joint[4].u_spid.u_id.i_spk.n);
    n_der   += int'(dut.g_joint[5].u_spid.u_id.d_spk.p || dut.g_joint[5].u_spid.u_id.d_spk.n);
    // hold-and-fire cancellation: a spike meets one of the other sign, held or
    // arriving in the same cycle
    n_cancel += hf_cancel(dut.g_joint[0].u_spid.u_hf.store, dut.g_joint[0].u_spid.u_hf.a,
                          dut.g_joint[0].u_spid.u_hf.b);
    n_cancel += hf_cancel(dut.g_joint[1].u_spid.u_hf.store, dut.g_joint[1].u_spid.u_hf.a,
                          dut.g_joint[1].u_spid.u_hf.b);
    n_cancel += hf_cancel(dut.g_joint[2].u_spid.u_hf.store, dut.g_joint[2].u_spid.u_hf.a,
                          dut.g_joint[2].u_spid.u_hf.b);
    n_cancel += hf_cancel(dut.g_joint[3].u_spid.u_hf.store, dut.g_joint[3].u_spid.u_hf.a,
                          dut.g_joint[3].u_spid.u_hf.b);
  end

  initial begin
    repeat (2_000_000) @(posedge clk_200);
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
    n_wr++;
  endtask

  task automatic axi_read(input int idx, output logic [31:0] d);
    @(posedge clk_50); #1;
    araddr = 8'(idx * 4); arvalid = 1; rready = 1;
    do @(posedge clk_50); while (!arready);
    #1 arvalid = 0;
    do @(posedge clk_50); while (!rvalid);
    d = rdata;
    #1 rready = 0;
    n_rd++;
  endtask

  task automatic set_joint(input int j, input int ref_v, input int ki, input int kd);
    axi_write(j * 6 + int'(R_REF_FD), 0);
    axi_write(j * 6 + int'(R_IG_FD), 0);
    axi_write(j * 6 + int'(R_KI_FD), 32'(ki));
    axi_write(j * 6 + int'(R_KD_FD), 32'(kd));
    axi_write(j * 6 + int'(R_KP), 64);
    axi_write(j * 6 + int'(R_REF), 32'(ref_v) & 32'h0000_FFFF);
  endtask

  task automatic check_joint(input int j, input int ref_v, input int tol);
    logic [31:0] d;
    int p;
    axi_read(j * 6 + int'(R_REF), d);
    p = int'(d[31:16]) - 32768;
    if (p != 0) n_pos_rd++;
    check(d[15:0] == 16'(ref_v), $sformatf("joint %0d reference reads back", j + 1));
    check(p >= ref_v - tol && p <= ref_v + tol,
          $sformatf("joint %0d position %0d, reference %0d", j + 1, p, ref_v));
    check(p == steps[j], $sformatf("joint %0d counter %0d, motor steps %0d", j + 1, p, steps[j]));
  endtask

  localparam int REFS [N_JOINTS] = '{487, -750, 383, -1585, 150, -150};

  initial begin
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0; wstrb = 0;
    repeat (4) @(posedge clk_200);
    #1 rst_n = 1;
    repeat (4) @(posedge clk_50);
    for (int j = 0; j < N_JOINTS; j++)
      set_joint(j, REFS[j], j == 4 ? 60 : 0, j == 5 ? 1 : 0);
    repeat (120_000) @(posedge clk_50);
    for (int j = 0; j < N_JOINTS; j++) check_joint(j, REFS[j], 16);
    // New reference of the other sign on joint 1.
    axi_write(int'(R_REF), 32'(-200) & 32'h0000_FFFF);
    repeat (100_000) @(posedge clk_50);
    check_joint(0, -200, 16);
    $display("mechanisms: fwd=%0d rev=%0d ref+=%0d ref-=%0d enc+=%0d enc-=%0d I=%0d D=%0d cancel=%0d wr=%0d rd=%0d posrd=%0d",
             n_fwd, n_rev, n_ref_p, n_ref_n, n_enc_p, n_enc_n, n_int, n_der, n_cancel, n_wr, n_rd, n_pos_rd);
    check(n_fwd > 0,   "forward drive happened");
    check(n_rev > 0,   "reverse drive happened");
    check(n_ref_p > 0, "positive reference spikes happened");
    check(n_ref_n > 0, "negative reference spikes happened");
    check(n_enc_p > 0, "positive encoder spikes happened");
    check(n_enc_n > 0, "negative encoder spikes happened");
    check(n_int > 0,   "integral term fired");
    check(n_der > 0,   "derivative term fired");
    check(n_cancel > 0, "hold-and-fire cancelled opposite spikes");
    check(n_wr > 0 && n_rd > 0 && n_pos_rd > 0, "AXI writes, reads and position read-back happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
