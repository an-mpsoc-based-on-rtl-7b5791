// tb_spid_joint: closed-loop test of one joint controller driving a motor model.
// The controller must bring the joint's position counter to
//   32768 + REF * (IG_FD + 1) / (REF_FD + 1)
// for positive and negative references, with the integral term on and off, using the
// forward and the reverse drive.
module tb_spid_joint;
  import scorbot_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  logic [5:0][31:0] cfg;
  logic enc_a, enc_b, fwd, rev;
  logic [15:0] pos;
  int steps;
  int checks = 0, failures = 0;
  int nfwd = 0, nrev = 0;

  always #10 clk = ~clk;

  spid_joint dut (.clk, .rst_n, .cfg, .enc_a, .enc_b, .pfm_fwd(fwd), .pfm_rev(rev), .pos);
  dc_motor_model #(.CYCLES_PER_STEP(16)) motor (.clk, .fwd, .rev, .enc_a, .enc_b, .steps);

  always @(posedge clk) begin
    if (fwd) nfwd++;
    if (rev) nrev++;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic go(input int ref_v, input int ref_fd, input int ig_fd, input int ki,
                    input int cycles, input int tol);
    int target, p;
    cfg[R_REF] = 32'(ref_v); cfg[R_REF_FD] = 32'(ref_fd); cfg[R_IG_FD] = 32'(ig_fd);
    cfg[R_KI_FD] = 32'(ki);
    target = ref_v * (ig_fd + 1) / (ref_fd + 1);
    repeat (cycles) @(posedge clk);
    #1;
    p = int'(pos) - 32768;
    check(p >= target - tol && p <= target + tol,
          $sformatf("ref %0d: position %0d, expected %0d +/- %0d", ref_v, p, target, tol));
    check(p == steps, $sformatf("position counter %0d follows the encoder (%0d steps)", p, steps));
  endtask

  initial begin
    cfg = '0;
    cfg[R_KP] = 32'd64;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    go(200, 0, 0, 0, 150000, 12);
    check(nfwd > 0, "forward drive used");
    go(-300, 0, 0, 0, 200000, 12);
    check(nrev > 0, "reverse drive used");
    go(487, 0, 1, 0, 300000, 30);
    go(-150, 1, 0, 40, 300000, 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
