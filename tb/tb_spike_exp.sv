// tb_spike_exp: self-checking test of the spike expander.
// A lone spike must give exactly kp cycles of forward (or reverse) drive starting the
// next cycle; an opposite spike cancels drive still owed; over random sparse streams
// forward minus reverse drive cycles equals kp times the net spike count.
module tb_spike_exp;
  import scorbot_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  spike_t spk;
  logic [15:0] kp;
  logic fwd, rev;
  int checks = 0, failures = 0;
  int nf = 0, nr = 0;

  always #5 clk = ~clk;

  spike_exp #(.KW(16)) dut (.clk, .rst_n, .spk, .kp, .pfm_fwd(fwd), .pfm_rev(rev));

  always @(posedge clk) begin
    if (fwd) nf++;
    if (rev) nr++;
  end

  initial begin
    repeat (300_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int f0, r0, net;
    spk = SPK_NONE; kp = 16'd10;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check(!fwd && !rev, "idle after reset");
    spk.p = 1; @(posedge clk); #1; spk = SPK_NONE;
    check(fwd && !rev, "forward starts the cycle after the spike");
    repeat (30) @(posedge clk); #1;
    check(nf == 10 && nr == 0, $sformatf("one spike: fwd %0d rev %0d", nf, nr));
    spk.n = 1; @(posedge clk); #1; spk = SPK_NONE;
    repeat (30) @(posedge clk); #1;
    check(nf == 10 && nr == 10, $sformatf("negative spike: fwd %0d rev %0d", nf, nr));
    // Opposite spike 4 cycles later: it takes kp from the 6 cycles still owed, so the
    // drive turns to reverse for the remaining 4 and the net drive is zero.
    f0 = nf; r0 = nr;
    spk.p = 1; @(posedge clk); #1; spk = SPK_NONE;
    repeat (3) @(posedge clk); #1;
    spk.n = 1; @(posedge clk); #1; spk = SPK_NONE;
    repeat (30) @(posedge clk); #1;
    check(nf - f0 == 4 && nr - r0 == 4, $sformatf("opposite: fwd %0d rev %0d", nf - f0, nr - r0));
    // Random.
    f0 = nf; r0 = nr; net = 0; kp = 16'd37;
    for (int i = 0; i < 100000; i++) begin
      int r;
      spk = SPK_NONE;
      r = $urandom_range(0, 999);
      if (r < 20) begin spk.p = 1; net++; end
      else if (r < 35) begin spk.n = 1; net--; end
      @(posedge clk); #1;
    end
    spk = SPK_NONE;
    repeat (20000) @(posedge clk); #1;
    check((nf - f0) - (nr - r0) == 37 * net,
          $sformatf("random: fwd-rev %0d, expected %0d", (nf - f0) - (nr - r0), 37 * net));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
