// tb_hold_fire: self-checking test of the spike subtractor.
// Checks the hold delay of a lone spike, cancellation of opposite spikes that arrive
// within the hold time, both signs, and, over long random streams on both inputs, that
// the net output count equals count(a) - count(b).
module tb_hold_fire;
  import scorbot_pkg::*;

  localparam int HOLD = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  spike_t a, b, y;
  int checks = 0, failures = 0;
  int yp = 0, yn = 0;

  always #5 clk = ~clk;

  hold_fire #(.HOLD(HOLD), .CW(4)) dut (.clk, .rst_n, .a, .b, .y);

  always @(posedge clk) begin
    if (y.p) yp++;
    if (y.n) yn++;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic idle(input int n);
    a = SPK_NONE; b = SPK_NONE;
    repeat (n) @(posedge clk);
    #1;
  endtask

  initial begin
    int delay, sa, sb, p0, n0;
    a = SPK_NONE; b = SPK_NONE;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // Lone positive spike on a: appears on y.p after HOLD+1 edges.
    a.p = 1; @(posedge clk); #1; a = SPK_NONE;
    delay = 0;
    while (!y.p && delay < 20) begin @(posedge clk); #1; delay++; end
    check(delay == HOLD, $sformatf("hold delay %0d, expected %0d", delay, HOLD));
    idle(10);
    // Lone positive spike on b gives a negative output spike.
    p0 = yp; n0 = yn;
    b.p = 1; @(posedge clk); #1; b = SPK_NONE;
    idle(10);
    check(yn == n0 + 1 && yp == p0, "b.p -> one negative spike");
    // a.p followed 2 cycles later by b.p: cancelled.
    p0 = yp; n0 = yn;
    a.p = 1; @(posedge clk); #1; a = SPK_NONE;
    @(posedge clk); #1;
    b.p = 1; @(posedge clk); #1; b = SPK_NONE;
    idle(10);
    check(yn == n0 && yp == p0, "opposite spikes within hold cancel");
    // a.n and b.n together cancel at once.
    a.n = 1; b.n = 1; @(posedge clk); #1;
    idle(10);
    check(yn == n0 && yp == p0, "simultaneous a.n and b.n cancel");
    // Random streams.
    p0 = yp; n0 = yn; sa = 0; sb = 0;
    for (int i = 0; i < 50000; i++) begin
      int r;
      a = SPK_NONE; b = SPK_NONE;
      r = $urandom_range(0, 99);
      if (r < 12) begin a.p = 1; sa++; end
      else if (r < 16) begin a.n = 1; sa--; end
      r = $urandom_range(0, 99);
      if (r < 5) begin b.p = 1; sb++; end
      else if (r < 8) begin b.n = 1; sb--; end
      @(posedge clk); #1;
    end
    idle(40);
    check((yp - p0) - (yn - n0) == sa - sb,
          $sformatf("random: net out %0d, expected %0d", (yp - p0) - (yn - n0), sa - sb));
    check((yp - p0) > 1000, "random: output active");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
