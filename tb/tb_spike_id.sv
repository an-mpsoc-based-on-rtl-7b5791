// tb_spike_id: self-checking test of the integral-derivative spike controller.
// 1) I and D off: the output is the error, spike for spike.
// 2) I only: the integral counter holds the net error count and, once the error stops,
//    keeps producing spikes at the rate the generator gives for it.
// 3) D only: a step in the error rate gives an extra burst (the derivative), equal to
//    the derivative integrator's count, after which the output rate returns to the
//    error rate.
module tb_spike_id;
  import scorbot_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  spike_t err, u;
  logic [15:0] ki, kd, integ;
  int checks = 0, failures = 0;
  int up = 0, un = 0;

  always #5 clk = ~clk;

  spike_id #(.IW(16), .FD_W(16)) dut (.clk, .rst_n, .err, .ki_fd(ki), .kd_fd(kd), .u, .integ);

  always @(posedge clk) begin
    if (u.p) up++;
    if (u.n) un++;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic restart(input int i, input int d);
    rst_n = 0; err = SPK_NONE; ki = 16'(i); kd = 16'(d);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    up = 0; un = 0;
  endtask

  initial begin
    int ne, u0, dnet, late_u;
    // 1) pass-through
    restart(0, 0);
    ne = 0;
    for (int c = 0; c < 20000; c++) begin
      int r;
      err = SPK_NONE;
      r = $urandom_range(0, 99);
      if (r < 10) begin err.p = 1; ne++; end
      else if (r < 16) begin err.n = 1; ne--; end
      @(posedge clk); #1;
    end
    err = SPK_NONE;
    repeat (20) @(posedge clk); #1;
    check(up - un == ne, $sformatf("I,D off: out %0d, error %0d", up - un, ne));
    // 2) integral
    restart(1, 0);
    for (int c = 0; c < 500; c++) begin
      err.p = 1; @(posedge clk); #1; err = SPK_NONE;
      repeat (9) @(posedge clk); #1;
    end
    check(integ == 16'(32768 + 500), $sformatf("integral %0d", int'(integ) - 32768));
    repeat (20) @(posedge clk); #1;
    u0 = up - un;
    check(u0 > 500, $sformatf("integral adds while error lasts: %0d", u0));
    repeat (65536) @(posedge clk); #1;   // one generator period at ki_fd = 1
    check(up - un - u0 >= 495 && up - un - u0 <= 505,
          $sformatf("integral output after error stopped: %0d, expected 500", up - un - u0));
    check(un == 0, "no negative spikes");
    // 3) derivative
    restart(0, 1);
    ne = 0;
    for (int c = 0; c < 400000; c++) begin
      if (c % 8 == 0) begin err.p = 1; ne++; end
      @(posedge clk); #1; err = SPK_NONE;
      if (c == 390000) late_u = up - un;
    end
    late_u = (up - un) - late_u;   // output count over the last 10000 cycles
    repeat (20) @(posedge clk); #1;
    dnet = int'(dut.d_count) - 32768;
    check(up - un == ne + dnet, $sformatf("out %0d = error %0d + derivative %0d", up - un, ne, dnet));
    check(dnet > 7900 && dnet < 8300, $sformatf("derivative burst %0d", dnet));
    check(late_u >= 1240 && late_u <= 1275, $sformatf("settled rate: %0d in 10000 cycles", late_u));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
