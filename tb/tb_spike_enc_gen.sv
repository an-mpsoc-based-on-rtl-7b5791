// tb_spike_enc_gen: self-checking test of the quadrature encoder to spike converter.
// Drives forward and backward quadrature sequences with random dwell times and checks
// one spike per edge with the right sign, no spike for a double (invalid) change, and
// the three-cycle latency.
module tb_spike_enc_gen;
  import scorbot_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  logic enc_a = 0, enc_b = 0;
  spike_t spk;
  int checks = 0, failures = 0;
  int np = 0, nn = 0;
  int phase = 0;   // 0:00 1:10 2:11 3:01 (A leads B going up)

  always #5 clk = ~clk;

  spike_enc_gen dut (.clk, .rst_n, .enc_a, .enc_b, .spk);

  always @(posedge clk) begin
    if (spk.p) np++;
    if (spk.n) nn++;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic set_phase(input int ph);
    phase = ph & 3;
    enc_a = (phase == 1) || (phase == 2);
    enc_b = (phase == 2) || (phase == 3);
  endtask

  task automatic move(input int steps);
    for (int i = 0; i < (steps < 0 ? -steps : steps); i++) begin
      set_phase(steps > 0 ? phase + 1 : phase + 3);
      repeat ($urandom_range(2, 6)) @(posedge clk);
      #1;
    end
  endtask

  initial begin
    int lat;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (4) @(posedge clk);
    #1;
    move(37);
    repeat (6) @(posedge clk); #1;
    check(np == 37 && nn == 0, $sformatf("forward 37: p=%0d n=%0d", np, nn));
    move(-53);
    repeat (6) @(posedge clk); #1;
    check(np == 37 && nn == 53, $sformatf("backward 53: p=%0d n=%0d", np, nn));
    // Invalid: both channels change at once.
    set_phase(phase + 2);
    repeat (6) @(posedge clk); #1;
    check(np == 37 && nn == 53, "double change gives no spike");
    // Latency of one edge.
    set_phase(phase + 1);
    lat = 0;
    while (!spk.p && lat < 10) begin @(posedge clk); #1; lat++; end
    check(lat == 3, $sformatf("latency %0d cycles, expected 3", lat));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
