// tb_spike_gen: self-checking test of the reverse-bitwise spike generator.
// For a set of signed references it resets the generator, lets it run exactly one
// full period of 2^15 steps and checks that exactly |value| spikes of the right sign
// came out, that half a period gives half of them (even spreading), and that the
// frequency divider stretches the period by fd+1 without changing the count.
module tb_spike_gen;
  import scorbot_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  logic signed [15:0] value;
  logic [15:0] fd;
  spike_t spk;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  spike_gen #(.W(16), .FD_W(16)) dut (.clk, .rst_n, .value, .fd, .spk);

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int v, input int f);
    int np = 0, nn = 0, nhalf = 0, last = -1000, mingap = 1 << 30, cyc;
    int steps = 32768;
    int mag;
    mag = v < 0 ? -v : v;
    rst_n = 0; value = 16'(v); fd = 16'(f);
    @(posedge clk); @(posedge clk);
    #1 rst_n = 1;
    for (cyc = 0; cyc < steps * (f + 1); cyc++) begin
      @(posedge clk); #1;
      if (spk.p) np++;
      if (spk.n) nn++;
      if (spk.p || spk.n) begin
        if (cyc - last < mingap) mingap = cyc - last;
        last = cyc;
      end
      if (cyc == steps * (f + 1) / 2 - 1) nhalf = np + nn;
    end
    checks++;
    if ((v >= 0 && (np != mag || nn != 0)) || (v < 0 && (nn != mag || np != 0))) begin
      failures++;
      $display("FAIL value=%0d fd=%0d: p=%0d n=%0d", v, f, np, nn);
    end
    checks++;
    if (nhalf < mag / 2 - 1 || nhalf > (mag + 1) / 2 + 1) begin
      failures++;
      $display("FAIL value=%0d half period count %0d", v, nhalf);
    end
    if (mag > 1) begin
      checks++;
      if (mingap < f + 1) begin
        failures++;
        $display("FAIL value=%0d fd=%0d spikes %0d cycles apart", v, f, mingap);
      end
    end
  endtask

  initial begin
    run(0, 0);
    run(1, 0);
    run(487, 0);
    run(-487, 0);
    run(-1585, 0);
    run(750, 2);
    run(32767, 0);
    run(-32768, 0);
    run(-383, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
