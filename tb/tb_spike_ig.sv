// tb_spike_ig: self-checking test of integrate-and-generate.
// Full-size instance (16 bits, offset 32768): the counter starts at the offset and
// follows +1/-1 per input spike; over one generator period the output gives exactly
// (count - offset) spikes. A 4-bit instance (offset 8) checks saturation at both ends.
module tb_spike_ig;
  import scorbot_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  spike_t in16, out16, in4, out4;
  logic [15:0] cnt16;
  logic [3:0]  cnt4;
  int checks = 0, failures = 0;
  int op = 0, on = 0;

  always #5 clk = ~clk;

  spike_ig #(.W(16), .OFFSET(32768), .FD_W(16)) dut (
    .clk, .rst_n, .spk_in(in16), .fd(16'd0), .count(cnt16), .spk_out(out16));
  spike_ig #(.W(4), .OFFSET(8), .FD_W(16)) dut4 (
    .clk, .rst_n, .spk_in(in4), .fd(16'd0), .count(cnt4), .spk_out(out4));

  always @(posedge clk) begin
    if (out16.p) op++;
    if (out16.n) on++;
  end

  initial begin
    repeat (500_000) @(posedge clk);
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
    int exp16, p0, n0;
    in16 = SPK_NONE; in4 = SPK_NONE;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check(cnt16 == 16'd32768, "reset value is the offset");
    exp16 = 32768;
    for (int i = 0; i < 3000; i++) begin
      in16 = SPK_NONE;
      if ($urandom_range(0, 2) != 0) begin in16.p = 1; exp16++; end
      else begin in16.n = 1; exp16--; end
      @(posedge clk); #1;
    end
    in16 = SPK_NONE;
    @(posedge clk); #1;
    check(int'(cnt16) == exp16, $sformatf("count %0d expected %0d", cnt16, exp16));
    // Output spikes over one full generator period (2^15 steps at fd = 0).
    p0 = op; n0 = on;
    repeat (32768) @(posedge clk);
    #1;
    check((op - p0) - (on - n0) == exp16 - 32768 || (op - p0) - (on - n0) == exp16 - 32768 + 1
          || (op - p0) - (on - n0) == exp16 - 32768 - 1,
          $sformatf("generated %0d spikes, expected %0d", (op - p0) - (on - n0), exp16 - 32768));
    check(on == n0, "no negative spikes for a positive integral");
    // Saturation of the 4-bit instance.
    for (int i = 0; i < 20; i++) begin in4.p = 1; @(posedge clk); #1; end
    in4 = SPK_NONE; @(posedge clk); #1;
    check(cnt4 == 4'd15, $sformatf("saturates high, count %0d", cnt4));
    for (int i = 0; i < 30; i++) begin in4.n = 1; @(posedge clk); #1; end
    in4 = SPK_NONE; @(posedge clk); #1;
    check(cnt4 == 4'd0, $sformatf("saturates low, count %0d", cnt4));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
