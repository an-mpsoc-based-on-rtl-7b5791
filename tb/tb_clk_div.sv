// tb_clk_div: self-checking test of the clock divider. Counts input cycles between
// output edges: with DIV = 4 the output must be high 2 and low 2 input cycles.
module tb_clk_div;
  logic clk = 0, rst_n = 1, clk_out;
  initial #1 rst_n = 0;
  int checks = 0, failures = 0;

  always #2.5 clk = ~clk;

  clk_div #(.DIV(4)) dut (.clk_in(clk), .rst_n, .clk_out);

  initial begin
    repeat (10_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hi, lo, rises;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk_out);
    rises = 0;
    for (int k = 0; k < 50; k++) begin
      hi = 0; lo = 0;
      while (clk_out) begin @(posedge clk); #0.1; hi++; end
      while (!clk_out) begin @(posedge clk); #0.1; lo++; end
      checks++;
      if (hi != 2 || lo != 2) begin
        failures++;
        $display("FAIL period %0d: high %0d low %0d", k, hi, lo);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
