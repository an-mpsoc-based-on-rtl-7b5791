// clk_div: derives the 50 MHz controller clock from the board's 200 MHz clock.
//
// An even divider: a counter of DIV/2 states toggles clk_out each time it wraps, so
// clk_out = clk_in / DIV with a 50 % duty cycle. DIV must be even and at least 2. The
// output is a flip-flop, so it is glitch-free; it starts low after reset and rises
// DIV/2 input cycles later. The divide ratio (200 MHz to 50 MHz, DIV = 4) follows the
// original platform, which needs the old 50 MHz rate so that the controllers' gains stay
// calibrated; using a counter rather than a vendor clock manager is this design's choice.
module clk_div #(
  parameter int unsigned DIV = 4
) (
  input  logic clk_in,
  input  logic rst_n,
  output logic clk_out
);

  localparam int unsigned HALF = DIV / 2;
  localparam int unsigned CW   = (HALF > 1) ? $clog2(HALF) : 1;

  logic [CW-1:0] cnt;

  always_ff @(posedge clk_in or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      clk_out <= 1'b0;
    end else if (cnt == CW'(HALF - 1)) begin
      cnt     <= '0;
      clk_out <= ~clk_out;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

endmodule
