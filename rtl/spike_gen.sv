// spike_gen: signed number to signed spike train (the "Spike GEN" of the controller).
//
// A reverse-bitwise generator. A (W-1)-bit step counter advances once every fd+1 clock
// cycles. On a step the counter's bit-reversed value is compared with |value|: the
// generator fires when it is smaller. Over 2^(W-1) steps exactly |value| spikes come
// out, spread evenly (bit reversal interleaves them), so the mean rate is
//   f_spk = f_clk * |value| / ((fd + 1) * 2^(W-1)).
// Spikes carry the sign of value. The output is registered: a spike is seen one cycle
// after its step. Mechanism and the divider are this design's choice; the original description only
// names the block and its role (reference position to spikes).
module spike_gen
  import scorbot_pkg::*;
#(
  parameter int unsigned W    = 16,  // width of the signed input
  parameter int unsigned FD_W = 16   // width of the frequency divider
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] value,
  input  logic [FD_W-1:0]     fd,
  output spike_t              spk
);

  logic [FD_W-1:0] div_cnt;
  logic [W-2:0]    step;
  logic [W-2:0]    step_rev;
  logic [W-1:0]    mag;
  logic            tick;

  assign tick = (div_cnt >= fd);
  assign mag  = value[W-1] ? W'(-value) : W'(value);

  always_comb begin
    for (int i = 0; i < W - 1; i++) step_rev[i] = step[W-2-i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt <= '0;
      step    <= '0;
      spk     <= SPK_NONE;
    end else begin
      spk <= SPK_NONE;
      if (tick) begin
        div_cnt <= '0;
        step    <= step + 1'b1;
        if ({1'b0, step_rev} < mag) begin
          spk.p <= ~value[W-1];
          spk.n <=  value[W-1];
        end
      end else begin
        div_cnt <= div_cnt + 1'b1;
      end
    end
  end

endmodule
