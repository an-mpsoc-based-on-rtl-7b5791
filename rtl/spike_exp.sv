// spike_exp: spike expander, the proportional stage and motor driver ("Spike EXP").
//
// Each controller spike is stretched into a pulse of kp clock cycles on one of two
// pulse-frequency-modulated outputs, forward for positive spikes and reverse for
// negative ones. A signed remaining-time counter holds the drive still owed: a
// positive spike adds kp, a negative one subtracts kp, and every cycle the counter
// steps one toward zero while its sign selects the active output. Opposite spikes
// therefore cancel drive still owed, and the duty cycle of the motor drive is
// kp * (net spike rate), proportional to the controller output. The outputs follow the
// counter register, so a spike at cycle t drives cycles t+1 .. t+kp. The counter
// saturates at +/-(2^(KW+1)-1). The original description names the block as the P component; the
// counter mechanism is this design's choice.
module spike_exp
  import scorbot_pkg::*;
#(
  parameter int unsigned KW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  spike_t        spk,
  input  logic [KW-1:0] kp,
  output logic          pfm_fwd,
  output logic          pfm_rev
);

  localparam int RW = KW + 2;
  localparam logic signed [RW-1:0] RMAX = RW'((1 << (KW + 1)) - 1);

  logic signed [RW-1:0] rem;
  logic signed [RW:0]   nxt;

  always_comb begin
    nxt = (RW+1)'(rem);
    if (spk.p && !spk.n) nxt = nxt + (RW+1)'(signed'({1'b0, kp}));
    if (spk.n && !spk.p) nxt = nxt - (RW+1)'(signed'({1'b0, kp}));
    if (rem > 0)      nxt = nxt - 1;
    else if (rem < 0) nxt = nxt + 1;
    if (nxt > (RW+1)'(RMAX))  nxt = (RW+1)'(RMAX);
    if (nxt < -(RW+1)'(RMAX)) nxt = -(RW+1)'(RMAX);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rem <= '0;
    else        rem <= RW'(nxt);
  end

  assign pfm_fwd = rem > 0;
  assign pfm_rev = rem < 0;

endmodule
