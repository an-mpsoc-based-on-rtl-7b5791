// hold_fire: spike subtractor (the "H&F", hold and fire, block).
//
// Output rate = rate(a) - rate(b), sign included. Each arriving spike moves a small
// signed store: +1 for a positive spike on a or a negative spike on b, -1 for the
// opposite. A spike is held until the store has been non-zero for HOLD cycles; a
// spike of the other sign arriving meanwhile cancels it, so opposite spikes that come
// close together never reach the output. Once the hold has run out the store drains
// at one spike per cycle, each carrying the store's sign, until it is empty (then the
// hold timer starts again). The store saturates at +/-(2^(CW-1)-1), so input bursts
// faster than one net spike per cycle are clipped. Output is registered.
// The original platform's block diagram gives the name, the + and - inputs and the
// role; the hold store,
// HOLD and CW are this design's choice.
module hold_fire
  import scorbot_pkg::*;
#(
  parameter int unsigned HOLD = 4,  // cycles a spike is held before it may fire
  parameter int unsigned CW   = 4   // width of the signed store
) (
  input  logic   clk,
  input  logic   rst_n,
  input  spike_t a,   // added
  input  spike_t b,   // subtracted
  output spike_t y
);

  localparam int SMAX = (1 << (CW - 1)) - 1;
  localparam int TW   = $clog2(HOLD + 1);

  logic signed [CW-1:0] store;
  logic [TW-1:0]        timer;
  logic                 fire;
  int                   delta;
  int                   nxt;

  assign fire = (store != 0) && (int'(timer) >= HOLD);

  always_comb begin
    delta = int'(a.p) - int'(a.n) - int'(b.p) + int'(b.n);
    nxt   = int'(store) + delta;
    if (fire) nxt = store > 0 ? nxt - 1 : nxt + 1;
    if (nxt > SMAX)  nxt = SMAX;
    if (nxt < -SMAX) nxt = -SMAX;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      store <= '0;
      timer <= '0;
      y     <= SPK_NONE;
    end else begin
      store <= CW'(nxt);
      if (nxt == 0)               timer <= '0;
      else if (int'(timer) < HOLD) timer <= timer + 1'b1;
      y.p <= fire && (store > 0);
      y.n <= fire && (store < 0);
    end
  end

endmodule
