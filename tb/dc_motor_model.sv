// dc_motor_model: behavioural model of a joint motor with its quadrature encoder, for
// testbenches only. The motor is an ideal integrator of its drive: every cycle with
// the forward (reverse) drive high moves an accumulator one unit up (down); every
// CYCLES_PER_STEP units the shaft advances one encoder step and the quadrature outputs
// take the next (previous) state of 00 -> 10 -> 11 -> 01. steps counts the net
// encoder steps taken.
module dc_motor_model #(
  parameter int CYCLES_PER_STEP = 16
) (
  input  logic clk,
  input  logic fwd,
  input  logic rev,
  output logic enc_a,
  output logic enc_b,
  output int   steps
);
  int acc = 0;
  int phase = 0;
  initial steps = 0;

  always @(posedge clk) begin
    if (fwd && !rev) acc = acc + 1;
    if (rev && !fwd) acc = acc - 1;
    if (acc >= CYCLES_PER_STEP) begin acc = 0; phase = (phase + 1) & 3; steps = steps + 1; end
    if (acc <= -CYCLES_PER_STEP) begin acc = 0; phase = (phase + 3) & 3; steps = steps - 1; end
  end

  assign enc_a = (phase == 1) || (phase == 2);
  assign enc_b = (phase == 2) || (phase == 3);
endmodule
