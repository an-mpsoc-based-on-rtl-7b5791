// spike_id: spike-domain integral-derivative controller ("Spike PID without expander",
// the "ID spike controller").
//
// Input: error spikes. Output u = error + I + D as a spike stream; the proportional
// gain is applied afterwards by the expander (spike_exp).
//   I term: a spike_ig integrates the error in a signed IW-bit counter (centred at
//           2^(IW-1)) and regenerates spikes at a rate proportional to the integral,
//           divided by ki_fd. ki_fd = 0 switches the term off.
//   D term: a hold_fire subtracts from the error an integrated copy of its own output
//           (a spike_ig with divider kd_fd in the feedback). The feedback catches up
//           with a steady error rate, so only changes of the error pass: a spike-domain
//           high-pass, the derivative. kd_fd = 0 switches the term off.
//   Sum:    two hold_fire blocks add the three streams (subtracting a sign-swapped
//           stream adds it).
// All outputs are registered; an error spike reaches u after two hold_fire delays.
// The split into I and D inside the joint controller follows the original platform's description; how each
// term is formed and the off codes are this design's choice.
module spike_id
  import scorbot_pkg::*;
#(
  parameter int unsigned IW   = 16,
  parameter int unsigned FD_W = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  spike_t          err,
  input  logic [FD_W-1:0] ki_fd,
  input  logic [FD_W-1:0] kd_fd,
  output spike_t          u,
  output logic [IW-1:0]   integ  // integral counter, for observation
);

  localparam int unsigned MID = 1 << (IW - 1);

  spike_t i_raw, i_spk;
  spike_t d_raw, d_spk, d_fb;
  spike_t s_ei;
  logic [IW-1:0] d_count;

  // Integral.
  spike_ig #(.W(IW), .OFFSET(MID), .FD_W(FD_W)) u_int (
    .clk, .rst_n, .spk_in(err), .fd(ki_fd), .count(integ), .spk_out(i_raw)
  );
  assign i_spk = (ki_fd != '0) ? i_raw : SPK_NONE;

  // Derivative: error minus integrated output.
  hold_fire #(.HOLD(1), .CW(4)) u_dsub (
    .clk, .rst_n, .a(err), .b(d_fb), .y(d_raw)
  );
  spike_ig #(.W(IW), .OFFSET(MID), .FD_W(FD_W)) u_dint (
    .clk, .rst_n, .spk_in(d_raw), .fd(kd_fd), .count(d_count), .spk_out(d_fb)
  );
  assign d_spk = (kd_fd != '0) ? d_raw : SPK_NONE;

  // Sum: err + I + D.
  hold_fire #(.HOLD(1), .CW(4)) u_sum1 (
    .clk, .rst_n, .a(err), .b(spk_neg(i_spk)), .y(s_ei)
  );
  hold_fire #(.HOLD(1), .CW(4)) u_sum2 (
    .clk, .rst_n, .a(s_ei), .b(spk_neg(d_spk)), .y(u)
  );

endmodule
