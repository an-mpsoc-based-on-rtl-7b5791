// spid_joint: spike-based PID position controller of one robot joint.
//
// The chain follows the controller's block diagram:
//   reference register -> spike_gen (ref-pos spikes) -> hold_fire (+)
//   encoder -> spike_enc_gen (speed spikes) -> spike_ig (16-bit position counter,
//              current-pos spikes) -> hold_fire (-)
//   hold_fire (error spikes) -> spike_id (I and D terms) -> spike_exp (P, PFM drive)
// The loop settles when the two spike rates into the subtractor match:
//   REF / (REF_FD + 1) = (POS - 32768) / (IG_FD + 1),
// so the ratio of the two dividers sets the spiking-input-to-position mapping of each
// joint. cfg holds the joint's six registers (see scorbot_pkg::reg_off_e); only bits
// 15:0 of each are used. Register layout and dividers are this design's choice.
module spid_joint
  import scorbot_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [5:0][REG_W-1:0]  cfg,
  input  logic                   enc_a,
  input  logic                   enc_b,
  output logic                   pfm_fwd,
  output logic                   pfm_rev,
  output logic [POS_W-1:0]       pos
);

  spike_t ref_spk, enc_spk, pos_spk, err_spk, u_spk;
  logic [15:0] integ;

  spike_gen #(.W(16), .FD_W(16)) u_ref (
    .clk, .rst_n, .value(cfg[R_REF][15:0]), .fd(cfg[R_REF_FD][15:0]), .spk(ref_spk)
  );

  spike_enc_gen u_enc (
    .clk, .rst_n, .enc_a, .enc_b, .spk(enc_spk)
  );

  spike_ig #(.W(POS_W), .OFFSET(POS_OFFSET), .FD_W(16)) u_pos (
    .clk, .rst_n, .spk_in(enc_spk), .fd(cfg[R_IG_FD][15:0]), .count(pos), .spk_out(pos_spk)
  );

  hold_fire #(.HOLD(4), .CW(4)) u_hf (
    .clk, .rst_n, .a(ref_spk), .b(pos_spk), .y(err_spk)
  );

  spike_id #(.IW(16), .FD_W(16)) u_id (
    .clk, .rst_n, .err(err_spk), .ki_fd(cfg[R_KI_FD][15:0]), .kd_fd(cfg[R_KD_FD][15:0]),
    .u(u_spk), .integ(integ)
  );

  spike_exp #(.KW(16)) u_exp (
    .clk, .rst_n, .spk(u_spk), .kp(cfg[R_KP][15:0]), .pfm_fwd, .pfm_rev
  );

endmodule
