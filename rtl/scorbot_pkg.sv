// scorbot_pkg: constants and types shared by the spike-based joint controllers.
//
// A spike stream is signed: every event is either positive or negative. On wires a
// stream is a spike_t, two one-cycle strobes p and n; p and n are never both high on
// the output of any block here. The sizes follow the controller described for the
// ED-Scorbot arm: six joints, a 16-bit absolute position counter per joint whose zero
// sits at the offset 32768, and a register file of 36 registers of 32 bits. The
// register map (six registers per joint) is this design's own choice.
package scorbot_pkg;

  localparam int unsigned N_JOINTS      = 6;
  localparam int unsigned N_REGS        = 36;
  localparam int unsigned REG_W         = 32;
  localparam int unsigned POS_W         = 16;
  localparam int unsigned POS_OFFSET    = 32768;
  localparam int unsigned REGS_PER_JOINT = N_REGS / N_JOINTS;

  // Signed spike: one-cycle strobes.
  typedef struct packed {
    logic p;
    logic n;
  } spike_t;

  localparam spike_t SPK_NONE = '{p: 1'b0, n: 1'b0};

  // Register offsets inside a joint's group of six.
  typedef enum logic [2:0] {
    R_REF    = 3'd0,  // [15:0] signed reference (spiking-input units), [31:16] read: position
    R_REF_FD = 3'd1,  // [15:0] divider of the reference spike generator
    R_IG_FD  = 3'd2,  // [15:0] divider of the position-feedback spike generator
    R_KI_FD  = 3'd3,  // [15:0] divider of the integral generator, 0 = off
    R_KD_FD  = 3'd4,  // [15:0] divider of the derivative feedback generator, 0 = off
    R_KP     = 3'd5   // [15:0] expander pulse length in cycles (proportional gain)
  } reg_off_e;

  // Swap the sign of a spike.
  function automatic spike_t spk_neg(spike_t s);
    return '{p: s.n, n: s.p};
  endfunction

endpackage
