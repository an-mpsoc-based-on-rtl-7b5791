// spike_ig: integrate and generate ("Spike I&G"; speed to position).
//
// An up/down counter of W bits integrates a signed spike stream: +1 per positive
// spike, -1 per negative one, saturating at 0 and 2^W-1. It starts at OFFSET, the
// zero of the signed quantity (count - OFFSET). A spike_gen turns (count - OFFSET)
// back into spikes, divided by fd, so the output rate is proportional to the
// integral of the input. In the joint controller the input is the encoder's speed
// spikes and the counter is the joint's 16-bit absolute position; the same block
// serves as the integrator of the ID controller. The counter updates one cycle after
// an input spike; the generator adds one more cycle. Counter width and offset follow
// the original platform; saturation and the generator are this design's choice.
module spike_ig
  import scorbot_pkg::*;
#(
  parameter int unsigned W      = 16,
  parameter int unsigned OFFSET = 32768,
  parameter int unsigned FD_W   = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  spike_t          spk_in,
  input  logic [FD_W-1:0] fd,
  output logic [W-1:0]    count,
  output spike_t          spk_out
);

  localparam logic [W-1:0] CMAX = '1;
  localparam logic [W-1:0] OFS  = W'(OFFSET);

  logic signed [W-1:0] centred;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= OFS;
    end else if (spk_in.p && !spk_in.n && count != CMAX) begin
      count <= count + 1'b1;
    end else if (spk_in.n && !spk_in.p && count != '0) begin
      count <= count - 1'b1;
    end
  end

  assign centred = signed'(count - OFS);

  spike_gen #(.W(W), .FD_W(FD_W)) u_gen (
    .clk   (clk),
    .rst_n (rst_n),
    .value (centred),
    .fd    (fd),
    .spk   (spk_out)
  );

endmodule
