// spike_enc_gen: optical encoder to spikes ("Spike ENC GEN").
//
// The motor's two-channel (quadrature) encoder is sampled through a two-flop
// synchronizer per channel. Every valid change of the {A,B} pair gives one spike:
// positive for the sequence 00 -> 10 -> 11 -> 01 -> 00 (A leads B), negative for the
// reverse. A change of both channels at once is not a valid quadrature step and is
// dropped. The spike rate is therefore four times the encoder line rate, a speed
// signal. Latency from an input edge to the spike is three cycles. The original description names
// the block; quadrature decoding and the direction convention are this design's choice.
module spike_enc_gen
  import scorbot_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   enc_a,
  input  logic   enc_b,
  output spike_t spk
);

  logic [1:0] sync_a, sync_b;
  logic [1:0] cur, prev;

  assign cur = {sync_a[1], sync_b[1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_a <= '0;
      sync_b <= '0;
      prev   <= '0;
      spk    <= SPK_NONE;
    end else begin
      sync_a <= {sync_a[0], enc_a};
      sync_b <= {sync_b[0], enc_b};
      prev   <= cur;
      spk    <= SPK_NONE;
      unique case ({prev, cur})
        4'b00_10, 4'b10_11, 4'b11_01, 4'b01_00: spk.p <= 1'b1;
        4'b00_01, 4'b01_11, 4'b11_10, 4'b10_00: spk.n <= 1'b1;
        default: ;
      endcase
    end
  end

endmodule
