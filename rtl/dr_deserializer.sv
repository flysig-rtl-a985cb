// dr_deserializer - LSB-first dual-rail bit stream to parallel word.
//
// Helper of the I/O port and the D/A port. Each valid token on in is
// shifted into the word (first bit ends up as bit 0) and acknowledged; the
// acknowledge is withdrawn when the producer returns to null. After W bits
// word_valid rises and further tokens wait unacknowledged (backpressure)
// until take is pulsed. The word interface is this design's own.
module dr_deserializer
  import flysig_pkg::*;
#(
  parameter int unsigned W = WORD_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  dr_t          in,
  output logic         in_ack,
  output logic [W-1:0] word,
  output logic         word_valid,
  input  logic         take
);
  logic [$clog2(W+1)-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      word   <= '0;
      cnt    <= '0;
      in_ack <= 1'b0;
    end else begin
      if (word_valid && take) cnt <= '0;
      if (dr_valid(in) && !in_ack && !word_valid) begin
        word   <= {in.t, word[W-1:1]};
        cnt    <= cnt + 1'b1;
        in_ack <= 1'b1;
      end else if (!dr_valid(in) && in_ack) begin
        in_ack <= 1'b0;
      end
    end
  end
  assign word_valid = (cnt == ($clog2(W+1))'(W));
endmodule
