// dr_serializer - parallel word to LSB-first dual-rail bit stream.
//
// Helper of the I/O port and the A/D port. load (with ready high) takes a
// W-bit word; its bits are then offered one token at a time on out, least
// significant bit first, each followed by the null spacer once the
// consumer acknowledges it. ready rises again after the last bit has been
// acknowledged. The bit order follows the paper's bit-serial operators;
// the word interface is this design's own.
// Timing: one bit per four-phase cycle, gated by the consumer.
module dr_serializer
  import flysig_pkg::*;
#(
  parameter int unsigned W = WORD_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] word,
  input  logic         load,
  output logic         ready,
  output dr_t          out,
  input  logic         out_ack
);
  logic [W-1:0]         sh;
  logic [$clog2(W+1)-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sh  <= '0;
      cnt <= '0;
      out <= DR_NULL;
    end else if (cnt == 0) begin
      if (load) begin
        sh  <= word;
        cnt <= ($clog2(W+1))'(W);
      end
    end else if (!dr_valid(out) && !out_ack) begin
      out <= dr_enc(sh[0]);
    end else if (dr_valid(out) && out_ack) begin
      out <= DR_NULL;
      sh  <= sh >> 1;
      cnt <= cnt - 1'b1;
    end
  end
  assign ready = rst_n && (cnt == 0);   // no word is taken while held in reset
endmodule
