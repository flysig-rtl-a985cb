// adda_port - D/A - A/D converter port.
//
// Links the fabric to external sample converters. A/D side: a sample on
// ad_data is accepted with ad_valid & ad_ready and sent into the fabric as
// a W-bit LSB-first bit-serial stream on src. D/A side: W bits arriving on
// snk are collected into da_data and offered with da_valid until the
// converter takes them with da_ready; while it does not, the port stops
// acknowledging, which stalls the fabric. The converters themselves are
// analog and outside this design; the valid/ready sample interface is
// this design's own choice.
module adda_port
  import flysig_pkg::*;
#(
  parameter int unsigned W = WORD_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] ad_data,
  input  logic         ad_valid,
  output logic         ad_ready,
  output logic [W-1:0] da_data,
  output logic         da_valid,
  input  logic         da_ready,
  output dr_t          src,
  input  logic         src_ack,
  input  dr_t          snk,
  output logic         snk_ack
);
  dr_serializer #(.W(W)) u_ad (
    .clk, .rst_n, .word(ad_data), .load(ad_valid), .ready(ad_ready),
    .out(src), .out_ack(src_ack));
  dr_deserializer #(.W(W)) u_da (
    .clk, .rst_n, .in(snk), .in_ack(snk_ack), .word(da_data),
    .word_valid(da_valid), .take(da_ready));
endmodule
