// io_port - host I/O port of the processor.
//
// Connects the host bus to the dataflow fabric. Host side: a word written
// with tx_load is sent into the fabric as a W-bit LSB-first bit-serial
// stream on the result source src (tx_ready says the port is free); W bits
// arriving on the sink channel snk are collected into rx_word, signalled by
// rx_valid and released by rx_take. The paper draws an I/O port between
// the routing and the distributor with a link to the PCI bus; the word
// format and handshakes are this design's own.
module io_port
  import flysig_pkg::*;
#(
  parameter int unsigned W = WORD_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] tx_word,
  input  logic         tx_load,
  output logic         tx_ready,
  output logic [W-1:0] rx_word,
  output logic         rx_valid,
  input  logic         rx_take,
  output dr_t          src,
  input  logic         src_ack,
  input  dr_t          snk,
  output logic         snk_ack
);
  dr_serializer #(.W(W)) u_tx (
    .clk, .rst_n, .word(tx_word), .load(tx_load), .ready(tx_ready),
    .out(src), .out_ack(src_ack));
  dr_deserializer #(.W(W)) u_rx (
    .clk, .rst_n, .in(snk), .in_ack(snk_ack), .word(rx_word),
    .word_valid(rx_valid), .take(rx_take));
endmodule
