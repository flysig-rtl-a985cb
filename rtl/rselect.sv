// rselect - read-select control operator (RSELECT).
//
// The select channel s (the diamond input of the paper's block symbol)
// decides which data input is read: s = 1 reads input a (True), s = 0
// reads input b (False). The value read is passed to y; the input not
// selected is left untouched and keeps its token for a later read.
// Data path as in the paper's RT netlist: four C-gates pair a rail of s
// with a rail of a or b, two ORs merge them into the rails of y.
// Acknowledge: ack_a = C(y_ack, s.t), ack_b = C(y_ack, s.f), s_ack is their
// OR. Each rises after the consumer took y and falls after it released it;
// because y returns to null only when both s and the selected input are
// null, the acknowledges fall only after the full return to zero. The
// acknowledge circuit is this design's reading of the figure.
// Interface: s/s_ack, a/a_ack, b/b_ack inputs, y/y_ack output.
// Timing: y one clock after s and the selected input are valid.
module rselect
  import flysig_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  dr_t  s,
  output logic s_ack,
  input  dr_t  a,
  output logic a_ack,
  input  dr_t  b,
  output logic b_ack,
  output dr_t  y,
  input  logic y_ack
);
  logic c_at, c_af, c_bt, c_bf;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {c_at, c_af, c_bt, c_bf} <= '0;
      {a_ack, b_ack} <= '0;
    end else begin
      c_at  <= c_gate(s.t, a.t, c_at);
      c_af  <= c_gate(s.t, a.f, c_af);
      c_bt  <= c_gate(s.f, b.t, c_bt);
      c_bf  <= c_gate(s.f, b.f, c_bf);
      a_ack <= c_gate(y_ack, s.t, a_ack);
      b_ack <= c_gate(y_ack, s.f, b_ack);
    end
  end
  assign y     = '{t: c_at | c_bt, f: c_af | c_bf};
  assign s_ack = a_ack | b_ack;

  a_one_side: assert property (@(posedge clk) disable iff (!rst_n) !(a_ack && b_ack));
endmodule
