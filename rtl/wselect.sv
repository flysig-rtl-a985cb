// wselect - write-select control operator (WSELECT).
//
// The opposite of rselect: the single data input d is written to output
// y1 (the True output) when the select channel s carries 1, and to y0
// (the False output) when it carries 0. The other output stays null.
// Each output rail is a C-gate of a select rail and a data rail; the
// input acknowledge (shared by s and d) is the OR of the two output
// acknowledges, since only the written output ever acknowledges.
// The paper gives this operator's function only; the netlist mirrors
// the rselect one.
// Interface: s/sd_ack, d/sd_ack inputs (one acknowledge for both),
// y1/y1_ack, y0/y0_ack outputs. Timing: output one clock after s and d.
module wselect
  import flysig_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  dr_t  s,
  input  dr_t  d,
  output logic sd_ack,
  output dr_t  y1,
  input  logic y1_ack,
  output dr_t  y0,
  input  logic y0_ack
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y1 <= DR_NULL;
      y0 <= DR_NULL;
    end else begin
      y1.t <= c_gate(s.t, d.t, y1.t);
      y1.f <= c_gate(s.t, d.f, y1.f);
      y0.t <= c_gate(s.f, d.t, y0.t);
      y0.f <= c_gate(s.f, d.f, y0.f);
    end
  end
  assign sd_ack = y1_ack | y0_ack;
endmodule
