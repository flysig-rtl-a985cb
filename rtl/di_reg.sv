// di_reg - basic register element of the FLYSIG operator library.
//
// A dual-rail four-phase half-buffer: each output rail is a C-gate of the
// matching input rail and the inverted downstream acknowledge, and the
// upstream acknowledge is the completion (t|f) of the stored code. The
// element therefore holds either one data bit or the empty spacer.
// The paper names three register types derived from one minimal register:
// uninitialized, 0-initialized and 1-initialized. Here they are one module
// whose reset content is the input init_val (callers pass dr_of_init() of
// INIT_EMPTY, INIT_ZERO or INIT_ONE). They are drawn as 'e' and '0' boxes in
// the paper's figures; the half-buffer circuit is this design's choice.
// The C-gates are flip-flops of the emulation clock (see c_element).
// Interface: in/in_ack (consumer side of the upstream channel),
// out/out_ack (producer side of the downstream channel), clk, synchronous
// active-low rst_n. Timing: one clock per C-gate transition, so a token
// enters an empty element one clock after it appears at its input.
module di_reg
  import flysig_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  dr_t  init_val,
  input  dr_t  in,
  output logic in_ack,
  output dr_t  out,
  input  logic out_ack
);
  always_ff @(posedge clk) begin
    if (!rst_n) out <= init_val;
    else begin
      out.t <= c_gate(in.t, ~out_ack, out.t);
      out.f <= c_gate(in.f, ~out_ack, out.f);
    end
  end
  assign in_ack = dr_valid(out);

  // Protocol rule: a register never holds the illegal code 11.
  a_legal: assert property (@(posedge clk) disable iff (!rst_n) !dr_illegal(out));
endmodule
