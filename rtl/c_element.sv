// c_element - Muller C-gate with N inputs, emulated with one flip-flop.
//
// The output rises when all inputs are 1, falls when all inputs are 0 and
// keeps its value otherwise. The paper builds its operators from C-gates
// (drawn as circles in its figures). Here the gate's state is a flip-flop
// clocked by a free-running emulation clock, i.e. every C-gate is given one
// clock of delay and all other gates zero delay. A delay-insensitive
// circuit must work under any gate delays, so this is a legal timing for
// it, and it keeps the netlist free of combinational loops.
// Interface: clk, synchronous active-low rst_n (output goes to INIT),
// in[N-1:0] -> out. Timing: out follows one clock after the inputs agree.
module c_element #(
  parameter int unsigned N    = 2,
  parameter logic        INIT = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in,
  output logic         out
);
  always_ff @(posedge clk) begin
    if (!rst_n)        out <= INIT;
    else if (&in)      out <= 1'b1;
    else if (~|in)     out <= 1'b0;
  end
endmodule
