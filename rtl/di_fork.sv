// di_fork - fork control operator: copies one channel to N channels.
//
// Every output carries the input code; the input is acknowledged by an
// N-input C-gate over the output acknowledges, so the input is released
// only when all consumers have taken the token, and re-armed only when all
// of them have returned to zero. Named (after Staunstrup's multi-ring
// operators) in the paper; the circuit is the standard one.
// Interface: in/in_ack, out[N]/out_ack[N]. Timing: acknowledge one clock
// after the last consumer's acknowledge.
module di_fork
  import flysig_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  dr_t          in,
  output logic         in_ack,
  output dr_t  [N-1:0] out,
  input  logic [N-1:0] out_ack
);
  always_comb for (int i = 0; i < N; i++) out[i] = in;
  c_element #(.N(N)) u_c (.clk, .rst_n, .in(out_ack), .out(in_ack));
endmodule
