// di_join - join control operator: merges N channels into one bundle.
//
// The bundle out[N] is shown to the consumer only once every input holds
// a token: a C-gate over the completion of all inputs opens the gate when
// all are valid and closes it when all have returned to null. The single
// bundle acknowledge is sent back to every input. Named (after
// Staunstrup's multi-ring operators) in the paper; the circuit is this
// design's choice.
// Interface: in[N]/in_ack[N], out[N]/out_ack. Timing: bundle valid one
// clock after the last input became valid.
module di_join
  import flysig_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  dr_t  [N-1:0] in,
  output logic [N-1:0] in_ack,
  output dr_t  [N-1:0] out,
  input  logic         out_ack
);
  logic [N-1:0] v;
  logic         all_q;
  always_comb for (int i = 0; i < N; i++) v[i] = dr_valid(in[i]);
  c_element #(.N(N)) u_c (.clk, .rst_n, .in(v), .out(all_q));
  always_comb for (int i = 0; i < N; i++) out[i] = all_q ? in[i] : DR_NULL;
  assign in_ack = {N{out_ack}};
endmodule
