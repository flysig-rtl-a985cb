// guard_evaluation - guard flags decide where each result is needed.
//
// cfg_guard[s] is the guard-flag segment of result source s: bit d set
// means destination d (a local memory cell, or an output link to a
// neighbouring processor) needs the result. The block turns the flags
// into the per-destination source selection used by the distributor, and
// computes each source's acknowledge as a C-gate over the acknowledges of
// all its flagged destinations: the source is released when every
// destination has taken the token and re-armed when every one has
// returned to zero (a fork). A source with no flag set is not needed
// anywhere; its tokens are acknowledged and dropped. The paper gives the
// guard-flag idea; the circuit is this design's.
// Timing: the acknowledge follows the last destination by one clock.
module guard_evaluation
  import flysig_pkg::*;
#(
  parameter int unsigned N_SRC = n_op_out(N_ADD_DEF, N_RSEL_DEF, N_WSEL_DEF) + N_EXT_DEF,
  parameter int unsigned N_DST = N_CELL_DEF + N_EXT_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_DST-1:0]  cfg_guard [N_SRC],
  input  dr_t  [N_SRC-1:0]  src,
  output logic [N_SRC-1:0]  src_ack,
  input  logic [N_DST-1:0]  dst_ack,
  output logic [N_SRC-1:0]  dst_sel [N_DST]
);
  always_comb
    for (int d = 0; d < N_DST; d++)
      for (int s = 0; s < N_SRC; s++)
        dst_sel[d][s] = cfg_guard[s][d];

  always_ff @(posedge clk) begin
    for (int s = 0; s < N_SRC; s++) begin
      if (!rst_n)                                   src_ack[s] <= 1'b0;
      else if (cfg_guard[s] == '0)                  src_ack[s] <= dr_valid(src[s]);
      else if ((dst_ack & cfg_guard[s]) == cfg_guard[s]) src_ack[s] <= 1'b1;
      else if ((dst_ack & cfg_guard[s]) == '0)      src_ack[s] <= 1'b0;
    end
  end
endmodule
