// distributor - carries results to the places where they are needed.
//
// Collects every result source of the processor - the operator results
// (including the I/O and A/D port streams) and the N_EXT input links from
// a neighbouring processor - into one source list src = {op_out, ext_in},
// and drives every destination: the N_CELL local memory cells and the
// N_EXT output links to a neighbouring processor (dst = {cells, ext_out}).
// Destination d receives the source whose guard flag for d is set (the
// guard evaluation's dst_sel, one-hot over the sources). Source
// acknowledges computed by the guard evaluation are returned to the
// operators and input links. The paper shows the distributor collecting
// operator outputs and feeding the guard evaluation and the next
// processor; the one-hot selection is this design's choice. Combinational.
module distributor
  import flysig_pkg::*;
#(
  parameter int unsigned N_OUT  = n_op_out(N_ADD_DEF, N_RSEL_DEF, N_WSEL_DEF),
  parameter int unsigned N_EXT  = N_EXT_DEF,
  parameter int unsigned N_CELL = N_CELL_DEF,
  localparam int unsigned N_SRC = N_OUT + N_EXT,
  localparam int unsigned N_DST = N_CELL + N_EXT
) (
  input  dr_t  [N_OUT-1:0]  op_out,
  output logic [N_OUT-1:0]  op_out_ack,
  input  dr_t  [N_EXT-1:0]  ext_in,
  output logic [N_EXT-1:0]  ext_in_ack,
  output dr_t  [N_SRC-1:0]  src,
  input  logic [N_SRC-1:0]  src_ack,
  input  logic [N_SRC-1:0]  dst_sel [N_DST],
  output dr_t  [N_CELL-1:0] cell_wr,
  output dr_t  [N_EXT-1:0]  ext_out
);
  dr_t [N_DST-1:0] dst;
  assign src        = {ext_in, op_out};
  assign op_out_ack = src_ack[N_OUT-1:0];
  assign ext_in_ack = src_ack[N_SRC-1:N_OUT];
  // rails of all sources as two vectors, so each destination is a pair of
  // masked OR reductions
  logic [N_SRC-1:0] src_t, src_f;
  for (genvar s = 0; s < N_SRC; s++) begin : g_src
    assign src_t[s] = src[s].t;
    assign src_f[s] = src[s].f;
  end
  for (genvar d = 0; d < N_DST; d++) begin : g_dst
    assign dst[d] = '{t: |(dst_sel[d] & src_t), f: |(dst_sel[d] & src_f)};
  end
  assign cell_wr = dst[N_CELL-1:0];
  assign ext_out = dst[N_DST-1:N_CELL];
endmodule
