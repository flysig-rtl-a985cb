// routing - associatively controlled crossbar from memory cells to operators.
//
// Each operator input port p looks for the scheduled cell whose operation
// id equals p (an associative match, one crosspoint switch per cell and
// port) and receives that cell's token; the port's acknowledge is returned
// to the matching cell. A port with no matching cell sees null. If two
// scheduled cells carry the same id, conflict is raised (a scheduling
// error) and their codes are ORed. The paper proposes "simple associatively
// controlled crossbar switches" for the configurable scheduling; the
// match-on-id form is this design's reading of it. Combinational.
module routing
  import flysig_pkg::*;
#(
  parameter int unsigned N_CELL = N_CELL_DEF,
  parameter int unsigned N_IN   = n_op_in(N_ADD_DEF, N_RSEL_DEF, N_WSEL_DEF)
) (
  input  token_t              tok [N_CELL],
  output logic   [N_CELL-1:0] cell_ack,
  output dr_t    [N_IN-1:0]   op_in,
  input  logic   [N_IN-1:0]   op_ack,
  output logic                conflict
);
  // hot[c][p]: crosspoint switch of cell c onto port p is closed. Each
  // cell decodes its operation id once, and the ports are formed as whole
  // vectors over all ports, cell by cell.
  logic [N_IN-1:0] hot [N_CELL];
  logic [N_IN-1:0] in_t, in_f, seen, dup;

  for (genvar c = 0; c < N_CELL; c++) begin : g_cell
    assign hot[c]      = tok[c].en ? (N_IN'(1) << tok[c].op_id) : '0;
    assign cell_ack[c] = |(hot[c] & op_ack);
  end

  always_comb begin
    in_t = '0;
    in_f = '0;
    seen = '0;
    dup  = '0;
    for (int c = 0; c < N_CELL; c++) begin
      in_t |= hot[c] & {N_IN{tok[c].data.t}};
      in_f |= hot[c] & {N_IN{tok[c].data.f}};
      dup  |= seen & hot[c];
      seen |= hot[c];
    end
  end

  for (genvar p = 0; p < N_IN; p++) begin : g_port
    assign op_in[p] = '{t: in_t[p], f: in_f[p]};
  end
  assign conflict = |dup;
endmodule
