// token_evaluation - decides which memory cells hold a valid token.
//
// For every cell it detects completion of the dual-rail code (valid flag
// = t | f), flags the illegal code 11, and forms the token handed to the
// routing: the cell's operation id and routing enable from the
// scheduling configuration, the valid flag, and the data. A cell that is
// not scheduled (cfg_en low) passes only null, so its token is never
// routed. valid_flags and illegal feed the status registers.
// Purely combinational. The paper gives the block's function ("determines
// if a memory cell contains a valid token"); the circuit is this design's.
module token_evaluation
  import flysig_pkg::*;
#(
  parameter int unsigned N_CELL = N_CELL_DEF
) (
  input  dr_t    [N_CELL-1:0] cell_q,
  input  logic [OP_ID_W-1:0]  cfg_op_id [N_CELL],
  input  logic   [N_CELL-1:0] cfg_en,
  output token_t              tok [N_CELL],
  output logic   [N_CELL-1:0] valid_flags,
  output logic                illegal
);
  always_comb begin
    illegal = 1'b0;
    for (int c = 0; c < N_CELL; c++) begin
      valid_flags[c]  = dr_valid(cell_q[c]);
      illegal        |= dr_illegal(cell_q[c]);
      tok[c].op_id    = cfg_op_id[c];
      tok[c].en       = cfg_en[c];
      tok[c].valid    = cfg_en[c] & valid_flags[c];
      tok[c].data     = cfg_en[c] ? cell_q[c] : DR_NULL;
    end
  end
endmodule
