// tb_token_evaluation - randomized test of the token evaluation.
//
// 200 random patterns of cell codes (null, 0, 1, and occasionally the
// illegal 11) and scheduling configurations; each output is compared with
// the rule worked out in the testbench: valid flag = code is 0 or 1
// (or 11), token data passed only for scheduled cells, illegal raised iff
// some cell holds 11.
module tb_token_evaluation;
  import flysig_pkg::*;
  localparam int NC = 8;
  int checks = 0, failures = 0;

  dr_t  [NC-1:0]      cell_q;
  logic [OP_ID_W-1:0] cfg_op_id [NC];
  logic [NC-1:0]      cfg_en, valid_flags;
  token_t             tok [NC];
  logic               illegal;

  token_evaluation #(.N_CELL(NC)) dut (.cell_q, .cfg_op_id, .cfg_en, .tok, .valid_flags, .illegal);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int n = 0; n < 200; n++) begin
      automatic bit any_bad = 1'b0;
      cfg_en = NC'($urandom);
      for (int c = 0; c < NC; c++) begin
        automatic int r = $urandom_range(0, 20);
        cell_q[c]    = r == 0 ? 2'b11 : (r < 7 ? DR_NULL : (r < 14 ? DR_ZERO : DR_ONE));
        cfg_op_id[c] = OP_ID_W'($urandom);
        if (r == 0) any_bad = 1'b1;
      end
      #1;
      check(illegal == any_bad, "illegal flag");
      for (int c = 0; c < NC; c++) begin
        automatic bit v = (cell_q[c] != DR_NULL);
        check(valid_flags[c] == v, "valid flag");
        check(tok[c].valid == (v && cfg_en[c]), "token valid");
        check(tok[c].en == cfg_en[c] && tok[c].op_id == cfg_op_id[c], "token id");
        check(tok[c].data == (cfg_en[c] ? cell_q[c] : DR_NULL), "token data");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
