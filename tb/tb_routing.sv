// tb_routing - randomized test of the associative crossbar.
//
// For 300 random schedules (cells enabled at random, random operation ids
// among the ports and beyond them, random cell codes and port
// acknowledges) the testbench computes, with its own loop over ports,
// which cell each port must receive, the ack each cell must get and
// whether two enabled cells claim one port; the block must agree.
module tb_routing;
  import flysig_pkg::*;
  localparam int NC = 8;
  localparam int NI = 6;
  int checks = 0, failures = 0;

  token_t          tok [NC];
  logic [NC-1:0]   cell_ack;
  dr_t  [NI-1:0]   op_in;
  logic [NI-1:0]   op_ack;
  logic            conflict;

  routing #(.N_CELL(NC), .N_IN(NI)) dut (.tok, .cell_ack, .op_in, .op_ack, .conflict);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int nconf = 0;
  initial begin
    for (int n = 0; n < 300; n++) begin
      automatic bit exp_conf = 1'b0;
      op_ack = NI'($urandom);
      for (int c = 0; c < NC; c++) begin
        tok[c].en    = ($urandom_range(0, 2) != 0);
        tok[c].op_id = OP_ID_W'($urandom_range(0, NI + 1));
        tok[c].data  = dr_t'($urandom_range(0, 2));
        tok[c].valid = dr_valid(tok[c].data);
      end
      #1;
      for (int p = 0; p < NI; p++) begin
        automatic int cnt = 0;
        automatic dr_t e = DR_NULL;
        for (int c = 0; c < NC; c++)
          if (tok[c].en && tok[c].op_id == OP_ID_W'(p)) begin cnt++; e = e | tok[c].data; end
        if (cnt > 1) exp_conf = 1'b1;
        check(op_in[p] == e, $sformatf("port %0d data", p));
      end
      for (int c = 0; c < NC; c++) begin
        automatic bit ea = tok[c].en && tok[c].op_id < OP_ID_W'(NI) && op_ack[tok[c].op_id];
        check(cell_ack[c] == ea, $sformatf("cell %0d ack", c));
      end
      check(conflict == exp_conf, "conflict flag");
      if (exp_conf) nconf++;
    end
    check(nconf > 0 && nconf < 300, "both conflict cases exercised");
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
