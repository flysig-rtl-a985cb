// tb_distributor - randomized test of the result distributor.
//
// Small instance: 5 operator results, 2 input links, 6 cells, 2 output
// links. For 300 random patterns of source codes, one-hot (or empty)
// destination selections and source acknowledges, every destination must
// carry exactly the code of its selected source (null if none), and the
// acknowledges must be returned to the right operator result or link.
module tb_distributor;
  import flysig_pkg::*;
  localparam int NO = 5, NE = 2, NC = 6;
  localparam int NS = NO + NE, ND = NC + NE;
  int checks = 0, failures = 0;

  dr_t  [NO-1:0] op_out;
  logic [NO-1:0] op_out_ack;
  dr_t  [NE-1:0] ext_in, ext_out;
  logic [NE-1:0] ext_in_ack;
  dr_t  [NS-1:0] src;
  logic [NS-1:0] src_ack;
  logic [NS-1:0] dst_sel [ND];
  dr_t  [NC-1:0] cell_wr;
  int            pick [ND];

  distributor #(.N_OUT(NO), .N_EXT(NE), .N_CELL(NC)) dut (
    .op_out, .op_out_ack, .ext_in, .ext_in_ack, .src, .src_ack, .dst_sel, .cell_wr, .ext_out);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < NO; i++) op_out[i] = dr_t'($urandom_range(0, 2));
      for (int i = 0; i < NE; i++) ext_in[i] = dr_t'($urandom_range(0, 2));
      src_ack = NS'($urandom);
      for (int d = 0; d < ND; d++) begin
        pick[d] = $urandom_range(0, NS);          // NS means: no source
        dst_sel[d] = pick[d] < NS ? NS'(1) << pick[d] : '0;
      end
      #1;
      for (int d = 0; d < ND; d++) begin
        automatic dr_t e = DR_NULL;
        automatic dr_t g = d < NC ? cell_wr[d] : ext_out[d - NC];
        if (pick[d] < NO) e = op_out[pick[d]];
        else if (pick[d] < NS) e = ext_in[pick[d] - NO];
        check(g == e, $sformatf("destination %0d", d));
      end
      for (int i = 0; i < NO; i++) check(op_out_ack[i] == src_ack[i], "operator ack");
      for (int i = 0; i < NE; i++) check(ext_in_ack[i] == src_ack[NO + i], "link ack");
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
