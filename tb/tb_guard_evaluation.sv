// tb_guard_evaluation - randomized test of the guard evaluation.
//
// 4 sources, 5 destinations. Guard flags are random (including empty
// ones); destination acknowledges and source codes change at random every
// clock. A reference model written in the testbench tracks, per source,
// the C-gate over the flagged destination acknowledges (or, for an empty
// guard, the echo of the source's completion) and must match src_ack in
// every clock; dst_sel must be the transpose of the guard flags.
module tb_guard_evaluation;
  import flysig_pkg::*;
  localparam int NS = 4, ND = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [ND-1:0] cfg_guard [NS];
  dr_t  [NS-1:0] src;
  logic [NS-1:0] src_ack, model;
  logic [ND-1:0] dst_ack;
  logic [NS-1:0] dst_sel [ND];

  guard_evaluation #(.N_SRC(NS), .N_DST(ND)) dut (
    .clk, .rst_n, .cfg_guard, .src, .src_ack, .dst_ack, .dst_sel);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int rises = 0;
  initial begin
    model = '0;
    for (int s = 0; s < NS; s++) cfg_guard[s] = ND'($urandom);
    cfg_guard[0] = '0;
    src = '0; dst_ack = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (n % 200 == 0) for (int s = 1; s < NS; s++) cfg_guard[s] = ND'($urandom);
      // biased acks so that all-ones and all-zeros happen often
      dst_ack = ($urandom_range(0, 2) == 0) ? ND'($urandom) : ($urandom_range(0, 1) ? '1 : '0);
      for (int s = 0; s < NS; s++) src[s] = dr_t'($urandom_range(0, 2));
      #1;
      for (int d = 0; d < ND; d++)
        for (int s = 0; s < NS; s++) check(dst_sel[d][s] == cfg_guard[s][d], "dst_sel");
      @(posedge clk);
      for (int s = 0; s < NS; s++) begin
        automatic logic nxt = model[s];
        if (cfg_guard[s] == '0) nxt = dr_valid(src[s]);
        else if ((dst_ack & cfg_guard[s]) == cfg_guard[s]) nxt = 1'b1;
        else if ((dst_ack & cfg_guard[s]) == '0) nxt = 1'b0;
        if (nxt && !model[s]) rises++;
        model[s] = nxt;
      end
      #1;
      check(src_ack == model, $sformatf("src_ack %b expected %b", src_ack, model));
    end
    check(rises > 100, "acknowledges toggled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
