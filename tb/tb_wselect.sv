// tb_wselect - self-checking test of the write-select operator.
//
// Random select bits on s and data bits on d; expected: every data bit
// appears, in order, on y1 when its select was 1 and on y0 when it was 0,
// and nowhere else. The y0 sink is stalled for a while, which must also
// stall the operator without losing or duplicating tokens.
module tb_wselect;
  import flysig_pkg::*;
  localparam int N = 60;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  dr_t  s, d, y1, y0;
  logic sd_ack, y1_ack, y0_ack, hold0;
  int   sent_s, sent_d, n1, n0, e1, e0;

  tb_dr_source u_ss (.clk, .rst_n, .out(s), .ack(sd_ack), .sent(sent_s));
  tb_dr_source u_sd (.clk, .rst_n, .out(d), .ack(sd_ack), .sent(sent_d));
  wselect dut (.clk, .rst_n, .s, .d, .sd_ack, .y1, .y1_ack, .y0, .y0_ack);
  tb_dr_sink u_k1 (.clk, .rst_n, .in(y1), .ack(y1_ack), .hold(1'b0), .n_got(n1), .errors(e1));
  tb_dr_sink u_k0 (.clk, .rst_n, .in(y0), .ack(y0_ack), .hold(hold0), .n_got(n0), .errors(e0));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit q1[$], q0[$];
  initial begin
    hold0 = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < N; k++) begin
      automatic bit sel = 1'($urandom);
      automatic bit v   = 1'($urandom);
      u_ss.push(sel);
      u_sd.push(v);
      if (sel) q1.push_back(v); else q0.push_back(v);
    end
    repeat (300) @(posedge clk);
    check(n0 == 0, "stalled output took nothing");
    hold0 = 1'b0;
    wait (n1 + n0 == N);
    repeat (20) @(posedge clk);
    check(e1 == 0 && e0 == 0, "protocol errors");
    check(n1 == q1.size() && n0 == q0.size(), "token count per output");
    while (q1.size() > 0) check(u_k1.pop() == q1.pop_front(), "y1 stream");
    while (q0.size() > 0) check(u_k0.pop() == q0.pop_front(), "y0 stream");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
