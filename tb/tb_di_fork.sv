// tb_di_fork - self-checking test of the fork operator.
//
// One random-timing source feeds a 3-way fork whose outputs go to three
// sinks with independent random timing; one sink is stalled for a while.
// Every sink must receive the whole stream in order, and the source must
// not run ahead of the slowest sink by more than one token.
module tb_di_fork;
  import flysig_pkg::*;
  localparam int N = 50;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  dr_t        d;
  logic       d_ack, hold2;
  dr_t  [2:0] o;
  logic [2:0] o_ack;
  int   sent, ng [3], er [3], ahead;

  tb_dr_source u_src (.clk, .rst_n, .out(d), .ack(d_ack), .sent(sent));
  di_fork #(.N(3)) dut (.clk, .rst_n, .in(d), .in_ack(d_ack), .out(o), .out_ack(o_ack));
  tb_dr_sink u_k0 (.clk, .rst_n, .in(o[0]), .ack(o_ack[0]), .hold(1'b0), .n_got(ng[0]), .errors(er[0]));
  tb_dr_sink u_k1 (.clk, .rst_n, .in(o[1]), .ack(o_ack[1]), .hold(1'b0), .n_got(ng[1]), .errors(er[1]));
  tb_dr_sink u_k2 (.clk, .rst_n, .in(o[2]), .ack(o_ack[2]), .hold(hold2), .n_got(ng[2]), .errors(er[2]));

  always @(posedge clk) if (rst_n && sent > ng[2]) ahead++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit q[$];
  initial begin
    ahead = 0;
    hold2 = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < N; k++) begin
      automatic bit v = 1'($urandom);
      u_src.push(v);
      q.push_back(v);
    end
    repeat (200) @(posedge clk);
    check(sent == 0 && ng[0] == 1 && ng[1] == 1, "fork waits for the stalled consumer");
    hold2 = 1'b0;
    wait (ng[0] == N && ng[1] == N && ng[2] == N);
    repeat (20) @(posedge clk);
    check(ahead == 0, "source ran ahead of a consumer");
    for (int i = 0; i < 3; i++) check(er[i] == 0, "protocol errors");
    for (int k = 0; k < N; k++) begin
      automatic bit e = q.pop_front();
      check(u_k0.pop() == e && u_k1.pop() == e && u_k2.pop() == e, $sformatf("bit %0d", k));
    end
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
