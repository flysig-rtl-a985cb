// tb_di_shiftreg - self-checking test of the register queue.
//
// A 6-element queue with two initialized elements (a 1 at the output end
// and a 0 two places before it) sits between a random-timing source and
// sink. Checks: the initial bits leave first and in order, the streamed
// bits follow unchanged, the four-phase rules hold, and with the sink
// stalled the queue holds at most DEPTH/2 tokens... plus the ones it was
// initialised with (a half-buffer queue keeps an empty element per token).
module tb_di_shiftreg;
  import flysig_pkg::*;
  localparam int DEPTH = 6;
  localparam int NBITS = 50;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  dr_t  d_in, d_out;
  logic a_in, a_out, hold;
  int   sent, n_got, errs;

  tb_dr_source u_src (.clk, .rst_n, .out(d_in), .ack(a_in), .sent(sent));
  di_shiftreg #(.DEPTH(DEPTH), .INIT_VALID(6'b101000), .INIT_VALUE(6'b100000)) dut (
    .clk, .rst_n, .in(d_in), .in_ack(a_in), .out(d_out), .out_ack(a_out));
  tb_dr_sink u_snk (.clk, .rst_n, .in(d_out), .ack(a_out), .hold(hold), .n_got(n_got), .errors(errs));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit exp_q[$];
  initial begin
    hold = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    exp_q.push_back(1'b1);
    exp_q.push_back(1'b0);
    for (int k = 0; k < NBITS; k++) begin
      automatic bit b = 1'($urandom);
      u_src.push(b);
      exp_q.push_back(b);
    end
    // stalled sink: the queue fills up to one token per two elements
    repeat (200) @(posedge clk);
    check(sent == DEPTH / 2 - 2,
          $sformatf("tokens accepted while stalled = %0d", sent));
    hold = 1'b0;
    wait (n_got == NBITS + 2);
    repeat (10) @(posedge clk);
    check(errs == 0, "protocol errors");
    while (exp_q.size() > 0) begin
      automatic bit e = exp_q.pop_front();
      automatic bit g = u_snk.pop();
      check(g == e, "bit order through the queue");
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
