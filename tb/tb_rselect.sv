// tb_rselect - self-checking test of the read-select operator.
//
// Random select bits are sent on s; inputs a (True) and b (False) are
// each given exactly as many data bits as the selects will read from them.
// Expected output: for each select, the next unread bit of the chosen
// input, in order. Checks the value stream, that each input gave up only
// the tokens it was asked for, the four-phase rules, and that a and b are
// never acknowledged together.
module tb_rselect;
  import flysig_pkg::*;
  localparam int NSEL = 60;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  dr_t  s, a, b, y;
  logic s_ack, a_ack, b_ack, y_ack;
  int   sent_s, sent_a, sent_b, n_got, errs, both_ack;

  tb_dr_source u_ss (.clk, .rst_n, .out(s), .ack(s_ack), .sent(sent_s));
  tb_dr_source u_sa (.clk, .rst_n, .out(a), .ack(a_ack), .sent(sent_a));
  tb_dr_source u_sb (.clk, .rst_n, .out(b), .ack(b_ack), .sent(sent_b));
  rselect dut (.clk, .rst_n, .s, .s_ack, .a, .a_ack, .b, .b_ack, .y, .y_ack);
  tb_dr_sink u_snk (.clk, .rst_n, .in(y), .ack(y_ack), .hold(1'b0), .n_got(n_got), .errors(errs));

  always @(posedge clk) if (rst_n && a_ack && b_ack) both_ack++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit exp_q[$];
  int na = 0, nb = 0;
  initial begin
    both_ack = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < NSEL; k++) begin
      automatic bit sel = 1'($urandom);
      automatic bit v   = 1'($urandom);
      u_ss.push(sel);
      if (sel) begin u_sa.push(v); na++; end
      else     begin u_sb.push(v); nb++; end
      exp_q.push_back(v);
    end
    wait (n_got == NSEL);
    repeat (20) @(posedge clk);
    check(errs == 0, "protocol errors on y");
    check(both_ack == 0, "a and b acknowledged together");
    check(sent_a == na && sent_b == nb && sent_s == NSEL, "tokens consumed per input");
    for (int k = 0; k < NSEL; k++) begin
      automatic bit e = exp_q.pop_front();
      automatic bit g = u_snk.pop();
      check(g == e, $sformatf("read %0d", k));
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
