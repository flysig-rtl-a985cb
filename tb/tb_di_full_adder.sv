// tb_di_full_adder - self-checking test of the bit-serial full adder.
//
// Streams the 64-bit operands of several random additions LSB first into
// a and b (with random pauses on both sides) and compares the sum stream
// with (a + b) mod 2^64 worked out in the testbench. The operands are sent
// back to back as one long number each, so the carry ring must carry
// between them exactly as integer addition of the concatenated numbers
// does. The first operands (all ones plus one) exercise a 64-bit carry
// chain.
module tb_di_full_adder;
  import flysig_pkg::*;
  localparam int NW = 4;           // 64-bit words
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  dr_t  a, b, s;
  logic a_ack, b_ack, s_ack;
  int   sent_a, sent_b, n_got, errs;

  tb_dr_source u_sa (.clk, .rst_n, .out(a), .ack(a_ack), .sent(sent_a));
  tb_dr_source u_sb (.clk, .rst_n, .out(b), .ack(b_ack), .sent(sent_b));
  di_full_adder dut (.clk, .rst_n, .a, .a_ack, .b, .b_ack, .sum(s), .sum_ack(s_ack));
  tb_dr_sink u_snk (.clk, .rst_n, .in(s), .ack(s_ack), .hold(1'b0), .n_got(n_got), .errors(errs));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [64*NW-1:0] va, vb, vs, got;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < NW; w++) begin
      va[64*w +: 64] = {$urandom, $urandom};
      vb[64*w +: 64] = {$urandom, $urandom};
    end
    va[63:0] = '1;                  // long carry chain
    vb[63:0] = 64'd1;
    vs = va + vb;
    for (int i = 0; i < 64*NW; i++) begin
      u_sa.push(va[i]);
      u_sb.push(vb[i]);
    end
    wait (n_got == 64*NW);
    repeat (10) @(posedge clk);
    check(errs == 0, "protocol errors on sum");
    for (int i = 0; i < 64*NW; i++) got[i] = u_snk.pop();
    for (int w = 0; w < NW; w++)
      check(got[64*w +: 64] == vs[64*w +: 64],
            $sformatf("word %0d: got %h expected %h", w, got[64*w +: 64], vs[64*w +: 64]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
