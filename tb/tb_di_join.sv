// tb_di_join - self-checking test of the join operator.
//
// Three random-timing sources feed a 3-way join. The testbench consumer
// takes a bundle only when all three codes are valid, and checks that the
// join never shows a partly valid bundle while it waits for inputs. The
// k-th bundle must hold the k-th bit of every source.
module tb_di_join;
  import flysig_pkg::*;
  localparam int N = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  dr_t  [2:0] d, o;
  logic [2:0] d_ack;
  logic       o_ack;
  int   sent [3], partial, n_got;
  logic [2:0] got [$];

  tb_dr_source u_s0 (.clk, .rst_n, .out(d[0]), .ack(d_ack[0]), .sent(sent[0]));
  tb_dr_source u_s1 (.clk, .rst_n, .out(d[1]), .ack(d_ack[1]), .sent(sent[1]));
  tb_dr_source u_s2 (.clk, .rst_n, .out(d[2]), .ack(d_ack[2]), .sent(sent[2]));
  di_join #(.N(3)) dut (.clk, .rst_n, .in(d), .in_ack(d_ack), .out(o), .out_ack(o_ack));

  // bundle consumer
  always @(posedge clk) begin
    if (!rst_n) begin
      o_ack <= 1'b0; partial <= 0; n_got <= 0;
    end else begin
      automatic int nv = dr_valid(o[0]) + dr_valid(o[1]) + dr_valid(o[2]);
      if (!o_ack && nv != 0 && nv != 3) partial <= partial + 1;
      if (!o_ack && nv == 3) begin
        got.push_back({o[2].t, o[1].t, o[0].t});
        n_got <= n_got + 1;
        o_ack <= 1'b1;
      end else if (o_ack && nv == 0) o_ack <= 1'b0;
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [2:0] q[$];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < N; k++) begin
      automatic logic [2:0] v = 3'($urandom);
      u_s0.push(v[0]); u_s1.push(v[1]); u_s2.push(v[2]);
      q.push_back(v);
    end
    wait (n_got == N);
    repeat (20) @(posedge clk);
    check(partial == 0, "partly valid bundle shown");
    for (int k = 0; k < N; k++) check(got.pop_front() == q.pop_front(), $sformatf("bundle %0d", k));
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
