// tb_di_reg - self-checking test of the basic register element.
//
// Three elements (uninitialized, 0-initialized, 1-initialized) each sit
// between a random-timing source and sink. Checks: the reset content of
// each, that an initialized element delivers its initial bit before the
// streamed bits, that every bit arrives in order, and the four-phase rules.
module tb_di_reg;
  import flysig_pkg::*;
  localparam int NBITS = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  dr_t  d_in [3], d_out [3];
  logic a_in [3], a_out [3];
  int   sent [3], n_got [3], errs [3];
  bit   exp_q [3][$];
  localparam dr_init_e INITS [3] = '{INIT_EMPTY, INIT_ZERO, INIT_ONE};

  for (genvar i = 0; i < 3; i++) begin : g
    tb_dr_source u_src (.clk, .rst_n, .out(d_in[i]), .ack(a_in[i]), .sent(sent[i]));
    di_reg dut (.clk, .rst_n, .init_val(dr_of_init(INITS[i])),
                .in(d_in[i]), .in_ack(a_in[i]), .out(d_out[i]), .out_ack(a_out[i]));
    tb_dr_sink u_snk (.clk, .rst_n, .in(d_out[i]), .ack(a_out[i]), .hold(1'b0),
                      .n_got(n_got[i]), .errors(errs[i]));
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    #1;
    check(d_out[0] == DR_NULL, "uninitialized element starts empty");
    check(d_out[1] == DR_ZERO, "0-initialized element starts with 0");
    check(d_out[2] == DR_ONE,  "1-initialized element starts with 1");
    exp_q[1].push_back(1'b0);
    exp_q[2].push_back(1'b1);
    for (int k = 0; k < NBITS; k++) begin
      bit b = 1'($urandom);
      g[0].u_src.push(b); g[1].u_src.push(b); g[2].u_src.push(b);
      for (int i = 0; i < 3; i++) exp_q[i].push_back(b);
    end
    wait (n_got[0] == NBITS && n_got[1] == NBITS + 1 && n_got[2] == NBITS + 1);
    repeat (10) @(posedge clk);
    for (int i = 0; i < 3; i++) begin
      check(errs[i] == 0, $sformatf("protocol errors element %0d", i));
      while (exp_q[i].size() > 0) begin
        automatic bit e = exp_q[i].pop_front();
        automatic bit g_ = 1'b0;
        case (i)
          0: g_ = g[0].u_snk.pop();
          1: g_ = g[1].u_snk.pop();
          default: g_ = g[2].u_snk.pop();
        endcase
        check(g_ == e, $sformatf("element %0d bit order", i));
      end
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
