// tb_local_memory - self-checking test of the token store.
//
// Four cells, configured with initial tokens empty, 0, 1 and 1. Each cell
// has its own random-timing source on wr and sink on rd. Checks: the
// initial token of each cell leaves first, then the written bits in order;
// a cell configured empty delivers only what is written; reset with a new
// configuration reloads the initial tokens.
module tb_local_memory;
  import flysig_pkg::*;
  localparam int NC = 4;
  localparam int N  = 30;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  dr_init_e        cfg_init [NC];
  dr_t  [NC-1:0]   wr, rd;
  logic [NC-1:0]   wr_ack, rd_ack;
  int sent [NC], ng [NC], er [NC];

  local_memory #(.N_CELL(NC)) dut (.clk, .rst_n, .cfg_init, .wr, .wr_ack, .rd, .rd_ack);
  for (genvar c = 0; c < NC; c++) begin : g
    tb_dr_source u_s (.clk, .rst_n, .out(wr[c]), .ack(wr_ack[c]), .sent(sent[c]));
    tb_dr_sink   u_k (.clk, .rst_n, .in(rd[c]), .ack(rd_ack[c]), .hold(1'b0), .n_got(ng[c]), .errors(er[c]));
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit pop_cell(int c);
    case (c)
      0: return g[0].u_k.pop();
      1: return g[1].u_k.pop();
      2: return g[2].u_k.pop();
      default: return g[3].u_k.pop();
    endcase
  endfunction

  bit q [NC][$];
  int nexp [NC];
  initial begin
    cfg_init = '{INIT_EMPTY, INIT_ZERO, INIT_ONE, INIT_ONE};
    repeat (3) @(posedge clk);
    #1;
    check(rd[0] == DR_NULL && rd[1] == DR_ZERO && rd[2] == DR_ONE && rd[3] == DR_ONE,
          "initial tokens during reset");
    rst_n = 1'b1;
    q[1].push_back(1'b0); q[2].push_back(1'b1); q[3].push_back(1'b1);
    for (int k = 0; k < N; k++) begin
      automatic logic [NC-1:0] v = NC'($urandom);
      g[0].u_s.push(v[0]); g[1].u_s.push(v[1]); g[2].u_s.push(v[2]); g[3].u_s.push(v[3]);
      for (int c = 0; c < NC; c++) q[c].push_back(v[c]);
    end
    for (int c = 0; c < NC; c++) nexp[c] = q[c].size();
    wait (ng[0] == nexp[0] && ng[1] == nexp[1] && ng[2] == nexp[2] && ng[3] == nexp[3]);
    repeat (20) @(posedge clk);
    for (int c = 0; c < NC; c++) begin
      check(er[c] == 0, "protocol errors");
      check(ng[c] == nexp[c], "token count");
      while (q[c].size() > 0) check(pop_cell(c) == q[c].pop_front(), $sformatf("cell %0d order", c));
    end
    // reload with another configuration
    cfg_init = '{INIT_ONE, INIT_EMPTY, INIT_ZERO, INIT_EMPTY};
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1;
    check(rd[0] == DR_ONE && rd[1] == DR_NULL && rd[2] == DR_ZERO && rd[3] == DR_NULL,
          "initial tokens after reconfiguration");
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
