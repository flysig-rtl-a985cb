// tb_flysig_processor - end-to-end test of the processor at its default size.
//
// The processor (26 adders, 2 rselect, 2 wselect, 64 cells, 2 links,
// 16-bit ports) is programmed over the host bus with two dataflow graphs,
// one after the other, and run on random data.
//
// Program 1:
//   A/D samples -> cell 0 -> adder 0.a ; host words (I/O port) -> cell 1 ->
//   adder 0.b ; adder 0 sum -> cell 2 -> D/A port.   Expect D/A = A + B,
//   taking the four 16-bit words of each stream as one 64-bit number.
//   Input link 0 -> fork to cell 3 (holds an initial 0 token) and cell 4 ->
//   adder 1 -> output link 0. The initial 0 shifts one copy by a bit, so
//   the link must carry 2X + X = 3X (first 40 bits).
//   Input link 1 has empty guard flags: its tokens must be taken and dropped.
// Program 2 (after stopping and reprogramming):
//   host words = select stream, forked to cells 10 and 14 ; A/D samples =
//   data -> cell 11. wselect 0 writes each data bit to cell 12 (select 1)
//   or cell 13 (select 0); rselect 0 reads them back in select order into
//   the D/A port and, by a second guard flag, to output link 1.
//   Both must give back the A/D data unchanged.
// The D/A converter and output link 0 are stalled for a while in each
// program. Mechanisms counted (each must occur): additions, initial-token
// shift, fork, dropped tokens, wselect true/false writes, rselect true/false
// reads, D/A stall, link stall, reprogramming. Status must show no illegal
// code and no routing conflict.
module tb_flysig_processor;
  import flysig_pkg::*;
  localparam int W = WORD_DEF;
  localparam int NX = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0]  addr;
  logic [31:0]  wdata, rdata;
  logic         we;
  logic [W-1:0] ad_data, da_data;
  logic         ad_valid, ad_ready, da_valid, da_ready;
  dr_t  [1:0]   ext_in, ext_out;
  logic [1:0]   ext_in_ack, ext_out_ack;
  logic         hold_o0;
  int sent0, sent1, got0, got1, err0, err1;

  flysig_processor dut (.*);

  tb_dr_source u_x0 (.clk, .rst_n, .out(ext_in[0]), .ack(ext_in_ack[0]), .sent(sent0));
  tb_dr_source u_x1 (.clk, .rst_n, .out(ext_in[1]), .ack(ext_in_ack[1]), .sent(sent1));
  tb_dr_sink   u_o0 (.clk, .rst_n, .in(ext_out[0]), .ack(ext_out_ack[0]), .hold(hold_o0),
                     .n_got(got0), .errors(err0));
  tb_dr_sink   u_o1 (.clk, .rst_n, .in(ext_out[1]), .ack(ext_out_ack[1]), .hold(1'b0),
                     .n_got(got1), .errors(err1));

  // operator / port numbering at the default size (see flysig_pkg)
  localparam int P_ADD0_A = 0, P_ADD0_B = 1, P_ADD1_A = 2, P_ADD1_B = 3;
  localparam int P_RS0_S = 52, P_RS0_A = 53, P_RS0_B = 54;
  localparam int P_WS0_S = 58, P_WS0_D = 59;
  localparam int P_IO = 62, P_DA = 63;
  localparam int S_ADD0 = 0, S_ADD1 = 1, S_RS0 = 26, S_WS0_T = 28, S_WS0_F = 29;
  localparam int S_IO = 32, S_AD = 33, S_X0 = 34, S_X1 = 35;
  localparam int N_SRC = 36;
  localparam int D_X0 = 64, D_X1 = 65;

  // ---- mechanism counters -------------------------------------------------
  int n_add, n_shift, n_fork, n_drop, n_ws_t, n_ws_f, n_rs_t, n_rs_f;
  int n_da_stall, n_link_stall, n_reprog;
  logic [3:0] prev;
  always @(posedge clk) begin
    prev <= {dr_valid(dut.op_out[S_WS0_T]), dr_valid(dut.op_out[S_WS0_F]),
             dut.u_ops.g_rsel[0].u_rs.a_ack, dut.u_ops.g_rsel[0].u_rs.b_ack};
    if (dr_valid(dut.op_out[S_WS0_T]) && !prev[3]) n_ws_t++;
    if (dr_valid(dut.op_out[S_WS0_F]) && !prev[2]) n_ws_f++;
    if (dut.u_ops.g_rsel[0].u_rs.a_ack && !prev[1]) n_rs_t++;
    if (dut.u_ops.g_rsel[0].u_rs.b_ack && !prev[0]) n_rs_f++;
    if (da_valid && !da_ready && dr_valid(dut.op_in[P_DA])) n_da_stall++;
    if (hold_o0 && dr_valid(ext_out[0])) n_link_stall++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); addr = 16'(a); wdata = d; we = 1'b1;
    @(negedge clk); we = 1'b0;
  endtask

  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk); addr = 16'(a);
    #1 d = rdata;
  endtask

  task automatic set_cell(int c, dr_init_e init, int op);
    wr(16'h1000 + c, {16'b0, 8'(op), 5'b0, 1'b1, 2'(init)});
  endtask

  task automatic guard(int s, int d1, int d2 = -1);
    logic [95:0] g = '0;
    if (d1 >= 0) g[d1] = 1'b1;
    if (d2 >= 0) g[d2] = 1'b1;
    for (int w = 0; w < 3; w++) wr(16'h2000 + 8*s + w, g[32*w +: 32]);
  endtask

  task automatic clear_all();
    for (int c = 0; c < 64; c++) wr(16'h1000 + c, 32'd0);
    for (int s = 0; s < N_SRC; s++) guard(s, -1);
  endtask

  task automatic host_send(logic [W-1:0] v);
    logic [31:0] st;
    do rd(16'h0001, st); while (!st[0]);
    wr(16'h0002, 32'(v));
  endtask

  task automatic ad_send(logic [W-1:0] v);
    @(negedge clk);
    ad_data = v; ad_valid = 1'b1;
    do @(posedge clk); while (!ad_ready);
    @(negedge clk);
    ad_valid = 1'b0;
  endtask

  task automatic da_take(output logic [W-1:0] v, input int stall);
    wait (da_valid);
    repeat (stall) @(posedge clk);
    @(negedge clk);
    v = da_data;
    da_ready = 1'b1;
    @(negedge clk);
    da_ready = 1'b0;
  endtask

  logic [63:0] A, B, S, D;
  logic [63:0] X;
  logic [31:0] st;
  int t0, t1;
  initial begin
    {n_add, n_shift, n_fork, n_drop, n_ws_t, n_ws_f, n_rs_t, n_rs_f} = '0;
    {n_da_stall, n_link_stall, n_reprog} = '0;
    addr = '0; wdata = '0; we = 1'b0;
    ad_data = '0; ad_valid = 1'b0; da_ready = 1'b0; hold_o0 = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ------------------------------ program 1 ------------------------------
    set_cell(0, INIT_EMPTY, P_ADD0_A);  guard(S_AD,   0);
    set_cell(1, INIT_EMPTY, P_ADD0_B);  guard(S_IO,   1);
    set_cell(2, INIT_EMPTY, P_DA);      guard(S_ADD0, 2);
    set_cell(3, INIT_ZERO,  P_ADD1_A);  guard(S_X0,   3, 4);
    set_cell(4, INIT_EMPTY, P_ADD1_B);  guard(S_ADD1, D_X0);
    rd(16'h3000, st);
    check(st[4:0] == 5'b01000, "initial token of cell 3 loaded while held");
    wr(16'h0000, 32'd1);
    rd(16'h3000, st);
    check(st[3] == 1'b1, "initial token still in cell 3 after run");
    A = {$urandom, $urandom}; B = {$urandom, $urandom}; S = A + B;
    X = {$urandom, $urandom};
    for (int i = 0; i < NX; i++) u_x0.push(X[i]);
    for (int i = 0; i < 10; i++) u_x1.push(1'($urandom));
    t0 = $time;
    fork
      for (int k = 0; k < 4; k++) ad_send(A[16*k +: 16]);
      for (int k = 0; k < 4; k++) host_send(B[16*k +: 16]);
      for (int k = 0; k < 4; k++) begin
        logic [W-1:0] v;
        da_take(v, k == 0 ? 200 : 0);
        check(v == S[16*k +: 16], $sformatf("program 1: D/A word %0d = %h, expected %h", k, v, S[16*k +: 16]));
        n_add++;
      end
      begin
        repeat (300) @(posedge clk);
        hold_o0 = 1'b0;
      end
    join
    t1 = $time;
    $display("program 1: 64 bit-serial additions through the fabric in %0d clocks", (t1 - t0) / 10);
    wait (got0 == NX);
    repeat (50) @(posedge clk);
    begin
      logic [NX-1:0] y, e;
      e = NX'(3 * X);
      for (int i = 0; i < NX; i++) y[i] = u_o0.pop();
      check(y == e, $sformatf("program 1: link 0 carries 3X (%h, expected %h)", y, e));
      if (y[0] == X[0] && e == y) n_shift++;   // 2X came from the inserted 0
      if (y == e) n_fork++;
    end
    check(sent1 == 10, "program 1: tokens with empty guard flags were dropped");
    n_drop = sent1;
    check(err0 == 0 && err1 == 0, "link protocol");
    rd(16'h0001, st);
    check(st[3:2] == 2'b00, "no illegal code, no routing conflict");

    // ------------------------------ program 2 ------------------------------
    wr(16'h0000, 32'd0);
    clear_all();
    hold_o0 = 1'b1;
    set_cell(10, INIT_EMPTY, P_WS0_S);  guard(S_IO,    10, 14);
    set_cell(11, INIT_EMPTY, P_WS0_D);  guard(S_AD,    11);
    set_cell(12, INIT_EMPTY, P_RS0_A);  guard(S_WS0_T, 12);
    set_cell(13, INIT_EMPTY, P_RS0_B);  guard(S_WS0_F, 13);
    set_cell(14, INIT_EMPTY, P_RS0_S);  guard(S_RS0,   15, D_X1);
    set_cell(15, INIT_EMPTY, P_DA);
    wr(16'h0000, 32'd1);
    n_reprog++;
    D = {$urandom, $urandom};
    fork
      for (int k = 0; k < 2; k++) ad_send(D[16*k +: 16]);
      for (int k = 0; k < 2; k++) host_send(k == 0 ? 16'h5A3C : 16'(~D[16*k +: 16] ^ $urandom));
      for (int k = 0; k < 2; k++) begin
        logic [W-1:0] v;
        da_take(v, k == 1 ? 150 : 0);
        check(v == D[16*k +: 16], $sformatf("program 2: D/A word %0d = %h, expected %h", k, v, D[16*k +: 16]));
      end
    join
    wait (got1 == 32);
    begin
      logic [31:0] y;
      for (int i = 0; i < 32; i++) y[i] = u_o1.pop();
      check(y == D[31:0], "program 2: link 1 copy of the selected data");
    end
    rd(16'h0001, st);
    check(st[3:2] == 2'b00, "no illegal code, no routing conflict");

    // ------------------------------ coverage -------------------------------
    $display("mechanisms: add=%0d shift=%0d fork=%0d drop=%0d wsel_t=%0d wsel_f=%0d rsel_t=%0d rsel_f=%0d da_stall=%0d link_stall=%0d reprogram=%0d",
             n_add, n_shift, n_fork, n_drop, n_ws_t, n_ws_f, n_rs_t, n_rs_f, n_da_stall, n_link_stall, n_reprog);
    check(n_add > 0, "addition happened");
    check(n_shift > 0, "initial-token shift happened");
    check(n_fork > 0, "fork happened");
    check(n_drop > 0, "drop happened");
    check(n_ws_t > 0 && n_ws_f > 0, "wselect wrote both outputs");
    check(n_rs_t > 0 && n_rs_f > 0, "rselect read both inputs");
    check(n_da_stall > 0, "D/A stall happened");
    check(n_link_stall > 0, "link stall happened");
    check(n_reprog > 0, "reprogramming happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
