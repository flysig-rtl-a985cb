// tb_triple_feedback - workload test: the recurrence x' = a + x + x + x
// built two ways from the operator library, as in the optimisation example
// of the FLYSIG paper.
//
// What it does and how it works:
//   Version A (straight forward) chains three bit-serial full adders:
//     s1 = a + f, s2 = s1 + f, x = s2 + f,
//   where f is the fed-back result. The second and third copies of f pass
//   one and two empty register elements, which act as queue slack.
//   Version B (optimised) uses two adders:
//     s1 = a + f, x = s1 + 2f.
//   The 2f operand is a copy of f that passes one empty element and then
//   one 0-initialised element. The initial token shifts the stream by one
//   bit, which doubles it.
//   In both versions x is forked to the output and to a feedback queue.
//   The queue holds four 0 tokens, so f = 16*x: x delayed by four bit
//   positions. A 3-way (A) or 2-way (B) fork then hands f to the adders.
//   Streams are never framed into words, so the whole input stream of NB
//   bits acts as one NB-bit number A. The output must then equal the
//   solution of X = A + 48*X (mod 2^NB). The testbench solves this by
//   iterating; each step fixes four more low bits. Both versions get the
//   same random input stream with random source and sink pauses. Each is
//   compared with the model in 32-bit slices, and the two are compared
//   with each other. The clocks per output bit are printed for both.
//
// Interface and timing: no ports. The clock is free running with a 10
//   time-unit period. A watchdog ends the run as a failure after 200000
//   clocks.
//
// Paper and own choices:
//   - From the paper: the two adder graphs, the initialised element used
//     as a shift, and the four 0-initialised elements in the feedback loop.
//   - Own choice: each 0 token in the feedback queue has an empty element in
//     front of it (8 elements in all). This follows the paper's rule of one
//     extra empty element per stored bit. Four directly adjacent tokens in
//     half-buffer elements cannot separate and would stall the loop.
//   - Own choice: the 3-way fork in version A. The figure draws the
//     fan-out of x as wires only.
module tb_triple_feedback;
  import flysig_pkg::*;
  localparam int NB = 256;                    // stream length in bits
  localparam logic [7:0] LOOP_VALID = 8'b1010_1010;   // four 0 tokens
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- version A
  dr_t  a_in, a_s1, a_s2, a_x, a_fb, a_q1, a_q2;
  logic a_in_ack, a_s1_ack, a_s2_ack, a_x_ack, a_fb_ack, a_q1_ack, a_q2_ack;
  dr_t  [1:0] a_xf;    logic [1:0] a_xf_ack;    // x -> {loop, output}
  dr_t  [2:0] a_ff;    logic [2:0] a_ff_ack;    // f -> three adders
  dr_t  a_loop;        logic a_loop_ack;
  int   a_sent, a_got, a_err;

  tb_dr_source u_src_a (.clk, .rst_n, .out(a_in), .ack(a_in_ack), .sent(a_sent));
  di_full_adder u_a1 (.clk, .rst_n, .a(a_in), .a_ack(a_in_ack), .b(a_ff[0]), .b_ack(a_ff_ack[0]),
                      .sum(a_s1), .sum_ack(a_s1_ack));
  di_shiftreg #(.DEPTH(1)) u_ae1 (.clk, .rst_n, .in(a_ff[1]), .in_ack(a_ff_ack[1]),
                                  .out(a_q1), .out_ack(a_q1_ack));
  di_full_adder u_a2 (.clk, .rst_n, .a(a_s1), .a_ack(a_s1_ack), .b(a_q1), .b_ack(a_q1_ack),
                      .sum(a_s2), .sum_ack(a_s2_ack));
  di_shiftreg #(.DEPTH(2)) u_ae2 (.clk, .rst_n, .in(a_ff[2]), .in_ack(a_ff_ack[2]),
                                  .out(a_q2), .out_ack(a_q2_ack));
  di_full_adder u_a3 (.clk, .rst_n, .a(a_s2), .a_ack(a_s2_ack), .b(a_q2), .b_ack(a_q2_ack),
                      .sum(a_x), .sum_ack(a_x_ack));
  di_fork #(.N(2)) u_axf (.clk, .rst_n, .in(a_x), .in_ack(a_x_ack), .out(a_xf), .out_ack(a_xf_ack));
  di_shiftreg #(.DEPTH(8), .INIT_VALID(LOOP_VALID), .INIT_VALUE(8'h00)) u_aloop (
    .clk, .rst_n, .in(a_xf[0]), .in_ack(a_xf_ack[0]), .out(a_loop), .out_ack(a_loop_ack));
  di_fork #(.N(3)) u_aff (.clk, .rst_n, .in(a_loop), .in_ack(a_loop_ack), .out(a_ff), .out_ack(a_ff_ack));
  tb_dr_sink u_snk_a (.clk, .rst_n, .in(a_xf[1]), .ack(a_xf_ack[1]), .hold(1'b0),
                      .n_got(a_got), .errors(a_err));

  // ---------------------------------------------------------------- version B
  dr_t  b_in, b_s1, b_x, b_q1, b_loop;
  logic b_in_ack, b_s1_ack, b_x_ack, b_q1_ack, b_loop_ack;
  dr_t  [1:0] b_xf;    logic [1:0] b_xf_ack;
  dr_t  [1:0] b_ff;    logic [1:0] b_ff_ack;
  int   b_sent, b_got, b_err;

  tb_dr_source u_src_b (.clk, .rst_n, .out(b_in), .ack(b_in_ack), .sent(b_sent));
  di_full_adder u_b1 (.clk, .rst_n, .a(b_in), .a_ack(b_in_ack), .b(b_ff[0]), .b_ack(b_ff_ack[0]),
                      .sum(b_s1), .sum_ack(b_s1_ack));
  // one empty element, then one 0-initialised element (the shift)
  di_shiftreg #(.DEPTH(2), .INIT_VALID(2'b10), .INIT_VALUE(2'b00)) u_bsh (
    .clk, .rst_n, .in(b_ff[1]), .in_ack(b_ff_ack[1]), .out(b_q1), .out_ack(b_q1_ack));
  di_full_adder u_b2 (.clk, .rst_n, .a(b_s1), .a_ack(b_s1_ack), .b(b_q1), .b_ack(b_q1_ack),
                      .sum(b_x), .sum_ack(b_x_ack));
  di_fork #(.N(2)) u_bxf (.clk, .rst_n, .in(b_x), .in_ack(b_x_ack), .out(b_xf), .out_ack(b_xf_ack));
  di_shiftreg #(.DEPTH(8), .INIT_VALID(LOOP_VALID), .INIT_VALUE(8'h00)) u_bloop (
    .clk, .rst_n, .in(b_xf[0]), .in_ack(b_xf_ack[0]), .out(b_loop), .out_ack(b_loop_ack));
  di_fork #(.N(2)) u_bff (.clk, .rst_n, .in(b_loop), .in_ack(b_loop_ack), .out(b_ff), .out_ack(b_ff_ack));
  tb_dr_sink u_snk_b (.clk, .rst_n, .in(b_xf[1]), .ack(b_xf_ack[1]), .hold(1'b0),
                      .n_got(b_got), .errors(b_err));

  // ---------------------------------------------------------------- checking
  logic [NB-1:0] va, vx, ga, gb;
  int t0, ta, tb_done;

  always @(posedge clk) begin
    if (rst_n && a_got == NB && ta == 0) ta = $time / 10;
    if (rst_n && b_got == NB && tb_done == 0) tb_done = $time / 10;
  end

  initial begin
    ta = 0; tb_done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    t0 = $time / 10;
    for (int i = 0; i < NB / 32; i++) va[32*i +: 32] = $urandom;
    va[31:0] = 32'hFFFF_FFFF;             // long carry runs at the start
    // reference: X = A + 48*X mod 2^NB, each iteration fixes 4 more bits
    vx = va;
    for (int k = 0; k < NB / 4 + 2; k++) vx = va + 48 * vx;
    check(vx == va + 48 * vx, "reference model did not converge");
    for (int i = 0; i < NB; i++) begin
      u_src_a.push(va[i]);
      u_src_b.push(va[i]);
    end
    wait (a_got == NB && b_got == NB);
    repeat (20) @(posedge clk);
    check(a_err == 0, "protocol errors at output of version A");
    check(b_err == 0, "protocol errors at output of version B");
    check(a_got == NB && b_got == NB, "extra output tokens");
    for (int i = 0; i < NB; i++) begin
      ga[i] = u_snk_a.pop();
      gb[i] = u_snk_b.pop();
    end
    for (int w = 0; w < NB / 32; w++) begin
      check(ga[32*w +: 32] == vx[32*w +: 32],
            $sformatf("A slice %0d: got %h expected %h", w, ga[32*w +: 32], vx[32*w +: 32]));
      check(gb[32*w +: 32] == vx[32*w +: 32],
            $sformatf("B slice %0d: got %h expected %h", w, gb[32*w +: 32], vx[32*w +: 32]));
    end
    check(ga == gb, "versions A and B differ");
    $display("version A (3 adders): %0d bits in %0d clocks", NB, ta - t0);
    $display("version B (2 adders): %0d bits in %0d clocks", NB, tb_done - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired (A %0d bits, B %0d bits)", a_got, b_got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
