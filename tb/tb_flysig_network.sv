// tb_flysig_network - two processors chained through a link: a hard-wired
// target version feeding a configurable prototype.
//
// What it does and how it works:
//   u_tgt is a flysig_target with the schedule y = 3x, built in through its
//   parameters. Its A/D samples X are forked to cell 0 and to cell 1. Cell 1
//   starts with a 0 token, so its copy is doubled. Adder 0 adds the two
//   copies, and the sum leaves on output link 0 rather than on the D/A port.
//   That link is wired to input link 0 of u_pro, a default-size
//   flysig_processor. The testbench programs u_pro over its register bus:
//     input link 0 (source 34) -> cell 0 -> adder 0 operand a
//     host I/O word (source 32) -> cell 1 -> adder 0 operand b
//     adder 0 (source 0)        -> cell 2 -> D/A port
//   The D/A words must be the 16-bit slices of 3*X + H. X and H are the
//   eight A/D samples and the eight host words, each taken as one 128-bit
//   stream, first word lowest.
//   The target starts running while the prototype is still being programmed,
//   with run = 0. Its link is then stalled across the chip boundary until
//   run is set, and the test checks that this stall happened. The D/A side
//   also waits a random 0..40 clocks before taking each word.
//
// Interface and timing: no ports. The clock is free running with a 10
// time-unit period, and both processors share it. A watchdog ends the run
// as a failure after 200000 clocks.
//
// Paper and own choices:
//   - From the paper: an algorithm may be spread over several processors,
//     results may be written directly into the registers of another
//     processor, and prototype and target versions may be connected.
//   - Own choices: the program, the sizes and all checks.
module tb_flysig_network;
  import flysig_pkg::*;
  localparam int W = WORD_DEF, NS = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- target: A/D -> 3x -> output link 0 ----------------------------------
  // sources: adder 0, I/O 1, A/D 2, link 3; destinations: cells 0..3, link 4
  logic [W-1:0] t_ad_data, t_da, t_rx;
  logic         t_ad_valid, t_ad_ready, t_da_valid, t_txr, t_rxv, t_ill, t_con;
  logic [3:0]   t_vf;
  logic [0:0]   t_in_ack;
  dr_t  [0:0]   link;
  logic [0:0]   link_ack;

  flysig_target #(
    .CELL_INIT(8'b00_00_01_00), .CELL_EN(4'b0011), .CELL_OP(32'h00_00_01_00),
    .GUARD(20'h00C10)               // A/D -> cells 0 and 1, adder 0 -> link 4
  ) u_tgt (
    .clk, .rst_n,
    .tx_word('0), .tx_load(1'b0), .tx_ready(t_txr), .rx_word(t_rx), .rx_valid(t_rxv), .rx_take(1'b0),
    .ad_data(t_ad_data), .ad_valid(t_ad_valid), .ad_ready(t_ad_ready),
    .da_data(t_da), .da_valid(t_da_valid), .da_ready(1'b0),
    .ext_in(DR_NULL), .ext_in_ack(t_in_ack), .ext_out(link), .ext_out_ack(link_ack),
    .valid_flags(t_vf), .illegal(t_ill), .conflict(t_con));

  // ---- prototype -----------------------------------------------------------
  logic [15:0]  addr;
  logic [31:0]  wdata, rdata;
  logic         we;
  logic [W-1:0] da_data;
  logic         da_valid, da_ready, ad_ready;
  dr_t  [1:0]   p_ext_in, p_ext_out;
  logic [1:0]   p_ext_in_ack;

  assign p_ext_in = {DR_NULL, link[0]};
  assign link_ack = p_ext_in_ack[0];

  flysig_processor u_pro (
    .clk, .rst_n, .addr, .wdata, .we, .rdata,
    .ad_data('0), .ad_valid(1'b0), .ad_ready,
    .da_data, .da_valid, .da_ready,
    .ext_in(p_ext_in), .ext_in_ack(p_ext_in_ack), .ext_out(p_ext_out), .ext_out_ack(2'b00));

  localparam int P_ADD0_A = 0, P_ADD0_B = 1, P_DA = 63;
  localparam int S_ADD0 = 0, S_IO = 32, S_X0 = 34;

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

  task automatic guard1(int s, int d);
    logic [95:0] g = '0;
    g[d] = 1'b1;
    for (int w = 0; w < 3; w++) wr(16'h2000 + 8*s + w, g[32*w +: 32]);
  endtask

  task automatic host_send(logic [W-1:0] v);
    logic [31:0] st;
    do rd(16'h0001, st); while (!st[0]);
    wr(16'h0002, 32'(v));
  endtask

  // ---- stimulus ------------------------------------------------------------
  logic [NS*W-1:0] X, H, E, got;
  int link_stall = 0, noise = 0, n_da = 0;
  bit running = 1'b0;

  always @(posedge clk) if (rst_n) begin
    if (!running && dr_valid(link[0]) && !link_ack[0]) link_stall++;
    if (p_ext_out != {DR_NULL, DR_NULL}) noise++;
    if (t_ill || t_con) noise++;
  end

  initial begin
    addr = '0; wdata = '0; we = 1'b0; da_ready = 1'b0;
    t_ad_data = '0; t_ad_valid = 1'b0;
    for (int i = 0; i < NS; i++) begin
      X[W*i +: W] = W'($urandom);
      H[W*i +: W] = W'($urandom);
    end
    X[W-1:0] = 16'hFFFF;
    E = (NS*W)'(3 * X + H);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      // target samples start at once
      for (int i = 0; i < NS; i++) begin
        repeat ($urandom_range(0, 30)) @(posedge clk);
        @(negedge clk);
        t_ad_data = X[W*i +: W]; t_ad_valid = 1'b1;
        do @(posedge clk); while (!t_ad_ready);
        @(negedge clk);
        t_ad_valid = 1'b0;
      end
      // prototype is programmed meanwhile, then started, then fed host words
      begin
        repeat (100) @(posedge clk);     // target link is waiting by now
        set_cell(0, INIT_EMPTY, P_ADD0_A);
        set_cell(1, INIT_EMPTY, P_ADD0_B);
        set_cell(2, INIT_EMPTY, P_DA);
        guard1(S_X0, 0);
        guard1(S_IO, 1);
        guard1(S_ADD0, 2);
        running = 1'b1;
        wr(16'h0000, 32'd1);
        for (int i = 0; i < NS; i++) host_send(H[W*i +: W]);
      end
      // D/A words
      for (int i = 0; i < NS; i++) begin
        wait (da_valid);
        repeat ($urandom_range(0, 40)) @(posedge clk);
        @(negedge clk);
        got[W*i +: W] = da_data;
        da_ready = 1'b1;
        @(negedge clk);
        da_ready = 1'b0;
        n_da++;
      end
    join
    repeat (200) @(posedge clk);
    for (int i = 0; i < NS; i++)
      check(got[W*i +: W] == E[W*i +: W],
            $sformatf("D/A word %0d: got %h expected %h", i, got[W*i +: W], E[W*i +: W]));
    check(!da_valid, "extra D/A words");
    check(link_stall > 0, "link was never stalled by the stopped prototype");
    check(noise == 0, "unused links driven, or target reported an error");
    begin
      logic [31:0] st;
      rd(16'h0001, st);
      check(st[3:2] == 2'b00, $sformatf("prototype status shows an error (%b)", st[3:0]));
    end
    $display("link stalled %0d clocks before the prototype ran", link_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired (D/A words %0d)", n_da);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
