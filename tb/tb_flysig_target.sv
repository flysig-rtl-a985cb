// tb_flysig_target - self-checking test of the hard-wired target version.
//
// What it does and how it works: two target processors with different
// built-in schedules run side by side from the same A/D samples.
//   - u_mul3 uses the module's default program, y = 3x. The A/D stream is
//     forked to both adder inputs, and one copy passes a 0-initialised cell,
//     which doubles it. The stream is not split into words, so the D/A
//     words must be the 16-bit slices of 3*X, where X is all samples
//     together as one 128-bit number (first sample lowest).
//   - u_loop overrides the schedule parameters. The A/D stream goes out on
//     output link 0, which the testbench wires back to input link 0. From
//     there it goes through cell 0 to the D/A port. Its D/A words must equal
//     the samples.
// Samples are offered with random gaps. The D/A side holds da_ready low for
// a random 0..40 clocks before it takes each word, which stalls the
// fabric. The test also checks that neither processor ever reports an
// illegal code or a routing conflict, and that u_mul3's unused output link
// stays null.
//
// Interface and timing: no ports. The clock is free running with a 10
// time-unit period. A watchdog ends the run as a failure after 100000
// clocks.
//
// Paper and own choices: the target version is described in the paper
// only as the prototype with its routing hard-wired. The two programs and
// all checks are this design's choices.
module tb_flysig_target;
  import flysig_pkg::*;
  localparam int W = 16, NS = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] ad_data;
  logic         m_ad_valid, l_ad_valid;
  logic [W-1:0] m_da, l_da, m_rx, l_rx;
  logic         m_ad_ready, l_ad_ready, m_da_valid, l_da_valid, m_da_ready, l_da_ready;
  logic         m_txr, l_txr, m_rxv, l_rxv;
  logic         m_ill, m_con, l_ill, l_con;
  logic [3:0]   m_vf, l_vf;
  dr_t  [0:0]   m_ext_out, l_link;
  logic [0:0]   m_ext_in_ack, l_link_ack;

  flysig_target u_mul3 (
    .clk, .rst_n,
    .tx_word('0), .tx_load(1'b0), .tx_ready(m_txr), .rx_word(m_rx), .rx_valid(m_rxv), .rx_take(1'b0),
    .ad_data, .ad_valid(m_ad_valid), .ad_ready(m_ad_ready),
    .da_data(m_da), .da_valid(m_da_valid), .da_ready(m_da_ready),
    .ext_in(DR_NULL), .ext_in_ack(m_ext_in_ack), .ext_out(m_ext_out), .ext_out_ack(1'b0),
    .valid_flags(m_vf), .illegal(m_ill), .conflict(m_con));

  // sources: adder 0, I/O 1, A/D 2, link 3; destinations: cells 0..3, link 4
  flysig_target #(
    .CELL_INIT(8'h00), .CELL_EN(4'b0001), .CELL_OP(32'h00_00_00_03),
    .GUARD(20'h0C000)                       // link 3 -> cell 0, A/D 2 -> link 4
  ) u_loop (
    .clk, .rst_n,
    .tx_word('0), .tx_load(1'b0), .tx_ready(l_txr), .rx_word(l_rx), .rx_valid(l_rxv), .rx_take(1'b0),
    .ad_data, .ad_valid(l_ad_valid), .ad_ready(l_ad_ready),
    .da_data(l_da), .da_valid(l_da_valid), .da_ready(l_da_ready),
    .ext_in(l_link), .ext_in_ack(l_link_ack), .ext_out(l_link), .ext_out_ack(l_link_ack),
    .valid_flags(l_vf), .illegal(l_ill), .conflict(l_con));

  int bad_status = 0, ext_noise = 0;
  always @(posedge clk) if (rst_n) begin
    if (m_ill || m_con || l_ill || l_con) bad_status++;
    if (m_ext_out != DR_NULL) ext_noise++;
  end

  // each processor gets its own valid line and takes each sample once
  task automatic ad_send(logic [W-1:0] v);
    @(negedge clk);
    ad_data = v; m_ad_valid = 1'b1; l_ad_valid = 1'b1;
    fork
      begin do @(posedge clk); while (!m_ad_ready); @(negedge clk); m_ad_valid = 1'b0; end
      begin do @(posedge clk); while (!l_ad_ready); @(negedge clk); l_ad_valid = 1'b0; end
    join
  endtask

  logic [NS*W-1:0] X, Y3, got_m, got_l;

  initial begin
    ad_data = '0; m_ad_valid = 1'b0; l_ad_valid = 1'b0;
    for (int i = 0; i < NS; i++) X[W*i +: W] = W'($urandom);
    X[W-1:0] = 16'hFFFF;                   // carry and shift run into word 1
    Y3 = (NS*W)'(3 * X);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NS; i++) begin
      repeat ($urandom_range(0, 30)) @(posedge clk);
      ad_send(X[W*i +: W]);
    end
  end

  initial begin
    m_da_ready = 1'b0;
    for (int i = 0; i < NS; i++) begin
      wait (m_da_valid);
      repeat ($urandom_range(0, 40)) @(posedge clk);
      @(negedge clk);
      got_m[W*i +: W] = m_da;
      m_da_ready = 1'b1;
      @(negedge clk);
      m_da_ready = 1'b0;
    end
  end

  initial begin
    l_da_ready = 1'b0;
    for (int i = 0; i < NS; i++) begin
      wait (l_da_valid);
      repeat ($urandom_range(0, 40)) @(posedge clk);
      @(negedge clk);
      got_l[W*i +: W] = l_da;
      l_da_ready = 1'b1;
      @(negedge clk);
      l_da_ready = 1'b0;
    end
  end

  int n_m, n_l;
  always @(posedge clk) begin
    if (!rst_n) begin n_m <= 0; n_l <= 0; end
    else begin
      if (m_da_valid && m_da_ready) n_m <= n_m + 1;
      if (l_da_valid && l_da_ready) n_l <= n_l + 1;
    end
  end

  initial begin
    wait (rst_n);
    wait (n_m == NS && n_l == NS);
    repeat (200) @(posedge clk);
    for (int i = 0; i < NS; i++) begin
      check(got_m[W*i +: W] == Y3[W*i +: W],
            $sformatf("3x word %0d: got %h expected %h", i, got_m[W*i +: W], Y3[W*i +: W]));
      check(got_l[W*i +: W] == X[W*i +: W],
            $sformatf("link word %0d: got %h expected %h", i, got_l[W*i +: W], X[W*i +: W]));
    end
    check(!m_da_valid && !l_da_valid, "extra D/A words");
    check(bad_status == 0, "illegal code or routing conflict reported");
    check(ext_noise == 0, "unused output link of u_mul3 was driven");
    check(!m_rxv && !l_rxv, "I/O port received words although no cell feeds it");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired (D/A words: %0d and %0d)", n_m, n_l);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
