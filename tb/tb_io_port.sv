// tb_io_port - self-checking test of the host I/O port.
//
// W = 16. Host side: four random words are loaded; the src channel
// (consumed by a random-timing sink) must deliver their bits LSB first,
// and tx_ready must be low while a word is being sent. Fabric side: a
// random-timing source sends the bits of three words into snk; each must
// appear on rx_word with rx_valid, and while the host has not taken a
// word the port must hold back further tokens.
module tb_io_port;
  import flysig_pkg::*;
  localparam int W = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [W-1:0] tx_word, rx_word;
  logic tx_load, tx_ready, rx_valid, rx_take;
  dr_t  src, snk;
  logic src_ack, snk_ack;
  int   n_got, errs, sent;

  io_port #(.W(W)) dut (.clk, .rst_n, .tx_word, .tx_load, .tx_ready, .rx_word, .rx_valid,
                        .rx_take, .src, .src_ack, .snk, .snk_ack);
  tb_dr_sink   u_k (.clk, .rst_n, .in(src), .ack(src_ack), .hold(1'b0), .n_got(n_got), .errors(errs));
  tb_dr_source u_s (.clk, .rst_n, .out(snk), .ack(snk_ack), .sent(sent));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] words [4], rwords [3];
  initial begin
    tx_load = 1'b0; rx_take = 1'b0; tx_word = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // fabric -> host words queued first so both directions run together
    for (int k = 0; k < 3; k++) begin
      rwords[k] = W'($urandom);
      for (int i = 0; i < W; i++) u_s.push(rwords[k][i]);
    end
    for (int k = 0; k < 4; k++) begin
      words[k] = W'($urandom);
      @(negedge clk);
      wait (tx_ready);
      @(negedge clk);
      tx_word = words[k]; tx_load = 1'b1;
      @(negedge clk);
      tx_load = 1'b0;
      check(!tx_ready, "busy while sending");
    end
    wait (n_got == 4 * W);
    for (int k = 0; k < 4; k++) begin
      automatic logic [W-1:0] g = '0;
      for (int i = 0; i < W; i++) g[i] = u_k.pop();
      check(g == words[k], $sformatf("tx word %0d", k));
    end
    check(errs == 0, "protocol errors");
    for (int k = 0; k < 3; k++) begin
      wait (rx_valid);
      repeat (50) @(posedge clk);
      check(sent <= W * (k + 1) + 1, "port holds back tokens while word unread");
      check(rx_word == rwords[k], $sformatf("rx word %0d", k));
      @(negedge clk); rx_take = 1'b1;
      @(negedge clk); rx_take = 1'b0;
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
