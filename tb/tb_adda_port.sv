// tb_adda_port - self-checking test of the D/A - A/D converter port.
//
// W = 16. A/D side: four random samples are offered with ad_valid; each
// must be accepted once (ad_ready) and leave on src as 16 bits LSB first.
// D/A side: three words arrive bit-serially on snk; each must be offered
// on da_data with da_valid, and while the converter keeps da_ready low
// the port must stop acknowledging (the fabric stalls); the stall is held
// for 100 clocks before each word is taken.
module tb_adda_port;
  import flysig_pkg::*;
  localparam int W = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [W-1:0] ad_data, da_data;
  logic ad_valid, ad_ready, da_valid, da_ready;
  dr_t  src, snk;
  logic src_ack, snk_ack;
  int   n_got, errs, sent;

  adda_port #(.W(W)) dut (.clk, .rst_n, .ad_data, .ad_valid, .ad_ready, .da_data, .da_valid,
                          .da_ready, .src, .src_ack, .snk, .snk_ack);
  tb_dr_sink   u_k (.clk, .rst_n, .in(src), .ack(src_ack), .hold(1'b0), .n_got(n_got), .errors(errs));
  tb_dr_source u_s (.clk, .rst_n, .out(snk), .ack(snk_ack), .sent(sent));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] samples [4], dwords [3];
  int stalls = 0;
  initial begin
    ad_valid = 1'b0; da_ready = 1'b0; ad_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 3; k++) begin
      dwords[k] = W'($urandom);
      for (int i = 0; i < W; i++) u_s.push(dwords[k][i]);
    end
    for (int k = 0; k < 4; k++) begin
      samples[k] = W'($urandom);
      @(negedge clk);
      ad_data = samples[k]; ad_valid = 1'b1;
      do @(posedge clk); while (!ad_ready);
      @(negedge clk);
      ad_valid = 1'b0;
    end
    wait (n_got == 4 * W);
    for (int k = 0; k < 4; k++) begin
      automatic logic [W-1:0] g = '0;
      for (int i = 0; i < W; i++) g[i] = u_k.pop();
      check(g == samples[k], $sformatf("A/D sample %0d", k));
    end
    check(errs == 0, "protocol errors");
    for (int k = 0; k < 3; k++) begin
      automatic int s0;
      wait (da_valid);
      s0 = sent;
      repeat (100) @(posedge clk);
      if (sent - s0 <= 1) stalls++;   // the last bit of the word may still complete
      check(da_data == dwords[k], $sformatf("D/A word %0d", k));
      @(negedge clk); da_ready = 1'b1;
      @(negedge clk); da_ready = 1'b0;
    end
    check(stalls == 3, "fabric stalled while the converter was not ready");
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
