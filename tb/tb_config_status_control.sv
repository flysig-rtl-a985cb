// tb_config_status_control - register-level test of the host interface.
//
// Small instance (4 cells, 3 sources, 40 destinations so that guard flags
// span two words). Writes every configuration register with random values
// and reads them back, compares the configuration outputs with what was
// written, checks the run bit, the one-clock tx_load / rx_take pulses, the
// refusal of a tx word while the port is busy, the sticky illegal flag and
// the status and valid-flag read-outs.
module tb_config_status_control;
  import flysig_pkg::*;
  localparam int NC = 4, NS = 3, ND = 40, W = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0]        addr;
  logic [31:0]        wdata, rdata;
  logic               we, run;
  dr_init_e           cfg_init [NC];
  logic [NC-1:0]      cfg_en, valid_flags;
  logic [OP_ID_W-1:0] cfg_op_id [NC];
  logic [ND-1:0]      cfg_guard [NS];
  logic [W-1:0]       tx_word, rx_word;
  logic tx_load, tx_ready, rx_valid, rx_take, illegal, conflict;

  config_status_control #(.N_CELL(NC), .N_SRC(NS), .N_DST(ND), .W(W)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(logic [15:0] a, logic [31:0] d);
    @(negedge clk); addr = a; wdata = d; we = 1'b1;
    @(negedge clk); we = 1'b0;
  endtask

  task automatic rdchk(logic [15:0] a, logic [31:0] e, string what);
    addr = a;
    #1;
    check(rdata == e, what);
  endtask

  logic [31:0] cellv [NC];
  logic [63:0] gv [NS];
  int loads = 0, takes = 0;
  always @(posedge clk) begin
    if (tx_load) loads++;
    if (rx_take) takes++;
  end

  initial begin
    addr = '0; wdata = '0; we = 1'b0;
    tx_ready = 1'b1; rx_valid = 1'b0; rx_word = 16'hBEEF;
    valid_flags = 4'b1010; illegal = 1'b0; conflict = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    check(run == 1'b0, "run low after reset");
    for (int c = 0; c < NC; c++) begin
      cellv[c] = {16'b0, 8'($urandom), 5'b0, 1'($urandom), 2'($urandom_range(0, 2))};
      wr(16'h1000 + 16'(c), cellv[c]);
    end
    for (int s = 0; s < NS; s++) begin
      gv[s] = {$urandom, $urandom};
      wr(16'h2000 + 16'(8*s), gv[s][31:0]);
      wr(16'h2000 + 16'(8*s + 1), gv[s][63:32]);
    end
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin
      check(cfg_init[c] == dr_init_e'(cellv[c][1:0]) && cfg_en[c] == cellv[c][2] &&
            cfg_op_id[c] == cellv[c][15:8], $sformatf("cell %0d outputs", c));
      rdchk(16'h1000 + 16'(c), cellv[c], $sformatf("cell %0d read-back", c));
    end
    for (int s = 0; s < NS; s++) begin
      check(cfg_guard[s] == gv[s][ND-1:0], $sformatf("guard %0d outputs", s));
      rdchk(16'h2000 + 16'(8*s), gv[s][31:0], "guard word 0 read-back");
      rdchk(16'h2000 + 16'(8*s + 1), gv[s][63:32], "guard word 1 read-back");
    end
    wr(16'h0000, 32'd1);
    check(run == 1'b1, "run set");
    rdchk(16'h0000, 32'd1, "run read-back");
    wr(16'h0002, 32'h1234);
    @(negedge clk);
    check(loads == 1 && tx_word == 16'h1234, "tx word loaded with one pulse");
    tx_ready = 1'b0;
    wr(16'h0002, 32'h5678);
    @(negedge clk);
    check(loads == 1 && tx_word == 16'h1234, "tx word refused while busy");
    rx_valid = 1'b1;
    rdchk(16'h0003, 32'h0000BEEF, "rx word read");
    rdchk(16'h0001, 32'b0010, "status rx valid, tx busy");
    wr(16'h0003, 32'd0);
    @(negedge clk);
    check(takes == 1, "rx take pulse");
    @(negedge clk); illegal = 1'b1; @(negedge clk); illegal = 1'b0; conflict = 1'b1;
    rdchk(16'h0001, 32'b1110, "sticky illegal and conflict status");
    rdchk(16'h3000, 32'b1010, "valid flags");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
