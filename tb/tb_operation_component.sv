// tb_operation_component - test of the operator set with its numbering.
//
// Instance with 2 adders, 1 rselect and 1 wselect (11 inputs, 5 results).
// Every input port gets its own random-timing source and every result its
// own receiver, all with random pauses. Adder k must return the bit-serial sum of its two 32-bit
// operands, the rselect the bits read according to its select stream,
// the wselect each data bit on the output chosen by its select. This
// checks both the operators and that the port numbering is as documented.
module tb_operation_component;
  import flysig_pkg::*;
  localparam int NA = 2, NR = 1, NW = 1;
  localparam int NI = 2*NA + 3*NR + 2*NW, NO = NA + NR + 2*NW;
  localparam int NB = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  dr_t  [NI-1:0] in;
  logic [NI-1:0] in_ack;
  dr_t  [NO-1:0] out;
  logic [NO-1:0] out_ack;
  int sent [NI], ng [NO], er [NO];

  operation_component #(.N_ADD(NA), .N_RSEL(NR), .N_WSEL(NW)) dut (
    .clk, .rst_n, .in, .in_ack, .out, .out_ack);
  // Per-channel four-phase drivers and receivers, fed from / into the
  // queues qin[] and qout[] (random pause of 0..2 clocks per transition).
  bit qin [NI][$];
  bit qout [NO][$];
  for (genvar i = 0; i < NI; i++) begin : gs
    int dly;
    always @(posedge clk) begin
      if (!rst_n) begin in[i] <= DR_NULL; dly <= 0; sent[i] <= 0; end
      else if (dly > 0) dly <= dly - 1;
      else if (!dr_valid(in[i]) && !in_ack[i] && qin[i].size() > 0) begin
        in[i] <= dr_enc(qin[i].pop_front()); dly <= int'($urandom_range(0, 2));
      end else if (dr_valid(in[i]) && in_ack[i]) begin
        in[i] <= DR_NULL; sent[i] <= sent[i] + 1; dly <= int'($urandom_range(0, 2));
      end
    end
  end
  for (genvar o = 0; o < NO; o++) begin : gk
    int dly;
    always @(posedge clk) begin
      if (!rst_n) begin out_ack[o] <= 1'b0; dly <= 0; ng[o] <= 0; er[o] <= 0; end
      else begin
        if (dr_illegal(out[o])) er[o] <= er[o] + 1;
        if (dly > 0) dly <= dly - 1;
        else if (dr_valid(out[o]) && !out_ack[o]) begin
          qout[o].push_back(out[o].t); ng[o] <= ng[o] + 1; out_ack[o] <= 1'b1;
          dly <= int'($urandom_range(0, 2));
        end else if (!dr_valid(out[o]) && out_ack[o]) begin
          out_ack[o] <= 1'b0; dly <= int'($urandom_range(0, 2));
        end
      end
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit q [NO][$];
  logic [NB-1:0] va [NA], vb [NA], vs;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < NA; k++) begin
      va[k] = $urandom; vb[k] = $urandom; vs = va[k] + vb[k];
      for (int i = 0; i < NB; i++) begin
        qin[2*k].push_back(va[k][i]); qin[2*k+1].push_back(vb[k][i]); q[k].push_back(vs[i]);
      end
    end
    for (int i = 0; i < NB; i++) begin      // rselect: inputs 4 (S), 5 (A), 6 (B); result 2
      automatic bit sel = 1'($urandom);
      automatic bit v = 1'($urandom);
      qin[4].push_back(sel); qin[sel ? 5 : 6].push_back(v); q[2].push_back(v);
    end
    for (int i = 0; i < NB; i++) begin      // wselect: inputs 7 (S), 8 (D); results 3, 4
      automatic bit sel = 1'($urandom);
      automatic bit v = 1'($urandom);
      qin[7].push_back(sel); qin[8].push_back(v); q[sel ? 3 : 4].push_back(v);
    end
    wait (ng[0] == NB && ng[1] == NB && ng[2] == NB && ng[3] + ng[4] == NB);
    repeat (20) @(posedge clk);
    for (int o = 0; o < NO; o++) begin
      check(er[o] == 0, "protocol errors");
      check(ng[o] == q[o].size(), $sformatf("result %0d token count", o));
      while (q[o].size() > 0) check(qout[o].pop_front() == q[o].pop_front(), $sformatf("result %0d stream", o));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
