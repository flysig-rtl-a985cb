// tb_dr_source - testbench producer of one dual-rail four-phase channel.
//
// Bits queued with push() are sent one token at a time: the code is put on
// out while ack is low, removed once ack is high. A random pause of
// 0..MAXDLY clocks is inserted before every transition so that the
// circuit under test sees irregular timing. sent counts completed tokens.
module tb_dr_source
  import flysig_pkg::*;
#(
  parameter int unsigned MAXDLY = 3
) (
  input  logic clk,
  input  logic rst_n,
  output dr_t  out,
  input  logic ack,
  output int   sent
);
  bit q[$];
  int dly;

  function automatic void push(bit b);
    q.push_back(b);
  endfunction

  function automatic int pending();
    return q.size();
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      out  <= DR_NULL;
      dly  <= 0;
      sent <= 0;
    end else if (dly > 0) begin
      dly <= dly - 1;
    end else if (!dr_valid(out) && !ack && q.size() > 0) begin
      out <= dr_enc(q.pop_front());
      dly <= int'($urandom_range(0, MAXDLY));
    end else if (dr_valid(out) && ack) begin
      out  <= DR_NULL;
      sent <= sent + 1;
      dly  <= int'($urandom_range(0, MAXDLY));
    end
  end
endmodule
