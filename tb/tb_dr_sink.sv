// tb_dr_sink - testbench consumer of one dual-rail four-phase channel.
//
// Takes each valid token (raises ack), records its bit in got[], and drops
// ack once the producer has returned to null. hold stops it from taking
// new tokens (backpressure). A random pause of 0..MAXDLY clocks precedes
// every transition. errors counts protocol violations: an illegal 11 code,
// or a valid code that changes while it is being acknowledged.
module tb_dr_sink
  import flysig_pkg::*;
#(
  parameter int unsigned MAXDLY = 3
) (
  input  logic clk,
  input  logic rst_n,
  input  dr_t  in,
  output logic ack,
  input  logic hold,
  output int   n_got,
  output int   errors
);
  bit  got[$];
  dr_t taken;
  int  dly;

  function automatic bit pop();
    return got.pop_front();
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      ack    <= 1'b0;
      dly    <= 0;
      n_got  <= 0;
      errors <= 0;
      taken  <= DR_NULL;
    end else begin
      if (dr_illegal(in)) errors <= errors + 1;
      else if (ack && dr_valid(in) && in != taken) errors <= errors + 1;
      if (dly > 0) begin
        dly <= dly - 1;
      end else if (dr_valid(in) && !ack && !hold) begin
        got.push_back(in.t);
        taken <= in;
        n_got <= n_got + 1;
        ack   <= 1'b1;
        dly   <= int'($urandom_range(0, MAXDLY));
      end else if (!dr_valid(in) && ack) begin
        ack <= 1'b0;
        dly <= int'($urandom_range(0, MAXDLY));
      end
    end
  end
endmodule
