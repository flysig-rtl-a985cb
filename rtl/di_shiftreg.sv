// di_shiftreg - queue of basic register elements (dual-rail shift register).
//
// DEPTH di_reg elements are chained; stage 0 is at the input, stage
// DEPTH-1 at the output. Each stage may start holding a token: bit i of
// INIT_VALID says stage i holds a data bit at reset, bit i of INIT_VALUE
// gives that bit (so a stage is a 0- or 1-initialized register), otherwise
// it starts empty. The paper asks for one extra empty element per data bit
// held for best throughput; that is a rule for the user of this module.
// Interface: in/in_ack, out/out_ack (four-phase dual-rail channels).
// Timing: an empty queue passes a token in DEPTH clocks.
module di_shiftreg
  import flysig_pkg::*;
#(
  parameter int unsigned      DEPTH      = 2,
  parameter logic [DEPTH-1:0] INIT_VALID = '0,
  parameter logic [DEPTH-1:0] INIT_VALUE = '0
) (
  input  logic clk,
  input  logic rst_n,
  input  dr_t  in,
  output logic in_ack,
  output dr_t  out,
  input  logic out_ack
);
  dr_t  d   [DEPTH+1];
  logic ack [DEPTH+1];
  assign d[0]       = in;
  assign in_ack     = ack[0];
  assign out        = d[DEPTH];
  assign ack[DEPTH] = out_ack;

  for (genvar i = 0; i < DEPTH; i++) begin : g_stage
    localparam dr_t INIT = INIT_VALID[i] ? dr_enc(INIT_VALUE[i]) : DR_NULL;
    di_reg u_reg (
      .clk, .rst_n, .init_val(INIT),
      .in(d[i]), .in_ack(ack[i]), .out(d[i+1]), .out_ack(ack[i+1])
    );
  end
endmodule
