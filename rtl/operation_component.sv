// operation_component - the operator set of the prototype processor.
//
// N_ADD bit-serial full adders, N_RSEL read-select and N_WSEL write-select
// operators, side by side. Inputs and results are numbered as in
// flysig_pkg: inputs adder k -> 2k (a), 2k+1 (b), then per rselect S, A, B,
// then per wselect S, D; results adder sums, then rselect Y, then per
// wselect Y(true), Y(false). (The I/O and converter ports take the last
// input and result numbers and sit beside this block in the processor.)
// The paper provides "a large set of operators" limited by design size and
// names adders and select operators; the mix and counts are this design's.
module operation_component
  import flysig_pkg::*;
#(
  parameter int unsigned N_ADD  = N_ADD_DEF,
  parameter int unsigned N_RSEL = N_RSEL_DEF,
  parameter int unsigned N_WSEL = N_WSEL_DEF,
  localparam int unsigned NI = 2*N_ADD + 3*N_RSEL + 2*N_WSEL,
  localparam int unsigned NO = N_ADD + N_RSEL + 2*N_WSEL
) (
  input  logic          clk,
  input  logic          rst_n,
  input  dr_t  [NI-1:0] in,
  output logic [NI-1:0] in_ack,
  output dr_t  [NO-1:0] out,
  input  logic [NO-1:0] out_ack
);
  localparam int unsigned IR = 2*N_ADD;          // first rselect input
  localparam int unsigned IW = IR + 3*N_RSEL;    // first wselect input
  localparam int unsigned OR = N_ADD;            // first rselect result
  localparam int unsigned OW = OR + N_RSEL;      // first wselect result

  for (genvar k = 0; k < N_ADD; k++) begin : g_add
    di_full_adder u_fa (
      .clk, .rst_n,
      .a(in[2*k]),   .a_ack(in_ack[2*k]),
      .b(in[2*k+1]), .b_ack(in_ack[2*k+1]),
      .sum(out[k]),  .sum_ack(out_ack[k]));
  end
  for (genvar j = 0; j < N_RSEL; j++) begin : g_rsel
    rselect u_rs (
      .clk, .rst_n,
      .s(in[IR+3*j]),   .s_ack(in_ack[IR+3*j]),
      .a(in[IR+3*j+1]), .a_ack(in_ack[IR+3*j+1]),
      .b(in[IR+3*j+2]), .b_ack(in_ack[IR+3*j+2]),
      .y(out[OR+j]),    .y_ack(out_ack[OR+j]));
  end
  for (genvar j = 0; j < N_WSEL; j++) begin : g_wsel
    logic sd_ack;
    wselect u_ws (
      .clk, .rst_n,
      .s(in[IW+2*j]), .d(in[IW+2*j+1]), .sd_ack(sd_ack),
      .y1(out[OW+2*j]),   .y1_ack(out_ack[OW+2*j]),
      .y0(out[OW+2*j+1]), .y0_ack(out_ack[OW+2*j+1]));
    assign in_ack[IW+2*j]   = sd_ack;
    assign in_ack[IW+2*j+1] = sd_ack;
  end
endmodule
