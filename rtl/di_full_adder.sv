// di_full_adder - complete bit-serial full-adder operator.
//
// Adds two LSB-first dual-rail bit streams a and b into the stream sum.
// Structure (after the paper's full-adder netlist): each operand passes an
// input queue of IN_DEPTH empty register elements, the add-operator cell
// (dr_add) forms sum and carry, the sum leaves through an output queue of
// OUT_DEPTH elements, and the carry runs round a ring of CARRY_DEPTH
// elements whose last element is 0-initialized, so the first bit is added
// with carry 0 and every later bit with the carry of the bit before.
// A C-gate joins the acknowledges of the sum queue and the carry ring and
// acknowledges all three adder inputs at once. Its third input is the
// completion (any rail high) of the adder inputs, so the acknowledge falls
// only when all three inputs have returned to null (the dual-rail XOR
// alone would report null as soon as one input is null).
// The carry is never cleared after reset: a stream is one long number,
// and word boundaries inside it carry over. The paper does not mention
// word framing.
// Interface: a/a_ack, b/b_ack (input channels), sum/sum_ack (output).
module di_full_adder
  import flysig_pkg::*;
#(
  parameter int unsigned IN_DEPTH    = 2,
  parameter int unsigned OUT_DEPTH   = 2,
  parameter int unsigned CARRY_DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  dr_t  a,
  output logic a_ack,
  input  dr_t  b,
  output logic b_ack,
  output dr_t  sum,
  input  logic sum_ack
);
  dr_t  a_q, b_q, c_q, s_d, co_d;
  logic s_ack, co_ack, op_ack;

  di_shiftreg #(.DEPTH(IN_DEPTH)) u_qa (
    .clk, .rst_n, .in(a), .in_ack(a_ack), .out(a_q), .out_ack(op_ack));
  di_shiftreg #(.DEPTH(IN_DEPTH)) u_qb (
    .clk, .rst_n, .in(b), .in_ack(b_ack), .out(b_q), .out_ack(op_ack));

  dr_add u_add (.a(a_q), .b(b_q), .c(c_q), .s(s_d), .co(co_d));

  di_shiftreg #(.DEPTH(OUT_DEPTH)) u_qs (
    .clk, .rst_n, .in(s_d), .in_ack(s_ack), .out(sum), .out_ack(sum_ack));

  // Carry ring: the element nearest the adder holds the initial 0.
  di_shiftreg #(
    .DEPTH(CARRY_DEPTH),
    .INIT_VALID(CARRY_DEPTH'(1) << (CARRY_DEPTH - 1)),
    .INIT_VALUE('0)
  ) u_carry (
    .clk, .rst_n, .in(co_d), .in_ack(co_ack), .out(c_q), .out_ack(op_ack));

  logic any_in;
  assign any_in = dr_valid(a_q) | dr_valid(b_q) | dr_valid(c_q);

  c_element #(.N(3)) u_join (.clk, .rst_n, .in({s_ack, co_ack, any_in}), .out(op_ack));
endmodule
