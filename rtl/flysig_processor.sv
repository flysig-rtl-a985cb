// flysig_processor - FLYSIG configurable dataflow processor (prototype).
//
// Bit-serial, dual-rail, four-phase operators are wired into a ring:
// local memory -> token evaluation -> routing -> operators / ports ->
// distributor -> guard evaluation -> local memory. The host loads the
// scheduling through config_status_control while the fabric is held in
// reset (run = 0): the initial token of every memory cell, which operator
// input each cell feeds (its operation id), and the guard flags saying
// which cells or output links receive each result. With run = 1 tokens
// flow on their own: an operator fires as soon as its operand tokens are
// present and its results have somewhere to go, so the timing is set by
// the data, not by a schedule.
// Result sources: operator results, the I/O port (host words), the A/D
// port (converter samples) and N_EXT input links from a neighbouring
// processor. Destinations: the N_CELL memory cells and N_EXT output
// links to a neighbouring processor, so processors can be chained.
// Interface: host register bus (see config_status_control), converter
// sample handshakes (see adda_port), ext_in/ext_out dual-rail channels.
// Everything is clocked by clk, which emulates the C-gate delays (see
// c_element); no part of the function depends on its frequency.
// The block structure follows the paper's processor figure; operator mix,
// counts and all encodings are this design's choices.
module flysig_processor
  import flysig_pkg::*;
#(
  parameter int unsigned N_ADD      = N_ADD_DEF,
  parameter int unsigned N_RSEL     = N_RSEL_DEF,
  parameter int unsigned N_WSEL     = N_WSEL_DEF,
  parameter int unsigned N_EXT      = N_EXT_DEF,
  parameter int unsigned N_CELL     = N_CELL_DEF,
  parameter int unsigned CELL_DEPTH = 2,
  parameter int unsigned W          = WORD_DEF,
  localparam int unsigned NI_OP = 2*N_ADD + 3*N_RSEL + 2*N_WSEL,
  localparam int unsigned NO_OP = N_ADD + N_RSEL + 2*N_WSEL,
  localparam int unsigned N_IN  = NI_OP + 2,
  localparam int unsigned N_OUT = NO_OP + 2,
  localparam int unsigned N_SRC = N_OUT + N_EXT,
  localparam int unsigned N_DST = N_CELL + N_EXT
) (
  input  logic             clk,
  input  logic             rst_n,
  // host bus
  input  logic [15:0]      addr,
  input  logic [31:0]      wdata,
  input  logic             we,
  output logic [31:0]      rdata,
  // D/A - A/D converters
  input  logic [W-1:0]     ad_data,
  input  logic             ad_valid,
  output logic             ad_ready,
  output logic [W-1:0]     da_data,
  output logic             da_valid,
  input  logic             da_ready,
  // links to neighbouring processors
  input  dr_t  [N_EXT-1:0] ext_in,
  output logic [N_EXT-1:0] ext_in_ack,
  output dr_t  [N_EXT-1:0] ext_out,
  input  logic [N_EXT-1:0] ext_out_ack
);
  logic                run, fab_rst_n;
  dr_init_e            cfg_init  [N_CELL];
  logic [N_CELL-1:0]   cfg_en;
  logic [OP_ID_W-1:0]  cfg_op_id [N_CELL];
  logic [N_DST-1:0]    cfg_guard [N_SRC];
  logic [W-1:0]        tx_word, rx_word;
  logic                tx_load, tx_ready, rx_valid, rx_take;
  logic [N_CELL-1:0]   valid_flags;
  logic                illegal, conflict;

  dr_t    [N_CELL-1:0] cell_wr, cell_rd;
  logic   [N_CELL-1:0] cell_wr_ack, cell_rd_ack;
  token_t              tok [N_CELL];
  dr_t    [N_IN-1:0]   op_in;
  logic   [N_IN-1:0]   op_in_ack;
  dr_t    [N_OUT-1:0]  op_out;
  logic   [N_OUT-1:0]  op_out_ack;
  dr_t    [N_SRC-1:0]  src;
  logic   [N_SRC-1:0]  src_ack;
  logic   [N_SRC-1:0]  dst_sel [N_DST];

  assign fab_rst_n = rst_n & run;

  config_status_control #(.N_CELL(N_CELL), .N_SRC(N_SRC), .N_DST(N_DST), .W(W)) u_cfg (
    .clk, .rst_n, .addr, .wdata, .we, .rdata,
    .run, .cfg_init, .cfg_en, .cfg_op_id, .cfg_guard,
    .tx_word, .tx_load, .tx_ready, .rx_word, .rx_valid, .rx_take,
    .valid_flags, .illegal, .conflict);

  local_memory #(.N_CELL(N_CELL), .CELL_DEPTH(CELL_DEPTH)) u_mem (
    .clk, .rst_n(fab_rst_n), .cfg_init,
    .wr(cell_wr), .wr_ack(cell_wr_ack), .rd(cell_rd), .rd_ack(cell_rd_ack));

  token_evaluation #(.N_CELL(N_CELL)) u_tok (
    .cell_q(cell_rd), .cfg_op_id, .cfg_en, .tok, .valid_flags, .illegal);

  routing #(.N_CELL(N_CELL), .N_IN(N_IN)) u_route (
    .tok, .cell_ack(cell_rd_ack), .op_in, .op_ack(op_in_ack), .conflict);

  operation_component #(.N_ADD(N_ADD), .N_RSEL(N_RSEL), .N_WSEL(N_WSEL)) u_ops (
    .clk, .rst_n(fab_rst_n),
    .in(op_in[NI_OP-1:0]), .in_ack(op_in_ack[NI_OP-1:0]),
    .out(op_out[NO_OP-1:0]), .out_ack(op_out_ack[NO_OP-1:0]));

  io_port #(.W(W)) u_io (
    .clk, .rst_n(fab_rst_n),
    .tx_word, .tx_load, .tx_ready, .rx_word, .rx_valid, .rx_take,
    .src(op_out[N_OUT-2]), .src_ack(op_out_ack[N_OUT-2]),
    .snk(op_in[N_IN-2]),   .snk_ack(op_in_ack[N_IN-2]));

  adda_port #(.W(W)) u_adda (
    .clk, .rst_n(fab_rst_n),
    .ad_data, .ad_valid, .ad_ready, .da_data, .da_valid, .da_ready,
    .src(op_out[N_OUT-1]), .src_ack(op_out_ack[N_OUT-1]),
    .snk(op_in[N_IN-1]),   .snk_ack(op_in_ack[N_IN-1]));

  distributor #(.N_OUT(N_OUT), .N_EXT(N_EXT), .N_CELL(N_CELL)) u_dist (
    .op_out, .op_out_ack, .ext_in, .ext_in_ack, .src, .src_ack,
    .dst_sel, .cell_wr, .ext_out);

  guard_evaluation #(.N_SRC(N_SRC), .N_DST(N_DST)) u_guard (
    .clk, .rst_n(fab_rst_n), .cfg_guard, .src, .src_ack,
    .dst_ack({ext_out_ack, cell_wr_ack}), .dst_sel);
endmodule
