// flysig_target - FLYSIG target version: the processor with its schedule
// hard-wired and only the operators one algorithm needs.
//
// What it does and how it works:
//   This is the same ring as flysig_processor:
//     local memory -> token evaluation -> routing -> operators and ports
//     -> distributor -> guard evaluation -> local memory.
//   The differences:
//   - Every configuration value is a parameter: each cell's initial token,
//     enable and operation id, and the guard flags of each result source.
//     The host register bus is gone, so there is no run bit. The fabric
//     starts from the initial tokens when rst_n is released.
//   - The operator counts are parameters too. They are set to what the
//     mapped algorithm uses, and synthesis removes the constant routing
//     logic.
//   The port numbering is the same as in flysig_processor, computed from the
//   counts:
//     operator inputs: adders, then rselects, then wselects, then the I/O sink
//       and the D/A sink;
//     result sources: adders, rselects, wselects, the I/O source, the A/D
//       source, then the input links;
//     destinations: cells, then output links.
//   The default program computes y = 3x on the converter streams:
//   - A/D samples are forked to cell 0 (adder a) and to cell 1 (adder b).
//   - Cell 1 starts with a 0 token, which shifts its copy one bit up and
//     doubles it.
//   - The sum goes through cell 2 to the D/A port.
//   - The one adder is the only operator kept. No select operator is built.
//
// Interface and timing:
//   - The I/O port's host side is a plain word handshake: tx_word/tx_load/
//     tx_ready, and rx_word/rx_valid/rx_take.
//   - The converter handshakes are those of adda_port.
//   - ext_in/ext_out are dual-rail channels to a neighbouring processor.
//   - The status outputs valid_flags (one per cell), illegal and conflict
//     are combinational.
//   - The clock only emulates the C-gate delays, as in the prototype.
//
// Parameter layout:
//   - CELL_INIT[2c+1:2c] is cell c's initial token: 0 empty, 1 zero, 2 one.
//   - CELL_EN[c] is cell c's enable.
//   - CELL_OP[8c+7:8c] is cell c's operation id.
//   - GUARD[s*N_DST+d] sends source s to destination d.
//
// Paper and own choices: the paper says the target differs from the
// prototype only in a hard-wired routing configuration and in dropping
// unused operators. Everything else (operators, dataflow) is unchanged,
// and this module follows that. The parameter encoding and the default
// program are this design's choices.
module flysig_target
  import flysig_pkg::*;
#(
  parameter int unsigned N_ADD      = 1,
  parameter int unsigned N_RSEL     = 0,
  parameter int unsigned N_WSEL     = 0,
  parameter int unsigned N_EXT      = 1,
  parameter int unsigned N_CELL     = 4,
  parameter int unsigned CELL_DEPTH = 2,
  parameter int unsigned W          = WORD_DEF,
  localparam int unsigned NI_OP = 2*N_ADD + 3*N_RSEL + 2*N_WSEL,
  localparam int unsigned NO_OP = N_ADD + N_RSEL + 2*N_WSEL,
  localparam int unsigned N_IN  = NI_OP + 2,
  localparam int unsigned N_OUT = NO_OP + 2,
  localparam int unsigned N_SRC = N_OUT + N_EXT,
  localparam int unsigned N_DST = N_CELL + N_EXT,
  // default: cell 1 holds a 0 token
  parameter logic [2*N_CELL-1:0]       CELL_INIT = 8'b00_00_01_00,
  parameter logic [N_CELL-1:0]         CELL_EN   = 4'b0111,
  // cell 0 -> adder0.a (0), cell 1 -> adder0.b (1), cell 2 -> D/A (3)
  parameter logic [OP_ID_W*N_CELL-1:0] CELL_OP   = 32'h00_03_01_00,
  // A/D (source 2) -> cells 0 and 1; adder0 (source 0) -> cell 2
  parameter logic [N_SRC*N_DST-1:0]    GUARD     = 20'h00C04
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [W-1:0]     tx_word,
  input  logic             tx_load,
  output logic             tx_ready,
  output logic [W-1:0]     rx_word,
  output logic             rx_valid,
  input  logic             rx_take,
  input  logic [W-1:0]     ad_data,
  input  logic             ad_valid,
  output logic             ad_ready,
  output logic [W-1:0]     da_data,
  output logic             da_valid,
  input  logic             da_ready,
  input  dr_t  [N_EXT-1:0] ext_in,
  output logic [N_EXT-1:0] ext_in_ack,
  output dr_t  [N_EXT-1:0] ext_out,
  input  logic [N_EXT-1:0] ext_out_ack,
  output logic [N_CELL-1:0] valid_flags,
  output logic             illegal,
  output logic             conflict
);
  dr_init_e            cfg_init  [N_CELL];
  logic [N_CELL-1:0]   cfg_en;
  logic [OP_ID_W-1:0]  cfg_op_id [N_CELL];
  logic [N_DST-1:0]    cfg_guard [N_SRC];

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

  // hard-wired schedule
  for (genvar c = 0; c < N_CELL; c++) begin : g_cfg_cell
    assign cfg_init[c]  = dr_init_e'(CELL_INIT[2*c +: 2]);
    assign cfg_en[c]    = CELL_EN[c];
    assign cfg_op_id[c] = CELL_OP[OP_ID_W*c +: OP_ID_W];
  end
  for (genvar s = 0; s < N_SRC; s++) begin : g_cfg_src
    assign cfg_guard[s] = GUARD[N_DST*s +: N_DST];
  end

  local_memory #(.N_CELL(N_CELL), .CELL_DEPTH(CELL_DEPTH)) u_mem (
    .clk, .rst_n, .cfg_init,
    .wr(cell_wr), .wr_ack(cell_wr_ack), .rd(cell_rd), .rd_ack(cell_rd_ack));

  token_evaluation #(.N_CELL(N_CELL)) u_tok (
    .cell_q(cell_rd), .cfg_op_id, .cfg_en, .tok, .valid_flags, .illegal);

  routing #(.N_CELL(N_CELL), .N_IN(N_IN)) u_route (
    .tok, .cell_ack(cell_rd_ack), .op_in, .op_ack(op_in_ack), .conflict);

  operation_component #(.N_ADD(N_ADD), .N_RSEL(N_RSEL), .N_WSEL(N_WSEL)) u_ops (
    .clk, .rst_n,
    .in(op_in[NI_OP-1:0]), .in_ack(op_in_ack[NI_OP-1:0]),
    .out(op_out[NO_OP-1:0]), .out_ack(op_out_ack[NO_OP-1:0]));

  io_port #(.W(W)) u_io (
    .clk, .rst_n,
    .tx_word, .tx_load, .tx_ready, .rx_word, .rx_valid, .rx_take,
    .src(op_out[N_OUT-2]), .src_ack(op_out_ack[N_OUT-2]),
    .snk(op_in[N_IN-2]),   .snk_ack(op_in_ack[N_IN-2]));

  adda_port #(.W(W)) u_adda (
    .clk, .rst_n,
    .ad_data, .ad_valid, .ad_ready, .da_data, .da_valid, .da_ready,
    .src(op_out[N_OUT-1]), .src_ack(op_out_ack[N_OUT-1]),
    .snk(op_in[N_IN-1]),   .snk_ack(op_in_ack[N_IN-1]));

  distributor #(.N_OUT(N_OUT), .N_EXT(N_EXT), .N_CELL(N_CELL)) u_dist (
    .op_out, .op_out_ack, .ext_in, .ext_in_ack, .src, .src_ack,
    .dst_sel, .cell_wr, .ext_out);

  guard_evaluation #(.N_SRC(N_SRC), .N_DST(N_DST)) u_guard (
    .clk, .rst_n, .cfg_guard, .src, .src_ack,
    .dst_ack({ext_out_ack, cell_wr_ack}), .dst_sel);
endmodule
