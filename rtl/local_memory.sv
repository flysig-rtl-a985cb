// local_memory - token store of the memory and routing component.
//
// N_CELL cells, each a queue of CELL_DEPTH basic register elements: results
// from the guard evaluation enter at wr[c], tokens leave towards the
// token evaluation at rd[c]. While the fabric is held in reset, the output
// element of every cell is loaded with the initial token cfg_init[c]
// chosen by the host (empty, 0 or 1), which is how the configuration
// stores initial operands; the other elements start empty. The paper calls
// these the local memory (registers) and asks for an extra empty element
// per data bit, hence the default depth of 2. Cell count and depth are
// this design's choice.
// Interface: wr[c]/wr_ack[c] input channels, rd[c]/rd_ack[c] outputs.
module local_memory
  import flysig_pkg::*;
#(
  parameter int unsigned N_CELL     = N_CELL_DEF,
  parameter int unsigned CELL_DEPTH = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  dr_init_e             cfg_init [N_CELL],
  input  dr_t     [N_CELL-1:0] wr,
  output logic    [N_CELL-1:0] wr_ack,
  output dr_t     [N_CELL-1:0] rd,
  input  logic    [N_CELL-1:0] rd_ack
);
  for (genvar c = 0; c < N_CELL; c++) begin : g_cell
    dr_t  d   [CELL_DEPTH+1];
    logic ack [CELL_DEPTH+1];
    assign d[0]            = wr[c];
    assign wr_ack[c]       = ack[0];
    assign rd[c]           = d[CELL_DEPTH];
    assign ack[CELL_DEPTH] = rd_ack[c];
    for (genvar i = 0; i < CELL_DEPTH; i++) begin : g_el
      di_reg u_el (
        .clk, .rst_n,
        .init_val(i == CELL_DEPTH - 1 ? dr_of_init(cfg_init[c]) : DR_NULL),
        .in(d[i]), .in_ack(ack[i]), .out(d[i+1]), .out_ack(ack[i+1]));
    end
  end
endmodule
