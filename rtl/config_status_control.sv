// config_status_control - host interface: configuration and status.
//
// A simple synchronous register bus (addr, wdata, we, combinational rdata)
// stands in for the host bus of the processor. Through it the host loads
// the scheduling before execution - per memory cell the initial token,
// the routing enable and the operation id; per result source the guard
// flags - starts and stops the fabric with the run bit (the dataflow
// fabric is held in reset while run is 0, which loads the initial
// tokens), exchanges words with the I/O port and reads status.
// Register map (word addresses):
//   0x0000 CTRL    rw  [0] run
//   0x0001 STATUS  r   [0] I/O tx ready, [1] I/O rx word valid,
//                      [2] illegal dual-rail code seen in a cell,
//                      [3] routing conflict
//   0x0002 IO_TX   w   word to send into the fabric (taken when tx ready)
//   0x0003 IO_RX   r   received word; any write releases it
//   0x1000+c       rw  cell c: [1:0] initial token (0 empty, 1 zero,
//                      2 one), [2] routing enable, [15:8] operation id
//   0x2000+8s+w    rw  guard flags of source s, bits 32w..32w+31
//   0x3000+w       r   valid flags of cells 32w..32w+31
// The paper gives the block's role (scheduling into routing and guard
// evaluation, initial operands into memory, all from a host before
// execution); the register map is this design's.
module config_status_control
  import flysig_pkg::*;
#(
  parameter int unsigned N_CELL = N_CELL_DEF,
  parameter int unsigned N_SRC  = n_op_out(N_ADD_DEF, N_RSEL_DEF, N_WSEL_DEF) + N_EXT_DEF,
  parameter int unsigned N_DST  = N_CELL_DEF + N_EXT_DEF,
  parameter int unsigned W      = WORD_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  // host bus
  input  logic [15:0]         addr,
  input  logic [31:0]         wdata,
  input  logic                we,
  output logic [31:0]         rdata,
  // configuration
  output logic                run,
  output dr_init_e            cfg_init  [N_CELL],
  output logic [N_CELL-1:0]   cfg_en,
  output logic [OP_ID_W-1:0]  cfg_op_id [N_CELL],
  output logic [N_DST-1:0]    cfg_guard [N_SRC],
  // I/O port
  output logic [W-1:0]        tx_word,
  output logic                tx_load,
  input  logic                tx_ready,
  input  logic [W-1:0]        rx_word,
  input  logic                rx_valid,
  output logic                rx_take,
  // status
  input  logic [N_CELL-1:0]   valid_flags,
  input  logic                illegal,
  input  logic                conflict
);
  localparam int unsigned GW = (N_DST + 31) / 32;   // guard words per source
  localparam int unsigned VW = (N_CELL + 31) / 32;  // valid-flag words

  logic [GW*32-1:0] guard_q [N_SRC];
  logic             illegal_q;

  always_ff @(posedge clk) begin
    tx_load <= 1'b0;
    rx_take <= 1'b0;
    if (!rst_n) begin
      run       <= 1'b0;
      illegal_q <= 1'b0;
      tx_word   <= '0;
      cfg_en    <= '0;
      for (int c = 0; c < N_CELL; c++) begin
        cfg_init[c]  <= INIT_EMPTY;
        cfg_op_id[c] <= '0;
      end
      for (int s = 0; s < N_SRC; s++) guard_q[s] <= '0;
    end else begin
      if (illegal) illegal_q <= 1'b1;
      if (we) begin
        if (addr == 16'h0000) run <= wdata[0];
        if (addr == 16'h0002 && tx_ready) begin
          tx_word <= wdata[W-1:0];
          tx_load <= 1'b1;
        end
        if (addr == 16'h0003) rx_take <= 1'b1;
        for (int c = 0; c < N_CELL; c++)
          if (addr == 16'h1000 + 16'(c)) begin
            cfg_init[c]  <= dr_init_e'(wdata[1:0]);
            cfg_en[c]    <= wdata[2];
            cfg_op_id[c] <= wdata[8 +: OP_ID_W];
          end
        for (int s = 0; s < N_SRC; s++)
          for (int w = 0; w < GW; w++)
            if (addr == 16'h2000 + 16'(8*s + w)) guard_q[s][32*w +: 32] <= wdata;
      end
    end
  end

  always_comb
    for (int s = 0; s < N_SRC; s++) cfg_guard[s] = guard_q[s][N_DST-1:0];

  logic [VW*32-1:0] vflags;
  assign vflags = (VW*32)'(valid_flags);

  always_comb begin
    rdata = '0;
    if (addr == 16'h0000) rdata = {31'b0, run};
    if (addr == 16'h0001) rdata = {28'b0, conflict, illegal_q, rx_valid, tx_ready};
    if (addr == 16'h0003) rdata = 32'(rx_word);
    for (int c = 0; c < N_CELL; c++)
      if (addr == 16'h1000 + 16'(c))
        rdata = {16'b0, cfg_op_id[c], 5'b0, cfg_en[c], cfg_init[c]};
    for (int s = 0; s < N_SRC; s++)
      for (int w = 0; w < GW; w++)
        if (addr == 16'h2000 + 16'(8*s + w)) rdata = guard_q[s][32*w +: 32];
    for (int w = 0; w < VW; w++)
      if (addr == 16'h3000 + 16'(w)) rdata = vflags[32*w +: 32];
  end
endmodule
