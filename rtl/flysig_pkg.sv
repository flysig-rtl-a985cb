// flysig_pkg - shared types and helpers of the FLYSIG dataflow processor.
//
// Every data bit in the design travels as a dual-rail code on two wires:
// {t,f} = 00 is the empty spacer ("null"), 10 is a logic 1, 01 a logic 0 and
// 11 is illegal. A channel is a dual-rail bit plus one acknowledge wire that
// runs back from the consumer (four-phase, return-to-zero protocol:
// data valid -> ack high -> data null -> ack low). Numbers are sent
// bit-serially, least significant bit first, one dual-rail token per bit.
//
// The dual-rail code and the four-phase protocol follow the paper. The
// clocked emulation of the C-gates (see c_element), the operator numbering
// of the prototype processor and the host register map are this design's own.
package flysig_pkg;

  typedef struct packed {
    logic t;   // true rail
    logic f;   // false rail
  } dr_t;

  localparam dr_t DR_NULL = '{t: 1'b0, f: 1'b0};
  localparam dr_t DR_ZERO = '{t: 1'b0, f: 1'b1};
  localparam dr_t DR_ONE  = '{t: 1'b1, f: 1'b0};

  // Initial content of a basic register element.
  typedef enum logic [1:0] {
    INIT_EMPTY = 2'd0,   // uninitialized minimal register
    INIT_ZERO  = 2'd1,   // 0-initialized register
    INIT_ONE   = 2'd2    // 1-initialized register
  } dr_init_e;

  function automatic dr_t dr_of_init(dr_init_e i);
    case (i)
      INIT_ZERO: return DR_ZERO;
      INIT_ONE:  return DR_ONE;
      default:   return DR_NULL;
    endcase
  endfunction

  function automatic dr_t dr_enc(logic b);
    return '{t: b, f: ~b};
  endfunction

  function automatic logic dr_valid(dr_t d);
    return d.t | d.f;
  endfunction

  function automatic logic dr_illegal(dr_t d);
    return d.t & d.f;
  endfunction

  // Dual-rail logic gates (Fig. 6(b) style): each output rail is a
  // monotonic function of the input rails, so a null input yields null.
  function automatic dr_t dr_and(dr_t a, dr_t b);
    return '{t: a.t & b.t, f: a.f | b.f};
  endfunction

  function automatic dr_t dr_or(dr_t a, dr_t b);
    return '{t: a.t | b.t, f: a.f & b.f};
  endfunction

  function automatic dr_t dr_xor(dr_t a, dr_t b);
    return '{t: (a.t & b.f) | (a.f & b.t), f: (a.t & b.t) | (a.f & b.f)};
  endfunction

  // Next state of a two-input Muller C-gate with inputs a, b and state q.
  function automatic logic c_gate(logic a, logic b, logic q);
    return (a & b) | (q & (a | b));
  endfunction

  // Prototype-processor operator set (defaults).
  localparam int unsigned N_ADD_DEF  = 26;  // bit-serial full adders
  localparam int unsigned N_RSEL_DEF = 2;   // RSELECT operators
  localparam int unsigned N_WSEL_DEF = 2;   // WSELECT operators
  localparam int unsigned N_EXT_DEF  = 2;   // links to a neighbouring processor
  localparam int unsigned N_CELL_DEF = 64;  // local memory token cells
  localparam int unsigned WORD_DEF   = 16;  // port sample width

  // Number of operator input ports and result sources of the operation
  // component, port numbering:
  //   inputs : adder k -> 2k (a), 2k+1 (b); then rselect j -> S,A,B;
  //            then wselect j -> S,D; then I/O-port sink; then D/A sink
  //   results: adder sums; rselect Y; wselect Y(true), Y(false) per op;
  //            I/O-port source; A/D source; then external inputs
  // A token as seen by the routing: the operation id (operator input port
  // the cell feeds), the valid flag of the cell, and the dual-rail data.
  localparam int unsigned OP_ID_W = 8;
  typedef struct packed {
    logic [OP_ID_W-1:0] op_id;
    logic               en;     // cell is scheduled (routing switch closed)
    logic               valid;  // valid-flag: cell holds a data token
    dr_t                data;
  } token_t;

  function automatic int unsigned n_op_in(int unsigned na, int unsigned nr, int unsigned nw);
    return 2*na + 3*nr + 2*nw + 2;
  endfunction

  function automatic int unsigned n_op_out(int unsigned na, int unsigned nr, int unsigned nw);
    return na + nr + 2*nw + 2;
  endfunction

endpackage
