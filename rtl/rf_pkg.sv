// rf_pkg: types and constants shared by the rate-flexible Fast-SSCL-SPC
// polar list decoder.
//
// LLRs are kept in sign-magnitude form as in the paper: internal LLRs use
// QLLR = 6 bits (1 sign bit, 5 magnitude bits, 2 of them fractional) and
// channel LLRs QCH = 4 bits (1 sign, 3 magnitude bits, same scaling, which is
// this design's choice). Path metrics are unsigned QPM = 8 bits and saturate.
//
// The control unit talks to the datapath with one command word per cycle
// (cmd_t). Its opcode names the decoding phase; the node sub-phases of the
// paper's NodeType signal (Rate-1: sort / estimate / hard decision, SPC:
// sort / estimate / hard decision / parity, Rep: one split) are opcodes.
package rf_pkg;

  localparam int unsigned QLLR = 6;   // internal LLR width (paper: 6)
  localparam int unsigned QCH  = 4;   // channel LLR width (paper: 4)
  localparam int unsigned QPM  = 8;   // path metric width (paper: 8)
  localparam int unsigned MAGW = QLLR - 1;

  // Command field widths: large enough for N up to 2^15.
  localparam int unsigned STW  = 5;   // stage index
  localparam int unsigned IDXW = 16;  // bit index
  localparam int unsigned CHW  = 8;   // chunk index
  localparam int unsigned STPW = 4;   // step inside a node phase

  typedef struct packed {
    logic            s;  // 1 = negative LLR (hard decision 1)
    logic [MAGW-1:0] m;  // magnitude
  } llr_t;

  typedef logic [QPM-1:0] pm_t;

  // Node classes found by the on-line identifier.
  typedef enum logic [2:0] {
    NODE_NONE  = 3'd0,  // not special: keep descending the tree
    NODE_RATE0 = 3'd1,
    NODE_RATE1 = 3'd2,
    NODE_REP   = 3'd3,
    NODE_SPC   = 3'd4
  } node_e;

  // Datapath operations (NodeType with its sub-types, plus tree moves).
  typedef enum logic [3:0] {
    OP_NOP       = 4'd0,
    OP_INIT      = 4'd1,   // new frame: one path, PM = 0
    OP_F         = 4'd2,   // F_t, one chunk of N_PE outputs
    OP_G         = 4'd3,   // G_t, one chunk of N_PE outputs
    OP_R0        = 4'd4,   // Rate-0 node
    OP_REP       = 4'd5,   // Rep node (split on its information bit)
    OP_R1_SORT   = 4'd6,   // Rate-1: fetch and sort LLR magnitudes
    OP_R1_EST    = 4'd7,   // Rate-1: estimate one unreliable bit (split)
    OP_R1_HARD   = 4'd8,   // Rate-1: hard decision on the remaining bits
    OP_SPC_SORT  = 4'd9,   // SPC: fetch, sort, parity and frozen bit
    OP_SPC_EST   = 4'd10,  // SPC: estimate one unreliable bit (split)
    OP_SPC_HARD  = 4'd11,  // SPC: hard decision on the remaining bits
    OP_SPC_PAR   = 4'd12,  // SPC: parity correction on the least reliable bit
    OP_COMBINE   = 4'd13,  // partial-sum combine, lower layer
    OP_BOUNDARY  = 4'd14,  // LPSCL partition boundary: prune and transfer up
    OP_UCOMBINE  = 4'd15   // partial-sum combine, upper layer
  } op_e;

  typedef struct packed {
    op_e             op;
    logic [STW-1:0]  stage;  // t: output stage of F/G, node stage otherwise
    logic [IDXW-1:0] idx;    // first bit index of the node concerned
    logic [CHW-1:0]  chunk;  // chunk of N_PE values for F/G
    logic [STPW-1:0] step;   // step inside a sort/estimate phase
  } cmd_t;

  // Saturating PM addition.
  function automatic pm_t pm_add(input pm_t a, input logic [QPM:0] b);
    logic [QPM+1:0] s;
    s = {1'b0, a} + {1'b0, b};
    return (s > (QPM+2)'((1 << QPM) - 1)) ? pm_t'((1 << QPM) - 1) : pm_t'(s);
  endfunction

endpackage
