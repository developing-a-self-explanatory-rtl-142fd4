// nfa_pkg: types and constants shared by the NFA transducer engine.
//
// The engine streams 8-bit symbols, so every PE holds a 256-entry match RAM
// and the transduction table stores one 8-bit output symbol per PE. The
// 256-entry RAM follows the paper; the configuration-bus encoding, the start
// modes and the neighbour numbering are this design's own choices.
package nfa_pkg;

  localparam int unsigned SYM_W  = 8;            // input/output symbol width
  localparam int unsigned NSYM   = 1 << SYM_W;   // 256 symbols per match RAM
  localparam int unsigned NDIR   = 4;            // immediate neighbours
  localparam int unsigned PEID_W = 16;           // PE index field on the config bus

  typedef logic [SYM_W-1:0] sym_t;

  // The empty output symbol (epsilon) is encoded as 0.
  localparam sym_t SYM_EPS = '0;

  // Neighbour directions, used as bit positions of the switch mask.
  typedef enum logic [1:0] {
    DIR_N = 2'd0,
    DIR_E = 2'd1,
    DIR_S = 2'd2,
    DIR_W = 2'd3
  } dir_e;

  // When a PE may be enabled without a neighbour.
  typedef enum logic [1:0] {
    START_NONE = 2'd0,  // only via neighbours
    START_SUB  = 2'd1,  // at the first symbol of every sub-sequence
    START_ALL  = 2'd2   // at every symbol
  } start_mode_e;

  // What a configuration write targets.
  typedef enum logic [2:0] {
    CFG_SYM    = 3'd0,  // match RAM bit: pe, sym, data[0]
    CFG_SWITCH = 3'd1,  // neighbour enable mask: pe, data[3:0]
    CFG_START  = 3'd2,  // start mode: pe, data[1:0]
    CFG_REPORT = 3'd3,  // report flag: pe, data[0]
    CFG_OUT    = 3'd4   // transduction table entry: pe, data[7:0]
  } cfg_target_e;

  typedef struct packed {
    logic                  we;
    cfg_target_e           target;
    logic [PEID_W-1:0]     pe;
    sym_t                  sym;
    logic [7:0]            data;
  } cfg_t;

  // Controller phases, one per term of the execution-time formula.
  typedef enum logic [2:0] {
    ST_LOAD      = 3'd0,  // n cycles: sub-sequence flushed into the engine
    ST_RUN       = 3'd1,  // 2n cycles: transitions
    ST_FLUSH_VEC = 3'd2,  // 1 cycle: state vector into the FIFO
    ST_TRANSDUCE = 3'd3,  // m cycles: transduction
    ST_OUTPUT    = 3'd4   // n cycles: output sub-sequence flushed out
  } ctrl_state_e;

endpackage
