// Shared types and constants of the multi-stage regular-expression matching unit.
//
// An NFA is handed to the hardware as two constant tables: a list of transitions
// (source state, target state, inclusive symbol range lo..hi) and, for every state,
// the bitmap of regular expressions (REs) it reports when it becomes active. A state
// whose bitmap is zero is not final. State 0 is always the initial state.
// Symbols are bytes. The table format is this design's own choice: the NFAs that
// were evaluated were generated as HDL by an external tool, which is not described.
package dpi_pkg;

  localparam int unsigned SYM_W  = 8;   // one input symbol is one byte
  localparam int unsigned IDX_W  = 16;  // width of a state index in the tables
  localparam int unsigned NUM_RE = 2;   // REs reported in a match bitmap

  typedef logic [NUM_RE-1:0] re_map_t;

  // One NFA transition: src --[lo..hi]--> dst
  typedef struct packed {
    logic [IDX_W-1:0] src;
    logic [IDX_W-1:0] dst;
    logic [SYM_W-1:0] lo;
    logic [SYM_W-1:0] hi;
  } trans_t;

endpackage
