// One finite automaton (FA) of the pipelined RE matching engine.
//
// The FA keeps no packet state of its own. Each clock it receives from the previous
// FA of the pipeline a configuration (the set of active NFA states, one bit per
// state) and a match bitmap, consumes one NB-bit block of the packet and registers
// the next configuration and the updated bitmap for the next FA. With in_first set
// it starts from the initial configuration {q0} instead of in_state, which is how
// the paper describes the FA that handles the first block of a packet. With in_en
// clear the block is skipped and configuration and bitmap pass through unchanged
// (used for the unused blocks of a packet's last word and for idle slots).
//
// The NFA is given by constant tables (see dpi_pkg). The next configuration is the
// classic one-flip-flop-per-state mapping: state d becomes active if some
// transition s --[lo..hi]--> d has s active and the symbol inside lo..hi. Matching
// is on prefixes: once any state with a nonzero RE bitmap is active, those RE bits
// are ORed into the match bitmap and stay set for the rest of the packet.
//
// A block of NB bits holds NB/8 symbols, applied one after the other within the
// cycle. The first symbol of the block is in bits [7:0]. The paper's main
// configuration uses NB = 8 (one symbol per cycle); its worked example uses 32.
// The byte order inside a block and the table format are this design's choices.
//
// Timing: one register stage; outputs are valid one cycle after the inputs.
module nfa_unit
  import dpi_pkg::*;
#(
  parameter int unsigned NB = 8,
  parameter int unsigned Q  = nfa_tables_pkg::A3_Q,
  parameter int unsigned T  = nfa_tables_pkg::A3_T,
  parameter trans_t  TRANS [T] = nfa_tables_pkg::A3_TRANS,
  parameter re_map_t FINAL [Q] = nfa_tables_pkg::A3_FINAL
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_en,     // process in_block this cycle
  input  logic          in_first,  // in_block is the first block of a packet
  input  logic [NB-1:0] in_block,
  input  logic [Q-1:0]  in_state,
  input  re_map_t       in_match,
  output logic [Q-1:0]  out_state,
  output re_map_t       out_match
);

  localparam int unsigned S = NB / SYM_W;  // symbols per block

  function automatic logic [Q-1:0] step(input logic [Q-1:0] cur, input logic [SYM_W-1:0] sym);
    logic [Q-1:0] nxt, src_on;
    nxt = '0;
    for (int t = 0; t < T; t++) begin
      src_on = cur >> TRANS[t].src;
      if (src_on[0] && sym >= TRANS[t].lo && sym <= TRANS[t].hi)
        nxt = nxt | (Q'(1) << TRANS[t].dst);
    end
    return nxt;
  endfunction

  function automatic re_map_t hits(input logic [Q-1:0] cur);
    re_map_t m;
    m = '0;
    for (int q = 0; q < Q; q++) begin
      if (cur[q]) m = m | FINAL[q];
    end
    return m;
  endfunction

  logic [Q-1:0] nxt_state;
  re_map_t      nxt_match;

  always_comb begin
    logic [Q-1:0] s;
    re_map_t      m;
    if (in_first) begin
      s = Q'(1);           // initial configuration {q0}
      m = hits(Q'(1));
    end else begin
      s = in_state;
      m = in_match;
    end
    for (int i = 0; i < S; i++) begin
      s = step(s, in_block[i*SYM_W +: SYM_W]);
      m = m | hits(s);
    end
    if (in_en) begin
      nxt_state = s;
      nxt_match = m;
    end else begin
      nxt_state = in_state;
      nxt_match = in_match;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_state <= '0;
      out_match <= '0;
    end else begin
      out_state <= nxt_state;
      out_match <= nxt_match;
    end
  end

endmodule
