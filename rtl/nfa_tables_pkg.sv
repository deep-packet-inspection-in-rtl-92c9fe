// NFA tables used by the default three-stage configuration.
//
// They form a chain of over-approximations of one language, built from the pruning
// example NFA (states q0..q4 over the symbols 'a' and 'b'):
//   A3 (precise): q0-a->q1, q1-a->q1, q1-b->q2, q2-b->q4, q1-a->q3; q3 and q4 final.
//   A2: A3 pruned with R = {q4}. q2 becomes a border state and therefore final.
//   A1: A3 pruned with R = {q2, q4} and then reduced by simulation, leaving
//       q0-a->q1 with q1 final.
// A3 and A1 are the left and right NFAs of the pruning example. A2 is this design's
// own intermediate step, made with the same pruning rule. Giving q3 the bit of RE 0
// and q4 the bit of RE 1 is also this design's choice. A border state reports the REs
// of the final states that were pruned behind it.
// Read as prefix languages (a packet matches once a final state is reached):
//   L(A3) = a a* (a | b b) ...,  L(A2) = a a* (a | b) ...,  L(A1) = a ...
package nfa_tables_pkg;
  import dpi_pkg::*;

  localparam logic [7:0] CH_A = 8'h61;  // 'a'
  localparam logic [7:0] CH_B = 8'h62;  // 'b'

  // A3: the precise NFA
  localparam int unsigned A3_Q = 5;
  localparam int unsigned A3_T = 5;
  localparam trans_t A3_TRANS [A3_T] = '{
    '{src: 16'd0, dst: 16'd1, lo: CH_A, hi: CH_A},
    '{src: 16'd1, dst: 16'd1, lo: CH_A, hi: CH_A},
    '{src: 16'd1, dst: 16'd2, lo: CH_B, hi: CH_B},
    '{src: 16'd2, dst: 16'd4, lo: CH_B, hi: CH_B},
    '{src: 16'd1, dst: 16'd3, lo: CH_A, hi: CH_A}
  };
  localparam re_map_t A3_FINAL [A3_Q] = '{2'b00, 2'b00, 2'b00, 2'b01, 2'b10};

  // A2: A3 with q4 pruned (border state q2 made final)
  localparam int unsigned A2_Q = 4;
  localparam int unsigned A2_T = 4;
  localparam trans_t A2_TRANS [A2_T] = '{
    '{src: 16'd0, dst: 16'd1, lo: CH_A, hi: CH_A},
    '{src: 16'd1, dst: 16'd1, lo: CH_A, hi: CH_A},
    '{src: 16'd1, dst: 16'd2, lo: CH_B, hi: CH_B},
    '{src: 16'd1, dst: 16'd3, lo: CH_A, hi: CH_A}
  };
  localparam re_map_t A2_FINAL [A2_Q] = '{2'b00, 2'b00, 2'b10, 2'b01};

  // A1: A3 with q2, q4 pruned, then simulation-reduced
  localparam int unsigned A1_Q = 2;
  localparam int unsigned A1_T = 1;
  localparam trans_t A1_TRANS [A1_T] = '{
    '{src: 16'd0, dst: 16'd1, lo: CH_A, hi: CH_A}
  };
  localparam re_map_t A1_FINAL [A1_Q] = '{2'b00, 2'b11};

endpackage
