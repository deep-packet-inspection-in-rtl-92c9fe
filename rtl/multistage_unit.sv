// Multi-stage RE matching unit (top level).
//
// Three match_engine stages in a row, joined by stage_link width converters. Stage 1
// sees the full input rate with K1 copies of the smallest, least precise NFA (A1);
// only the packets it accepts reach stage 2, which therefore needs fewer copies
// (K2) of a larger, more precise NFA (A2); stage 3 has K3 copies of the precise NFA
// (A3). Every stage drops the packets its NFA rejects. Because each NFA accepts a
// superset of the language of the next one, no packet that the precise NFA accepts
// is lost; the output carries exactly the packets matched by A3, each with the RE
// bitmap computed by stage 3.
//
// Sizes follow the paper: 8-bit NFAs at 200 MHz (1.6 Gbit/s each) and a 512-bit
// input word, so K1 = 64 copies take 100 Gbit/s. K2 = 32 and K3 = 16 give the
// stages the same throughputs as the paper's worked 3-stage example (16, 8 and 4
// NFAs of 32 bits, i.e. 102.4, 51.2 and 25.6 Gbit/s); the stage sizes for the
// evaluated RE sets are not given. The NFAs are the pruning example's chain from
// nfa_tables_pkg. The packet receive path and the transfer to the host are not part
// of this module: input and output are plain packet streams.
//
// Interface: valid/ready packet streams as in match_engine (sop, eop, nblk = valid
// bytes of the word, byte 0 in bits [7:0]). The output is K3*NB bits wide and
// carries the match bitmap with every word. stage_drop/stage_pass/stage_wait pulse,
// one bit per stage, when a stage drops a packet, forwards a packet, or has a
// context waiting for data.
module multistage_unit
  import dpi_pkg::*;
#(
  parameter int unsigned NB    = 8,
  parameter int unsigned K1    = 64,
  parameter int unsigned K2    = 32,
  parameter int unsigned K3    = 16,
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned PKTS  = 256,
  localparam int unsigned B1   = $clog2(K1 + 1),
  localparam int unsigned B2   = $clog2(K2 + 1),
  localparam int unsigned B3   = $clog2(K3 + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [K1*NB-1:0] in_data,
  input  logic             in_sop,
  input  logic             in_eop,
  input  logic [B1-1:0]    in_nblk,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [K3*NB-1:0] out_data,
  output logic             out_sop,
  output logic             out_eop,
  output logic [B3-1:0]    out_nblk,
  output re_map_t          out_match,
  output logic [2:0]       stage_drop,
  output logic [2:0]       stage_pass,
  output logic [2:0]       stage_wait
);

  import nfa_tables_pkg::*;

  // stage 1 -> link 1
  logic             s1_valid, s1_ready, s1_sop, s1_eop;
  logic [K1*NB-1:0] s1_data;
  logic [B1-1:0]    s1_nblk;
  re_map_t          s1_match;
  // link 1 -> stage 2
  logic             l1_valid, l1_ready, l1_sop, l1_eop;
  logic [K2*NB-1:0] l1_data;
  logic [B2-1:0]    l1_nblk;
  // stage 2 -> link 2
  logic             s2_valid, s2_ready, s2_sop, s2_eop;
  logic [K2*NB-1:0] s2_data;
  logic [B2-1:0]    s2_nblk;
  re_map_t          s2_match;
  // link 2 -> stage 3
  logic             l2_valid, l2_ready, l2_sop, l2_eop;
  logic [K3*NB-1:0] l2_data;
  logic [B3-1:0]    l2_nblk;

  // The bitmaps of stages 1 and 2 are over-approximations and are not passed on
  // (each stage computes its own), and ev_done is not brought out: these outputs
  // are left unconnected on purpose.
  logic [2:0] done_unused;

  match_engine #(.K(K1), .NB(NB), .DEPTH(DEPTH), .PKTS(PKTS),
                 .Q(A1_Q), .T(A1_T), .TRANS(A1_TRANS), .FINAL(A1_FINAL)) u_stage1 (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data, .in_sop, .in_eop, .in_nblk,
    .out_valid(s1_valid), .out_ready(s1_ready), .out_data(s1_data), .out_sop(s1_sop),
    .out_eop(s1_eop), .out_nblk(s1_nblk), .out_match(s1_match),
    .ev_wait(stage_wait[0]), .ev_done(done_unused[0]), .ev_drop(stage_drop[0]),
    .ev_pass(stage_pass[0])
  );

  stage_link #(.KI(K1), .KO(K2), .NB(NB)) u_link1 (
    .clk, .rst_n,
    .in_valid(s1_valid), .in_ready(s1_ready), .in_data(s1_data), .in_sop(s1_sop),
    .in_eop(s1_eop), .in_nblk(s1_nblk),
    .out_valid(l1_valid), .out_ready(l1_ready), .out_data(l1_data), .out_sop(l1_sop),
    .out_eop(l1_eop), .out_nblk(l1_nblk)
  );

  match_engine #(.K(K2), .NB(NB), .DEPTH(DEPTH), .PKTS(PKTS),
                 .Q(A2_Q), .T(A2_T), .TRANS(A2_TRANS), .FINAL(A2_FINAL)) u_stage2 (
    .clk, .rst_n,
    .in_valid(l1_valid), .in_ready(l1_ready), .in_data(l1_data), .in_sop(l1_sop),
    .in_eop(l1_eop), .in_nblk(l1_nblk),
    .out_valid(s2_valid), .out_ready(s2_ready), .out_data(s2_data), .out_sop(s2_sop),
    .out_eop(s2_eop), .out_nblk(s2_nblk), .out_match(s2_match),
    .ev_wait(stage_wait[1]), .ev_done(done_unused[1]), .ev_drop(stage_drop[1]),
    .ev_pass(stage_pass[1])
  );

  stage_link #(.KI(K2), .KO(K3), .NB(NB)) u_link2 (
    .clk, .rst_n,
    .in_valid(s2_valid), .in_ready(s2_ready), .in_data(s2_data), .in_sop(s2_sop),
    .in_eop(s2_eop), .in_nblk(s2_nblk),
    .out_valid(l2_valid), .out_ready(l2_ready), .out_data(l2_data), .out_sop(l2_sop),
    .out_eop(l2_eop), .out_nblk(l2_nblk)
  );

  match_engine #(.K(K3), .NB(NB), .DEPTH(DEPTH), .PKTS(PKTS),
                 .Q(A3_Q), .T(A3_T), .TRANS(A3_TRANS), .FINAL(A3_FINAL)) u_stage3 (
    .clk, .rst_n,
    .in_valid(l2_valid), .in_ready(l2_ready), .in_data(l2_data), .in_sop(l2_sop),
    .in_eop(l2_eop), .in_nblk(l2_nblk),
    .out_valid, .out_ready, .out_data, .out_sop, .out_eop, .out_nblk, .out_match,
    .ev_wait(stage_wait[2]), .ev_done(done_unused[2]), .ev_drop(stage_drop[2]),
    .ev_pass(stage_pass[2])
  );

endmodule
