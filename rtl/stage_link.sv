// Link between two stages of the multi-stage unit.
//
// A later stage has fewer FAs than the one before it, so its words are narrower:
// KO blocks instead of KI (KI must be a multiple of KO). The link takes one wide
// word, holds it in a register and hands it on as R = KI/KO narrow words, lowest
// blocks first, so the order of the packet's blocks is kept. In the last word of a
// packet only the sub-words that contain valid blocks are sent, and the last of
// them carries eop and its own block count. The match bitmap of the previous stage
// is not passed on: the next stage computes its own.
//
// The paper only mentions that the stages are interconnected, at negligible cost;
// this width converter is this design's own choice. Handshakes are valid/ready on
// both sides; in_ready does not depend on in_valid. A narrow word leaves at the
// earliest one cycle after its wide word was accepted; at most one wide word is
// held, and a new one is taken in the cycle the last sub-word leaves.
module stage_link #(
  parameter int unsigned KI  = 64,
  parameter int unsigned KO  = 32,
  parameter int unsigned NB  = 8,
  localparam int unsigned BI = $clog2(KI + 1),
  localparam int unsigned BO = $clog2(KO + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [KI*NB-1:0] in_data,
  input  logic             in_sop,
  input  logic             in_eop,
  input  logic [BI-1:0]    in_nblk,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [KO*NB-1:0] out_data,
  output logic             out_sop,
  output logic             out_eop,
  output logic [BO-1:0]    out_nblk
);

  localparam int unsigned R  = KI / KO;
  localparam int unsigned JW = (R > 1) ? $clog2(R) : 1;

  logic             h_valid;
  logic [KI*NB-1:0] h_data;
  logic             h_sop, h_eop;
  logic [BI-1:0]    h_nblk;
  logic [JW-1:0]    j;        // sub-word being sent
  logic [BI-1:0]    nsub;     // sub-words to send for the held word
  logic [BI-1:0]    rem;      // valid blocks from sub-word j on
  logic             last_sub;

  always_comb begin
    nsub     = h_eop ? BI'((h_nblk + BI'(KO - 1)) / BI'(KO)) : BI'(R);
    last_sub = (BI'(j) == nsub - 1'b1);
    rem      = h_nblk - BI'(j) * BI'(KO);
  end

  assign out_valid = h_valid;
  assign out_data  = h_data[j*KO*NB +: KO*NB];
  assign out_sop   = h_sop && (j == '0);
  assign out_eop   = h_eop && last_sub;
  assign out_nblk  = (h_eop && last_sub) ? BO'(rem) : BO'(KO);
  assign in_ready  = !h_valid || (out_ready && last_sub);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_valid <= 1'b0;
      j       <= '0;
    end else begin
      if (in_valid && in_ready) begin
        h_valid <= 1'b1;
        j       <= '0;
      end else if (h_valid && out_ready) begin
        if (last_sub) h_valid <= 1'b0;
        else          j       <= j + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      h_data <= in_data;
      h_sop  <= in_sop;
      h_eop  <= in_eop;
      h_nblk <= in_nblk;
    end
  end

endmodule
