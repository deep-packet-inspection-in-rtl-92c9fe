// RE matching engine: one stage of the multi-stage unit.
//
// K copies of one NFA (nfa_unit) are chained into a ring and share one packet buffer
// (packet_buffer) whose words are K blocks of NB bits. A packet is matched by one
// "context" that travels around the ring: in cycle t it is at FA 1, which consumes
// block 1 of the packet's current word; in cycle t+1 FA 2 consumes block 2 of the
// same word with the configuration FA 1 produced, and so on; after FA K the
// configuration goes back to FA 1 for the next word. There are K contexts in the
// ring, one per FA at any time, so K packets are matched in parallel and the engine
// as a whole consumes one N-bit word (N = K*NB) per clock. This is the pipelined
// organisation the paper builds on; the scheduling below is this design's own.
//
// Scheduler (at the entry of FA 1): a context that has no packet takes the oldest
// packet not yet assigned. A context whose next word is not in the buffer yet (the
// input was slower) idles for one trip round the ring and tries again. After the
// last word of its packet leaves FA K, the packet's match bitmap is recorded.
//
// Packet table and retirement: each packet gets an entry (start and end address,
// done flag, match bitmap) in arrival order. Packets retire in arrival order: a
// packet with a nonzero bitmap is read out of the buffer word by word and sent on
// with its bitmap (for the next stage or the host); a packet with an all-zero bitmap
// is dropped. Both free its buffer space. When the last word of a forwarded packet
// leaves, the next entry is checked as well, so that a next packet that is done and
// matched follows without an idle cycle. The paper states only that each stage
// passes on the packets its NFA accepts; in-order retirement, the table and the
// drop/forward logic are this design's choices. The paper's figure takes a match
// bitmap from every FA; here it is taken after FA K, up to K-1 cycles later.
//
// Interface: a packet stream in and out, valid/ready handshake, one word per
// transfer, sop/eop marking the first and last word and nblk the number of valid
// NB-bit blocks in the word (K except possibly in the last word; block 0 is the
// first). Every packet starts at block 0 of a word. A packet may not be longer than
// DEPTH words. in_ready does not depend on in_valid. The ev_* outputs pulse for one
// cycle on the events they name.
// Timing: a 1-word packet accepted in cycle t with an empty engine appears on the
// output in cycle t+K+3 if it matches.
module match_engine
  import dpi_pkg::*;
#(
  parameter int unsigned K     = 64,
  parameter int unsigned NB    = 8,
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned PKTS  = 256,
  parameter int unsigned Q     = nfa_tables_pkg::A3_Q,
  parameter int unsigned T     = nfa_tables_pkg::A3_T,
  parameter trans_t  TRANS [T] = nfa_tables_pkg::A3_TRANS,
  parameter re_map_t FINAL [Q] = nfa_tables_pkg::A3_FINAL,
  localparam int unsigned N    = K * NB,
  localparam int unsigned BW   = $clog2(K + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // packet stream in
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [N-1:0]  in_data,
  input  logic          in_sop,
  input  logic          in_eop,
  input  logic [BW-1:0] in_nblk,
  // accepted packets out
  output logic          out_valid,
  input  logic          out_ready,
  output logic [N-1:0]  out_data,
  output logic          out_sop,
  output logic          out_eop,
  output logic [BW-1:0] out_nblk,
  output re_map_t       out_match,
  // event pulses
  output logic          ev_wait,   // a context waited for its next word
  output logic          ev_done,   // a packet finished matching
  output logic          ev_drop,   // a packet was dropped (no RE matched)
  output logic          ev_pass    // a matching packet was fully forwarded
);

  localparam int unsigned AW     = $clog2(DEPTH);
  localparam int unsigned PW     = $clog2(PKTS);
  localparam int unsigned META_W = BW + 1;

  typedef struct packed {
    logic          busy;    // context owns a packet
    logic          fresh;   // no word of the packet processed yet
    logic          issued;  // a word is travelling with the context this trip
    logic          last;    // that word is the packet's last
    logic [BW-1:0] nblk;    // valid blocks of that word
    logic [AW-1:0] raddr;   // buffer address of that word
    logic [AW:0]   addr;    // next word to issue (with wrap bit)
    logic [PW-1:0] pkt;     // packet table entry
  } tok_t;

  // ---------------------------------------------------------------- pointers
  logic [AW:0] wp, free_ptr;                 // buffer write / oldest used word
  logic [PW:0] alloc_ptr, assign_ptr, rt_ptr; // packet table pointers
  logic [PW-1:0] cur_pkt;                    // entry of the packet being written

  // packet table
  logic [AW:0]   pt_start [PKTS];
  logic [AW:0]   pt_end   [PKTS];
  logic          pt_done  [PKTS];
  re_map_t       pt_match [PKTS];

  // ---------------------------------------------------------------- buffer
  logic              in_fire;
  logic [AW-1:0]     row_addr [K];
  logic [NB-1:0]     row_data [K];
  logic [AW-1:0]     meta_addr, rd_addr;
  logic [META_W-1:0] meta_data, rd_meta;
  logic [N-1:0]      rd_data;

  assign in_ready = ((wp - free_ptr) != (AW+1)'(DEPTH)) &&
                    ((alloc_ptr - rt_ptr) != (PW+1)'(PKTS));
  assign in_fire  = in_valid && in_ready;

  packet_buffer #(.K(K), .NB(NB), .DEPTH(DEPTH), .META_W(META_W)) u_buf (
    .clk      (clk),
    .wr_en    (in_fire),
    .wr_addr  (wp[AW-1:0]),
    .wr_data  (in_data),
    .wr_meta  ({in_eop, in_nblk}),
    .row_addr (row_addr),
    .row_data (row_data),
    .meta_addr(meta_addr),
    .meta_data(meta_data),
    .rd_addr  (rd_addr),
    .rd_data  (rd_data),
    .rd_meta  (rd_meta)
  );

  // ---------------------------------------------------------------- ring
  tok_t tok [K];       // token held after FA i
  tok_t in_tok [K];    // token entering FA i
  tok_t pre, ctl;      // scheduler: before / after issuing a word
  logic done_now, assign_now;

  logic [Q-1:0] fa_state [K];
  re_map_t      fa_match [K];

  // scheduler, part 1: retire the returning packet, assign a new one
  always_comb begin
    pre        = tok[K-1];
    done_now   = pre.busy && pre.issued && pre.last;
    if (done_now) pre.busy = 1'b0;
    pre.fresh  = tok[K-1].fresh && !tok[K-1].issued;
    assign_now = !pre.busy && (assign_ptr != alloc_ptr);
    if (assign_now) begin
      pre.busy  = 1'b1;
      pre.fresh = 1'b1;
      pre.pkt   = assign_ptr[PW-1:0];
      pre.addr  = pt_start[assign_ptr[PW-1:0]];
    end
  end

  assign meta_addr = pre.addr[AW-1:0];

  // scheduler, part 2: issue the next word if it has been written
  always_comb begin
    ctl        = pre;
    ctl.issued = pre.busy && (pre.addr != wp);
    if (ctl.issued) begin
      ctl.raddr = pre.addr[AW-1:0];
      ctl.last  = meta_data[META_W-1];
      ctl.nblk  = meta_data[BW-1:0];
      ctl.addr  = pre.addr + 1'b1;
    end
  end

  assign ev_wait = pre.busy && !ctl.issued;
  assign ev_done = done_now;

  for (genvar i = 0; i < K; i++) begin : g_fa
    if (i == 0) begin : g_first
      assign in_tok[i] = ctl;
    end else begin : g_next
      assign in_tok[i] = tok[i-1];
    end

    assign row_addr[i] = in_tok[i].raddr;

    nfa_unit #(.NB(NB), .Q(Q), .T(T), .TRANS(TRANS), .FINAL(FINAL)) u_fa (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_en    (in_tok[i].issued && (BW'(i) < in_tok[i].nblk)),
      .in_first (in_tok[i].issued && in_tok[i].fresh && (i == 0)),
      .in_block (row_data[i]),
      .in_state (fa_state[(i + K - 1) % K]),
      .in_match (fa_match[(i + K - 1) % K]),
      .out_state(fa_state[i]),
      .out_match(fa_match[i])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) tok[i] <= '0;
      else        tok[i] <= in_tok[i];
    end
  end

  // ---------------------------------------------------------------- retirement
  typedef enum logic {RT_IDLE, RT_SEND} rt_state_t;
  rt_state_t   rt_state;
  logic [AW:0] rd;
  logic        rd_first;
  logic [PW-1:0] head;
  logic        head_done, head_hit, rd_last;
  logic [PW-1:0] next;
  logic        next_hit;

  assign head      = rt_ptr[PW-1:0];
  assign head_done = (rt_ptr != alloc_ptr) && pt_done[head];
  assign head_hit  = (pt_match[head] != '0);
  assign next      = head + 1'b1;
  assign next_hit  = (rt_ptr + 1'b1 != alloc_ptr) && pt_done[next] && (pt_match[next] != '0);
  assign rd_addr   = rd[AW-1:0];
  assign rd_last   = rd_meta[META_W-1];

  assign out_valid = (rt_state == RT_SEND);
  assign out_data  = rd_data;
  assign out_sop   = rd_first;
  assign out_eop   = rd_last;
  assign out_nblk  = rd_meta[BW-1:0];
  assign out_match = pt_match[head];

  assign ev_drop = (rt_state == RT_IDLE) && head_done && !head_hit;
  assign ev_pass = out_valid && out_ready && rd_last;

  // ---------------------------------------------------------------- control state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp         <= '0;
      free_ptr   <= '0;
      alloc_ptr  <= '0;
      assign_ptr <= '0;
      rt_ptr     <= '0;
      cur_pkt    <= '0;
      rt_state   <= RT_IDLE;
      rd         <= '0;
      rd_first   <= 1'b0;
    end else begin
      if (in_fire) begin
        wp <= wp + 1'b1;
        if (in_sop) begin
          alloc_ptr <= alloc_ptr + 1'b1;
          cur_pkt   <= alloc_ptr[PW-1:0];
        end
      end
      if (assign_now) assign_ptr <= assign_ptr + 1'b1;

      unique case (rt_state)
        RT_IDLE: begin
          if (head_done) begin
            if (head_hit) begin
              rt_state <= RT_SEND;
              rd       <= pt_start[head];
              rd_first <= 1'b1;
            end else begin
              free_ptr <= pt_end[head] + 1'b1;
              rt_ptr   <= rt_ptr + 1'b1;
            end
          end
        end
        RT_SEND: begin
          if (out_ready) begin
            rd_first <= 1'b0;
            if (rd_last) begin
              free_ptr <= rd + 1'b1;
              rt_ptr   <= rt_ptr + 1'b1;
              // look ahead: a next packet that is done and matched starts at once
              if (next_hit) begin
                rd       <= pt_start[next];
                rd_first <= 1'b1;
              end else begin
                rt_state <= RT_IDLE;
              end
            end else begin
              rd <= rd + 1'b1;
            end
          end
        end
        default: rt_state <= RT_IDLE;
      endcase
    end
  end

  // packet table (no reset needed: an entry is initialised when it is allocated)
  always_ff @(posedge clk) begin
    if (in_fire) begin
      if (in_sop) begin
        pt_start[alloc_ptr[PW-1:0]] <= wp;
        pt_done[alloc_ptr[PW-1:0]]  <= 1'b0;
      end
      if (in_eop) pt_end[in_sop ? alloc_ptr[PW-1:0] : cur_pkt] <= wp;
    end
    if (done_now) begin
      pt_done[tok[K-1].pkt]  <= 1'b1;
      pt_match[tok[K-1].pkt] <= fa_match[K-1];
    end
  end

  // ---------------------------------------------------------------- stream rules
  logic          hold_q;
  logic [N-1:0]  hold_data;
  logic          hold_sop, hold_eop;

  always_ff @(posedge clk) begin
    hold_data <= in_data;
    hold_sop  <= in_sop;
    hold_eop  <= in_eop;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_q <= 1'b0;
    end else begin
      hold_q <= in_valid && !in_ready;
      if (hold_q) begin
        assert (in_valid && in_data == hold_data && in_sop == hold_sop && in_eop == hold_eop)
          else $error("match_engine: input word changed or withdrawn while stalled");
      end
      if (in_fire && !in_eop) begin
        assert (in_nblk == BW'(K))
          else $error("match_engine: only the last word of a packet may be partial");
      end
    end
  end

endmodule
