// Self-checking testbench for stage_link.
//
// A 64-bit to 16-bit link (KI = 8, KO = 2 byte blocks) gets random packets of 1..40
// bytes, packed into 8-byte words with the last word partial. Phase 1 uses random
// valid and ready; the narrow side is reassembled into bytes and compared with the
// packets sent, and sop, eop and nblk are checked on every narrow word. Phase 2
// keeps both sides always ready and checks the rate: one narrow word per cycle.
module tb_stage_link;
  localparam int KI = 8, KO = 2, NB = 8, BI = 4, BO = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic             in_valid, in_ready, in_sop, in_eop;
  logic [KI*NB-1:0] in_data;
  logic [BI-1:0]    in_nblk;
  logic             out_valid, out_ready, out_sop, out_eop;
  logic [KO*NB-1:0] out_data;
  logic [BO-1:0]    out_nblk;

  stage_link #(.KI(KI), .KO(KO), .NB(NB)) dut (.*);

  byte exp_q[$];      // all bytes sent, in order
  int  exp_len[$];    // packet lengths
  int  nb_out_words = 0;
  bit  rand_valid = 1, rand_ready = 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic send_packet(input int len);
    byte p[];
    p = new[len];
    foreach (p[i]) begin p[i] = byte'($urandom); exp_q.push_back(p[i]); end
    exp_len.push_back(len);
    for (int w = 0; w * KI < len; w++) begin
      @(negedge clk);
      while (rand_valid && $urandom_range(0, 3) == 0) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1;
      in_sop   = (w == 0);
      in_eop   = ((w + 1) * KI >= len);
      in_nblk  = in_eop ? BI'(len - w * KI) : BI'(KI);
      in_data  = {$urandom, $urandom};
      for (int b = 0; b < KI; b++) if (w * KI + b < len) in_data[b*8 +: 8] = p[w*KI + b];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  // sink
  int  cur_len = 0;
  bit  in_pkt = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      nb_out_words++;
      check(out_sop == !in_pkt, "sop on first word only");
      check(out_eop || out_nblk == BO'(KO), "full word unless eop");
      check(out_nblk >= 1 && out_nblk <= KO, "nblk range");
      for (int b = 0; b < KO; b++) begin
        if (b < out_nblk) begin
          check(exp_q.size() > 0 && out_data[b*8 +: 8] == exp_q[0], "byte value");
          if (exp_q.size() > 0) void'(exp_q.pop_front());
          cur_len++;
        end
      end
      in_pkt = !out_eop;
      if (out_eop) begin
        check(exp_len.size() > 0 && cur_len == exp_len[0], $sformatf("packet length %0d", cur_len));
        if (exp_len.size() > 0) void'(exp_len.pop_front());
        cur_len = 0;
      end
    end
  end

  always @(negedge clk) out_ready <= rand_ready ? ($urandom_range(0, 2) != 0) : 1'b1;

  initial begin
    int words, t0;
    in_valid = 0; in_sop = 0; in_eop = 0; in_nblk = 0; in_data = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) send_packet($urandom_range(1, 40));
    repeat (50) @(posedge clk);
    check(exp_q.size() == 0 && exp_len.size() == 0, "all data delivered");
    // phase 2: rate
    rand_valid = 0; rand_ready = 0;
    repeat (2) @(posedge clk);
    words = nb_out_words;
    t0 = $time;
    for (int n = 0; n < 20; n++) send_packet(KI * 4);   // 4 full words = 16 narrow words each
    while (nb_out_words - words < 20 * 16 && ($time - t0) / 10 < 1000) @(posedge clk);
    check(nb_out_words - words == 20 * 16, "phase 2 word count");
    check(($time - t0) / 10 <= 20 * 16 + 4,
          $sformatf("rate: %0d cycles for %0d words", ($time - t0) / 10, 20 * 16));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
