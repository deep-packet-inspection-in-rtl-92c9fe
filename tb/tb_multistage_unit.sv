// End-to-end testbench for multistage_unit at its default size (512-bit input,
// 64/32/16 FAs, 2048-word buffers).
//
// Random packets of 1..1518 bytes are generated whose first bytes are mostly 'a',
// 'b' and 'x', so that some are rejected by stage 1 (no leading 'a'), some pass
// stage 1 but are rejected by stage 2 (e.g. "ax..."), some pass stage 2 but are
// rejected by stage 3 (e.g. "abx..."), and some match RE 0 ("aa...") or RE 1
// ("a...abb..."). The expected result is computed here from the two REs; the
// output must carry exactly the matching packets, in order, byte for byte, with
// the precise bitmap. The testbench also counts the mechanisms of the design and
// fails if one never happened: drops in each stage, forwarding by each stage,
// contexts waiting for data, the width conversion of both links, and backpressure
// from the output up to the input (the output is held not ready for a while).
// Finally, back-to-back 24-word packets that stage 1 rejects must enter at one
// 512-bit word per clock, the 100 Gbit/s rate at 200 MHz, without a stall.
module tb_multistage_unit;
  import dpi_pkg::*;
  localparam int K1 = 64, K3 = 16, B1 = 7, B3 = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  int checks = 0, failures = 0;

  logic            in_valid, in_ready, in_sop, in_eop;
  logic [K1*8-1:0] in_data;
  logic [B1-1:0]   in_nblk;
  logic            out_valid, out_ready, out_sop, out_eop;
  logic [K3*8-1:0] out_data;
  logic [B3-1:0]   out_nblk;
  re_map_t         out_match;
  logic [2:0]      stage_drop, stage_pass, stage_wait;

  multistage_unit dut (.*);

  byte     exp_bytes[$];
  int      exp_len[$];
  re_map_t exp_map[$];
  int      n_sent = 0, n_hit = 0;
  int      cnt_drop[3] = '{0, 0, 0}, cnt_pass[3] = '{0, 0, 0}, cnt_wait[3] = '{0, 0, 0};
  int      cnt_stall = 0, cnt_split = 0, cur_words = 0;
  int      exp_drop1 = 0, exp_drop2 = 0, exp_drop3 = 0;
  bit      rand_valid = 1;
  int      ready_mode = 1;   // 0: always ready, 1: random, 2: never
  int      gap = 0;          // forced idle cycles before every word
  int      blocked = 0;      // stalled cycles while the output is blocked

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // languages of the three NFAs (prefix matching)
  function automatic int lead_a(input byte p[]);
    int i = 0;
    while (i < p.size() && p[i] == "a") i++;
    return i;
  endfunction
  function automatic bit acc_a1(input byte p[]);
    return p.size() >= 1 && p[0] == "a";
  endfunction
  function automatic bit acc_a2(input byte p[]);
    int i = lead_a(p);
    return i >= 2 || (i == 1 && p.size() > 1 && p[1] == "b");
  endfunction
  function automatic re_map_t ref_match(input byte p[]);
    re_map_t m = '0;
    int i = lead_a(p);
    if (i >= 2) m[0] = 1'b1;
    if (i >= 1 && i + 1 < p.size() && p[i] == "b" && p[i+1] == "b") m[1] = 1'b1;
    return m;
  endfunction

  function automatic byte rnd_byte();
    case ($urandom_range(0, 6))
      0, 1, 2: return "a";
      3, 4:    return "b";
      5:       return "x";
      default: return byte'($urandom);
    endcase
  endfunction

  task automatic send(input byte p[]);
    re_map_t m;
    m = ref_match(p);
    n_sent++;
    if (!acc_a1(p)) exp_drop1++;
    else if (!acc_a2(p)) exp_drop2++;
    else if (m == '0) exp_drop3++;
    if (m != '0) begin
      n_hit++;
      foreach (p[i]) exp_bytes.push_back(p[i]);
      exp_len.push_back(p.size());
      exp_map.push_back(m);
    end
    for (int w = 0; w * K1 < p.size(); w++) begin
      @(negedge clk);
      if (gap > 0) begin
        in_valid = 0;
        repeat (gap) @(negedge clk);
      end
      while (rand_valid && $urandom_range(0, 3) == 0) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1;
      in_sop   = (w == 0);
      in_eop   = ((w + 1) * K1 >= p.size());
      in_nblk  = in_eop ? B1'(p.size() - w * K1) : B1'(K1);
      for (int b = 0; b < K1; b++)
        in_data[b*8 +: 8] = (w * K1 + b < p.size()) ? p[w*K1 + b] : 8'($urandom);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
  endtask

  task automatic stop();
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic send_random();
    byte p[];
    int len;
    len = (gap > 0) ? 8 * K1 : ($urandom_range(0, 3) == 0) ? $urandom_range(1, 1518) : $urandom_range(1, 200);
    p = new[len];
    foreach (p[i]) p[i] = rnd_byte();
    send(p);
    if (rand_valid) stop();
  endtask

  // sink and counters
  int cur_len = 0;
  bit in_pkt = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int s = 0; s < 3; s++) begin
        if (stage_drop[s]) cnt_drop[s]++;
        if (stage_pass[s]) cnt_pass[s]++;
        if (stage_wait[s]) cnt_wait[s]++;
      end
      if (in_valid && !in_ready) cnt_stall++;
      // output blocked and input stalled for long enough: let the traffic go again
      if (ready_mode == 2 && in_valid && !in_ready && ++blocked > 200) ready_mode = 1;
      if (out_valid && out_ready) begin
        check(out_sop == !in_pkt, "sop on first word only");
        check(out_eop || out_nblk == B3'(K3), "full word unless eop");
        check(exp_map.size() > 0 && out_match == exp_map[0],
              $sformatf("bitmap %b expected %b", out_match, exp_map.size() ? exp_map[0] : 2'b00));
        for (int b = 0; b < K3; b++) begin
          if (b < out_nblk) begin
            check(exp_bytes.size() > 0 && out_data[b*8 +: 8] == exp_bytes[0], "byte value");
            if (exp_bytes.size() > 0) void'(exp_bytes.pop_front());
            cur_len++;
          end
        end
        cur_words++;
        in_pkt = !out_eop;
        if (out_eop) begin
          check(exp_len.size() > 0 && cur_len == exp_len[0], $sformatf("packet length %0d", cur_len));
          // one 128-bit output word per 16 bytes: both links split the words
          check(cur_words == (cur_len + K3 - 1) / K3, $sformatf("%0d words for %0d bytes", cur_words, cur_len));
          if (cur_len > K1) cnt_split++;
          cur_words = 0;
          if (exp_len.size() > 0) void'(exp_len.pop_front());
          if (exp_map.size() > 0) void'(exp_map.pop_front());
          cur_len = 0;
        end
      end
    end
  end

  always @(negedge clk)
    out_ready <= (ready_mode == 0) ? 1'b1 : (ready_mode == 2) ? 1'b0 : ($urandom_range(0, 3) != 0);

  task automatic drain();
    int t = 0;
    while ((exp_len.size() > 0 ||
            cnt_drop[0] + cnt_drop[1] + cnt_drop[2] + cnt_pass[2] != n_sent) && t < 200000) begin
      @(posedge clk);
      t++;
    end
    check(exp_len.size() == 0, "all expected packets delivered");
  endtask

  initial begin
    int t0, s0;
    byte p[];
    in_valid = 0; in_sop = 0; in_eop = 0; in_nblk = 0; in_data = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // phase 0: words of one packet trickle in, so stage 1 contexts wait for data
    gap = 100;
    for (int n = 0; n < 2; n++) send_random();
    gap = 0;
    // phase 1: random traffic, random gaps, random output stalls
    for (int n = 0; n < 200; n++) send_random();
    // phase 2: host stops taking packets; matching traffic backs up to the input
    ready_mode = 2;
    rand_valid = 0;
    s0 = cnt_stall;
    while (cnt_stall == s0 && cyc < 400000) begin
      p = new[$urandom_range(100, 1518)];
      foreach (p[i]) p[i] = "a";
      send(p);
    end
    stop();
    ready_mode = 1;
    drain();
    for (int s = 0; s < 3; s++) begin
      check(cnt_drop[s] > 0, $sformatf("stage %0d dropped a packet", s + 1));
      check(cnt_pass[s] > 0, $sformatf("stage %0d forwarded a packet", s + 1));
    end
    check(cnt_wait[0] > 0, "stage 1 contexts waited for data");
    check(cnt_split > 0, "multi-word packets crossed both width converters");
    check(cnt_stall > s0, "backpressure reached the input");
    check(cnt_drop[0] == exp_drop1 && cnt_drop[1] == exp_drop2 && cnt_drop[2] == exp_drop3,
          $sformatf("drops per stage %0d/%0d/%0d expected %0d/%0d/%0d", cnt_drop[0], cnt_drop[1],
                    cnt_drop[2], exp_drop1, exp_drop2, exp_drop3));
    check(cnt_pass[2] == n_hit, "stage 3 passed exactly the matching packets");

    // phase 3: 100 Gbit/s of non-matching traffic, one word per clock
    ready_mode = 0;
    repeat (5) @(posedge clk);
    s0 = cnt_stall;
    t0 = cyc;
    for (int n = 0; n < 120; n++) begin
      p = new[24 * K1];
      foreach (p[i]) p[i] = (i == 0) ? "x" : rnd_byte();
      send(p);
    end
    stop();
    check(cnt_stall == s0, $sformatf("no stall at line rate (%0d stalls)", cnt_stall - s0));
    check(cyc - t0 <= 120 * 24 + 3, $sformatf("%0d words took %0d cycles", 120 * 24, cyc - t0));
    drain();

    $display("sent %0d packets, %0d matched; drops %0d/%0d/%0d; waits %0d/%0d/%0d; stalls %0d; cycles %0d",
             n_sent, n_hit, cnt_drop[0], cnt_drop[1], cnt_drop[2], cnt_wait[0], cnt_wait[1],
             cnt_wait[2], cnt_stall, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
