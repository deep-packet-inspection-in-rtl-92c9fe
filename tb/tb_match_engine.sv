// Self-checking testbench for match_engine.
//
// A small engine (K = 4 FAs of 8 bits, 64-word buffer, 8-entry packet table) with
// the precise example NFA A3. Random packets (1..30 bytes, mostly made of 'a', 'b'
// and 'x') are generated; the expected RE bitmap of each one is computed here
// directly from the two REs (RE 0: the packet starts with "aa"; RE 1: it starts
// with one or more 'a' followed by "bb"). Only packets with a nonzero bitmap may
// come out, in arrival order, byte for byte, with that bitmap on every word.
//   phase 1: random input gaps and output stalls (contexts wait for data, the
//            buffer or packet table fills and stalls the input)
//   phase 2: rate. Back-to-back 4-word packets that do not match: the engine must
//            take one word per clock (N = K*NB bits per cycle) without stalling.
//   phase 3: latency. A 1-word matching packet into an idle engine must appear on
//            the output K+3 cycles after it was accepted.
//   phase 4: back-to-back 8-word packets that all match must also leave at one
//            word per clock, with no idle cycle between packets (measured over
//            the last 20 of 30 packets, once the output has settled).
module tb_match_engine;
  import dpi_pkg::*;
  localparam int K = 4, NB = 8, DEPTH = 64, PKTS = 8, BW = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  int checks = 0, failures = 0;

  logic          in_valid, in_ready, in_sop, in_eop;
  logic [K*NB-1:0] in_data;
  logic [BW-1:0] in_nblk;
  logic          out_valid, out_ready, out_sop, out_eop;
  logic [K*NB-1:0] out_data;
  logic [BW-1:0] out_nblk;
  re_map_t       out_match;
  logic          ev_wait, ev_done, ev_drop, ev_pass;

  match_engine #(.K(K), .NB(NB), .DEPTH(DEPTH), .PKTS(PKTS)) dut (.*);

  // expected output
  byte     exp_bytes[$];
  int      exp_len[$];
  re_map_t exp_map[$];
  int      n_sent = 0, n_hit = 0, n_recv = 0;
  int      cnt_wait = 0, cnt_drop = 0, cnt_pass = 0, cnt_stall = 0, cnt_done = 0;
  bit      rand_valid = 1, rand_ready = 1;
  int      t_accept = 0, t_first_out = -1, t_last_out = -1;
  int      mark_pkt = -1, t_mark = -1;   // start time of output packet number mark_pkt

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  function automatic re_map_t ref_match(input byte p[]);
    re_map_t m = '0;
    int i;
    if (p.size() >= 2 && p[0] == "a" && p[1] == "a") m[0] = 1'b1;
    if (p.size() >= 1 && p[0] == "a") begin
      i = 1;
      while (i < p.size() && p[i] == "a") i++;
      if (i + 1 < p.size() && p[i] == "b" && p[i+1] == "b") m[1] = 1'b1;
    end
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
    if (m != '0) begin
      n_hit++;
      foreach (p[i]) exp_bytes.push_back(p[i]);
      exp_len.push_back(p.size());
      exp_map.push_back(m);
    end
    for (int w = 0; w * K < p.size(); w++) begin
      @(negedge clk);
      while (rand_valid && $urandom_range(0, 2) == 0) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1;
      in_sop   = (w == 0);
      in_eop   = ((w + 1) * K >= p.size());
      in_nblk  = in_eop ? BW'(p.size() - w * K) : BW'(K);
      in_data  = $urandom;   // padding bytes are random
      for (int b = 0; b < K; b++) if (w * K + b < p.size()) in_data[b*8 +: 8] = p[w*K + b];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
  endtask

  // end a burst: nothing valid from the next cycle on
  task automatic stop();
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic send_random(input int maxlen);
    byte p[];
    p = new[$urandom_range(1, maxlen)];
    foreach (p[i]) p[i] = rnd_byte();
    send(p);
    stop();
  endtask

  // sink and event counters
  int cur_len = 0;
  bit in_pkt = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (ev_wait) cnt_wait++;
      if (ev_drop) cnt_drop++;
      if (ev_pass) cnt_pass++;
      if (ev_done) cnt_done++;
      if (in_valid && !in_ready) cnt_stall++;
      if (out_valid && t_first_out < 0) t_first_out = cyc;
      if (in_valid && in_ready && in_eop) t_accept = cyc;
      if (out_valid && out_ready) begin
        t_last_out = cyc;
        if (out_sop && n_recv == mark_pkt) t_mark = cyc;
        check(out_sop == !in_pkt, "sop on first word only");
        check(out_eop || out_nblk == BW'(K), "full word unless eop");
        check(exp_map.size() > 0 && out_match == exp_map[0],
              $sformatf("bitmap %b expected %b", out_match, exp_map.size() ? exp_map[0] : 2'b00));
        for (int b = 0; b < K; b++) begin
          if (b < out_nblk) begin
            check(exp_bytes.size() > 0 && out_data[b*8 +: 8] == exp_bytes[0], "byte value");
            if (exp_bytes.size() > 0) void'(exp_bytes.pop_front());
            cur_len++;
          end
        end
        in_pkt = !out_eop;
        if (out_eop) begin
          n_recv++;
          check(exp_len.size() > 0 && cur_len == exp_len[0], $sformatf("packet length %0d", cur_len));
          if (exp_len.size() > 0) void'(exp_len.pop_front());
          if (exp_map.size() > 0) void'(exp_map.pop_front());
          cur_len = 0;
        end
      end
    end
  end

  always @(negedge clk) out_ready <= rand_ready ? ($urandom_range(0, 3) != 0) : 1'b1;

  task automatic drain();
    int t;
    t = 0;
    while ((exp_len.size() > 0 || cnt_drop + cnt_pass != n_sent) && t < 5000) begin
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

    // phase 1
    for (int n = 0; n < 400; n++) send_random(30);
    drain();
    check(cnt_wait > 0,  "contexts waited for data");
    check(cnt_stall > 0, "input was stalled by a full buffer or table");
    check(cnt_drop > 0 && cnt_pass > 0, "packets were both dropped and passed");
    check(cnt_pass == n_hit && cnt_drop == n_sent - n_hit, "pass/drop counts");
    check(cnt_done == n_sent, "every packet finished matching");
    $display("phase 1: %0d packets, %0d matched, waits %0d stalls %0d", n_sent, n_hit, cnt_wait, cnt_stall);

    // phase 2: line rate
    rand_valid = 0; rand_ready = 0;
    repeat (5) @(posedge clk);
    s0 = cnt_stall;
    t0 = cyc;
    for (int n = 0; n < 50; n++) begin
      p = new[4 * K];
      foreach (p[i]) p[i] = "x";
      send(p);
    end
    stop();
    check(cnt_stall == s0, $sformatf("no stall at line rate (%0d stalls)", cnt_stall - s0));
    check(cyc - t0 <= 50 * 4 + 3, $sformatf("200 words took %0d cycles", cyc - t0));
    drain();

    // phase 3: latency
    repeat (20) @(posedge clk);
    t_first_out = -1;
    p = new[2];
    p[0] = "a"; p[1] = "a";
    send(p);
    stop();
    drain();
    check(t_first_out - t_accept == K + 3,
          $sformatf("latency %0d cycles, expected %0d", t_first_out - t_accept, K + 3));

    // phase 4: back-to-back matching packets must leave without a gap
    repeat (20) @(posedge clk);
    s0 = cnt_stall;
    mark_pkt = n_recv + 10;   // the first packets settle the phase; measure the other 20
    for (int n = 0; n < 30; n++) begin
      p = new[2 * K * K];
      foreach (p[i]) p[i] = "a";
      send(p);
    end
    stop();
    drain();
    check(cnt_stall == s0, "no stall with matching traffic at line rate");
    check(t_mark >= 0 && t_last_out - t_mark == 20 * 2 * K - 1,
          $sformatf("%0d matching words left in %0d cycles", 20 * 2 * K, t_last_out - t_mark + 1));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
