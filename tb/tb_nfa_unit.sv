// Self-checking testbench for nfa_unit.
//
// Three instances: the precise example NFA A3 with 8-bit blocks, the same NFA with
// 16-bit blocks (two symbols per cycle), and the merging example NFA (q0..q7 over
// a, b, c, d), given here as its own tables. The reference next-state functions
// below are written out by hand from the two example automata, not from the tables.
// Part 1 drives random configurations, bitmaps, blocks and control bits and checks
// every registered output one cycle later. Part 2 feeds whole strings through the
// A3 instance, feeding its output back as the next input, and checks the bitmap
// against the languages of the two REs (RE 0: a a* a, RE 1: a a* b b, on prefixes).
module tb_nfa_unit;
  import dpi_pkg::*;

  localparam logic [7:0] A = 8'h61, B = 8'h62, C = 8'h63, D = 8'h64, X = 8'h78;

  // merging example NFA: q0-a->q1, q0-b->q2, q2-c->q3, q3-d->q4, q4-a->q5,
  // q4-c->q7, q5-b->q6; q1 reports RE 0, q6 and q7 report RE 1
  localparam trans_t F5_TRANS [7] = '{
    '{src: 16'd0, dst: 16'd1, lo: A, hi: A},
    '{src: 16'd0, dst: 16'd2, lo: B, hi: B},
    '{src: 16'd2, dst: 16'd3, lo: C, hi: C},
    '{src: 16'd3, dst: 16'd4, lo: D, hi: D},
    '{src: 16'd4, dst: 16'd5, lo: A, hi: A},
    '{src: 16'd4, dst: 16'd7, lo: C, hi: C},
    '{src: 16'd5, dst: 16'd6, lo: B, hi: B}
  };
  localparam re_map_t F5_FINAL [8] = '{2'b00, 2'b01, 2'b00, 2'b00, 2'b00, 2'b00, 2'b10, 2'b10};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---- A3, 8-bit
  logic        a_en, a_first;
  logic [7:0]  a_blk;
  logic [4:0]  a_si, a_so;
  re_map_t     a_mi, a_mo;
  nfa_unit #(.NB(8)) u_a3 (.clk, .rst_n, .in_en(a_en), .in_first(a_first), .in_block(a_blk),
                           .in_state(a_si), .in_match(a_mi), .out_state(a_so), .out_match(a_mo));

  // ---- A3, 16-bit
  logic        w_en, w_first;
  logic [15:0] w_blk;
  logic [4:0]  w_si, w_so;
  re_map_t     w_mi, w_mo;
  nfa_unit #(.NB(16)) u_w16 (.clk, .rst_n, .in_en(w_en), .in_first(w_first), .in_block(w_blk),
                             .in_state(w_si), .in_match(w_mi), .out_state(w_so), .out_match(w_mo));

  // ---- merging example, 8-bit
  logic        f_en, f_first;
  logic [7:0]  f_blk;
  logic [7:0]  f_si, f_so;
  re_map_t     f_mi, f_mo;
  nfa_unit #(.NB(8), .Q(8), .T(7), .TRANS(F5_TRANS), .FINAL(F5_FINAL)) u_f5 (
    .clk, .rst_n, .in_en(f_en), .in_first(f_first), .in_block(f_blk),
    .in_state(f_si), .in_match(f_mi), .out_state(f_so), .out_match(f_mo));

  // ---- hand-written reference automata
  function automatic logic [4:0] ref_a3(input logic [4:0] s, input logic [7:0] c);
    logic [4:0] n;
    n    = '0;
    n[1] = (s[0] || s[1]) && c == A;
    n[2] = s[1] && c == B;
    n[3] = s[1] && c == A;
    n[4] = s[2] && c == B;
    return n;
  endfunction
  function automatic re_map_t ref_a3_hit(input logic [4:0] s);
    return {s[4], s[3]};
  endfunction

  function automatic logic [7:0] ref_f5(input logic [7:0] s, input logic [7:0] c);
    logic [7:0] n;
    n    = '0;
    n[1] = s[0] && c == A;
    n[2] = s[0] && c == B;
    n[3] = s[2] && c == C;
    n[4] = s[3] && c == D;
    n[5] = s[4] && c == A;
    n[7] = s[4] && c == C;
    n[6] = s[5] && c == B;
    return n;
  endfunction
  function automatic re_map_t ref_f5_hit(input logic [7:0] s);
    return {s[6] || s[7], s[1]};
  endfunction

  function automatic logic [7:0] rnd_sym();
    case ($urandom_range(0, 5))
      0, 1: return A;
      2:    return B;
      3:    return C;
      4:    return D;
      default: return 8'($urandom);
    endcase
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // expected outputs computed when the inputs are applied
  logic [4:0] e_as, e_ws;
  logic [7:0] e_fs;
  re_map_t    e_am, e_wm, e_fm;

  task automatic apply_random();
    logic [4:0] s;
    logic [7:0] s8;
    re_map_t m;
    a_en = 1'($urandom); a_first = 1'($urandom); a_blk = rnd_sym();
    a_si = 5'($urandom); a_mi = 2'($urandom);
    w_en = 1'($urandom); w_first = 1'($urandom); w_blk = {rnd_sym(), rnd_sym()};
    w_si = 5'($urandom); w_mi = 2'($urandom);
    f_en = 1'($urandom); f_first = 1'($urandom); f_blk = rnd_sym();
    f_si = 8'($urandom); f_mi = 2'($urandom);
    // A3 8-bit
    s = a_first ? 5'b00001 : a_si;
    m = a_first ? 2'b00 : a_mi;
    s = ref_a3(s, a_blk); m |= ref_a3_hit(s);
    e_as = a_en ? s : a_si; e_am = a_en ? m : a_mi;
    // A3 16-bit: low byte first
    s = w_first ? 5'b00001 : w_si;
    m = w_first ? 2'b00 : w_mi;
    s = ref_a3(s, w_blk[7:0]);  m |= ref_a3_hit(s);
    s = ref_a3(s, w_blk[15:8]); m |= ref_a3_hit(s);
    e_ws = w_en ? s : w_si; e_wm = w_en ? m : w_mi;
    // merging example
    s8 = f_first ? 8'b00000001 : f_si;
    m  = f_first ? 2'b00 : f_mi;
    s8 = ref_f5(s8, f_blk); m |= ref_f5_hit(s8);
    e_fs = f_en ? s8 : f_si; e_fm = f_en ? m : f_mi;
  endtask

  // run a string through u_a3 with feedback; returns the final bitmap
  task automatic run_string(input byte str[], output re_map_t res);
    for (int i = 0; i < str.size(); i++) begin
      @(negedge clk);
      a_en = 1'b1; a_first = (i == 0); a_blk = str[i];
      if (i > 0) begin a_si = a_so; a_mi = a_mo; end
    end
    @(negedge clk);
    res = a_mo;
  endtask

  task automatic lang(input string s, input re_map_t exp);
    byte b[];
    re_map_t r;
    b = new[s.len()];
    foreach (b[i]) b[i] = s[i];
    run_string(b, r);
    check(r == exp, $sformatf("string %s: got %b expected %b", s, r, exp));
  endtask

  initial begin
    a_en = 0; a_first = 0; a_blk = 0; a_si = 0; a_mi = 0;
    w_en = 0; w_first = 0; w_blk = 0; w_si = 0; w_mi = 0;
    f_en = 0; f_first = 0; f_blk = 0; f_si = 0; f_mi = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // part 1: random single-cycle checks
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      apply_random();
      @(posedge clk); #1;
      check(a_so == e_as && a_mo == e_am, $sformatf("A3/8 state %b/%b match %b/%b", a_so, e_as, a_mo, e_am));
      check(w_so == e_ws && w_mo == e_wm, $sformatf("A3/16 state %b/%b match %b/%b", w_so, e_ws, w_mo, e_wm));
      check(f_so == e_fs && f_mo == e_fm, $sformatf("F5 state %b/%b match %b/%b", f_so, e_fs, f_mo, e_fm));
    end
    // part 2: languages of the two REs of A3
    lang("aa",     2'b01);
    lang("abb",    2'b10);
    lang("aaabbx", 2'b11);
    lang("ab",     2'b00);
    lang("abab",   2'b00);
    lang("ba",     2'b00);
    lang("a",      2'b00);
    lang("xaa",    2'b00);
    lang("aaxxxx", 2'b01);
    lang("aaaaab", 2'b01);
    lang("abbaaa", 2'b10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
