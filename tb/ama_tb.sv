// ama_tb -- end-to-end test of the processor in both of its schemes.
//
// One pipelined and one non-pipelined processor each get a stream of words: the
// paper's example words first, then random words and words built around stored roots.
// A scoreboard per processor remembers each accepted word and its cycle, and checks
// every result against the reference stemmer and its latency (five edges).  The rate
// is checked too: with input always offered, the pipelined processor takes a word
// every cycle and the non-pipelined one every fifth cycle.  Each mechanism of the
// design is counted and must occur at least once.
module ama_tb;
  import arabic_pkg::*;
  import stem_ref_pkg::*;

  localparam int N_WORDS = 400;

  logic clock = 0, reset;
  always #5 clock = ~clock;
  int cycle = 0;
  always @(posedge clock) cycle <= cycle + 1;

  int checks = 0, failures = 0;

  // ---- mechanism counters -------------------------------------------------------
  int n_root3, n_root4, n_none, n_pfx_mask, n_sfx_mask, n_slots_full, n_short, n_full_len;
  int n_overlap, n_held_off;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Words offered to both processors, in order.
  word_t words [N_WORDS];

  initial begin
    string ex [8] = '{"أفأستسقيناكموها", "سيلعبون", "يكتبون", "يدرسون", "يدارس",
                      "فقالوا", "يزلزل", "تدحرج"};
    foreach (ex[i]) words[i] = utf8_word(ex[i]);
    for (int i = 8; i < N_WORDS; i++)
      words[i] = (i % 3 == 0) ? random_word($urandom_range(1, 15)) : rooted_word();
    words[N_WORDS-1] = utf8_word("تتتتتتتتتتتتتتت");  // 15 letters, every slot full
  end

  // Statistics over the word list.
  initial begin
    #1;
    foreach (words[i]) begin
      automatic result_t r = ref_result(words[i]);
      automatic stems_t  s = ref_stems(words[i]);
      automatic int      l = word_len(words[i]);
      bit      seen_non;
      if (r.found3) n_root3++;
      if (r.found4) n_root4++;
      if (!r.found3 && !r.found4) n_none++;
      if (s.n3 == STEM_SLOTS || s.n4 == STEM_SLOTS) n_slots_full++;
      if (l < WORD_LEN) n_short++; else n_full_len++;
      seen_non = 0;
      for (int k = 0; k < PREFIX_POS && k < l; k++) begin
        if (!is_pfx(words[i][k])) seen_non = 1;
        else if (seen_non) begin n_pfx_mask++; break; end
      end
      seen_non = 0;
      for (int k = l - 1; k >= 0; k--) begin
        if (!is_sfx(words[i][k])) seen_non = 1;
        else if (seen_non) begin n_sfx_mask++; break; end
      end
    end
  end

  // ---- the two processors -------------------------------------------------------
  word_t  w_p, w_n;
  logic   iv_p, iv_n, rdy_p, rdy_n, ov_p, ov_n, f3_p, f3_n, f4_p, f4_n;
  stem3_t r3_p, r3_n;
  stem4_t r4_p, r4_n;

  ama #(.PIPELINED(1'b1)) dut_p (.clock, .reset, .word_i(w_p), .in_valid(iv_p), .in_ready(rdy_p),
    .root3(r3_p), .found3(f3_p), .root4(r4_p), .found4(f4_p), .out_valid(ov_p));
  ama #(.PIPELINED(1'b0)) dut_n (.clock, .reset, .word_i(w_n), .in_valid(iv_n), .in_ready(rdy_n),
    .root3(r3_n), .found3(f3_n), .root4(r4_n), .found4(f4_n), .out_valid(ov_n));

  // Scoreboards: accepted word index and cycle.
  int q_p [$], c_p [$], q_n [$], c_n [$];
  int i_p = 0, i_n = 0, done_p = 0, done_n = 0;
  int first_p = -1, last_p = -1, first_n = -1, last_n = -1;

  task automatic score(string tag, int idx, int acc_cycle, logic f3, stem3_t r3,
                       logic f4, stem4_t r4);
    result_t e = ref_result(words[idx]);
    check(f3 === e.found3 && r3 === e.root3 && f4 === e.found4 && r4 === e.root4,
          $sformatf("%s word %0d: got %b %h %b %h exp %b %h %b %h", tag, idx, f3, r3, f4, r4,
                    e.found3, e.root3, e.found4, e.root4));
    check(cycle - acc_cycle == 5, $sformatf("%s word %0d latency %0d", tag, idx, cycle - acc_cycle));
  endtask

  always @(posedge clock) if (!reset) begin
    if (iv_p && rdy_p) begin
      q_p.push_back(i_p); c_p.push_back(cycle);
      if (first_p < 0) first_p = cycle;
      last_p = cycle;
    end
    if (iv_n && rdy_n) begin
      q_n.push_back(i_n); c_n.push_back(cycle);
      if (first_n < 0) first_n = cycle;
      last_n = cycle;
    end
    if (iv_n && !rdy_n) n_held_off++;
    if (q_p.size() >= 2) n_overlap++;
    if (ov_p) begin
      check(q_p.size() > 0, "pipelined: result with no word");
      if (q_p.size() > 0) begin
        score("pipelined", q_p[0], c_p[0], f3_p, r3_p, f4_p, r4_p);
        void'(q_p.pop_front()); void'(c_p.pop_front()); done_p++;
      end
    end
    if (ov_n) begin
      check(q_n.size() > 0, "non-pipelined: result with no word");
      if (q_n.size() > 0) begin
        score("non-pipelined", q_n[0], c_n[0], f3_n, r3_n, f4_n, r4_n);
        void'(q_n.pop_front()); void'(c_n.pop_front()); done_n++;
      end
    end
  end

  // Drivers: offer the next word whenever the previous one was taken.
  always @(posedge clock) begin
    if (!reset) begin
      if (iv_p && rdy_p) i_p <= i_p + 1;
      if (iv_n && rdy_n) i_n <= i_n + 1;
    end
  end
  assign iv_p = !reset && i_p < N_WORDS;
  assign iv_n = !reset && i_n < N_WORDS;
  assign w_p  = words[(i_p < N_WORDS) ? i_p : 0];
  assign w_n  = words[(i_n < N_WORDS) ? i_n : 0];

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset = 1;
    repeat (3) @(posedge clock);
    #1 reset = 0;
    wait (done_p == N_WORDS && done_n == N_WORDS);
    @(posedge clock);
    // Rates: one word per cycle, one word per five cycles.
    check(last_p - first_p == N_WORDS - 1, $sformatf("pipelined rate %0d", last_p - first_p));
    check(last_n - first_n == 5 * (N_WORDS - 1), $sformatf("non-pipelined rate %0d", last_n - first_n));
    $display("root3 %0d, root4 %0d, none %0d, prefix masked %0d, suffix masked %0d, all slots %0d",
             n_root3, n_root4, n_none, n_pfx_mask, n_sfx_mask, n_slots_full);
    $display("short words %0d, 15-letter words %0d, overlap cycles %0d, held-off cycles %0d",
             n_short, n_full_len, n_overlap, n_held_off);
    check(n_root3 > 0, "no trilateral root");
    check(n_root4 > 0, "no quadrilateral root");
    check(n_none > 0, "no word without root");
    check(n_pfx_mask > 0, "prefix masking never needed");
    check(n_sfx_mask > 0, "suffix masking never needed");
    check(n_slots_full > 0, "stem slots never all filled");
    check(n_short > 0 && n_full_len > 0, "word lengths");
    check(n_overlap > 0, "pipeline never overlapped words");
    check(n_held_off > 0, "non-pipelined unit never held a word off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
