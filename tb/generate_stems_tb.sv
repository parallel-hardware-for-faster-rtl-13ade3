// generate_stems_tb -- stems of the paper's example words and of random words against
// the reference stemmer.  The prefix and suffix flags are worked out here from the
// reference letter sets; slot contents, slot order and valid bits are all checked.
module generate_stems_tb;
  import arabic_pkg::*;
  import stem_ref_pkg::*;

  word_t                 w;
  logic [WORD_LEN-1:0]   used, ps;
  logic [PREFIX_POS-1:0] pp;
  stem3_t                s3 [STEM_SLOTS];
  stem4_t                s4 [STEM_SLOTS];
  logic [STEM_SLOTS-1:0] v3, v4;
  int checks = 0, failures = 0, full_slots = 0;

  generate_stems dut (.word_i(w), .used(used), .pp_r(pp), .ps_r(ps),
                      .stem3_o(s3), .v3_o(v3), .stem4_o(s4), .v4_o(v4));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(word_t word);
    int l = word_len(word);
    stems_t r;
    w = word;
    for (int k = 0; k < WORD_LEN; k++) used[k] = (k < l);
    for (int i = 0; i < PREFIX_POS; i++) pp[i] = (i < l) && prefix_ok(word, i + 1);
    for (int j = 0; j < WORD_LEN; j++) ps[j] = (j < l) && suffix_ok(word, l - j);
    #1;
    r = ref_stems(word);
    if (r.n3 == STEM_SLOTS) full_slots++;
    for (int n = 0; n < STEM_SLOTS; n++) begin
      checks++;
      if (v3[n] !== (n < r.n3) || (n < r.n3 && s3[n] !== r.s3[n])) begin
        failures++;
        $display("FAIL 3-slot %0d of %h: v=%b got %h", n, word, v3[n], s3[n]);
      end
      checks++;
      if (v4[n] !== (n < r.n4) || (n < r.n4 && s4[n] !== r.s4[n])) begin
        failures++;
        $display("FAIL 4-slot %0d of %h: v=%b got %h", n, word, v4[n], s4[n]);
      end
    end
  endtask

  initial begin
    stems_t r;
    // s-y-l-'-b-w-n: the paper lists l-'-b, y-l-'-b and l-'-b-w among its stems.
    apply(utf8_word("سيلعبون"));
    checks++;
    if (!(v3[0] && s3[0] == utf8_word("لعب")[2:0])) begin
      failures++; $display("FAIL l-'-b not in the first 3-slot");
    end
    // Longest word of the language.
    apply(utf8_word("أفأستسقيناكموها"));
    apply(utf8_word("يكتبون"));
    apply(utf8_word("تتتتتتتتت"));   // all starts and ends valid: six stems of each size
    for (int t = 0; t < 3000; t++) apply(random_word($urandom_range(15)));
    for (int t = 0; t < 500; t++)  apply(rooted_word());
    checks++;
    if (full_slots == 0) begin failures++; $display("FAIL slots never all filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
