// ama_full_tb -- the processor at its default configuration (pipelined) on the
// paper's example words and on word streams the size of its two evaluation texts.
//
// The example words check the roots the paper reports, among them s-q-y from the
// longest Arabic word.  Then two streams of generated words, 980 and 77,476 words long
// (the word counts of the paper's two texts), are pushed through back to back; every
// result is checked against the reference stemmer, and the number of clock edges must
// be the word count plus four: the edge that takes a word is the first of the five
// register loads, the edge that loads its roots the fifth; in between one word enters
// per clock.
module ama_full_tb;
  import arabic_pkg::*;
  import stem_ref_pkg::*;

  logic   clock = 0, reset;
  word_t  word_i;
  logic   in_valid, in_ready, found3, found4, out_valid;
  stem3_t root3;
  stem4_t root4;
  int checks = 0, failures = 0;

  ama dut (.clock, .reset, .word_i, .in_valid, .in_ready, .root3, .found3, .root4, .found4,
           .out_valid);

  always #5 clock = ~clock;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Runs n words through, back to back, and checks results, latency and rate.
  task automatic run_stream(word_t ws [$]);
    int n = ws.size();
    int sent = 0, got = 0, start, cyc = 0, n_found = 0;
    start = 0;
    while (got < n) begin
      in_valid = (sent < n);
      word_i   = (sent < n) ? ws[sent] : '0;
      @(posedge clock);
      cyc++;
      if (in_valid && in_ready) sent++;
      #1;
      if (out_valid) begin
        result_t e = ref_result(ws[got]);
        check(found3 === e.found3 && root3 === e.root3 && found4 === e.found4 &&
              root4 === e.root4, $sformatf("word %0d: got %b %h %b %h", got, found3, root3,
              found4, root4));
        if (found3 || found4) n_found++;
        got++;
      end
    end
    in_valid = 0;
    check(cyc == n + 4, $sformatf("%0d words took %0d cycles", n, cyc));
    $display("%0d words in %0d cycles, %0d with a stored root", n, cyc, n_found);
  endtask

  function automatic stem3_t s3(string s);
    word_t w = utf8_word(s);
    return w[2:0];
  endfunction
  function automatic stem4_t s4(string s);
    word_t w = utf8_word(s);
    return w[3:0];
  endfunction

  initial begin
    word_t ws [$];
    reset = 1; in_valid = 0; word_i = '0;
    repeat (3) @(posedge clock);
    #1 reset = 0;

    // Paper examples, one at a time, with the roots the paper reports.
    ws = {utf8_word("أفأستسقيناكموها"), utf8_word("سيلعبون"), utf8_word("يكتبون"),
          utf8_word("يدرسون"), utf8_word("تدحرج")};
    run_stream(ws);
    // Spot checks of the reported roots (the stream checked them against the model).
    ws = {utf8_word("أفأستسقيناكموها")};
    in_valid = 1; word_i = ws[0];
    @(posedge clock); #1 in_valid = 0;
    repeat (4) @(posedge clock);
    #1;
    check(out_valid && found3 && root3 == s3("سقي"), "longest word gives s-q-y");
    $display("word_i = %s -> root3 = %s", word_names(ws[0], 15), {char_name(root3[0]), " ", char_name(root3[1]), " ", char_name(root3[2])});
    in_valid = 1; word_i = utf8_word("سيلعبون");
    @(posedge clock); #1 in_valid = 0;
    repeat (4) @(posedge clock);
    #1;
    check(out_valid && found3 && root3 == s3("لعب"), "s-y-l-'-b-w-n gives l-'-b");
    in_valid = 1; word_i = utf8_word("تدحرج");
    @(posedge clock); #1 in_valid = 0;
    repeat (4) @(posedge clock);
    #1;
    check(out_valid && found4 && root4 == s4("دحرج"), "t-d-h.-r-j gives d-h.-r-j");

    // Streams of the sizes of the two evaluated texts.
    ws = {};
    for (int i = 0; i < 980; i++) ws.push_back((i % 2 == 1) ? rooted_word() : random_word($urandom_range(2, 15)));
    run_stream(ws);
    ws = {};
    for (int i = 0; i < 77476; i++) ws.push_back((i % 2 == 1) ? rooted_word() : random_word($urandom_range(2, 15)));
    run_stream(ws);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
