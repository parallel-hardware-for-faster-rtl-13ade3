// datapath_tb -- the datapath driven directly through its five load enables.
//
// Part 1 loads all five register arrays every cycle (pipelined use) with a new word
// each cycle and checks each word's roots five edges later.  Part 2 raises the loads
// one at a time (non-pipelined use) with the input word changed to garbage after it
// was taken, which checks that each array holds its contents between loads.
module datapath_tb;
  import arabic_pkg::*;
  import stem_ref_pkg::*;

  logic   clk = 0, rst;
  logic [4:0] ld;
  word_t  w;
  stem3_t r3;
  stem4_t r4;
  logic   f3, f4;
  int checks = 0, failures = 0;

  datapath dut (.clk, .rst, .ld, .word_i(w), .root3(r3), .found3(f3), .root4(r4), .found4(f4));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(word_t word);
    result_t e = ref_result(word);
    checks++;
    if (f3 !== e.found3 || r3 !== e.root3 || f4 !== e.found4 || r4 !== e.root4) begin
      failures++;
      $display("FAIL word %h: got %b %h %b %h exp %b %h %b %h", word, f3, r3, f4, r4,
               e.found3, e.root3, e.found4, e.root4);
    end
  endtask

  initial begin
    word_t q [$];
    rst = 1; ld = '0; w = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    // Part 1: all loads every cycle.
    ld = 5'b11111;
    for (int cyc = 0; cyc < 2005; cyc++) begin
      w = (cyc % 2) ? rooted_word() : random_word($urandom_range(3, 15));
      q.push_back(w);
      @(posedge clk);
      #1;
      if (q.size() == 6) begin
        void'(q.pop_front());
        compare(q[0]);   // the word taken five edges ago
      end
    end
    // Part 2: one load per cycle.
    for (int n = 0; n < 300; n++) begin
      word_t word = (n % 2) ? rooted_word() : random_word($urandom_range(3, 15));
      for (int k = 0; k < 5; k++) begin
        ld = 5'(1 << k);
        w  = (k == 0) ? word : random_word(15);
        @(posedge clk);
        #1;
      end
      ld = '0;
      w  = random_word(15);
      compare(word);
      @(posedge clk);
      #1;
      compare(word);   // still held with every load low
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
