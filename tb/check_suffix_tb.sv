// check_suffix_tb -- every code point of the Arabic block, plus random ones, against
// the reference suffix set.
module check_suffix_tb;
  import arabic_pkg::*;
  import stem_ref_pkg::*;
  char_t c;
  logic  iss;
  int checks = 0, failures = 0, hits = 0;

  check_suffix dut (.s_letter(c), .iss_o(iss));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 256 + 500; t++) begin
      c = (t < 256) ? char_t'(16'h0600 + t) : 16'($urandom);
      #1;
      checks++;
      if (iss && t < 256) hits++;
      if (iss !== is_sfx(c)) begin
        failures++;
        $display("FAIL %h gave %b", c, iss);
      end
    end
    checks++;
    if (hits != 9) begin failures++; $display("FAIL %0d suffix letters seen", hits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
