// check_prefix_tb -- every code point of the Arabic block, plus random ones, against
// the reference prefix set.
module check_prefix_tb;
  import arabic_pkg::*;
  import stem_ref_pkg::*;
  char_t c;
  logic  isp;
  int checks = 0, failures = 0, hits = 0;

  check_prefix dut (.p_letter(c), .isp_o(isp));

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
      if (isp && t < 256) hits++;
      if (isp !== is_pfx(c)) begin
        failures++;
        $display("FAIL %h gave %b", c, isp);
      end
    end
    checks++;
    if (hits != 7) begin failures++; $display("FAIL %0d prefix letters seen", hits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
