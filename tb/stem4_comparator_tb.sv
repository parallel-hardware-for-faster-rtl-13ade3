// stem4_comparator_tb -- equal and one-letter-different four-letter words.
module stem4_comparator_tb;
  import arabic_pkg::*;
  stem4_t a, b;
  logic   eq;
  int checks = 0, failures = 0;

  stem4_comparator dut (.a(a), .b(b), .equal(eq));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int c = 0; c < 4; c++) a[c] = char_t'(16'h0620 + $urandom_range(42));
      b = a;
      if (t % 2) b[$urandom_range(3)] ^= char_t'(1 << $urandom_range(15));
      #1;
      checks++;
      if (eq !== (a == b)) begin failures++; $display("FAIL %h %h -> %b", a, b, eq); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
