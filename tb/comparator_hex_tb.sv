// comparator_hex_tb -- exhaustive-ish equality check of the character comparator.
module comparator_hex_tb;
  import arabic_pkg::*;
  char_t a, b;
  logic  sim;
  int checks = 0, failures = 0;

  comparator_hex dut (.hex1(a), .hex2(b), .similar(sim));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      a = 16'($urandom);
      case (t % 3)
        0: b = a;
        1: b = a ^ (16'h1 << $urandom_range(15));   // differs in one bit
        default: b = 16'($urandom);
      endcase
      #1;
      checks++;
      if (sim !== (a === b)) begin
        failures++;
        $display("FAIL %h vs %h gave %b", a, b, sim);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
