// prd_prefixes_tb -- all 32 flag patterns: the output must be the run of ones that
// starts at position 0.
module prd_prefixes_tb;
  logic [4:0] isp, pp;
  int checks = 0, failures = 0;

  prd_prefixes dut (.isp(isp), .pp_o(pp));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [4:0] exp;
    for (int v = 0; v < 32; v++) begin
      isp = 5'(v);
      // Length of the leading run, counted independently.
      exp = '0;
      for (int n = 0; n <= 5; n++) begin
        automatic bit all = 1;
        for (int k = 0; k < n; k++) if (!isp[k]) all = 0;
        if (all && n > 0) exp[n-1] = 1'b1;
      end
      #1;
      checks++;
      if (pp !== exp) begin
        failures++;
        $display("FAIL isp=%b pp=%b exp=%b", isp, pp, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
