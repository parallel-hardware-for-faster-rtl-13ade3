// prd_suffixes_tb -- random flag patterns on words of every length, plus the paper's
// example y-k-t-b-w-n: the output must flag exactly the positions where a run of
// suffix letters reaching the word's end begins.
module prd_suffixes_tb;
  logic [14:0] iss, used, ps;
  int checks = 0, failures = 0;

  prd_suffixes dut (.iss(iss), .used(used), .ps_o(ps));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [14:0] expected(logic [14:0] f, int len);
    logic [14:0] e = '0;
    for (int j = 0; j < len; j++) begin
      bit all = 1;
      for (int k = j; k < len; k++) if (!f[k]) all = 0;
      e[j] = all;
    end
    return e;
  endfunction

  task automatic run(logic [14:0] f, int len);
    iss  = f;
    used = (len == 15) ? '1 : 15'((1 << len) - 1);
    #1;
    checks++;
    if (ps !== expected(f, len)) begin
      failures++;
      $display("FAIL len=%0d iss=%b ps=%b exp=%b", len, iss, ps, expected(f, len));
    end
  endtask

  initial begin
    // Paper example: y k t b w n, flags 1 1 1 0 1 1 from the first letter; masked to
    // w and n only.
    run(15'b110111, 6);
    checks++;
    if (ps !== 15'b110000) begin failures++; $display("FAIL paper example ps=%b", ps); end
    for (int t = 0; t < 3000; t++) begin
      logic [14:0] f = 15'($urandom);
      // bias towards long trailing runs
      if (t % 2 == 0) f = f | (15'h7FFF << $urandom_range(14));
      run(f, $urandom_range(15));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
