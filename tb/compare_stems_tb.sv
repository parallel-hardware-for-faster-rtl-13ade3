// compare_stems_tb -- random slot contents, some of them stored roots, against a
// direct search of the root list; the lowest matching valid slot must win.
module compare_stems_tb;
  import arabic_pkg::*;

  stem3_t                sc1 [STEM_SLOTS];
  stem4_t                sc2 [STEM_SLOTS];
  logic [STEM_SLOTS-1:0] v3, v4;
  stem3_t                r3;
  stem4_t                r4;
  logic                  f3, f4;
  int checks = 0, failures = 0, n_found3 = 0, n_found4 = 0, n_missed = 0;

  compare_stems dut (.sc1_i(sc1), .v3_i(v3), .sc2_i(sc2), .v4_i(v4),
                     .sc1_o(r3), .found3(f3), .sc2_o(r4), .found4(f4));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic   e3, e4;
      stem3_t x3;
      stem4_t x4;
      for (int s = 0; s < STEM_SLOTS; s++) begin
        for (int c = 0; c < 3; c++) sc1[s][c] = char_t'(16'h0620 + $urandom_range(42));
        for (int c = 0; c < 4; c++) sc2[s][c] = char_t'(16'h0620 + $urandom_range(42));
        if ($urandom_range(3) == 0) sc1[s] = ROOTS3[$urandom_range(N_ROOT3 - 1)];
        if ($urandom_range(3) == 0) sc2[s] = ROOTS4[$urandom_range(N_ROOT4 - 1)];
      end
      v3 = 6'($urandom);
      v4 = 6'($urandom);
      #1;
      e3 = 0; x3 = '0;
      e4 = 0; x4 = '0;
      for (int s = 0; s < STEM_SLOTS; s++) begin
        if (v3[s] && !e3) foreach (ROOTS3[k]) if (sc1[s] == ROOTS3[k]) begin e3 = 1; x3 = sc1[s]; end
        if (v4[s] && !e4) foreach (ROOTS4[k]) if (sc2[s] == ROOTS4[k]) begin e4 = 1; x4 = sc2[s]; end
      end
      if (e3) n_found3++;
      if (e4) n_found4++;
      if (!e3 && !e4) n_missed++;
      checks++;
      if (f3 !== e3 || r3 !== x3) begin
        failures++; $display("FAIL trilateral: got %b %h exp %b %h", f3, r3, e3, x3);
      end
      checks++;
      if (f4 !== e4 || r4 !== x4) begin
        failures++; $display("FAIL quadrilateral: got %b %h exp %b %h", f4, r4, e4, x4);
      end
    end
    checks++;
    if (n_found3 == 0 || n_found4 == 0 || n_missed == 0) begin
      failures++; $display("FAIL coverage %0d %0d %0d", n_found3, n_found4, n_missed);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
