// compare_stems -- matches the candidate stems against the stored roots.
//
// Every filled three-letter slot is compared with every stored trilateral root by a
// stem3_comparator, and every filled four-letter slot with every stored quadrilateral
// root by a stem4_comparator, all in parallel.  The lowest slot that matches some root
// wins (slots are filled in order of stem start, so the stem with the shortest prefix
// wins).  sc1_o/sc2_o carry the winning stem, found3/found4 say whether one matched;
// with no match the root outputs read EMPTY_CHAR.
//
// From the paper: the six parallel comparisons per size (its Fig. 8), the split into
// stem3_Comparator and stem4_Comparator, and the two root outputs.  This design's own:
// the found flags, the lowest-slot priority, and the root list itself (arabic_pkg),
// which the paper does not give.  Purely combinational.
module compare_stems
  import arabic_pkg::*;
(
  input  stem3_t                sc1_i [STEM_SLOTS],
  input  logic [STEM_SLOTS-1:0] v3_i,
  input  stem4_t                sc2_i [STEM_SLOTS],
  input  logic [STEM_SLOTS-1:0] v4_i,
  output stem3_t                sc1_o,
  output logic                  found3,
  output stem4_t                sc2_o,
  output logic                  found4
);

  logic [N_ROOT3-1:0] eq3 [STEM_SLOTS];
  logic [N_ROOT4-1:0] eq4 [STEM_SLOTS];
  logic [STEM_SLOTS-1:0] hit3, hit4;

  for (genvar s = 0; s < STEM_SLOTS; s++) begin : g_slot
    for (genvar r = 0; r < N_ROOT3; r++) begin : g_r3
      stem3_comparator u_c3 (.a(sc1_i[s]), .b(ROOTS3[r]), .equal(eq3[s][r]));
    end
    for (genvar r = 0; r < N_ROOT4; r++) begin : g_r4
      stem4_comparator u_c4 (.a(sc2_i[s]), .b(ROOTS4[r]), .equal(eq4[s][r]));
    end
    assign hit3[s] = v3_i[s] && (|eq3[s]);
    assign hit4[s] = v4_i[s] && (|eq4[s]);
  end

  // Extract root: first matching slot of each size.
  always_comb begin
    sc1_o  = '{default: EMPTY_CHAR};
    sc2_o  = '{default: EMPTY_CHAR};
    found3 = 1'b0;
    found4 = 1'b0;
    for (int s = STEM_SLOTS - 1; s >= 0; s--) begin
      if (hit3[s]) begin
        sc1_o  = sc1_i[s];
        found3 = 1'b1;
      end
      if (hit4[s]) begin
        sc2_o  = sc2_i[s];
        found4 = 1'b1;
      end
    end
  end

endmodule
