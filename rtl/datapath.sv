// datapath -- the five-stage root-extraction datapath.
//
// Stage by stage, each ending in a register array loaded by ld[k]:
//   1. regC x15 hold the input word (Chars).
//   2. checkPrefix x5 on characters 0..4 and checkSuffix x15 on all characters; their
//      flags go to the reg arrays isp and iss.
//   3. prdPrefixes and prdSuffixes mask the flags down to the usable prefix and suffix
//      runs; results go to pp_r and ps_r.
//   4. generateStems cuts the three- and four-letter candidate stems; they go to six
//      reg3C and six reg4C (sc1_i, sc2_i) with their slot-valid bits.
//   5. compareStems matches them against the stored roots; the results go to one reg3C
//      (root3) and one reg4C (root4) with their found bits.
// Everything between register arrays is combinational, so with all five loads high
// every cycle the datapath is a five-stage pipeline.
//
// The units, the register arrays and the signal names follow the paper's datapath
// figure.  This design adds copies of the word and of its used-position mask in the
// stage 2 and 3 register arrays, so that generate_stems sees the word that belongs to
// the flags it gets even when words overlap in the pipeline; the paper's figure shows
// no such copies.
module datapath
  import arabic_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic [4:0] ld,
  input  word_t      word_i,
  output stem3_t     root3,
  output logic       found3,
  output stem4_t     root4,
  output logic       found4
);

  // ---- stage 1: input characters -------------------------------------------------
  word_t chars;
  for (genvar i = 0; i < WORD_LEN; i++) begin : g_regC
    ld_reg #(.WIDTH(CHAR_W)) regC (.clk, .rst, .ld(ld[0]), .d(word_i[i]), .q(chars[i]));
  end

  logic [WORD_LEN-1:0] used1;
  for (genvar i = 0; i < WORD_LEN; i++) begin : g_used
    assign used1[i] = (chars[i] != EMPTY_CHAR);
  end

  // ---- stage 2: prefix and suffix checks ----------------------------------------
  logic [PREFIX_POS-1:0] isp_o, isp;
  logic [WORD_LEN-1:0]   iss_o, iss, used2;
  word_t                 word2;

  for (genvar i = 0; i < PREFIX_POS; i++) begin : g_chkp
    check_prefix u_checkPrefix (.p_letter(chars[i]), .isp_o(isp_o[i]));
  end
  for (genvar i = 0; i < WORD_LEN; i++) begin : g_chks
    check_suffix u_checkSuffix (.s_letter(chars[i]), .iss_o(iss_o[i]));
  end

  ld_reg #(.WIDTH(PREFIX_POS))      reg_isp   (.clk, .rst, .ld(ld[1]), .d(isp_o), .q(isp));
  ld_reg #(.WIDTH(WORD_LEN))        reg_iss   (.clk, .rst, .ld(ld[1]), .d(iss_o), .q(iss));
  ld_reg #(.WIDTH(WORD_LEN))        reg_used2 (.clk, .rst, .ld(ld[1]), .d(used1), .q(used2));
  ld_reg #(.WIDTH(WORD_LEN*CHAR_W)) reg_word2 (.clk, .rst, .ld(ld[1]), .d(chars), .q(word2));

  // ---- stage 3: produce prefixes and suffixes -----------------------------------
  logic [PREFIX_POS-1:0] pp_o, pp_r;
  logic [WORD_LEN-1:0]   ps_o, ps_r, used3;
  word_t                 word3;

  prd_prefixes u_prdPrefixes (.isp(isp), .pp_o(pp_o));
  prd_suffixes u_prdSuffixes (.iss(iss), .used(used2), .ps_o(ps_o));

  ld_reg #(.WIDTH(PREFIX_POS))      reg_pp    (.clk, .rst, .ld(ld[2]), .d(pp_o),  .q(pp_r));
  ld_reg #(.WIDTH(WORD_LEN))        reg_ps    (.clk, .rst, .ld(ld[2]), .d(ps_o),  .q(ps_r));
  ld_reg #(.WIDTH(WORD_LEN))        reg_used3 (.clk, .rst, .ld(ld[2]), .d(used2), .q(used3));
  ld_reg #(.WIDTH(WORD_LEN*CHAR_W)) reg_word3 (.clk, .rst, .ld(ld[2]), .d(word2), .q(word3));

  // ---- stage 4: generate and filter stems ---------------------------------------
  stem3_t                ps1_o [STEM_SLOTS];
  stem4_t                ps2_o [STEM_SLOTS];
  stem3_t                sc1_i [STEM_SLOTS];
  stem4_t                sc2_i [STEM_SLOTS];
  logic [STEM_SLOTS-1:0] v3_o, v4_o, v3, v4;

  generate_stems u_generateStems (
    .word_i(word3), .used(used3), .pp_r(pp_r), .ps_r(ps_r),
    .stem3_o(ps1_o), .v3_o(v3_o), .stem4_o(ps2_o), .v4_o(v4_o)
  );

  for (genvar s = 0; s < STEM_SLOTS; s++) begin : g_stemregs
    ld_reg #(.WIDTH(3*CHAR_W)) reg3C (.clk, .rst, .ld(ld[3]), .d(ps1_o[s]), .q(sc1_i[s]));
    ld_reg #(.WIDTH(4*CHAR_W)) reg4C (.clk, .rst, .ld(ld[3]), .d(ps2_o[s]), .q(sc2_i[s]));
  end
  ld_reg #(.WIDTH(STEM_SLOTS)) reg_v3 (.clk, .rst, .ld(ld[3]), .d(v3_o), .q(v3));
  ld_reg #(.WIDTH(STEM_SLOTS)) reg_v4 (.clk, .rst, .ld(ld[3]), .d(v4_o), .q(v4));

  // ---- stage 5: compare stems and extract the root ------------------------------
  stem3_t sc1_o;
  stem4_t sc2_o;
  logic   f3_o, f4_o;

  compare_stems u_compareStems (
    .sc1_i(sc1_i), .v3_i(v3), .sc2_i(sc2_i), .v4_i(v4),
    .sc1_o(sc1_o), .found3(f3_o), .sc2_o(sc2_o), .found4(f4_o)
  );

  ld_reg #(.WIDTH(3*CHAR_W)) reg3C_root (.clk, .rst, .ld(ld[4]), .d(sc1_o), .q(root3));
  ld_reg #(.WIDTH(4*CHAR_W)) reg4C_root (.clk, .rst, .ld(ld[4]), .d(sc2_o), .q(root4));
  ld_reg #(.WIDTH(2))        reg_found  (.clk, .rst, .ld(ld[4]), .d({f4_o, f3_o}),
                                         .q({found4, found3}));

endmodule
