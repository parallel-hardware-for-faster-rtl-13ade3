// prd_prefixes -- turns the per-position prefix flags into the usable prefix run.
//
// A prefix can only be a run of prefix letters starting at the first letter of the
// word.  The first position whose letter is not a prefix letter ends the run, and
// every later position is masked off.  pp_o[i] is high when the letters 0..i are all
// prefix letters, so the stem may start right after position i.  Starting at position
// 0 (no prefix) is always possible and is not flagged here; generate_stems adds it.
//
// From the paper: the masking idea, stated for suffixes and said to work "in a similar
// fashion" for prefixes.  The paper's own example (Table 3) leaves a third prefix letter
// unflagged for a reason it does not state; this unit masks only at the first
// non-prefix letter.  Purely combinational.
module prd_prefixes
  import arabic_pkg::*;
(
  input  logic [PREFIX_POS-1:0] isp,
  output logic [PREFIX_POS-1:0] pp_o
);

  always_comb begin
    logic run;
    run = 1'b1;
    for (int i = 0; i < PREFIX_POS; i++) begin
      run     = run & isp[i];
      pp_o[i] = run;
    end
  end

endmodule
