// generate_stems -- cuts every candidate stem of three and four letters out of the word.
//
// A stem starts right after the prefix and ends right before the suffix.  The start
// can be position 0 (no prefix) or i+1 for every flagged prefix position pp[i], six
// choices in all.  The end can be the position of any flagged suffix start ps[j], or
// the word length (no suffix).  For each start there is at most one end giving a
// three-letter stem and one giving a four-letter stem, so each list holds at most
// STEM_SLOTS = 6 stems.  Stems are packed into the lowest free slots in order of their
// start position, as the paper's truncation loop does with its two counters.  v3/v4
// flag the filled slots; the other slots read as EMPTY_CHAR.
//
// From the paper: the pair loops, the size equation (end-1)-(start) = 2 or 3, the six
// slots per size and their filling order.  The used mask and the word length taken from
// it are this design's way of knowing where a short word ends.  Purely combinational.
module generate_stems
  import arabic_pkg::*;
(
  input  word_t                 word_i,
  input  logic [WORD_LEN-1:0]   used,
  input  logic [PREFIX_POS-1:0] pp_r,
  input  logic [WORD_LEN-1:0]   ps_r,
  output stem3_t                stem3_o [STEM_SLOTS],
  output logic [STEM_SLOTS-1:0] v3_o,
  output stem4_t                stem4_o [STEM_SLOTS],
  output logic [STEM_SLOTS-1:0] v4_o
);

  localparam int unsigned CW = $clog2(STEM_SLOTS);

  // Word length: the first unused position (words are left-aligned).
  logic [$clog2(WORD_LEN+1)-1:0] len;
  always_comb begin
    len = WORD_LEN[$clog2(WORD_LEN+1)-1:0];
    for (int k = WORD_LEN - 1; k >= 0; k--)
      if (!used[k]) len = k[$clog2(WORD_LEN+1)-1:0];
  end

  // Stem end allowed at position s (s letters before the suffix): a flagged suffix
  // start, or the word end.
  function automatic logic end_ok(input int s, input logic [WORD_LEN-1:0] ps,
                                  input int l);
    if (s == l)                       return 1'b1;
    else if (s < l && s < WORD_LEN)   return ps[s];
    else                              return 1'b0;
  endfunction

  always_comb begin
    logic [CW-1:0] count1, count2;
    logic          start_ok;
    count1 = '0;
    count2 = '0;
    v3_o   = '0;
    v4_o   = '0;
    for (int n = 0; n < STEM_SLOTS; n++) begin
      stem3_o[n] = '{default: EMPTY_CHAR};
      stem4_o[n] = '{default: EMPTY_CHAR};
    end
    for (int i = 0; i <= PREFIX_POS; i++) begin
      start_ok = (i == 0) ? 1'b1 : pp_r[i-1];
      if (start_ok && end_ok(i + 3, ps_r, int'(len))) begin
        for (int c = 0; c < 3; c++) stem3_o[count1][c] = word_i[i + c];
        v3_o[count1] = 1'b1;
        if (count1 < CW'(STEM_SLOTS - 1)) count1 = count1 + 1'b1;
      end
      if (start_ok && end_ok(i + 4, ps_r, int'(len))) begin
        for (int c = 0; c < 4; c++) stem4_o[count2][c] = word_i[i + c];
        v4_o[count2] = 1'b1;
        if (count2 < CW'(STEM_SLOTS - 1)) count2 = count2 + 1'b1;
      end
    end
  end

endmodule
