// arabic_pkg -- shared types and constants of the verb-root extraction processor.
//
// Characters are 16-bit Unicode code points of the Arabic block (U+0600..U+06FF).
// An input word holds up to WORD_LEN characters; character 0 is the first letter of
// the word (the right-most one when written), and a word shorter than WORD_LEN is
// left-aligned with the unused tail positions holding EMPTY_CHAR (0x0000).
//
// From the paper: 16-bit Unicode characters, a 15-character word, five prefix
// positions, the seven prefix letters and their code points, six stem slots of each
// size.  This design's own choices: the EMPTY_CHAR code for unused positions, the
// ninth suffix letter (plain alif, added to the eight letters of the paper's suffix
// word), and the contents of the stored root list.  The paper does not give that list.
// This list holds the roots the paper names in its examples plus a few common
// quadrilateral roots, so the quadrilateral path has something to match.
package arabic_pkg;

  localparam int unsigned CHAR_W     = 16;  // Unicode code unit
  localparam int unsigned WORD_LEN   = 15;  // longest Arabic word, in characters
  localparam int unsigned PREFIX_POS = 5;   // positions examined for prefixes
  localparam int unsigned STEM_SLOTS = 6;   // stems of each size held per word
  localparam int unsigned N_PREFIX   = 7;
  localparam int unsigned N_SUFFIX   = 9;

  typedef logic [CHAR_W-1:0]   char_t;
  typedef char_t [2:0]         stem3_t;   // [0] is the first letter of the stem
  typedef char_t [3:0]         stem4_t;
  typedef char_t [WORD_LEN-1:0] word_t;   // [0] is the first letter of the word

  localparam char_t EMPTY_CHAR = 16'h0000;

  // Letters that may start a verb: alif-hamza, taa, sin, faa, lam, nun, yaa.
  localparam char_t PREFIX_LETTERS [N_PREFIX] = '{
    16'h0623, 16'h062A, 16'h0633, 16'h0641, 16'h0644, 16'h0646, 16'h064A
  };

  // Letters that may end a verb: alif-hamza-below, yaa, taa, nun, kaf, mim, waw, haa,
  // plus plain alif.
  localparam char_t SUFFIX_LETTERS [N_SUFFIX] = '{
    16'h0625, 16'h064A, 16'h062A, 16'h0646, 16'h0643, 16'h0645, 16'h0648, 16'h0647,
    16'h0627
  };

  // Stored trilateral roots, first letter at index 0.
  localparam int unsigned N_ROOT3 = 15;
  localparam stem3_t ROOTS3 [N_ROOT3] = '{
    '{16'h064A, 16'h0642, 16'h0633},   // s-q-y   (give water)
    '{16'h0628, 16'h0639, 16'h0644},   // l-'-b   (play)
    '{16'h0633, 16'h0631, 16'h062F},   // d-r-s   (study)
    '{16'h0628, 16'h062D, 16'h0635},   // s.-h.-b (accompany)
    '{16'h0645, 16'h0644, 16'h0639},   // '-l-m   (know)
    '{16'h0631, 16'h0641, 16'h0643},   // k-f-r   (disbelieve)
    '{16'h0644, 16'h0648, 16'h0642},   // q-w-l   (say)
    '{16'h0633, 16'h0641, 16'h0646},   // n-f-s   (soul)
    '{16'h0644, 16'h0632, 16'h0646},   // n-z-l   (descend)
    '{16'h0644, 16'h0645, 16'h0639},   // '-m-l   (work)
    '{16'h0642, 16'h0644, 16'h062E},   // kh-l-q  (create)
    '{16'h0644, 16'h0639, 16'h062C},   // j-'-l   (make)
    '{16'h0628, 16'h062A, 16'h0643},   // k-t-b   (write)
    '{16'h0646, 16'h0648, 16'h0643},   // k-w-n   (be)
    '{16'h0649, 16'h0623, 16'h0631}    // r-'-a   (see)
  };

  // Stored quadrilateral roots, first letter at index 0.
  localparam int unsigned N_ROOT4 = 4;
  localparam stem4_t ROOTS4 [N_ROOT4] = '{
    '{16'h062C, 16'h0631, 16'h0632, 16'h062D},   // h.-z-r-j
    '{16'h0644, 16'h0632, 16'h0644, 16'h0632},   // z-l-z-l (shake)
    '{16'h062C, 16'h0631, 16'h062D, 16'h062F},   // d-h.-r-j (roll)
    '{16'h0645, 16'h062C, 16'h0631, 16'h062A}    // t-r-j-m (translate)
  };

endpackage
