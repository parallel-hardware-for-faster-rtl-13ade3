// stem_ref_pkg -- reference model and helpers shared by the testbenches.
//
// The reference follows the software formulation of the stemmer rather than the
// hardware's: it enumerates prefix lengths and suffix lengths as strings, keeps the
// stems of three and four letters in order of increasing prefix length, and looks
// each one up in the stored root list.  It keeps its own copy of the prefix and suffix
// letter sets, so a wrong constant in the RTL shows as a mismatch.
//
// char_name() gives the ASCII name of a letter for display in simulation logs, using
// the names of the original's simulation traces where they print one (Alif U for
// alif-hamza, Alif N for plain alif, Sin, Qaf, Yaa, ...).
// utf8_word() turns a UTF-8 string of Arabic letters (two bytes each) into a
// left-aligned word of 16-bit code points, so tests can be written in Arabic.
package stem_ref_pkg;
  import arabic_pkg::*;

  // Prefix letters f s a l t n y; suffix letters a-hamza-below y t n k m w h a.
  localparam char_t REF_PFX [7] = '{16'h0641, 16'h0633, 16'h0623, 16'h0644, 16'h062A,
                                    16'h0646, 16'h064A};
  localparam char_t REF_SFX [9] = '{16'h0627, 16'h0625, 16'h064A, 16'h062A, 16'h0646,
                                    16'h0643, 16'h0645, 16'h0648, 16'h0647};

  typedef struct {
    int     n3;
    int     n4;
    stem3_t s3 [6];
    stem4_t s4 [6];
  } stems_t;

  typedef struct {
    logic   found3;
    stem3_t root3;
    logic   found4;
    stem4_t root4;
  } result_t;

  function automatic bit is_pfx(char_t c);
    foreach (REF_PFX[k]) if (REF_PFX[k] == c) return 1;
    return 0;
  endfunction

  function automatic bit is_sfx(char_t c);
    foreach (REF_SFX[k]) if (REF_SFX[k] == c) return 1;
    return 0;
  endfunction

  function automatic int word_len(word_t w);
    for (int k = 0; k < 15; k++) if (w[k] == 16'h0000) return k;
    return 15;
  endfunction

  // Prefix of length pl allowed: at most five letters, all prefix letters.
  function automatic bit prefix_ok(word_t w, int pl);
    if (pl > 5) return 0;
    for (int k = 0; k < pl; k++) if (!is_pfx(w[k])) return 0;
    return 1;
  endfunction

  // Suffix of length sl allowed: the last sl letters are all suffix letters.
  function automatic bit suffix_ok(word_t w, int sl);
    int l = word_len(w);
    for (int k = l - sl; k < l; k++) if (!is_sfx(w[k])) return 0;
    return 1;
  endfunction

  function automatic stems_t ref_stems(word_t w);
    stems_t r;
    int l = word_len(w);
    r.n3 = 0;
    r.n4 = 0;
    for (int pl = 0; pl <= 5; pl++) begin
      if (!prefix_ok(w, pl)) continue;
      if (l - pl - 3 >= 0 && suffix_ok(w, l - pl - 3)) begin
        for (int c = 0; c < 3; c++) r.s3[r.n3][c] = w[pl + c];
        r.n3++;
      end
      if (l - pl - 4 >= 0 && suffix_ok(w, l - pl - 4)) begin
        for (int c = 0; c < 4; c++) r.s4[r.n4][c] = w[pl + c];
        r.n4++;
      end
    end
    return r;
  endfunction

  function automatic result_t ref_result(word_t w);
    result_t r;
    stems_t  s = ref_stems(w);
    r.found3 = 0; r.root3 = '0;
    r.found4 = 0; r.root4 = '0;
    for (int i = 0; i < s.n3 && !r.found3; i++)
      foreach (ROOTS3[k]) if (ROOTS3[k] == s.s3[i]) begin r.found3 = 1; r.root3 = s.s3[i]; end
    for (int i = 0; i < s.n4 && !r.found4; i++)
      foreach (ROOTS4[k]) if (ROOTS4[k] == s.s4[i]) begin r.found4 = 1; r.root4 = s.s4[i]; end
    return r;
  endfunction

  function automatic string char_name(char_t c);
    case (c)
      16'h0000: return "-";
      16'h0621: return "Hamza";  16'h0622: return "Alif M";  16'h0623: return "Alif U";
      16'h0624: return "Waw H";  16'h0625: return "Alif D";  16'h0626: return "Yaa H";
      16'h0627: return "Alif N"; 16'h0628: return "Baa";     16'h0629: return "Taa M";
      16'h062A: return "Taa";    16'h062B: return "Thaa";    16'h062C: return "Jim";
      16'h062D: return "Hha";    16'h062E: return "Khaa";    16'h062F: return "Dal";
      16'h0630: return "Thal";   16'h0631: return "Raa";     16'h0632: return "Zay";
      16'h0633: return "Sin";    16'h0634: return "Shin";    16'h0635: return "Sad";
      16'h0636: return "Dad";    16'h0637: return "Tta";     16'h0638: return "Dha";
      16'h0639: return "Ain";    16'h063A: return "Ghain";   16'h0641: return "Faa";
      16'h0642: return "Qaf";    16'h0643: return "Kaf";     16'h0644: return "Lam";
      16'h0645: return "Mim";    16'h0646: return "Nun";     16'h0647: return "Haa";
      16'h0648: return "Waw";    16'h0649: return "Alif Q";  16'h064A: return "Yaa";
      default:  return $sformatf("U+%04h", c);
    endcase
  endfunction

  function automatic string word_names(word_t w, int n);
    string s = "";
    for (int k = 0; k < n; k++) s = {s, (k > 0) ? " " : "", char_name(w[k])};
    return s;
  endfunction

  function automatic word_t utf8_word(string s);
    word_t w = '0;
    int    n = 0;
    for (int i = 0; i + 1 < s.len() && n < 15; i += 2) begin
      byte unsigned b0 = s[i];
      byte unsigned b1 = s[i+1];
      w[n] = {5'b0, b0[4:0], b1[5:0]};
      n++;
    end
    return w;
  endfunction

  // Random word of length l drawn from a small alphabet rich in affix letters, so
  // that prefix and suffix runs and root matches are frequent.
  function automatic word_t random_word(int l);
    localparam char_t ALPHA [16] = '{16'h0641, 16'h0633, 16'h0623, 16'h0644, 16'h062A,
      16'h0646, 16'h064A, 16'h0627, 16'h0648, 16'h0643, 16'h0645, 16'h0647, 16'h0628,
      16'h0639, 16'h0642, 16'h062F};
    word_t w = '0;
    for (int k = 0; k < l; k++) w[k] = ALPHA[$urandom_range(15)];
    return w;
  endfunction

  // A random word built around a stored root: up to two prefix letters, the root,
  // up to three suffix letters.
  function automatic word_t rooted_word();
    word_t w = '0;
    int    n = 0;
    int    np = $urandom_range(2);
    int    ns = $urandom_range(3);
    bit    quad = $urandom_range(1) == 1;
    for (int k = 0; k < np; k++) w[n++] = REF_PFX[$urandom_range(6)];
    if (quad) begin
      stem4_t r = ROOTS4[$urandom_range(N_ROOT4 - 1)];
      for (int c = 0; c < 4; c++) w[n++] = r[c];
    end else begin
      stem3_t r = ROOTS3[$urandom_range(N_ROOT3 - 1)];
      for (int c = 0; c < 3; c++) w[n++] = r[c];
    end
    for (int k = 0; k < ns; k++) w[n++] = REF_SFX[$urandom_range(8)];
    return w;
  endfunction

endpackage
