// check_suffix -- tests whether one character is one of the nine suffix letters.
//
// Built like check_prefix: nine comparator_hex instances against the constant suffix
// letters, ORed.  The datapath holds fifteen of these, one per character position.
// The paper names the letters only through an Arabic word with eight distinct letters
// while saying there are nine; plain alif is the ninth here (see arabic_pkg).
// Purely combinational.
module check_suffix
  import arabic_pkg::*;
(
  input  char_t s_letter,
  output logic  iss_o
);

  logic [N_SUFFIX-1:0] r;

  for (genvar i = 0; i < N_SUFFIX; i++) begin : g_cmp
    comparator_hex u_cmp (.hex1(s_letter), .hex2(SUFFIX_LETTERS[i]), .similar(r[i]));
  end

  assign iss_o = |r;

endmodule
