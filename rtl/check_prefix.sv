// check_prefix -- tests whether one character is one of the seven prefix letters.
//
// Seven comparator_hex instances compare the character against the constant prefix
// letters in parallel and their results are ORed, as in the paper's data-parallel
// checkPrefix entity.  The datapath holds five of these, one per prefix position.
// Purely combinational.
module check_prefix
  import arabic_pkg::*;
(
  input  char_t p_letter,
  output logic  isp_o
);

  logic [N_PREFIX-1:0] r;

  for (genvar i = 0; i < N_PREFIX; i++) begin : g_cmp
    comparator_hex u_cmp (.hex1(p_letter), .hex2(PREFIX_LETTERS[i]), .similar(r[i]));
  end

  assign isp_o = |r;

endmodule
