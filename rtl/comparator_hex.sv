// comparator_hex -- equality comparator for two 16-bit characters.
//
// The smallest unit of the design: similar is high when hex1 and hex2 hold the same
// Unicode code point.  checkPrefix and checkSuffix use one per candidate letter.
// Purely combinational; port names follow the paper's component declaration.
module comparator_hex
  import arabic_pkg::*;
(
  input  char_t hex1,
  input  char_t hex2,
  output logic  similar
);

  assign similar = (hex1 == hex2);

endmodule
