// stem3_comparator -- compares two three-character words.
//
// equal is high when all three 16-bit characters of a and b match.  compare_stems uses
// one per (stem slot, stored root) pair.  Purely combinational.
module stem3_comparator
  import arabic_pkg::*;
(
  input  stem3_t a,
  input  stem3_t b,
  output logic   equal
);

  assign equal = (a[0] == b[0]) && (a[1] == b[1]) && (a[2] == b[2]);

endmodule
