// stem4_comparator -- compares two four-character words.
//
// equal is high when all four 16-bit characters of a and b match.  compare_stems uses
// one per (stem slot, stored root) pair.  Purely combinational.
module stem4_comparator
  import arabic_pkg::*;
(
  input  stem4_t a,
  input  stem4_t b,
  output logic   equal
);

  assign equal = (a[0] == b[0]) && (a[1] == b[1]) && (a[2] == b[2]) && (a[3] == b[3]);

endmodule
