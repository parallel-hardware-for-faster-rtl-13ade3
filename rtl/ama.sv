// ama -- Arabic verb-root extraction processor (control unit + datapath).
//
// Takes one word of up to 15 Unicode characters (character 0 first, unused positions
// 0x0000) and returns the trilateral root (root3) and the quadrilateral root (root4)
// found among its candidate stems, each with a found flag.  PIPELINED selects the
// paper's two processors: 1 gives the pipelined one (a word per cycle, result five
// cycles later), 0 the non-pipelined one (a word per five cycles).
//
// Handshake (this design's choice): a word is taken on a rising clock edge where
// in_valid and in_ready are both high; out_valid is high for one cycle when root3,
// root4, found3 and found4 hold that word's result, exactly five edges later.  The
// results then stay until the next word's result replaces them.  reset is synchronous
// and active high.  The port names clock, reset, word_i, root3 and root4 are those of
// the paper's simulation figures.
module ama
  import arabic_pkg::*;
#(
  parameter bit PIPELINED = 1'b1
) (
  input  logic   clock,
  input  logic   reset,
  input  word_t  word_i,
  input  logic   in_valid,
  output logic   in_ready,
  output stem3_t root3,
  output logic   found3,
  output stem4_t root4,
  output logic   found4,
  output logic   out_valid
);

  logic [4:0] ld;

  control_unit #(.PIPELINED(PIPELINED)) u_control (
    .clk(clock), .rst(reset), .in_valid, .in_ready, .ld, .out_valid
  );

  datapath u_datapath (
    .clk(clock), .rst(reset), .ld, .word_i, .root3, .found3, .root4, .found4
  );

endmodule
