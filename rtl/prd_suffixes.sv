// prd_suffixes -- turns the per-position suffix flags into the usable suffix run.
//
// A suffix can only be a run of suffix letters ending at the last letter of the word.
// Scanning from the last position towards the first, unused positions (used low) are
// skipped, suffix letters extend the run, and the first other letter ends it: it and
// every position before it are masked off.  ps_o[j] is high when the letters j..end
// are all suffix letters, so the stem may end right before position j.  Ending at the
// word's last letter (no suffix) is not flagged here; generate_stems adds it.
//
// For the paper's example word y-k-t-b-w-n the raw flags are 110111 (last letter on
// the left) and the output is 11 followed by masked positions.  The used mask is this
// design's addition: the paper expects unused positions but does not say how the
// producer tells them apart.  Purely combinational.
module prd_suffixes
  import arabic_pkg::*;
(
  input  logic [WORD_LEN-1:0] iss,
  input  logic [WORD_LEN-1:0] used,
  output logic [WORD_LEN-1:0] ps_o
);

  always_comb begin
    logic run;
    run = 1'b1;
    for (int j = WORD_LEN - 1; j >= 0; j--) begin
      if (used[j]) begin
        run     = run & iss[j];
        ps_o[j] = run;
      end else begin
        ps_o[j] = 1'b0;
      end
    end
  end

endmodule
