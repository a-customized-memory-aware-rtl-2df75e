// align_score: the "alignment score" block of the functional unit. It
// compares the two 2-bit characters and returns the substitution score
// T(i,j) of the DP recurrence: MATCH when the characters are identical,
// MISMATCH otherwise. Purely combinational.
// The paper gives the function (+1 for a match, -1 for a mismatch); the
// defaults follow its worked example.
module align_score
  import nw_pkg::*;
#(
  parameter int MATCH    = nw_pkg::MATCH_SCORE,
  parameter int MISMATCH = nw_pkg::MISMATCH_SCORE
) (
  input  char_t  a,
  input  char_t  b,
  output score_t score
);
  always_comb score = (a == b) ? score_t'(MATCH) : score_t'(MISMATCH);
endmodule
