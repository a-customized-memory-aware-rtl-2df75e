// functional_unit: one DP cell update of the Needleman-Wunsch recurrence
//   DP(i,j) = max( NW + T(a,b), N + gap, W + gap ).
// It holds the alignment-score block, three adders (north-west + score,
// north + gap, west + gap) and a three-input maximum. The core is
// combinational: its result is captured by the register of the PE row that
// owns it (RA1), which the paper's Result-Reg corresponds to, so a cell takes
// one clock from operands to registered result.
// The structure follows the paper's functional-unit figure; keeping the operand
// registers in the PE (where they are the neighbours' RA1/RA2 registers) is
// this design's choice, and it is what makes the one-cycle datapath latency
// the paper states possible.
module functional_unit
  import nw_pkg::*;
#(
  parameter int MATCH    = nw_pkg::MATCH_SCORE,
  parameter int MISMATCH = nw_pkg::MISMATCH_SCORE
) (
  input  char_t  a,          // streamed character
  input  char_t  b,          // stationary character of this row
  input  score_t north,
  input  score_t north_west,
  input  score_t west,
  input  score_t gap,        // gap penalty (negative)
  output score_t result
);
  score_t t_ab, s_diag, s_north, s_west, m1;

  align_score #(.MATCH(MATCH), .MISMATCH(MISMATCH)) u_score (
    .a(a), .b(b), .score(t_ab)
  );

  always_comb begin
    s_diag  = north_west + t_ab;
    s_north = north + gap;
    s_west  = west + gap;
    m1      = (s_north > s_west) ? s_north : s_west;
    result  = (s_diag > m1) ? s_diag : m1;
  end
endmodule
