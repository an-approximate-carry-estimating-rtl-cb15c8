// Propagating Error Rectification Logic (PERL).
//
// The same two-level carry estimator as the CEU, applied to the next two bit
// pairs below the block's top pairs: a1/b1 = A/B[k-3], a0/b0 = A/B[k-4].
//   c_perl = a1.b1 + a0.b0.(a1 + b1)
// Its output is used only when the Selection Unit finds that both top pairs
// propagate, so that the carry out of the block equals the carry out of bit
// k-3; PERL then looks two bit pairs further down instead of guessing 0.
//
// Interface: a_mid = {A[k-3], A[k-4]}, b_mid = {B[k-3], B[k-4]}.
// Purely combinational, two gate levels deep. Equation and bit choice follow
// the published design.
module perl (
  input  logic [1:0] a_mid,
  input  logic [1:0] b_mid,
  output logic       c_perl
);
  always_comb
    c_perl = (a_mid[1] & b_mid[1]) | (a_mid[0] & b_mid[0] & (a_mid[1] | b_mid[1]));
endmodule
