// Selection Unit (SU).
//
// Detects the four input cases in which the CEU cannot know the carry: both
// of the block's top bit pairs propagate (exactly one of A/B is 1 in each).
//   sel = (A[k-1] ^ B[k-1]) . (A[k-2] ^ B[k-2])
// sel = 1 makes the block take PERL's estimate, sel = 0 the CEU's.
//
// Interface: a_hi = {A[k-1], A[k-2]}, b_hi = {B[k-1], B[k-2]}.
// Purely combinational, two gate levels deep. The equation and its use are
// those of the published design.
module selection_unit (
  input  logic [1:0] a_hi,
  input  logic [1:0] b_hi,
  output logic       sel
);
  always_comb
    sel = (a_hi[1] ^ b_hi[1]) & (a_hi[0] ^ b_hi[0]);
endmodule
