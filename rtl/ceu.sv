// Carry Estimate Unit (CEU).
//
// Estimates the carry that a k-bit summation block passes to the next block,
// looking only at the block's two most significant bit pairs. If the top pair
// generates (1,1) the carry is 1, if it kills (0,0) the carry is 0; if it
// propagates, the second pair decides when it generates or kills. When both
// pairs propagate the true carry depends on lower bits, and the estimate is 0.
// This is the two-level equation
//   c_ceu = a1.b1 + a0.b0.(a1 + b1)
// with a1/b1 = A/B[k-1] and a0/b0 = A/B[k-2], exactly as published.
//
// Interface: a_hi = {A[k-1], A[k-2]}, b_hi = {B[k-1], B[k-2]}; c_ceu is the
// estimate. Purely combinational, two gate levels deep.
module ceu (
  input  logic [1:0] a_hi,
  input  logic [1:0] b_hi,
  output logic       c_ceu
);
  always_comb
    c_ceu = (a_hi[1] & b_hi[1]) | (a_hi[0] & b_hi[0] & (a_hi[1] | b_hi[1]));
endmodule
