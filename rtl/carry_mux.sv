// Carry select multiplexer of a summation block.
//
// Chooses the carry handed to the next block:
//   c_out = ~sel.c_ceu + sel.c_perl
// Input 0 is the CEU estimate, input 1 the PERL estimate; sel comes from the
// Selection Unit. One 2:1 multiplexer per block, as in the published block
// diagram (input 0 = CEU, input 1 = PERL). Purely combinational.
module carry_mux (
  input  logic c_ceu,
  input  logic c_perl,
  input  logic sel,
  output logic c_out
);
  always_comb
    c_out = sel ? c_perl : c_ceu;
endmodule
