// N-bit approximate adder built from N/K parallel summation blocks.
//
// The operands are cut into N/K segments of K bits. Segment i is added by
// summation block i; its carry in is the carry that block i-1 estimated from
// its own top bits (block 0 gets 0). Because no estimate depends on a carry
// in, all blocks work at once and the delay is about one K-bit ripple plus a
// few gates, whatever N is. The sum is exact unless some block's estimate
// differs from the true carry, which can happen only when that block's top
// four bit pairs all propagate (two with PERL_EN = 0) and a carry arrives
// from further down.
//
// Parameters: N operand width, K block width (N a multiple of K), PERL_EN
// selects the rectified design (1, K >= 4) or the plain one (0, K >= 2).
// Defaults are 32-bit operands in 8-bit blocks with rectification, the
// configuration of the image filtering study; 8/16/32 bits with 4/8/16-bit
// blocks are also evaluated for this adder.
//
// Interface: unsigned operands a, b; sum is the N-bit approximate sum and
// cout the carry estimated by the last block. Purely combinational: no clock,
// no reset, no state.
//
// The block structure, the estimator equations and the zero carry into the
// first block follow the published design. The choice of default size, the
// use of the last block's estimate as cout and the PERL_EN switch between
// the rectified and plain variants are this implementation's.
module cesa_perl_adder #(
  parameter int unsigned N       = 32,
  parameter int unsigned K       = 8,
  parameter bit          PERL_EN = 1'b1
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] sum,
  output logic         cout
);
  localparam int unsigned NB = N / K;

  if (N % K != 0 || NB < 1) begin : g_bad_n
    $error("cesa_perl_adder: N (%0d) must be a positive multiple of K (%0d)", N, K);
  end

  // carry[i] is the carry into block i; carry[NB] leaves the adder.
  logic [NB:0] carry;

  assign carry[0] = 1'b0;

  for (genvar i = 0; i < NB; i++) begin : g_blk
    summation_block #(.K(K), .PERL_EN(PERL_EN)) u_blk (
      .a     (a[i*K +: K]),
      .b     (b[i*K +: K]),
      .cin   (carry[i]),
      .sum   (sum[i*K +: K]),
      .c_out (carry[i+1])
    );
  end

  assign cout = carry[NB];
endmodule
