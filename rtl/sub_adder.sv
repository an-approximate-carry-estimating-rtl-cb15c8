// K-bit sub-adder of a summation block.
//
// A plain ripple-carry adder: bit j computes sum[j] = a[j] ^ b[j] ^ c[j] and
// c[j+1] = a[j].b[j] + (a[j] ^ b[j]).c[j], starting from cin. The carry into
// the block is not the true carry of the lower bits but the estimate chosen by
// the previous block, so all sub-adders of the adder work at the same time.
// The sub-adder's own carry out of bit K-1 is not used: the next block gets
// the estimated carry instead. The ripple structure is this design's reading
// of the per-bit loop given for the block; any exact K-bit adder would do.
//
// Interface: a, b (K bits), cin; sum (K bits). Purely combinational, K full
// adder delays deep.
module sub_adder #(
  parameter int unsigned K = 8
) (
  input  logic [K-1:0] a,
  input  logic [K-1:0] b,
  input  logic         cin,
  output logic [K-1:0] sum
);
  // c[j] is the carry into bit j. The carry out of bit K-1 is not needed.
  logic [K-1:0] c;

  assign c[0] = cin;

  for (genvar j = 0; j < K; j++) begin : g_bit
    assign sum[j] = a[j] ^ b[j] ^ c[j];
    if (j < K - 1) begin : g_carry
      assign c[j+1] = (a[j] & b[j]) | ((a[j] ^ b[j]) & c[j]);
    end
  end
endmodule
