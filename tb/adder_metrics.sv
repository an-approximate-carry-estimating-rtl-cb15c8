// Error statistics collector for one configuration of the approximate adder.
//
// Instantiates cesa_perl_adder with the given N, K and PERL_EN, feeds it the
// low N bits of the shared operands a and b on every rising clock edge while
// en is high, and accumulates:
//   mismatches  results that differ from an integer model of the adder
//               (block carry = carry out of the previous block's top W bits
//               added with carry in 0, W = 4 with rectification, 2 without)
//   n_err       results whose N-bit sum differs from the exact N-bit sum
//   sum_ed      sum of |approximate - exact| (error distance)
//   sum_red     sum of error distance / exact sum (relative error distance)
// The results of one edge are counted one cycle later, so en must stay low
// for a cycle before the counters are read.
module adder_metrics #(
  parameter int unsigned N       = 32,
  parameter int unsigned K       = 8,
  parameter bit          PERL_EN = 1'b1
) (
  input  logic        clk,
  input  logic        en,
  input  logic [63:0] a,
  input  logic [63:0] b,
  output longint      n_vec,
  output longint      mismatches,
  output longint      n_err,
  output real         sum_ed,
  output real         sum_red
);
  localparam int unsigned NB = N / K;
  localparam int unsigned W  = PERL_EN ? 4 : 2;

  logic [N-1:0] x, y, s;
  logic         co;

  cesa_perl_adder #(.N(N), .K(K), .PERL_EN(PERL_EN)) u_add (.a(x), .b(y), .sum(s), .cout(co));

  initial begin
    n_vec = 0; mismatches = 0; n_err = 0; sum_ed = 0.0; sum_red = 0.0;
    x = '0; y = '0;
  end

  function automatic logic [N:0] model(logic [N-1:0] p, logic [N-1:0] q);
    logic [N-1:0] r;
    logic [K:0]   part;
    logic [W:0]   top;
    logic         c;
    c = 1'b0;
    for (int i = 0; i < NB; i++) begin
      part = {1'b0, p[i*K +: K]} + {1'b0, q[i*K +: K]} + {{K{1'b0}}, c};
      r[i*K +: K] = part[K-1:0];
      top = {1'b0, p[i*K+K-W +: W]} + {1'b0, q[i*K+K-W +: W]};
      c = top[W];
    end
    return {c, r};
  endfunction

  logic pending = 1'b0;

  always @(posedge clk) begin
    if (pending) begin
      logic [N:0] exact;
      real        ed;
      exact = {1'b0, x} + {1'b0, y};
      n_vec++;
      if ({co, s} != model(x, y)) mismatches++;
      if (s != exact[N-1:0]) begin
        n_err++;
        ed = (s > exact[N-1:0]) ? real'(s - exact[N-1:0]) : real'(exact[N-1:0] - s);
        sum_ed += ed;
        if (exact != 0) sum_red += ed / real'(exact);
      end
    end
    pending <= en;
    if (en) begin
      x <= a[N-1:0];
      y <= b[N-1:0];
    end
  end
endmodule
