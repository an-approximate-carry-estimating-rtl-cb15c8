// K-bit summation block of the carry estimating simultaneous adder.
//
// The block adds its sub-inputs a and b with the carry cin chosen by the
// previous block, and at the same time estimates the carry it hands to the
// next block from its own top bits only:
//   - CEU   looks at bit pairs K-1 and K-2,
//   - PERL  looks at bit pairs K-3 and K-4,
//   - SU    flags the case where pairs K-1 and K-2 both propagate,
//   - a 2:1 mux takes PERL's estimate when SU flags, the CEU's otherwise.
// The estimate does not depend on cin, so no carry ripples from block to
// block: every block's sum and carry settle after one sub-adder delay.
//
// PERL_EN = 1 builds the rectified block (CESA-PERL), which needs K >= 4.
// PERL_EN = 0 builds the plain block (CESA): no PERL, SU or mux, the carry is
// the CEU estimate (0 in the undecided cases), and K >= 2 suffices.
//
// Interface: a, b (K bits), cin; sum (K bits), c_out. Combinational.
//
// The block's contents and the minimum block sizes follow the published
// design; the PERL_EN parameter is this implementation's way of offering
// both variants from one module.
module summation_block #(
  parameter int unsigned K       = 8,
  parameter bit          PERL_EN = 1'b1
) (
  input  logic [K-1:0] a,
  input  logic [K-1:0] b,
  input  logic         cin,
  output logic [K-1:0] sum,
  output logic         c_out
);
  if (PERL_EN && K < 4) begin : g_bad_k
    $error("summation_block: K must be at least 4 with PERL, got %0d", K);
  end
  if (!PERL_EN && K < 2) begin : g_bad_k_cesa
    $error("summation_block: K must be at least 2, got %0d", K);
  end

  logic c_ceu;

  sub_adder #(.K(K)) u_sub_adder (
    .a   (a),
    .b   (b),
    .cin (cin),
    .sum (sum)
  );

  ceu u_ceu (
    .a_hi  (a[K-1:K-2]),
    .b_hi  (b[K-1:K-2]),
    .c_ceu (c_ceu)
  );

  if (PERL_EN) begin : g_perl
    logic c_perl, sel;

    perl u_perl (
      .a_mid  (a[K-3:K-4]),
      .b_mid  (b[K-3:K-4]),
      .c_perl (c_perl)
    );

    selection_unit u_su (
      .a_hi (a[K-1:K-2]),
      .b_hi (b[K-1:K-2]),
      .sel  (sel)
    );

    carry_mux u_mux (
      .c_ceu  (c_ceu),
      .c_perl (c_perl),
      .sel    (sel),
      .c_out  (c_out)
    );
  end else begin : g_cesa
    assign c_out = c_ceu;
  end
endmodule
