// End-to-end testbench for the approximate adder at its default size
// (32-bit operands, 8-bit blocks, rectification on).
//
// The expected result comes from an integer model written from the adder's
// definition rather than from its gates: block i adds its K-bit segments
// plus a carry, and that carry is the carry out of the top four bits of
// block i-1 added with carry in 0 (block 0 gets 0). The cout output is the
// same estimate for the last block.
//
// Vectors: directed corner cases, then random operands. Random operands
// rarely make four bit pairs propagate in a row, so a share of the vectors
// is built with propagating top bits to reach the rectification and error
// cases often. The run counts how often each mechanism occurs and fails if
// one never does: a carry decided by the CEU, a carry handed to PERL, a
// carry that PERL corrects to 1, a result that is exact, and a result that
// differs from the exact sum. It also reports error rate, mean error
// distance and mean relative error distance over the uniform random part.
module tb_cesa_perl_adder;
  localparam int unsigned N  = 32;
  localparam int unsigned K  = 8;
  localparam int unsigned NB = N / K;
  localparam int unsigned NRAND = 200000;
  localparam int unsigned NBIASED = 50000;

  logic         clk = 1'b0;
  logic [N-1:0] a, b, sum;
  logic         cout;
  int           checks = 0, failures = 0, cycles = 0;

  // mechanism counters
  int n_ceu = 0, n_perl = 0, n_rectify = 0, n_exact = 0, n_error = 0;
  // error metrics over the uniform random vectors
  int    n_uniform = 0, n_uniform_err = 0;
  real   sum_ed = 0.0, sum_red = 0.0;

  cesa_perl_adder dut (.a(a), .b(b), .sum(sum), .cout(cout));

  always #5 clk = ~clk;

  initial begin : watchdog
    while (cycles < NRAND + NBIASED + 1000) begin
      @(posedge clk);
      cycles++;
    end
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Estimated carry out of one K-bit segment: carry of its top 4 bits, cin 0.
  function automatic logic est_carry(logic [K-1:0] x, logic [K-1:0] y);
    logic [4:0] t;
    t = {1'b0, x[K-1:K-4]} + {1'b0, y[K-1:K-4]};
    return t[4];
  endfunction

  function automatic logic [N-1:0] rand_word();
    logic [N-1:0] w;
    for (int i = 0; i < N; i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  function automatic logic [N:0] model(logic [N-1:0] x, logic [N-1:0] y);
    logic [N-1:0] s;
    logic [K:0]   part;
    logic         c;
    c = 1'b0;
    for (int i = 0; i < NB; i++) begin
      part = {1'b0, x[i*K +: K]} + {1'b0, y[i*K +: K]} + {{K{1'b0}}, c};
      s[i*K +: K] = part[K-1:0];
      c = est_carry(x[i*K +: K], y[i*K +: K]);
    end
    return {c, s};
  endfunction

  task automatic apply(logic [N-1:0] x, logic [N-1:0] y, bit uniform);
    logic [N:0] exp_r, exact;
    logic [1:0] p_hi;
    logic [4:0] t4;
    logic [2:0] t2;
    real ed;
    a = x;
    b = y;
    @(negedge clk);
    exp_r = model(x, y);
    exact = {1'b0, x} + {1'b0, y};
    checks++;
    if ({cout, sum} !== exp_r) begin
      failures++;
      if (failures < 10)
        $display("FAIL a=%h b=%h got %b_%h expected %b_%h", x, y, cout, sum, exp_r[N], exp_r[N-1:0]);
    end
    for (int i = 0; i < NB - 1; i++) begin
      p_hi = x[i*K+K-2 +: 2] ^ y[i*K+K-2 +: 2];
      if (p_hi == 2'b11) begin
        n_perl++;
        t4 = {1'b0, x[i*K+K-4 +: 4]} + {1'b0, y[i*K+K-4 +: 4]};
        t2 = {1'b0, x[i*K+K-2 +: 2]} + {1'b0, y[i*K+K-2 +: 2]};
        if (t4[4] && !t2[2]) n_rectify++;
      end else begin
        n_ceu++;
      end
    end
    if (sum == exact[N-1:0]) n_exact++;
    else n_error++;
    if (uniform) begin
      n_uniform++;
      ed = (sum > exact[N-1:0]) ? real'(sum - exact[N-1:0]) : real'(exact[N-1:0] - sum);
      if (sum != exact[N-1:0]) n_uniform_err++;
      sum_ed += ed;
      if (exact != 0) sum_red += ed / real'(exact);
    end
  endtask

  initial begin : stim
    logic [N-1:0] x, y, m;
    // directed corners
    apply('0, '0, 1'b0);
    apply('1, '0, 1'b0);
    apply('1, {{(N-1){1'b0}}, 1'b1}, 1'b0);   // long carry chain: approximated
    apply('1, '1, 1'b0);
    apply({(N/2){2'b10}}, {(N/2){2'b01}}, 1'b0);
    apply({(N/4){4'b0101}}, {(N/4){4'b1010}}, 1'b0);
    // uniform random operands
    for (int v = 0; v < NRAND; v++) begin
      x = rand_word();
      y = rand_word();
      apply(x, y, 1'b1);
    end
    // operands whose block tops tend to propagate
    for (int v = 0; v < NBIASED; v++) begin
      x = rand_word();
      m = '0;
      for (int i = 0; i < NB; i++)
        if ($urandom_range(1, 0) == 1) m[i*K+K-4 +: 4] = 4'hF;
      y = (rand_word() & ~m) | (~x & m);
      apply(x, y, 1'b0);
    end

    $display("mechanisms: ceu=%0d perl=%0d rectified=%0d exact=%0d approximated=%0d",
             n_ceu, n_perl, n_rectify, n_exact, n_error);
    $display("uniform random (N=%0d K=%0d): ER=%0.3f%% MED=%0.1f MRED=%0.6f",
             N, K, 100.0 * n_uniform_err / n_uniform, sum_ed / n_uniform, sum_red / n_uniform);
    checks++; if (n_ceu == 0)     begin failures++; $display("FAIL no CEU-decided carry"); end
    checks++; if (n_perl == 0)    begin failures++; $display("FAIL PERL never selected"); end
    checks++; if (n_rectify == 0) begin failures++; $display("FAIL PERL never rectified a carry"); end
    checks++; if (n_exact == 0)   begin failures++; $display("FAIL no exact result"); end
    checks++; if (n_error == 0)   begin failures++; $display("FAIL no approximated result"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
