// Accuracy study of the approximate adder over uniform random operands.
//
// Runs the configurations (bit size, block size) = (8,4), (16,4), (16,8),
// (32,4), (32,8), (32,16) with rectification and, for comparison, the same
// ones without it plus (32,2), all on the same random operand stream, and
// prints error rate (ER), mean error distance (MED) and mean relative error
// distance (MRED) for each.
// Checks: every result equals the integer model of its configuration; the
// rectified adder never has a higher error rate than the plain one of the
// same size; (8,4) with rectification is exact on its 8 sum bits, because
// block 1's estimate then sees all four bits of block 0, whose carry in is 0;
// where a block is wider than the bits its estimate looks at, the error rate
// lies within 1.5 percentage points of a prediction from carry statistics
// (see predicted_er below).
module tb_error_metrics;
  localparam int unsigned NVEC = 200000;
  localparam int unsigned NCFG = 13;

  logic        clk = 1'b0;
  logic        en  = 1'b0;
  logic [63:0] a = '0, b = '0;
  int          checks = 0, failures = 0, cycles = 0;

  longint n_vec[NCFG], mism[NCFG], n_err[NCFG];
  real    sed[NCFG], sred[NCFG];

  // configuration table: N, K, PERL_EN
  adder_metrics #(.N(8),  .K(4),  .PERL_EN(1)) m0  (clk, en, a, b, n_vec[0],  mism[0],  n_err[0],  sed[0],  sred[0]);
  adder_metrics #(.N(16), .K(4),  .PERL_EN(1)) m1  (clk, en, a, b, n_vec[1],  mism[1],  n_err[1],  sed[1],  sred[1]);
  adder_metrics #(.N(16), .K(8),  .PERL_EN(1)) m2  (clk, en, a, b, n_vec[2],  mism[2],  n_err[2],  sed[2],  sred[2]);
  adder_metrics #(.N(32), .K(4),  .PERL_EN(1)) m3  (clk, en, a, b, n_vec[3],  mism[3],  n_err[3],  sed[3],  sred[3]);
  adder_metrics #(.N(32), .K(8),  .PERL_EN(1)) m4  (clk, en, a, b, n_vec[4],  mism[4],  n_err[4],  sed[4],  sred[4]);
  adder_metrics #(.N(32), .K(16), .PERL_EN(1)) m5  (clk, en, a, b, n_vec[5],  mism[5],  n_err[5],  sed[5],  sred[5]);
  adder_metrics #(.N(8),  .K(4),  .PERL_EN(0)) m6  (clk, en, a, b, n_vec[6],  mism[6],  n_err[6],  sed[6],  sred[6]);
  adder_metrics #(.N(16), .K(4),  .PERL_EN(0)) m7  (clk, en, a, b, n_vec[7],  mism[7],  n_err[7],  sed[7],  sred[7]);
  adder_metrics #(.N(16), .K(8),  .PERL_EN(0)) m8  (clk, en, a, b, n_vec[8],  mism[8],  n_err[8],  sed[8],  sred[8]);
  adder_metrics #(.N(32), .K(4),  .PERL_EN(0)) m9  (clk, en, a, b, n_vec[9],  mism[9],  n_err[9],  sed[9],  sred[9]);
  adder_metrics #(.N(32), .K(8),  .PERL_EN(0)) m10 (clk, en, a, b, n_vec[10], mism[10], n_err[10], sed[10], sred[10]);
  adder_metrics #(.N(32), .K(16), .PERL_EN(0)) m11 (clk, en, a, b, n_vec[11], mism[11], n_err[11], sed[11], sred[11]);
  adder_metrics #(.N(32), .K(2),  .PERL_EN(0)) m12 (clk, en, a, b, n_vec[12], mism[12], n_err[12], sed[12], sred[12]);

  int cfg_n[NCFG] = '{8, 16, 16, 32, 32, 32, 8, 16, 16, 32, 32, 32, 32};
  int cfg_k[NCFG] = '{4,  4,  8,  4,  8, 16, 4,  4,  8,  4,  8, 16,  2};
  int cfg_p[NCFG] = '{1,  1,  1,  1,  1,  1, 0,  0,  0,  0,  0,  0,  0};

  always #5 clk = ~clk;

  initial begin : watchdog
    while (cycles < NVEC + 100) begin
      @(posedge clk);
      cycles++;
    end
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Probability that the true carry into bit j is 1 for uniform operands.
  function automatic real p_carry(int j);
    real p;
    p = 0.0;
    for (int i = 0; i < j; i++) p = 0.25 + 0.5 * p;
    return p;
  endfunction

  // Predicted error rate: block i's carry is wrong when the W top bit pairs
  // of block i-1 all propagate and the carry into those W bits is 1.
  function automatic real predicted_er(int n, int k, int p);
    int  w;
    real ok;
    w  = p ? 4 : 2;
    ok = 1.0;
    for (int i = 1; i < n / k; i++)
      ok = ok * (1.0 - (1.0 / real'(1 << w)) * p_carry(i * k - w));
    return 1.0 - ok;
  endfunction

  initial begin : stim
    real er[NCFG];
    real pred;
    for (int v = 0; v < NVEC; v++) begin
      @(negedge clk);
      a  = {$urandom, $urandom};
      b  = {$urandom, $urandom};
      en = 1'b1;
    end
    @(negedge clk);
    en = 1'b0;
    @(negedge clk);
    @(negedge clk);
    $display("  N   K  rect   ER(%%)   predicted   MED          MRED");
    for (int c = 0; c < NCFG; c++) begin
      er[c] = real'(n_err[c]) / real'(n_vec[c]);
      pred  = predicted_er(cfg_n[c], cfg_k[c], cfg_p[c]);
      $display("%3d %3d  %0d   %7.3f   %7.3f   %11.2f  %10.3e", cfg_n[c], cfg_k[c], cfg_p[c],
               100.0 * er[c], 100.0 * pred, sed[c] / real'(n_vec[c]), sred[c] / real'(n_vec[c]));
      checks++;
      if (n_vec[c] != NVEC || mism[c] != 0) begin
        failures++;
        $display("FAIL config %0d: %0d vectors, %0d model mismatches", c, n_vec[c], mism[c]);
      end
      // The prediction treats blocks as independent, which holds only when
      // the estimate looks at fewer bits than the block has.
      if (cfg_k[c] > (cfg_p[c] ? 4 : 2)) begin
        checks++;
        if (er[c] - pred > 0.015 || pred - er[c] > 0.015) begin
        failures++;
          $display("FAIL config %0d: error rate far from prediction", c);
        end
      end
    end
    for (int c = 0; c < 6; c++) begin
      checks++;
      if (er[c] > er[c + 6]) begin
        failures++;
        $display("FAIL rectified (%0d,%0d) worse than plain", cfg_n[c], cfg_k[c]);
      end
    end
    checks++;
    if (n_err[0] != 0) begin
      failures++;
      $display("FAIL (8,4) with rectification should be exact");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
