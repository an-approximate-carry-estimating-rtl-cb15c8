// K-means clustering of 150 two-dimensional points into 3 clusters with the
// approximate adder doing the additions.
//
// The data set is generated here: 50 points around each of three centres,
// coordinates in tenths of a unit (like petal and sepal sizes in
// millimetres), with a spread that makes the clusters touch. Three
// clusterings run side by side, each with a 32-bit adder of block size 4, 8
// or 16 (with rectification), plus an exact one. In each the additions of
// the squared distance dx*dx + dy*dy and the sums of member coordinates for
// the new centres go through the approximate adder; subtraction,
// multiplication, comparison, member counting and division are exact. All
// start from the same centres and run 10 iterations. Every approximate
// addition is checked against an integer model of the adder. The run reports
// for each block size how many points end up in a different cluster than in
// the exact run (taking the best matching of cluster names), and checks that the approximations were exercised.
module tb_kmeans;
  localparam int unsigned N     = 32;
  localparam int unsigned NPTS  = 150;
  localparam int unsigned NCL   = 3;
  localparam int unsigned NITER = 10;
  localparam int unsigned NCFG  = 3;

  logic         clk = 1'b0;
  int           checks = 0, failures = 0, cycles = 0;
  logic [N-1:0] in_a[NCFG], in_b[NCFG], out_s[NCFG];
  logic         out_c[NCFG];

  cesa_perl_adder #(.N(N), .K(4))  u_k4  (.a(in_a[0]), .b(in_b[0]), .sum(out_s[0]), .cout(out_c[0]));
  cesa_perl_adder #(.N(N), .K(8))  u_k8  (.a(in_a[1]), .b(in_b[1]), .sum(out_s[1]), .cout(out_c[1]));
  cesa_perl_adder #(.N(N), .K(16)) u_k16 (.a(in_a[2]), .b(in_b[2]), .sum(out_s[2]), .cout(out_c[2]));

  int cfg_k[NCFG] = '{4, 8, 16};

  int px[NPTS], py[NPTS];
  int label[NCFG + 1][NPTS];
  int n_add[NCFG], n_approx[NCFG], n_mismatch = 0;

  always #5 clk = ~clk;

  initial begin : watchdog
    while (cycles < 100000) begin
      @(posedge clk);
      cycles++;
    end
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] model(logic [N-1:0] p, logic [N-1:0] q, int k);
    logic [N-1:0] r;
    logic [N:0]   part;
    logic [4:0]   top;
    logic         c;
    c = 1'b0;
    r = '0;
    for (int i = 0; i < N / k; i++) begin
      part = ((p >> (i * k)) & ((N+1)'(1) << k) - 1) + ((q >> (i * k)) & ((N+1)'(1) << k) - 1)
             + (N+1)'(c);
      r = r | ((part[N-1:0] & ((N'(1) << k) - 1)) << (i * k));
      top = 5'(((p >> (i * k + k - 4)) & 15) + ((q >> (i * k + k - 4)) & 15));
      c = top[4];
    end
    return r;
  endfunction

  // Approximate addition in configuration c (c = NCFG means exact).
  task automatic add(input int c, input int x, input int y, output int r);
    if (c == NCFG) begin
      r = x + y;
    end else begin
      in_a[c] = N'(x);
      in_b[c] = N'(y);
      #1;
      n_add[c]++;
      if (out_s[c] != N'(x + y)) n_approx[c]++;
      if (out_s[c] !== model(N'(x), N'(y), cfg_k[c])) begin
        n_mismatch++;
        if (n_mismatch < 10)
          $display("FAIL K=%0d %0d + %0d gave %0d", cfg_k[c], x, y, out_s[c]);
      end
      r = int'(out_s[c]);
    end
  endtask

  task automatic run(input int c);
    int cx[NCL], cy[NCL], sx[NCL], sy[NCL], cnt[NCL];
    int d, best, bestd, dx, dy;
    for (int j = 0; j < NCL; j++) begin
      cx[j] = px[j * 50];
      cy[j] = py[j * 50];
    end
    for (int it = 0; it < NITER; it++) begin
      for (int j = 0; j < NCL; j++) begin
        sx[j] = 0; sy[j] = 0; cnt[j] = 0;
      end
      for (int i = 0; i < NPTS; i++) begin
        best = 0;
        bestd = 0;
        for (int j = 0; j < NCL; j++) begin
          dx = px[i] - cx[j];
          dy = py[i] - cy[j];
          add(c, dx * dx, dy * dy, d);
          if (j == 0 || d < bestd) begin
            best = j;
            bestd = d;
          end
        end
        label[c][i] = best;
        add(c, sx[best], px[i], sx[best]);
        add(c, sy[best], py[i], sy[best]);
        cnt[best]++;
      end
      for (int j = 0; j < NCL; j++)
        if (cnt[j] > 0) begin
          cx[j] = sx[j] / cnt[j];
          cy[j] = sy[j] / cnt[j];
        end
      @(negedge clk);
    end
  endtask

  initial begin : stim
    int centre_x[NCL] = '{500, 590, 660};
    int centre_y[NCL] = '{340, 280, 300};
    int diff;
    for (int i = 0; i < NPTS; i++) begin
      px[i] = centre_x[i / 50] - 80 + int'($urandom_range(40, 0)) + int'($urandom_range(40, 0))
              + int'($urandom_range(40, 0)) + int'($urandom_range(40, 0));
      py[i] = centre_y[i / 50] - 60 + int'($urandom_range(30, 0)) + int'($urandom_range(30, 0))
              + int'($urandom_range(30, 0)) + int'($urandom_range(30, 0));
    end
    for (int c = 0; c < NCFG; c++) begin
      n_add[c] = 0;
      n_approx[c] = 0;
    end
    for (int c = 0; c <= NCFG; c++) run(c);

    for (int c = 0; c < NCFG; c++) begin
      // smallest disagreement over the 6 renamings of the three clusters
      diff = NPTS;
      for (int pm = 0; pm < 6; pm++) begin
        int perm[NCL], dd;
        perm[0] = pm / 2;
        perm[1] = (pm / 2 + 1 + pm % 2) % 3;
        perm[2] = 3 - perm[0] - perm[1];
        dd = 0;
        for (int i = 0; i < NPTS; i++)
          if (perm[label[c][i]] != label[NCFG][i]) dd++;
        if (dd < diff) diff = dd;
      end
      $display("(32,%0d): %0d additions, %0d approximated, %0d of %0d points clustered differently (%0.2f%%)",
               cfg_k[c], n_add[c], n_approx[c], diff, NPTS, 100.0 * diff / NPTS);
      checks++;
      if (n_add[c] != NITER * NPTS * (NCL + 2)) begin
        failures++;
        $display("FAIL wrong number of additions");
      end
    end
    checks++;
    if (n_mismatch != 0) failures++;
    checks++;
    if (n_approx[0] == 0) begin
      failures++;
      $display("FAIL the 4-bit-block adder never approximated");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
