// Self-checking testbench for the Propagating Error Rectification Logic.
//
// Applies all 16 combinations of the bit pairs K-3 and K-4 and compares the
// estimate with the carry out of a 2-bit integer addition of those pairs with
// carry in 0: that carry is what PERL must return (it is exact whenever
// the pairs do not both propagate and 0 when they do). Also checks that
// exactly 12 of the 16 cases are free of any lower-bit dependence.
module tb_perl;
  logic       clk = 1'b0;
  logic [1:0] a_mid, b_mid;
  logic       c_perl;
  int         checks = 0, failures = 0, cycles = 0;

  perl dut (.a_mid(a_mid), .b_mid(b_mid), .c_perl(c_perl));

  always #5 clk = ~clk;

  initial begin : watchdog
    while (cycles < 1000) begin
      @(posedge clk);
      cycles++;
    end
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    int certain;
    logic [2:0] s0, s1;
    certain = 0;
    for (int v = 0; v < 16; v++) begin
      a_mid = v[3:2];
      b_mid = v[1:0];
      @(negedge clk);
      s0 = {1'b0, a_mid} + {1'b0, b_mid};          // carry in 0
      s1 = {1'b0, a_mid} + {1'b0, b_mid} + 3'd1;   // carry in 1
      checks++;
      if (c_perl !== s0[2]) begin
        failures++;
        $display("FAIL a=%b b=%b c_perl=%b expected %b", a_mid, b_mid, c_perl, s0[2]);
      end
      if (s0[2] == s1[2]) certain++;
    end
    checks++;
    if (certain != 12) begin
      failures++;
      $display("FAIL %0d cases independent of lower bits, expected 12", certain);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
