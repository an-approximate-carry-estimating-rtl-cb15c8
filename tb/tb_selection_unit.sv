// Self-checking testbench for the Selection Unit.
//
// Applies all 16 combinations of the two top bit pairs. sel must be 1
// exactly when the top pairs' carry out depends on the carry coming from
// below, i.e. when a 2-bit addition of the pairs gives a different carry for
// carry in 0 and carry in 1. Also checks that this happens in 4 of 16 cases.
module tb_selection_unit;
  logic       clk = 1'b0;
  logic [1:0] a_hi, b_hi;
  logic       sel;
  int         checks = 0, failures = 0, cycles = 0;

  selection_unit dut (.a_hi(a_hi), .b_hi(b_hi), .sel(sel));

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
    int n_sel;
    logic [2:0] s0, s1;
    n_sel = 0;
    for (int v = 0; v < 16; v++) begin
      a_hi = v[3:2];
      b_hi = v[1:0];
      @(negedge clk);
      s0 = {1'b0, a_hi} + {1'b0, b_hi};
      s1 = {1'b0, a_hi} + {1'b0, b_hi} + 3'd1;
      checks++;
      if (sel !== (s0[2] != s1[2])) begin
        failures++;
        $display("FAIL a=%b b=%b sel=%b", a_hi, b_hi, sel);
      end
      if (sel) n_sel++;
    end
    checks++;
    if (n_sel != 4) begin
      failures++;
      $display("FAIL sel set in %0d cases, expected 4", n_sel);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
