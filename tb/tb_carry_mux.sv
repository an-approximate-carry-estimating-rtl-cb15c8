// Self-checking testbench for the carry select multiplexer: all 8 input
// combinations; sel = 0 must pass c_ceu, sel = 1 must pass c_perl.
module tb_carry_mux;
  logic clk = 1'b0;
  logic c_ceu, c_perl, sel, c_out;
  int   checks = 0, failures = 0, cycles = 0;

  carry_mux dut (.c_ceu(c_ceu), .c_perl(c_perl), .sel(sel), .c_out(c_out));

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
    logic expected;
    for (int v = 0; v < 8; v++) begin
      {sel, c_perl, c_ceu} = v[2:0];
      @(negedge clk);
      expected = (v >= 4) ? v[1] : v[0];
      checks++;
      if (c_out !== expected) begin
        failures++;
        $display("FAIL sel=%b c_ceu=%b c_perl=%b c_out=%b", sel, c_ceu, c_perl, c_out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
