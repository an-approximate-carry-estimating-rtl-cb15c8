// Self-checking testbench for the K-bit sub-adder at its default K = 8.
// Exhaustive over both operands and the carry in (2^17 vectors); the
// expected sum is the integer a + b + cin truncated to K bits.
module tb_sub_adder;
  localparam int unsigned K = 8;

  logic         clk = 1'b0;
  logic [K-1:0] a, b, sum;
  logic         cin;
  int           checks = 0, failures = 0, cycles = 0;

  sub_adder dut (.a(a), .b(b), .cin(cin), .sum(sum));

  always #5 clk = ~clk;

  initial begin : watchdog
    while (cycles < 200000) begin
      @(posedge clk);
      cycles++;
    end
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    logic [K:0] expected;
    for (int v = 0; v < (1 << (2 * K + 1)); v++) begin
      {cin, a, b} = v[2*K:0];
      @(negedge clk);
      expected = {1'b0, a} + {1'b0, b} + {{K{1'b0}}, cin};
      checks++;
      if (sum !== expected[K-1:0]) begin
        failures++;
        if (failures < 10)
          $display("FAIL a=%h b=%h cin=%b sum=%h expected %h", a, b, cin, sum, expected[K-1:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
