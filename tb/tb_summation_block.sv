// Self-checking testbench for the summation block.
//
// Three instances are driven exhaustively (operands and carry in):
//   K = 8 with rectification (the default), K = 4 with rectification (the
//   smallest rectified block), K = 2 without rectification.
// Expected values are computed with integer arithmetic, not with the
// block's gate equations: the sum is a + b + cin truncated to K bits, and
// the estimated carry out is the carry out of the block's top W bits added
// with carry in 0 (W = 4 with rectification, W = 2 without). That is exactly
// what CEU, SU, PERL and mux together compute.
// The run also counts the vectors in which the rectification path is taken
// and changes the carry, and fails if there are none.
module tb_summation_block;
  logic clk = 1'b0;
  int   checks = 0, failures = 0, cycles = 0;
  int   n_rectified = 0;

  logic [7:0] a8, b8, s8;
  logic       cin8, co8;
  logic [3:0] a4, b4, s4;
  logic       cin4, co4;
  logic [1:0] a2, b2, s2;
  logic       cin2, co2;

  summation_block dut (.a(a8), .b(b8), .cin(cin8), .sum(s8), .c_out(co8));
  summation_block #(.K(4), .PERL_EN(1'b1)) dut4 (.a(a4), .b(b4), .cin(cin4), .sum(s4), .c_out(co4));
  summation_block #(.K(2), .PERL_EN(1'b0)) dut2 (.a(a2), .b(b2), .cin(cin2), .sum(s2), .c_out(co2));

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

  task automatic check(string name, logic [7:0] got_s, logic [7:0] exp_s,
                       logic got_c, logic exp_c);
    checks++;
    if (got_s !== exp_s || got_c !== exp_c) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s sum=%h exp %h c_out=%b exp %b", name, got_s, exp_s, got_c, exp_c);
    end
  endtask

  initial begin : stim
    logic [8:0] full;
    logic [4:0] top4;
    logic [2:0] top2;
    logic [4:0] f4;
    logic [2:0] f2;
    for (int v = 0; v < (1 << 17); v++) begin
      {cin8, a8, b8} = v[16:0];
      {cin4, a4, b4} = v[8:0];
      {cin2, a2, b2} = v[4:0];
      @(negedge clk);
      // K = 8, rectified
      full = {1'b0, a8} + {1'b0, b8} + {8'd0, cin8};
      top4 = {1'b0, a8[7:4]} + {1'b0, b8[7:4]};
      top2 = {1'b0, a8[7:6]} + {1'b0, b8[7:6]};
      check("K8", s8, full[7:0], co8, top4[4]);
      if (top4[4] != top2[2]) n_rectified++;
      // smaller blocks: each combination once
      if (v < (1 << 9)) begin
        f4 = {1'b0, a4} + {1'b0, b4} + {4'd0, cin4};
        top4 = {1'b0, a4} + {1'b0, b4};
        check("K4", {4'd0, s4}, {4'd0, f4[3:0]}, co4, top4[4]);
      end
      if (v < (1 << 5)) begin
        f2 = {1'b0, a2} + {1'b0, b2} + {2'd0, cin2};
        top2 = {1'b0, a2} + {1'b0, b2};
        check("K2", {6'd0, s2}, {6'd0, f2[1:0]}, co2, top2[2]);
      end
    end
    checks++;
    if (n_rectified == 0) begin
      failures++;
      $display("FAIL the rectification path never changed the carry");
    end
    $display("rectified carries: %0d of %0d vectors", n_rectified, 1 << 17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
