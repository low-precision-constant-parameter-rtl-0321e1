// tb_bb1: random test of Building Block 1.  Checks that the two registered
// 6:3 counts equal the popcounts of the input halves one clock later and that
// the 3-bit adder (with its carry revealed through the blue S,S cell) gives
// the 4-bit sum, combinationally (REG_SUM=0) and registered (REG_SUM=1).
module tb_bb1;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [11:0] x;
  logic [2:0]  aa, ab, ra, rb, ra1, rb1;
  logic [3:0]  s0, s1;
  int checks = 0, failures = 0;

  bb1 #(.REG_SUM(1'b0)) dut0 (.clk(clk), .x(x), .add_a(aa), .add_b(ab), .red_a(ra), .red_b(rb), .sum(s0));
  bb1 #(.REG_SUM(1'b1)) dut1 (.clk(clk), .x(x), .add_a(aa), .add_b(ab), .red_a(ra1), .red_b(rb1), .sum(s1));

  initial begin
    logic [11:0] xp;
    logic [3:0]  sp;
    x = '0; aa = '0; ab = '0;
    @(negedge clk);
    for (int n = 0; n < 2000; n++) begin
      x  = 12'($urandom);
      aa = 3'($urandom);
      ab = 3'($urandom);
      #1;
      checks++;
      if (s0 != 4'(aa) + 4'(ab)) begin failures++; $display("FAIL comb sum %0d+%0d=%0d", aa, ab, s0); end
      xp = x; sp = 4'(aa) + 4'(ab);
      @(negedge clk);
      checks++;
      if (ra != 3'($countones(xp[5:0])) || rb != 3'($countones(xp[11:6])) ||
          ra1 != ra || rb1 != rb) begin
        failures++; $display("FAIL red x=%b ra=%0d rb=%0d", xp, ra, rb);
      end
      checks++;
      if (s1 != sp) begin failures++; $display("FAIL reg sum %0d exp %0d", s1, sp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
