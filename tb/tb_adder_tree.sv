// tb_adder_tree: drives adder trees of 12, 50 and 200 inputs with random bit
// vectors every clock and checks that each output is the popcount of the
// vector applied LAT = 1 + floor(L/2) clocks earlier (L = ceil(log2(ceil(N/12)))),
// and that the tag arrives with the same latency.
module tb_adder_tree;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst;
  int checks = 0, failures = 0;

  localparam int N0 = 12, N1 = 50, N2 = 200;
  localparam int L0 = 1, L1 = 2, L2 = 3;    // latencies by the formula above
  logic [N0-1:0] b0; logic [N1-1:0] b1; logic [N2-1:0] b2;
  logic [$clog2(N0+1)-1:0] c0; logic [$clog2(N1+1)-1:0] c1; logic [$clog2(N2+1)-1:0] c2;
  logic tag, t0, t1, t2;

  adder_tree #(.N(N0)) d0 (.clk(clk), .rst(rst), .bits(b0), .tag_in(tag), .cnt(c0), .tag_out(t0));
  adder_tree #(.N(N1)) d1 (.clk(clk), .rst(rst), .bits(b1), .tag_in(tag), .cnt(c1), .tag_out(t1));
  adder_tree #(.N(N2)) d2 (.clk(clk), .rst(rst), .bits(b2), .tag_in(tag), .cnt(c2), .tag_out(t2));

  int h0 [$], h1 [$], h2 [$];
  logic ht [$];

  initial begin
    rst = 1; b0 = '0; b1 = '0; b2 = '0; tag = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 600; n++) begin
      for (int k = 0; k < N0; k++) b0[k] = 1'($urandom);
      for (int k = 0; k < N1; k++) b1[k] = ($urandom % 4) != 0;
      for (int k = 0; k < N2; k++) b2[k] = ($urandom % 8) == 0 || n % 50 == 7;
      tag = ($urandom % 5) == 0;
      h0.push_back($countones(b0)); h1.push_back($countones(b1)); h2.push_back($countones(b2));
      ht.push_back(tag);
      @(negedge clk);
      if (n >= L2) begin
        checks += 3;
        if (int'(c0) != h0[n - L0 + 1]) begin failures++; $display("FAIL N0 step %0d %0d", n, c0); end
        if (int'(c1) != h1[n - L1 + 1]) begin failures++; $display("FAIL N1 step %0d %0d", n, c1); end
        if (int'(c2) != h2[n - L2 + 1]) begin failures++; $display("FAIL N2 step %0d %0d", n, c2); end
        checks += 3;
        if (t0 != ht[n - L0 + 1] || t1 != ht[n - L1 + 1] || t2 != ht[n - L2 + 1]) begin
          failures++; $display("FAIL tag step %0d", n);
        end
      end
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
