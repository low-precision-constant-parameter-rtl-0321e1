// tb_cfmm: feeds random 8-bit activations bit-serially (LSB first, words of
// 20 clocks sent back to back) and rebuilds each of the 64 product streams,
// which must equal m * x, one clock behind the input.
module tb_cfmm;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, x;
  logic [63:0] p;
  int checks = 0, failures = 0;
  localparam int T = 20;

  cfmm dut (.clk(clk), .rst(rst), .x(x), .p(p));

  initial begin
    logic [7:0]  a;
    logic [T-1:0] acc [64];
    rst = 1; x = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int w = 0; w < 300; w++) begin
      a = (w == 0) ? 8'hff : (w == 1) ? 8'h00 : 8'($urandom);
      for (int m = 0; m < 64; m++) acc[m] = '0;
      for (int t = 0; t <= T; t++) begin
        x = (t < 8) ? a[t] : 1'b0;
        if (t == T) x = 1'b0;
        @(posedge clk); #1;
        // p now shows bit t of each product
        if (t < T) for (int m = 0; m < 64; m++) acc[m][t] = p[m];
        @(negedge clk);
        if (t == T - 1) break;
      end
      for (int m = 0; m < 64; m++) begin
        checks++;
        if (int'(acc[m]) != m * int'(a)) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d m=%0d got %0d", a, m, acc[m]);
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
