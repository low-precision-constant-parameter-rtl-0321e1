// tb_sra: feeds random column sums, T per word, words back to back and with
// gaps, and checks that y = sum_t c_t*2^t read as a T-bit two's complement
// number, with y_valid raised by the clock edge that takes the last column.
module tb_sra;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int T = 18, CW = 5;
  logic rst, first, yv;
  logic [CW-1:0] c;
  logic signed [T-1:0] y;
  int checks = 0, failures = 0;

  sra #(.T(T), .CW(CW)) dut (.clk(clk), .rst(rst), .cnt(c), .first(first), .y(y), .y_valid(yv));

  initial begin
    longint s;
    logic [T-1:0] e;
    rst = 1; first = 0; c = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int w = 0; w < 400; w++) begin
      s = 0;
      for (int t = 0; t < T; t++) begin
        first = (t == 0);
        c = CW'($urandom % 21);
        s += longint'(c) << t;
        @(negedge clk);
        checks++;
        if (yv != (t == T - 1)) begin failures++; $display("FAIL valid w=%0d t=%0d", w, t); end
      end
      first = 0; c = '0;
      e = T'(s);
      checks++;
      if (y != signed'(e)) begin
        failures++; $display("FAIL w=%0d y=%0d exp=%0d", w, y, signed'(e));
      end
      if (w % 3 == 0) @(negedge clk);   // sometimes a gap
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
