// tb_accumulator: sends random 3x4 slices at random positions (partly outside
// a 4x5 map) into the accumulator, then drains it with a ready signal that
// stalls at random, and compares every pixel with a reference sum.  A second
// image checks that the drain cleared the memory.
module tb_accumulator;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int NOUT = 2, SR = 3, SC = 4, TIN = 12, AW = 16, H = 4, W = 5;
  localparam int PA = $clog2(H * W);
  logic rst, iv, ds, ov, ordy, dd, busy;
  logic signed [TIN-1:0] iy [SR][SC][NOUT];
  logic signed [15:0] oy0, ox0;
  logic [PA-1:0] oa;
  logic signed [NOUT-1:0][AW-1:0] od;
  int checks = 0, failures = 0, stalls = 0;
  int ref_m [H*W][NOUT];

  accumulator #(.NOUT(NOUT), .SR(SR), .SC(SC), .TIN(TIN), .AW(AW), .H(H), .W(W)) dut (
    .clk(clk), .rst(rst), .in_valid(iv), .in_y(iy), .oy0(oy0), .ox0(ox0),
    .drain_start(ds), .out_valid(ov), .out_ready(ordy), .out_addr(oa), .out_data(od),
    .drain_done(dd), .busy(busy));

  initial begin
    int yy, xx, v, n;
    rst = 1; iv = 0; ds = 0; ordy = 0; oy0 = '0; ox0 = '0;
    for (int r = 0; r < SR; r++) for (int c = 0; c < SC; c++) for (int o = 0; o < NOUT; o++) iy[r][c][o] = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    while (busy) @(negedge clk);          // initial clear
    for (int img = 0; img < 2; img++) begin
      for (int p = 0; p < H * W; p++) for (int o = 0; o < NOUT; o++) ref_m[p][o] = 0;
      for (int s = 0; s < 25; s++) begin
        yy = int'($urandom % (H + 3)) - 2; xx = int'($urandom % (W + 4)) - 3;
        oy0 = 16'(yy); ox0 = 16'(xx);
        for (int r = 0; r < SR; r++) for (int c = 0; c < SC; c++) for (int o = 0; o < NOUT; o++) begin
          v = int'($urandom % 4001) - 2000;
          iy[r][c][o] = TIN'(v);
          if (yy + r >= 0 && yy + r < H && xx + c >= 0 && xx + c < W) ref_m[(yy + r) * W + xx + c][o] += v;
        end
        iv = 1; @(negedge clk); iv = 0;
        while (busy) @(negedge clk);
      end
      ds = 1; @(negedge clk); ds = 0;
      n = 0;
      while (n < H * W) begin
        ordy = ($urandom % 3) != 0;
        #1;
        if (ov && ordy) begin
          for (int o = 0; o < NOUT; o++) begin
            checks++;
            if (int'(signed'(od[o])) != ref_m[oa][o] || int'(oa) != n) begin
              failures++; $display("FAIL img%0d px %0d o%0d got %0d exp %0d", img, oa, o, signed'(od[o]), ref_m[oa][o]);
            end
          end
          n++;
        end else if (ov) stalls++;
        @(negedge clk);
        ordy = 0;
      end
      repeat (2) @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL busy after drain"); end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (dd) $display("drain done at %0t", $time);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
