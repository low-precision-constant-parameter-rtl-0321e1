// tb_kernel: runs random passes through two small kernels and compares every
// slice element with a direct computation from the weight function:
//   * a 3x3, 4-instance kernel folded 2x (8 input channels, 3 output
//     channels), which sums overlapping instance footprints into a 3x6 slice
//     and muxes two weight sets;
//   * a 1x1, 2-instance unfolded kernel.
// Expected value = sum of w*x over the instances covering the column, minus
// the number of negative weights used (one's complement negation).  It also
// checks y_valid rises T + tree latency clocks after the edge that takes "first", and that
// words can follow back to back.
module tb_kernel;
  import ccnn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst;
  int checks = 0, failures = 0;

  localparam int NIN = 8, NOUT = 3, K = 3, INST = 4, FOLD = 2, SEED = 11;
  localparam int NHW = NIN / FOLD, SC = INST + K - 1;
  localparam int T = kernel_t(NIN, FOLD, K, INST);
  localparam int NT = tree_n(NIN, FOLD, K, INST);
  localparam int TLAT = 1 + $clog2((NT + 11) / 12) / 2;

  localparam int NIN2 = 6, NOUT2 = 2, INST2 = 2, SEED2 = 5;
  localparam int T2 = kernel_t(NIN2, 1, 1, INST2);

  logic [INST-1:0][NHW-1:0] x;
  logic first;
  logic [0:0] phase;
  logic signed [T-1:0] y [K][SC][NOUT];
  logic yv;

  logic [INST2-1:0][NIN2-1:0] x2;
  logic signed [T2-1:0] y2 [1][INST2][NOUT2];
  logic yv2;

  kernel #(.NIN(NIN), .NOUT(NOUT), .K(K), .INST(INST), .FOLD(FOLD), .SEED(SEED)) dut (
    .clk(clk), .rst(rst), .x(x), .first(first), .phase(phase), .y(y), .y_valid(yv));
  kernel #(.NIN(NIN2), .NOUT(NOUT2), .K(1), .INST(INST2), .FOLD(1), .SEED(SEED2)) dut2 (
    .clk(clk), .rst(rst), .x(x2), .first(first), .phase(1'b0), .y(y2), .y_valid(yv2));

  int a [INST][NHW];
  int a2 [INST2][NIN2];
  int fcur;
  int exp_q [$];     // expected values of kernel 1, flattened
  int exp2_q [$];
  int tfirst [$];
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic expect_slices();
    int s, w, dx;
    for (int r = 0; r < K; r++)
      for (int j = 0; j < SC; j++)
        for (int o = 0; o < NOUT; o++) begin
          s = 0;
          for (int i = 0; i < INST; i++) begin
            dx = i - j + K - 1;
            if (dx < 0 || dx >= K) continue;
            for (int m = 0; m < NHW; m++) begin
              w = wgt(SEED, o, fcur * NHW + m, K - 1 - r, dx);
              s += w * a[i][m];
              if (w < 0) s -= 1;
            end
          end
          exp_q.push_back(s);
        end
    for (int j = 0; j < INST2; j++)
      for (int o = 0; o < NOUT2; o++) begin
        s = 0;
        for (int m = 0; m < NIN2; m++) begin
          w = wgt(SEED2, o, m, 0, 0);
          s += w * a2[j][m];
          if (w < 0) s -= 1;
        end
        exp2_q.push_back(s);
      end
  endtask

  // checker
  initial begin
    int tf, e;
    forever begin
      @(posedge clk); #1;
      if (yv) begin
        tf = tfirst.pop_front();
        checks++;
        if (cyc - tf != T + TLAT) begin
          failures++; $display("FAIL latency %0d (exp %0d)", cyc - tf, T + TLAT);
        end
        for (int r = 0; r < K; r++)
          for (int j = 0; j < SC; j++)
            for (int o = 0; o < NOUT; o++) begin
              e = exp_q.pop_front();
              checks++;
              if (int'(y[r][j][o]) != e) begin
                failures++;
                if (failures < 10) $display("FAIL k3 r%0d j%0d o%0d got %0d exp %0d", r, j, o, y[r][j][o], e);
              end
            end
      end
      if (yv2) begin
        for (int j = 0; j < INST2; j++)
          for (int o = 0; o < NOUT2; o++) begin
            e = exp2_q.pop_front();
            checks++;
            if (int'(y2[0][j][o]) != e) begin
              failures++;
              if (failures < 10) $display("FAIL k1 j%0d o%0d got %0d exp %0d", j, o, y2[0][j][o], e);
            end
          end
      end
    end
  end

  initial begin
    rst = 1; x = '0; x2 = '0; first = 0; phase = 0;
    repeat (4) @(negedge clk);
    rst = 0;
    for (int pass = 0; pass < 60; pass++) begin
      fcur = pass % FOLD;
      for (int i = 0; i < INST; i++)
        for (int m = 0; m < NHW; m++) a[i][m] = (pass == 0) ? 255 : int'($urandom % 256);
      for (int i = 0; i < INST2; i++)
        for (int m = 0; m < NIN2; m++) a2[i][m] = int'($urandom % 256);
      expect_slices();
      phase = 1'(fcur);
      for (int t = 0; t < T; t++) begin
        first = (t == 0);
        if (t == 0) tfirst.push_back(cyc + 1);
        for (int i = 0; i < INST; i++)
          for (int m = 0; m < NHW; m++) x[i][m] = (t < 8) ? 1'((a[i][m] >> t) & 1) : 1'b0;
        for (int i = 0; i < INST2; i++)
          for (int m = 0; m < NIN2; m++) x2[i][m] = (t < 8) ? 1'((a2[i][m] >> t) & 1) : 1'b0;
        @(negedge clk);
      end
      first = 0; x = '0; x2 = '0;
      if (pass % 4 == 3) repeat (5) @(negedge clk);
    end
    repeat (T + 20) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || exp2_q.size() != 0) begin failures++; $display("FAIL missing results"); end
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
