// tb_feeder: a 3x5 map of 4-channel pixels sits in a behavioural buffer.
// Passes at every row and column group (including the zero padding around
// the map) and both fold phases are run; the bit streams are rebuilt and
// compared with the buffer contents (or zero outside the map).  Also checks
// the pass length (INST+1 read clocks, then T bit clocks) and the "first" mark.
module tb_feeder;
  import ccnn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int C = 4, INST = 2, FOLD = 2, H = 3, W = 5, T = 12, NHW = C / FOLD;
  localparam int PA = $clog2(H * W);
  logic rst, start, rd_en, first, busy;
  logic signed [15:0] y, x0;
  logic [0:0] phase, phase_o;
  logic [PA-1:0] rd_addr;
  logic [C*8-1:0] rd_data, mem [H*W];
  logic [INST-1:0][NHW-1:0] x;
  int checks = 0, failures = 0, pads = 0;

  feeder #(.C(C), .INST(INST), .FOLD(FOLD), .H(H), .W(W), .T(T)) dut (
    .clk(clk), .rst(rst), .start(start), .y(y), .x0(x0), .phase(phase),
    .rd_en(rd_en), .rd_addr(rd_addr), .rd_data(rd_data), .x(x), .first(first),
    .phase_o(phase_o), .busy(busy));

  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  initial begin
    int got [INST][NHW];
    int e, n;
    for (int p = 0; p < H * W; p++) mem[p] = 32'($urandom);
    rst = 1; start = 0; y = '0; x0 = '0; phase = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int yy = -1; yy <= H; yy++)
      for (int xx = -1; xx <= W; xx += INST)
        for (int f = 0; f < FOLD; f++) begin
          y = 16'(yy); x0 = 16'(xx); phase = 1'(f); start = 1;
          @(negedge clk); start = 0;
          for (int i = 0; i < INST; i++) for (int m = 0; m < NHW; m++) got[i][m] = 0;
          n = 0;
          while (!first) begin @(negedge clk); n++; end
          checks++;
          if (n != INST + 1) begin failures++; $display("FAIL read phase length %0d", n); end
          for (int t = 0; t < T; t++) begin
            for (int i = 0; i < INST; i++)
              for (int m = 0; m < NHW; m++) got[i][m] += int'(x[i][m]) << t;
            @(negedge clk);
          end
          checks++;
          if (busy) begin failures++; $display("FAIL still busy"); end
          for (int i = 0; i < INST; i++)
            for (int m = 0; m < NHW; m++) begin
              if (yy < 0 || yy >= H || xx + i < 0 || xx + i >= W) begin
                e = 0; pads++;
              end else e = int'(mem[yy * W + xx + i][(f * NHW + m) * 8 +: 8]);
              checks++;
              if (got[i][m] != e) begin
                failures++; $display("FAIL y%0d x%0d f%0d m%0d got %0d exp %0d", yy, xx + i, f, m, got[i][m], e);
              end
            end
        end
    checks++;
    if (pads == 0) begin failures++; $display("FAIL no padding seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
