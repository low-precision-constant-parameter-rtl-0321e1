// resblock_run: drives one residual block through two images and checks them
// against tb_ref_pkg.  The second image is written into the input double
// buffer while the first is being processed.  It counts how often the
// block's mechanisms occur: padding passes of the 3x3 layer, fold phases > 0,
// slice elements summed across neighbouring passes (multi-instance overlap),
// accumulator-to-collector stalls, ReLU clamps, saturations, negative weights
// and shortcut additions.  Reports through its output ports when done.
module resblock_run
  import ccnn_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int C_IN = 8, C_MID = 4, H = 5, W = 6, INST = 4, FOLD = 1, LANES = 4, SEED = 3
) (
  input  logic clk,
  output logic fin,
  output int   checks,
  output int   failures,
  output int   n_pad,
  output int   n_fold,
  output int   n_overlap,
  output int   n_stall,
  output stats_t st
);
  localparam int PA = $clog2(H * W);
  logic rst, in_we, in_swap, start, busy, done, out_re;
  logic [PA-1:0] in_addr, out_addr;
  logic [C_IN*8-1:0] in_data, out_data;

  resblock #(.C_IN(C_IN), .C_MID(C_MID), .H(H), .W(W), .INST(INST), .FOLD(FOLD),
             .LANES(LANES), .SEED(SEED)) dut (
    .clk(clk), .rst(rst), .in_we(in_we), .in_addr(in_addr), .in_data(in_data),
    .in_swap(in_swap), .start(start), .busy(busy), .done(done),
    .out_re(out_re), .out_addr(out_addr), .out_data(out_data));

  // mechanism counters
  always @(posedge clk) if (!rst) begin
    if (dut.u_l2.fstart && (dut.u_l2.y < 0 || dut.u_l2.y >= H || dut.u_l2.x0 < 0 ||
                            int'(dut.u_l2.x0) + INST > W)) n_pad++;
    if ((dut.u_l1.fstart && dut.u_l1.f != 0) || (dut.u_l2.fstart && dut.u_l2.f != 0) ||
        (dut.u_l3.fstart && dut.u_l3.f != 0)) n_fold++;
    if (dut.u_l2.u_acc.state == 2'd2 && dut.u_l2.u_acc.tin_map &&
        (int'(dut.u_l2.u_acc.ec) < 2 || int'(dut.u_l2.u_acc.ec) >= INST)) n_overlap++;
    if ((dut.u_l1.a_valid && !dut.u_l1.a_ready) || (dut.u_l3.a_valid && !dut.u_l3.a_ready)) n_stall++;
  end

  int img [2][];
  int refo [2][];

  task automatic load(int k);
    for (int p = 0; p < H * W; p++) begin
      in_we = 1; in_addr = PA'(p);
      for (int c = 0; c < C_IN; c++) in_data[c*8 +: 8] = 8'(img[k][p * C_IN + c]);
      @(negedge clk);
    end
    in_we = 0;
  endtask

  task automatic compare(int k);
    for (int p = 0; p < H * W; p++) begin
      out_re = 1; out_addr = PA'(p);
      @(negedge clk);
      out_re = 0;
      for (int c = 0; c < C_IN; c++) begin
        checks++;
        if (int'(out_data[c*8 +: 8]) != refo[k][p * C_IN + c]) begin
          failures++;
          if (failures < 10) $display("FAIL img%0d px%0d ch%0d got %0d exp %0d", k, p, c,
                                      out_data[c*8 +: 8], refo[k][p * C_IN + c]);
        end
      end
    end
  endtask

  initial begin
    int cyc;
    fin = 0; checks = 0; failures = 0; n_pad = 0; n_fold = 0; n_overlap = 0; n_stall = 0;
    st = '{default: 0};
    rst = 1; in_we = 0; in_swap = 0; start = 0; out_re = 0; in_addr = '0; out_addr = '0; in_data = '0;
    for (int k = 0; k < 2; k++) begin
      img[k] = new[H * W * C_IN];
      for (int i = 0; i < H * W * C_IN; i++)
        img[k][i] = ($urandom % 4 == 0) ? 0 : int'($urandom % 256);
      block(SEED, C_IN, C_MID, H, W, img[k], refo[k], st);
    end
    repeat (3) @(negedge clk);
    rst = 0;
    load(0);
    in_swap = 1; @(negedge clk); in_swap = 0;
    start = 1; @(negedge clk); start = 0;
    load(1);                          // next image into the other bank
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("[%0dx%0d C%0d/%0d INST%0d FOLD%0d] image 0 took %0d clocks", H, W, C_IN, C_MID,
             INST, FOLD, cyc + H * W + 2);
    compare(0);
    in_swap = 1; @(negedge clk); in_swap = 0;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    compare(1);
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
    fin = 1;
  end
endmodule
