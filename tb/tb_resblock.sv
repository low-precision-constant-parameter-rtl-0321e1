// tb_resblock: end-to-end test of the residual block at two reduced sizes:
//   A: conv2_2-like, 4 kernel instances, no folding (8/4 channels, 5x6 map);
//   B: conv5_2-like, 1 instance, folded 4x (16/8 channels, 3x3 map).
// Each runs two images (the second loaded into the input double buffer while
// the first is processed) and compares every output activation with the
// reference model.  Every mechanism of the design must occur at least once.
module tb_resblock;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic fa, fb;
  int ca, fla, pa, foa, oa, sa, cb, flb, pb, fob, ob, sb;
  stats_t sta, stb;

  resblock_run #(.C_IN(8), .C_MID(4), .H(5), .W(6), .INST(4), .FOLD(1), .LANES(4), .SEED(3)) ra (
    .clk(clk), .fin(fa), .checks(ca), .failures(fla), .n_pad(pa), .n_fold(foa),
    .n_overlap(oa), .n_stall(sa), .st(sta));
  resblock_run #(.C_IN(16), .C_MID(8), .H(3), .W(3), .INST(1), .FOLD(4), .LANES(8), .SEED(21)) rb (
    .clk(clk), .fin(fb), .checks(cb), .failures(flb), .n_pad(pb), .n_fold(fob),
    .n_overlap(ob), .n_stall(sb), .st(stb));

  task automatic need(string what, int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    wait (fa && fb);
    checks = ca + cb;
    failures = fla + flb;
    $display("mechanism counts:");
    need("3x3 padding passes", pa + pb);
    need("fold phases > 0", foa + fob);
    need("multi-instance overlap adds", oa);
    need("collector stalls", sa + sb);
    need("ReLU clamps", sta.relu + stb.relu);
    need("saturations", sta.sat + stb.sat);
    need("negative weights", sta.negw + stb.negw);
    need("shortcut additions", sta.sc_add + stb.sc_add);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
