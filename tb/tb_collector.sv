// tb_collector: feeds random accumulated sums through two collectors (8
// channels on 4 shared multiplier lanes, with and without the shortcut add)
// and compares with the formula
//   out = sat255(relu(round((acc + bias + nneg) * scale / 2^16) [+ shortcut])).
// Checks the pixel time NOUT/LANES + 1 clocks and counts ReLU clamps and
// saturations, both of which must occur.
module tb_collector;
  import ccnn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int NOUT = 8, AW = 20, LANES = 4, SEED = 9, NIN = 5, K = 3, PA = 6;
  logic rst, iv, ir0, ir1, sce0, sce1, ov0, ov1;
  logic [PA-1:0] ia, sca0, sca1, oa0, oa1;
  logic signed [NOUT-1:0][AW-1:0] id;
  logic [NOUT*8-1:0] scd, od0, od1, scmem [1<<PA];
  int checks = 0, failures = 0, relus = 0, sats = 0;

  collector #(.NOUT(NOUT), .AW(AW), .LANES(LANES), .SEED(SEED), .NIN(NIN), .K(K),
              .SHORTCUT(1'b0), .PA(PA)) d0 (
    .clk(clk), .rst(rst), .in_valid(iv), .in_ready(ir0), .in_addr(ia), .in_data(id),
    .sc_rd_en(sce0), .sc_rd_addr(sca0), .sc_rd_data('0),
    .out_valid(ov0), .out_addr(oa0), .out_data(od0));
  collector #(.NOUT(NOUT), .AW(AW), .LANES(LANES), .SEED(SEED), .NIN(NIN), .K(K),
              .SHORTCUT(1'b1), .PA(PA)) d1 (
    .clk(clk), .rst(rst), .in_valid(iv), .in_ready(ir1), .in_addr(ia), .in_data(id),
    .sc_rd_en(sce1), .sc_rd_addr(sca1), .sc_rd_data(scd),
    .out_valid(ov1), .out_addr(oa1), .out_data(od1));

  always_ff @(posedge clk) if (sce1) scd <= scmem[sca1];

  function automatic int post(longint acc, int o, int sc, bit use_sc);
    longint v;
    v = acc + bias(SEED, o) + nneg(SEED, o, NIN, K);
    v = (v * scale(SEED, o) + (longint'(1) << (SCALE_SH - 1))) >>> SCALE_SH;
    if (use_sc) v += sc;
    if (v < 0) return -1;
    if (v > 255) return 256;
    return int'(v);
  endfunction

  initial begin
    int acc [NOUT];
    int e0, e1, sc, n;
    for (int p = 0; p < (1 << PA); p++)
      for (int c = 0; c < NOUT; c++) scmem[p][c*8 +: 8] = 8'($urandom);
    rst = 1; iv = 0; ia = '0; id = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int px = 0; px < 300; px++) begin
      ia = PA'($urandom);
      for (int o = 0; o < NOUT; o++) begin
        acc[o] = int'($urandom % 400001) - 200000;
        id[o] = AW'(acc[o]);
      end
      iv = 1;
      @(negedge clk); iv = 0;
      n = 1;
      while (!ov0) begin @(negedge clk); n++; end
      checks++;
      if (n != NOUT / LANES + 1 || !ov1) begin failures++; $display("FAIL pixel time %0d", n); end
      checks += 2;
      if (oa0 != ia || oa1 != ia) begin failures++; $display("FAIL addr"); end
      for (int o = 0; o < NOUT; o++) begin
        sc = int'(scmem[ia][o*8 +: 8]);
        e0 = post(longint'(acc[o]), o, 0, 0);
        e1 = post(longint'(acc[o]), o, sc, 1);
        if (e0 < 0) relus++;
        if (e0 > 255) sats++;
        e0 = e0 < 0 ? 0 : e0 > 255 ? 255 : e0;
        e1 = e1 < 0 ? 0 : e1 > 255 ? 255 : e1;
        checks += 2;
        if (int'(od0[o*8 +: 8]) != e0) begin failures++; $display("FAIL o%0d got %0d exp %0d", o, od0[o*8 +: 8], e0); end
        if (int'(od1[o*8 +: 8]) != e1) begin failures++; $display("FAIL sc o%0d got %0d exp %0d", o, od1[o*8 +: 8], e1); end
      end
    end
    checks += 2;
    if (relus == 0) begin failures++; $display("FAIL no ReLU clamp"); end
    if (sats == 0) begin failures++; $display("FAIL no saturation"); end
    $display("relu clamps %0d saturations %0d", relus, sats);
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
