// tb_fm_buffer: checks a double buffer (writes go to one bank, reads see the
// other, swap exchanges them, read data one clock after re and held) and a
// single-bank buffer (write then read back).
module tb_fm_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int D = 20, WD = 16;
  logic rst, swap, we, re, we1, re1, wb, wb1;
  logic [$clog2(D)-1:0] wa, ra;
  logic [WD-1:0] wd, rd, rd1;
  int checks = 0, failures = 0;

  fm_buffer #(.DEPTH(D), .WIDTH(WD), .DOUBLE(1'b1)) dut (
    .clk(clk), .rst(rst), .swap(swap), .we(we), .waddr(wa), .wdata(wd),
    .re(re), .raddr(ra), .rdata(rd), .wbank(wb));
  fm_buffer #(.DEPTH(D), .WIDTH(WD), .DOUBLE(1'b0)) dut1 (
    .clk(clk), .rst(rst), .swap(swap), .we(we1), .waddr(wa), .wdata(wd),
    .re(re1), .raddr(ra), .rdata(rd1), .wbank(wb1));

  function automatic logic [WD-1:0] pat(int img, int a);
    return WD'(img * 1000 + a * 7 + 3);
  endfunction

  initial begin
    rst = 1; swap = 0; we = 0; re = 0; we1 = 0; re1 = 0; wa = '0; ra = '0; wd = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int img = 0; img < 4; img++) begin
      // write image img into the write bank while reading image img-1
      for (int a = 0; a < D; a++) begin
        we = 1; wa = $clog2(D)'(a); wd = pat(img, a);
        re = (img > 0); ra = $clog2(D)'(D - 1 - a);
        we1 = 1; re1 = 0;
        @(negedge clk);
        if (img > 0) begin
          checks++;
          if (rd != pat(img - 1, D - 1 - a)) begin
            failures++; $display("FAIL img %0d addr %0d got %0d", img, D - 1 - a, rd);
          end
        end
      end
      we = 0; re = 0; we1 = 0;
      @(negedge clk);
      checks++;
      if (img > 0 && rd != pat(img - 1, 0)) begin failures++; $display("FAIL hold"); end
      swap = 1; @(negedge clk); swap = 0;
      checks++;
      if (wb != 1'(img + 1)) begin failures++; $display("FAIL bank %0d", wb); end
    end
    // single bank: read back the last image written
    for (int a = 0; a < D; a++) begin
      re1 = 1; ra = $clog2(D)'(a);
      @(negedge clk);
      checks++;
      if (rd1 != pat(3, a)) begin failures++; $display("FAIL single %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
