// fm_buffer: feature-map buffer built from block RAM.
//
// One word holds all channels of one pixel (WIDTH = channels * 8 bits) and
// the address is the pixel index y*W + x.  With DOUBLE = 1 the buffer is a
// double buffer: two banks, the writer filling one while the reader drains
// the other, and a one-clock "swap" pulse exchanging them.  With DOUBLE = 0 it
// is a single bank that is written by one stage and read by the next.
//
// Interface: write port (we, waddr, wdata) and read port (re, raddr); rdata is
// registered, valid the clock after re, and holds until the next read.
// Both ports may be used in the same clock.  The paper names double buffers
// and streaming FIFOs built from block RAM; the single word-per-pixel layout
// and the port arrangement are this design's own.
module fm_buffer #(
  parameter int unsigned DEPTH  = 3136,
  parameter int unsigned WIDTH  = 2048,
  parameter bit          DOUBLE = 1'b1,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             swap,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  output logic             wbank
);
  localparam int unsigned NB = DOUBLE ? 2 : 1;

  logic [WIDTH-1:0] mem [NB*DEPTH];
  logic             rbank;

  assign rbank = DOUBLE ? ~wbank : 1'b0;

  always_ff @(posedge clk) begin
    if (rst)       wbank <= 1'b0;
    else if (swap) wbank <= DOUBLE ? ~wbank : 1'b0;
  end

  always_ff @(posedge clk) begin
    if (we) mem[(DOUBLE ? int'(wbank) * DEPTH : 0) + int'(waddr)] <= wdata;
    if (re) rdata <= mem[(DOUBLE ? int'(rbank) * DEPTH : 0) + int'(raddr)];
  end

  initial assert (DEPTH > 0 && WIDTH > 0);
endmodule
