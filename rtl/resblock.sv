// resblock: one Resnet bottleneck residual block as a compiled CNN (top level).
//
//   input BUFFER -> [FEEDER, KERNEL 1x1, ACCUMULATOR, COLLECTOR] -> BUFFER
//                -> [FEEDER, KERNEL 3x3, ACCUMULATOR, COLLECTOR] -> BUFFER
//                -> [FEEDER, KERNEL 1x1, ACCUMULATOR, COLLECTOR(+shortcut)]
//                -> output BUFFER
// The shortcut is the identity bypass: the last collector adds the block's
// input pixel, read from the input buffer.  Defaults are the conv2_2 block of
// Resnet50 (256 -> 64 -> 64 -> 256 channels, 56x56, 4 kernel instances, no
// folding); conv5_2 is C_IN=2048, C_MID=512, H=W=7, INST=1, FOLD=4.
//
// The input and output buffers are chip-level double buffers: the host writes
// the next image into one bank (in_we/in_addr/in_data) and flips the banks
// with in_swap before "start"; the finished image appears in the output read
// bank when "done" pulses (the output banks flip then), and is read with
// out_re/out_addr, out_data valid the next clock.  Pixel address = y*W + x,
// channel c in bits [8c+7:8c].  The three layers run one after another, each
// through its own feeder, kernel, accumulator and collector; start is taken
// only while !busy.  The block structure follows the paper; the host-side
// ports and the layer-at-a-time sequencing are this design's own.
module resblock
  import ccnn_pkg::*;
#(
  parameter int unsigned C_IN  = 256,
  parameter int unsigned C_MID = 64,
  parameter int unsigned H     = 56,
  parameter int unsigned W     = 56,
  parameter int unsigned INST  = 4,
  parameter int unsigned FOLD  = 1,
  parameter int unsigned LANES = 16,
  parameter int          SEED  = 1,
  localparam int unsigned PA   = $clog2(H * W)
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   in_we,
  input  logic [PA-1:0]          in_addr,
  input  logic [C_IN*ACT_W-1:0]  in_data,
  input  logic                   in_swap,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  input  logic                   out_re,
  input  logic [PA-1:0]          out_addr,
  output logic [C_IN*ACT_W-1:0]  out_data
);
  typedef enum logic [2:0] {B_IDLE, B_L1, B_L2, B_L3} bstate_t;
  bstate_t state;

  logic [2:0] st_start, st_done, st_busy;

  // buffer ports
  logic                   b0_re;  logic [PA-1:0] b0_raddr; logic [C_IN*ACT_W-1:0]  b0_rdata;
  logic                   b1_we;  logic [PA-1:0] b1_waddr; logic [C_MID*ACT_W-1:0] b1_wdata;
  logic                   b1_re;  logic [PA-1:0] b1_raddr; logic [C_MID*ACT_W-1:0] b1_rdata;
  logic                   b2_we;  logic [PA-1:0] b2_waddr; logic [C_MID*ACT_W-1:0] b2_wdata;
  logic                   b2_re;  logic [PA-1:0] b2_raddr; logic [C_MID*ACT_W-1:0] b2_rdata;
  logic                   b3_we;  logic [PA-1:0] b3_waddr; logic [C_IN*ACT_W-1:0]  b3_wdata;
  logic                   s1_re,  s3_sc_re;
  logic [PA-1:0]          s1_raddr, s3_sc_raddr;
  logic                   unused_re2, unused_re3;
  logic [PA-1:0]          unused_ra2, unused_ra3;
  logic                   unused_bank0, unused_bank1, unused_bank2, unused_bank3;

  // input buffer: chip-level double buffer, shared by layer 1's feeder and
  // the shortcut read of layer 3 (never active at the same time)
  assign b0_re    = s1_re | s3_sc_re;
  assign b0_raddr = s1_re ? s1_raddr : s3_sc_raddr;

  fm_buffer #(.DEPTH(H*W), .WIDTH(C_IN*ACT_W), .DOUBLE(1'b1)) u_buf0 (
    .clk(clk), .rst(rst), .swap(in_swap), .we(in_we), .waddr(in_addr), .wdata(in_data),
    .re(b0_re), .raddr(b0_raddr), .rdata(b0_rdata), .wbank(unused_bank0));

  fm_buffer #(.DEPTH(H*W), .WIDTH(C_MID*ACT_W), .DOUBLE(1'b0)) u_buf1 (
    .clk(clk), .rst(rst), .swap(1'b0), .we(b1_we), .waddr(b1_waddr), .wdata(b1_wdata),
    .re(b1_re), .raddr(b1_raddr), .rdata(b1_rdata), .wbank(unused_bank1));

  fm_buffer #(.DEPTH(H*W), .WIDTH(C_MID*ACT_W), .DOUBLE(1'b0)) u_buf2 (
    .clk(clk), .rst(rst), .swap(1'b0), .we(b2_we), .waddr(b2_waddr), .wdata(b2_wdata),
    .re(b2_re), .raddr(b2_raddr), .rdata(b2_rdata), .wbank(unused_bank2));

  // output buffer: chip-level double buffer, banks flip when a block finishes
  fm_buffer #(.DEPTH(H*W), .WIDTH(C_IN*ACT_W), .DOUBLE(1'b1)) u_buf3 (
    .clk(clk), .rst(rst), .swap(st_done[2]), .we(b3_we), .waddr(b3_waddr), .wdata(b3_wdata),
    .re(out_re), .raddr(out_addr), .rdata(out_data), .wbank(unused_bank3));

  conv_stage #(.NIN(C_IN), .NOUT(C_MID), .K(1), .INST(INST), .FOLD(FOLD), .H(H), .W(W),
               .SEED(SEED + 0), .LANES(LANES), .SHORTCUT(1'b0)) u_l1 (
    .clk(clk), .rst(rst), .start(st_start[0]), .done(st_done[0]), .busy(st_busy[0]),
    .src_re(s1_re), .src_raddr(s1_raddr), .src_rdata(b0_rdata),
    .sc_re(unused_re3), .sc_raddr(unused_ra3), .sc_rdata('0),
    .dst_we(b1_we), .dst_waddr(b1_waddr), .dst_wdata(b1_wdata));

  conv_stage #(.NIN(C_MID), .NOUT(C_MID), .K(3), .INST(INST), .FOLD(FOLD), .H(H), .W(W),
               .SEED(SEED + 1), .LANES(LANES), .SHORTCUT(1'b0)) u_l2 (
    .clk(clk), .rst(rst), .start(st_start[1]), .done(st_done[1]), .busy(st_busy[1]),
    .src_re(b1_re), .src_raddr(b1_raddr), .src_rdata(b1_rdata),
    .sc_re(unused_re2), .sc_raddr(unused_ra2), .sc_rdata('0),
    .dst_we(b2_we), .dst_waddr(b2_waddr), .dst_wdata(b2_wdata));

  conv_stage #(.NIN(C_MID), .NOUT(C_IN), .K(1), .INST(INST), .FOLD(FOLD), .H(H), .W(W),
               .SEED(SEED + 2), .LANES(LANES), .SHORTCUT(1'b1)) u_l3 (
    .clk(clk), .rst(rst), .start(st_start[2]), .done(st_done[2]), .busy(st_busy[2]),
    .src_re(b2_re), .src_raddr(b2_raddr), .src_rdata(b2_rdata),
    .sc_re(s3_sc_re), .sc_raddr(s3_sc_raddr), .sc_rdata(b0_rdata),
    .dst_we(b3_we), .dst_waddr(b3_waddr), .dst_wdata(b3_wdata));


  always_ff @(posedge clk) begin
    st_start <= '0;
    done     <= 1'b0;
    if (rst) begin
      state <= B_IDLE;
    end else begin
      case (state)
        B_IDLE: if (start) begin state <= B_L1; st_start[0] <= 1'b1; end
        B_L1:   if (st_done[0]) begin state <= B_L2; st_start[1] <= 1'b1; end
        B_L2:   if (st_done[1]) begin state <= B_L3; st_start[2] <= 1'b1; end
        B_L3:   if (st_done[2]) begin state <= B_IDLE; done <= 1'b1; end
        default: state <= B_IDLE;
      endcase
    end
  end

  assign busy = (state != B_IDLE) || (|st_busy);
endmodule
