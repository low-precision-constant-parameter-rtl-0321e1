// conv_stage: one convolution layer of a residual block, i.e. the chain
// FEEDER -> KERNEL -> ACCUMULATOR -> COLLECTOR between two buffers.
//
// On "start" the stage runs every kernel pass of one image: input rows
// y = -P .. H-1+P and column groups x0 = -P, -P+INST, ... up to W-1+P
// (P = (K-1)/2; passes over the zero padding are run too, so that every output
// pixel receives every tap and the collector's one's complement correction is
// a per-channel constant), and for each, fold phases 0..FOLD-1.  A pass is
// started only after the previous pass's slice has been handed to the
// accumulator.  When all passes are done the accumulator is drained through
// the collector into the destination buffer, and "done" pulses.
//
// Interface: source buffer read port (src_*), shortcut read port (sc_*, used
// only with SHORTCUT), destination buffer write port (dst_*).  Timing per pass:
// INST+1 read clocks, T bit clocks, tree and SRA latency; per output pixel
// NOUT/LANES+1 collector clocks.  Layer-at-a-time sequencing is this design's
// own choice; the chain of blocks follows the paper's residual block figure.
module conv_stage
  import ccnn_pkg::*;
#(
  parameter int unsigned NIN      = 64,
  parameter int unsigned NOUT     = 64,
  parameter int unsigned K        = 3,
  parameter int unsigned INST     = 4,
  parameter int unsigned FOLD     = 1,
  parameter int unsigned H        = 56,
  parameter int unsigned W        = 56,
  parameter int          SEED     = 2,
  parameter int unsigned LANES    = 16,
  parameter bit          SHORTCUT = 1'b0,
  localparam int unsigned PA      = $clog2(H * W)
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   start,
  output logic                   done,
  output logic                   busy,
  output logic                   src_re,
  output logic [PA-1:0]          src_raddr,
  input  logic [NIN*ACT_W-1:0]   src_rdata,
  output logic                   sc_re,
  output logic [PA-1:0]          sc_raddr,
  input  logic [NOUT*ACT_W-1:0]  sc_rdata,
  output logic                   dst_we,
  output logic [PA-1:0]          dst_waddr,
  output logic [NOUT*ACT_W-1:0]  dst_wdata
);
  localparam int unsigned NHW = NIN / FOLD;
  localparam int unsigned T   = kernel_t(NIN, FOLD, K, INST);
  localparam int unsigned AW  = serial_len(K * K * NIN);
  localparam int unsigned SR  = K;
  localparam int unsigned SC  = INST + K - 1;
  localparam int unsigned FW  = FOLD > 1 ? $clog2(FOLD) : 1;
  localparam int          P   = (int'(K) - 1) / 2;

  typedef enum logic [2:0] {S_IDLE, S_PASS, S_WAIT, S_FLUSH, S_DRAIN, S_DONE} state_t;
  state_t state;

  logic signed [15:0] y, x0;
  logic [FW-1:0]      f;

  // feeder -> kernel
  logic [INST-1:0][NHW-1:0] xb;
  logic                     first, fbusy;
  logic [FW-1:0]            phase_k;
  // kernel -> accumulator
  logic signed [T-1:0]      ky [SR][SC][NOUT];
  logic                     ky_valid;
  // accumulator -> collector
  logic                     a_valid, a_ready, a_done, a_busy;
  logic [PA-1:0]            a_addr;
  logic signed [NOUT-1:0][AW-1:0] a_data;
  logic                     drain_start;
  logic                     fstart;

  feeder #(.C(NIN), .INST(INST), .FOLD(FOLD), .H(H), .W(W), .T(T)) u_feeder (
    .clk(clk), .rst(rst), .start(fstart), .y(y), .x0(x0), .phase(f),
    .rd_en(src_re), .rd_addr(src_raddr), .rd_data(src_rdata),
    .x(xb), .first(first), .phase_o(phase_k), .busy(fbusy));

  kernel #(.NIN(NIN), .NOUT(NOUT), .K(K), .INST(INST), .FOLD(FOLD), .SEED(SEED)) u_kernel (
    .clk(clk), .rst(rst), .x(xb), .first(first), .phase(phase_k),
    .y(ky), .y_valid(ky_valid));

  accumulator #(.NOUT(NOUT), .SR(SR), .SC(SC), .TIN(T), .AW(AW), .H(H), .W(W)) u_acc (
    .clk(clk), .rst(rst), .in_valid(ky_valid), .in_y(ky),
    .oy0(16'(y + 16'(P - (int'(K) - 1)))), .ox0(16'(x0 + 16'(P - (int'(K) - 1)))),
    .drain_start(drain_start), .out_valid(a_valid), .out_ready(a_ready),
    .out_addr(a_addr), .out_data(a_data), .drain_done(a_done), .busy(a_busy));

  collector #(.NOUT(NOUT), .AW(AW), .LANES(LANES), .SEED(SEED), .NIN(NIN), .K(K),
              .SHORTCUT(SHORTCUT), .PA(PA)) u_col (
    .clk(clk), .rst(rst), .in_valid(a_valid), .in_ready(a_ready), .in_addr(a_addr),
    .in_data(a_data), .sc_rd_en(sc_re), .sc_rd_addr(sc_raddr), .sc_rd_data(sc_rdata),
    .out_valid(dst_we), .out_addr(dst_waddr), .out_data(dst_wdata));

  assign fstart      = (state == S_PASS) && !a_busy && !fbusy;
  assign drain_start = (state == S_FLUSH) && !a_busy;
  assign busy        = (state != S_IDLE);

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      state <= S_IDLE;
      y     <= '0;
      x0    <= '0;
      f     <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state <= S_PASS;
          y     <= 16'(-P);
          x0    <= 16'(-P);
          f     <= '0;
        end
        S_PASS: if (!a_busy && !fbusy) state <= S_WAIT;  // feeder takes the pass
        S_WAIT: if (ky_valid) begin            // slice goes to the accumulator
          if (int'(f) != int'(FOLD) - 1) begin
            f     <= f + 1'b1;
            state <= S_PASS;
          end else begin
            f <= '0;
            if (int'(x0) + int'(INST) <= int'(W) - 1 + P) begin
              x0    <= x0 + 16'(INST);
              state <= S_PASS;
            end else begin
              x0 <= 16'(-P);
              if (int'(y) < int'(H) - 1 + P) begin
                y     <= y + 1'b1;
                state <= S_PASS;
              end else begin
                state <= S_FLUSH;
              end
            end
          end
        end
        S_FLUSH: if (!a_busy) state <= S_DRAIN;
        S_DRAIN: if (a_done) state <= S_DONE;
        S_DONE:  if (!dst_we && a_ready) begin  // last pixel written
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
