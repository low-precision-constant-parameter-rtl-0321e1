// feeder: fetches activations from a feature-map buffer and serializes them
// for the bit-serial kernel.
//
// A pass is started with the row y and first column x0 of INST neighbouring
// input pixels and the fold phase.  The feeder reads the INST pixel words one
// per clock; a pixel outside the H x W map (the zero padding of a K x K
// convolution) is replaced by zeros without a read.  Of each word it keeps the
// NHW = C/FOLD channels of the current phase, then shifts all of them out
// LSB first, one bit per clock for T clocks (8 data bits, then zeros), with
// "first" on bit 0.
//
// Interface: start (one clock, only while !busy), y, x0 (signed), phase;
// buffer read port rd_en/rd_addr, rd_data valid the clock after rd_en.
// x[i][m], first, phase_o drive the kernel; phase_o holds until the next start.
// Timing: INST+1 clocks of reading, then T clocks of bits; busy covers both.
// The paper states only that the feeder serializes buffer data for the kernel
// (and the shortcut); the pass format and the padding rule are this design's own.
module feeder
  import ccnn_pkg::*;
#(
  parameter int unsigned C    = 256,
  parameter int unsigned INST = 4,
  parameter int unsigned FOLD = 1,
  parameter int unsigned H    = 56,
  parameter int unsigned W    = 56,
  parameter int unsigned T    = 24,
  localparam int unsigned NHW = C / FOLD,
  localparam int unsigned AW  = $clog2(H * W),
  localparam int unsigned FW  = FOLD > 1 ? $clog2(FOLD) : 1
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,
  input  logic signed [15:0]       y,
  input  logic signed [15:0]       x0,
  input  logic [FW-1:0]            phase,
  output logic                     rd_en,
  output logic [AW-1:0]            rd_addr,
  input  logic [C*ACT_W-1:0]       rd_data,
  output logic [INST-1:0][NHW-1:0] x,
  output logic                     first,
  output logic [FW-1:0]            phase_o,
  output logic                     busy
);
  typedef enum logic [1:0] {IDLE, LOAD, SER} state_t;
  state_t state;

  logic [ACT_W-1:0]           sh [INST][NHW];
  logic [$clog2(INST+1)-1:0]  i;        // next pixel to fetch
  logic [$clog2(T+1)-1:0]     t;
  logic signed [15:0]         yq, x0q;
  logic                       cap, cap_in;   // capture pending, pixel in map
  localparam int unsigned IW = (INST > 1) ? $clog2(INST) : 1;
  logic [IW-1:0]              cap_i;
  logic signed [16:0]         xi;
  logic                       inb;

  assign xi  = 17'(x0q) + 17'(i);
  assign inb = (yq >= 0) && (yq < 16'(H)) && (xi >= 0) && (xi < 17'(W));

  always_comb begin
    rd_en   = (state == LOAD) && (int'(i) < int'(INST)) && inb;
    rd_addr = AW'(int'(yq) * int'(W) + int'(xi));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= IDLE;
      i       <= '0;
      t       <= '0;
      cap     <= 1'b0;
      cap_in  <= 1'b0;
      cap_i   <= '0;
      phase_o <= '0;
      yq      <= '0;
      x0q     <= '0;
      for (int a = 0; a < int'(INST); a++)
        for (int m = 0; m < int'(NHW); m++) sh[a][m] <= '0;
    end else begin
      cap <= 1'b0;
      // capture the pixel requested in the previous clock
      if (cap) begin
        for (int m = 0; m < int'(NHW); m++)
          sh[cap_i][m] <= cap_in ? rd_data[(int'(phase_o) * int'(NHW) + m) * int'(ACT_W) +: ACT_W]
                                 : '0;
      end
      case (state)
        IDLE: if (start) begin
          state   <= LOAD;
          yq      <= y;
          x0q     <= x0;
          phase_o <= phase;
          i       <= '0;
        end
        LOAD: begin
          if (int'(i) < int'(INST)) begin
            cap    <= 1'b1;
            cap_in <= inb;
            cap_i  <= IW'(i);
            i      <= i + 1'b1;
          end else begin
            state <= SER;
            t     <= '0;
          end
        end
        SER: begin
          for (int a = 0; a < int'(INST); a++)
            for (int m = 0; m < int'(NHW); m++) sh[a][m] <= sh[a][m] >> 1;
          t <= t + 1'b1;
          if (int'(t) == int'(T) - 1) state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  always_comb begin
    for (int a = 0; a < int'(INST); a++)
      for (int m = 0; m < int'(NHW); m++) x[a][m] = (state == SER) && sh[a][m][0];
  end
  assign first = (state == SER) && (t == 0);
  assign busy  = (state != IDLE);
endmodule
