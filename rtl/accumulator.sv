// accumulator: adds the kernel's partial sums across convolution steps and
// streams finished sums to the collector.
//
// The kernel delivers, per pass, an SR x SC slice of partial sums for NOUT
// output channels whose top-left element belongs to output pixel (oy0, ox0).
// The accumulator holds a partial-sum memory with one word (NOUT sums of AW
// bits) per output pixel and adds the slice into it, one slice element per
// clock (read-modify-write), skipping elements that fall outside the H x W
// map.  Slices of neighbouring passes overlap, so every output pixel collects
// the contributions of all K x K taps (and all fold phases).  After the last
// pass a drain sweeps the map in pixel order, hands each word to the
// collector with a valid/ready handshake and clears it for the next image.
// After reset the memory is cleared once (H*W clocks, busy is high).
//
// Interface: in_valid with in_y, oy0, ox0 (in_y must hold for SR*SC clocks,
// which the kernel's SRAs guarantee; a slice may only arrive while !busy);
// drain_start; out_valid/out_ready/out_addr/out_data; drain_done pulses after
// the last word is taken.  The paper gives the accumulator's function; the
// per-pixel memory and the sequential read-modify-write are this design's own.
module accumulator
  import ccnn_pkg::*;
#(
  parameter int unsigned NOUT = 64,
  parameter int unsigned SR   = 3,
  parameter int unsigned SC   = 6,
  parameter int unsigned TIN  = 23,
  parameter int unsigned AW   = 26,
  parameter int unsigned H    = 56,
  parameter int unsigned W    = 56,
  localparam int unsigned PA  = $clog2(H * W)
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_valid,
  input  logic signed [TIN-1:0]       in_y [SR][SC][NOUT],
  input  logic signed [15:0]          oy0,
  input  logic signed [15:0]          ox0,
  input  logic                        drain_start,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [PA-1:0]               out_addr,
  output logic signed [NOUT-1:0][AW-1:0] out_data,
  output logic                        drain_done,
  output logic                        busy
);
  typedef enum logic [1:0] {CLR, IDLE, ADD, DRAIN} state_t;
  state_t state;

  logic signed [NOUT-1:0][AW-1:0] mem [H*W];
  logic [$clog2(SR*SC+1)-1:0]     e;
  logic [(SR > 1 ? $clog2(SR) : 1)-1:0] er;
  logic [(SC > 1 ? $clog2(SC) : 1)-1:0] ec;
  logic [PA:0]                    p;
  logic signed [15:0]             oyq, oxq;
  logic signed [17:0]             ty, tx;
  logic                           tin_map;
  logic [PA-1:0]                  taddr;

  assign ty      = 18'(oyq) + 18'(er);
  assign tx      = 18'(oxq) + 18'(ec);
  assign tin_map = (ty >= 0) && (ty < 18'(H)) && (tx >= 0) && (tx < 18'(W));
  assign taddr   = PA'(int'(ty) * int'(W) + int'(tx));

  always_ff @(posedge clk) begin
    drain_done <= 1'b0;
    if (rst) begin
      state <= CLR;
      p     <= '0;
      e     <= '0;
      er    <= '0;
      ec    <= '0;
      oyq   <= '0;
      oxq   <= '0;
    end else begin
      case (state)
        CLR: begin
          mem[p[PA-1:0]] <= '0;
          if (int'(p) == int'(H * W) - 1) begin
            state <= IDLE;
            p     <= '0;
          end else p <= p + 1'b1;
        end
        IDLE: begin
          if (in_valid) begin
            state <= ADD;
            oyq   <= oy0;
            oxq   <= ox0;
            e     <= '0;
            er    <= '0;
            ec    <= '0;
          end else if (drain_start) begin
            state <= DRAIN;
            p     <= '0;
          end
        end
        ADD: begin
          if (tin_map) begin
            for (int o = 0; o < int'(NOUT); o++)
              mem[taddr][o] <= mem[taddr][o] + AW'(in_y[er][ec][o]);
          end
          if (int'(ec) == int'(SC) - 1) begin
            ec <= '0;
            er <= er + 1'b1;
          end else ec <= ec + 1'b1;
          e <= e + 1'b1;
          if (int'(e) == int'(SR * SC) - 1) state <= IDLE;
        end
        DRAIN: begin
          if (out_ready) begin
            mem[p[PA-1:0]] <= '0;
            if (int'(p) == int'(H * W) - 1) begin
              state      <= IDLE;
              drain_done <= 1'b1;
            end
            p <= p + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign out_valid = (state == DRAIN);
  assign out_addr  = p[PA-1:0];
  assign out_data  = mem[p[PA-1:0]];
  assign busy      = (state != IDLE);

  // a slice must not arrive while the previous one is still being added
  property p_no_overrun;
    @(posedge clk) disable iff (rst) in_valid |-> state != ADD;
  endproperty
  a_no_overrun: assert property (p_no_overrun);
endmodule
