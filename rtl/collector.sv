// collector: per-channel post-processing of finished convolution sums.
//
// For every output pixel the collector takes NOUT accumulated sums and, for
// each output channel o, computes
//   v = acc + B[o]                       bias adder; B[o] = bias + number of
//                                        negative weights of channel o, which
//                                        turns the kernel's one's complement
//                                        sums into two's complement
//   v = round(v * S[o] / 2^SCALE_SH)     per-channel scaling (normalization),
//                                        round half up
//   v = v + shortcut[o]                  only in the last collector of a block
//   out = min(max(v, 0), 255)            ReLU, then saturate to 8 bits
// The scaling multipliers (DSP blocks) are shared: LANES multipliers process
// LANES channels per clock, so a pixel takes NOUT/LANES clocks.
//
// Interface: in_valid/in_ready handshake with in_addr/in_data (one pixel).
// With SHORTCUT the collector reads the shortcut pixel at in_addr from the
// block's input buffer through sc_rd_en/sc_rd_addr (data the next clock).
// out_valid pulses for one clock with out_addr/out_data, NOUT/LANES + 1 clocks
// after the handshake.  The list of operations, the bias-adder correction and
// the DSP sharing follow the paper; the fixed-point formats, the rounding
// mode and the operation order are this design's own.
module collector
  import ccnn_pkg::*;
#(
  parameter int unsigned NOUT     = 64,
  parameter int unsigned AW       = 26,
  parameter int unsigned LANES    = 16,
  parameter int          SEED     = 2,
  parameter int unsigned NIN      = 64,
  parameter int unsigned K        = 3,
  parameter bit          SHORTCUT = 1'b0,
  parameter int unsigned PA       = 12
) (
  input  logic                           clk,
  input  logic                           rst,
  input  logic                           in_valid,
  output logic                           in_ready,
  input  logic [PA-1:0]                  in_addr,
  input  logic signed [NOUT-1:0][AW-1:0] in_data,
  output logic                           sc_rd_en,
  output logic [PA-1:0]                  sc_rd_addr,
  input  logic [NOUT*ACT_W-1:0]          sc_rd_data,
  output logic                           out_valid,
  output logic [PA-1:0]                  out_addr,
  output logic [NOUT*ACT_W-1:0]          out_data
);
  localparam int unsigned NG = NOUT / LANES;
  localparam int unsigned VW = AW + 2;                 // after bias add
  localparam int unsigned PW = VW + SCALE_W + 1;       // after scaling

  typedef int tab_t [NOUT];

  function automatic tab_t mk_bias();
    tab_t t;
    for (int o = 0; o < int'(NOUT); o++) t[o] = bias(SEED, o) + nneg(SEED, o, NIN, K);
    return t;
  endfunction
  function automatic tab_t mk_scale();
    tab_t t;
    for (int o = 0; o < int'(NOUT); o++) t[o] = scale(SEED, o);
    return t;
  endfunction

  localparam tab_t BT  = mk_bias();
  localparam tab_t SCL = mk_scale();

  logic                           busy;
  logic [$clog2(NG+1)-1:0]        g;
  logic signed [NOUT-1:0][AW-1:0] acc_q;
  logic [PA-1:0]                  addr_q;
  logic [ACT_W-1:0]               res [LANES];

  assign in_ready   = !busy;
  assign sc_rd_en   = SHORTCUT && in_valid && !busy;
  assign sc_rd_addr = in_addr;

  // LANES shared multiplier lanes
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [VW-1:0]  v;
    logic signed [PW-1:0]  prod, rnd;
    logic signed [PW:0]    w;
    int                    o;
    always_comb begin
      o    = int'(g) * int'(LANES) + l;
      v    = VW'(signed'(acc_q[o])) + VW'(BT[o]);
      prod = PW'(v) * PW'(SCL[o]);
      rnd  = (prod + (PW'(1) <<< (SCALE_SH - 1))) >>> SCALE_SH;
      w    = (PW+1)'(rnd);
      if (SHORTCUT) w = w + (PW+1)'(sc_rd_data[o*ACT_W +: ACT_W]);
      if (w < 0)          res[l] = '0;
      else if (w > 255)   res[l] = 8'd255;
      else                res[l] = ACT_W'(w);
    end
  end

  always_ff @(posedge clk) begin
    out_valid <= 1'b0;
    if (rst) begin
      busy     <= 1'b0;
      g        <= '0;
      addr_q   <= '0;
      out_addr <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        busy   <= 1'b1;
        g      <= '0;
        acc_q  <= in_data;
        addr_q <= in_addr;
      end
    end else begin
      for (int l = 0; l < int'(LANES); l++)
        out_data[(int'(g) * int'(LANES) + l) * int'(ACT_W) +: ACT_W] <= res[l];
      if (int'(g) == int'(NG) - 1) begin
        busy      <= 1'b0;
        out_valid <= 1'b1;
        out_addr  <= addr_q;
      end
      g <= g + 1'b1;
    end
  end

  initial assert (NOUT % LANES == 0);
endmodule
