// kernel: compiled (constant-weight) bit-serial convolution kernel.
//
// One pass takes INST neighbouring input pixels of one row (one kernel
// "instance" each), every one carrying NIN/FOLD input channels as bit-serial
// streams, and produces all partial sums those pixels contribute to a
// K x (INST+K-1) slice of output pixels for all NOUT output channels:
//   * one CFMM per (instance, input channel) makes all 64 magnitude products
//     of its input;
//   * the routing is fixed at elaboration: for output element (r, j, o) the
//     adder tree takes, from every instance i whose K x K footprint covers
//     column j, the product selected by |w| of weight
//     w = W[o][m][dy = K-1-r][dx = i-j+K-1], inverted when w < 0 (one's
//     complement negation) and left out when w = 0 (sparsity costs nothing);
//   * one adder tree and one shift right accumulator per output element.
// Overlapping footprints of neighbouring instances are summed inside the trees,
// as in the paper's 4-instance 3x3 example (a 3x6 output slice whose columns
// receive instances {0},{0,1},{0,1,2},{1,2,3},{2,3},{3}).
//
// Folding (FOLD > 1) time-multiplexes the hardware over FOLD groups of NIN/FOLD
// input channels: each adder-tree input becomes a FOLD-way mux between the
// products each phase needs; the partial sums of the phases are added by the
// accumulator outside.
//
// Interface and timing: x[i][m] is bit t of input channel phase*NIN/FOLD+m of
// instance i; "first" marks t = 0; a word is T = kernel_t(...) clocks long,
// bits 8..T-1 being zero.  phase must be stable for the whole word.  y holds
// the slice, a T-bit two's complement value per element that is the true
// partial sum minus the number of negative weights used; y_valid pulses
// T + LAT clock edges after the edge that samples "first" (LAT = adder tree
// latency; the CFMM adds one clock, the SRA's last bit one less).  Words may
// follow back to back.
// The weights come from ccnn_pkg::wgt(SEED, ...).  Structure (CFMM, routing,
// tree, SRA; multi-instance summing; mux folding) follows the paper; the fold
// over input channels and the weight source are this design's own choices.
module kernel
  import ccnn_pkg::*;
#(
  parameter int unsigned NIN  = 64,
  parameter int unsigned NOUT = 64,
  parameter int unsigned K    = 3,
  parameter int unsigned INST = 4,
  parameter int unsigned FOLD = 1,
  parameter int          SEED = 2,
  localparam int unsigned NHW = NIN / FOLD,
  localparam int unsigned SR  = K,
  localparam int unsigned SC  = INST + K - 1,
  localparam int unsigned NT  = tree_n(NIN, FOLD, K, INST),
  localparam int unsigned T   = kernel_t(NIN, FOLD, K, INST),
  localparam int unsigned FW  = FOLD > 1 ? $clog2(FOLD) : 1
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [INST-1:0][NHW-1:0]  x,
  input  logic                      first,
  input  logic [FW-1:0]             phase,
  output logic signed [T-1:0]       y [SR][SC][NOUT],
  output logic                      y_valid
);
  localparam int unsigned CW = $clog2(NT + 1);
  localparam int unsigned NS = (K < INST) ? K : INST;   // instance slots per tree

  logic [INST*NHW*64-1:0] pv;       // all products, index (i*NHW + m)*64 + |w|
  logic                   first_d;
  logic [FW-1:0]          phase_d;

  // Routing table of the tree for slice element (r, j, o): for input k and
  // fold phase f (entry k*FOLD+f), -1 if the weight is zero (or no instance covers column j),
  // otherwise 2*(product index) + (1 if the weight is negative).
  typedef int route_t [NT*FOLD];

  function automatic route_t route(input int r, input int j, input int o);
    route_t rt;
    int ilo, ihi, ii, w, a;
    ilo = (j - int'(K) + 1) > 0 ? (j - int'(K) + 1) : 0;
    ihi = j < int'(INST) - 1 ? j : int'(INST) - 1;
    for (int s = 0; s < int'(NS); s++)
      for (int m = 0; m < int'(NHW); m++)
        for (int f = 0; f < int'(FOLD); f++) begin
          ii = ilo + s;
          rt[(s*NHW + m)*FOLD + f] = -1;
          if (ii <= ihi) begin
            w = wgt(SEED, o, f * int'(NHW) + m, int'(K) - 1 - r, ii - j + int'(K) - 1);
            a = w < 0 ? -w : w;
            if (w != 0) rt[(s*NHW + m)*FOLD + f] = 2 * ((ii * int'(NHW) + m) * 64 + a) + (w < 0 ? 1 : 0);
          end
        end
    return rt;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      first_d <= 1'b0;
      phase_d <= '0;
    end else begin
      first_d <= first;
      phase_d <= phase;
    end
  end

  for (genvar i = 0; i < INST; i++) begin : g_inst
    for (genvar m = 0; m < NHW; m++) begin : g_cf
      cfmm u_cfmm (.clk(clk), .rst(rst), .x(x[i][m]), .p(pv[(i*NHW + m)*64 +: 64]));
    end
  end

  logic vld [SR][SC][NOUT];

  for (genvar r = 0; r < SR; r++) begin : g_r
    for (genvar j = 0; j < SC; j++) begin : g_j
      for (genvar o = 0; o < NOUT; o++) begin : g_o
        localparam route_t RT = route(r, j, o);
        logic [NT-1:0] tin;
        logic [CW-1:0] cnt;
        logic          tag;
        // CFMM output routing block: constant selection, sign by inversion,
        // zero weights dropped, FOLD-way mux when folded
        always_comb begin
          for (int k = 0; k < int'(NT); k++) begin
            int c;
            c = RT[k*FOLD + (FOLD > 1 ? int'(phase_d) : 0)];
            tin[k] = (c >= 0) && (pv[c / 2] ^ c[0]);
          end
        end
        adder_tree #(.N(NT), .CW(CW)) u_tree (
          .clk(clk), .rst(rst), .bits(tin), .tag_in(first_d), .cnt(cnt), .tag_out(tag));
        sra #(.T(T), .CW(CW)) u_sra (
          .clk(clk), .rst(rst), .cnt(cnt), .first(tag), .y(y[r][j][o]), .y_valid(vld[r][j][o]));
      end
    end
  end

  assign y_valid = vld[0][0][0];
endmodule
