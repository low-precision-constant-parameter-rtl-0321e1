// adder_tree: the per-output-channel adder tree ("Add Yn") of the bit-serial
// kernel.
//
// Every clock each input carries one bit (the same bit position) of one
// bit-serial product, so the tree is a population count of N bits.  The first
// two adder stages are Building Block 1 cells (bb1): 12 inputs are reduced by
// two 6:3 reductions (registered) and a 3-bit adder into a 4-bit count.  The
// remaining stages are ordinary parallel adders arranged as a binary tree.
// Following the paper's best variant, a pipeline register sits after every
// second adder stage: after stage 1 (the 6:3 reductions), then after parallel
// levels 2, 4, ... counted from the leaves.
//
// A one-bit tag travels alongside through the same number of registers, so
// the shift right accumulator can find bit 0 of each word.
//
// Interface: bits[N-1:0], tag_in in; cnt = number of ones, tag_out, both
// LAT = 1 + floor(L/2) clocks later, L = ceil(log2(ceil(N/12))).
// The pipeline rule follows the paper; the heap layout and the zero padding
// of unused leaves are this design's own.
module adder_tree #(
  parameter int unsigned N  = 12,
  parameter int unsigned CW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [N-1:0]  bits,
  input  logic          tag_in,
  output logic [CW-1:0] cnt,
  output logic          tag_out
);
  localparam int unsigned NB  = (N + 11) / 12;
  localparam int unsigned L   = $clog2(NB);
  localparam int unsigned NP  = 1 << L;
  localparam int unsigned LAT = 1 + L / 2;

  logic [NB*12-1:0] padded;

  assign padded = (NB*12)'(bits);

  // leaves: one BB1 per 12 inputs (heap positions NP .. 2*NP-1)
  for (genvar g = 0; g < NP; g++) begin : g_leaf
    logic [CW-1:0] v;
    if (g < NB) begin : g_bb
      logic [2:0] ra, rb;
      logic [3:0] s;
      bb1 #(.REG_SUM(1'b0)) u_bb (
        .clk(clk), .x(padded[g*12 +: 12]), .add_a(ra), .add_b(rb),
        .red_a(ra), .red_b(rb), .sum(s));
      assign v = CW'(s);
    end else begin : g_zero
      assign v = '0;
    end
  end

  // parallel adder nodes, heap position n = 1 .. NP-1 (children 2n, 2n+1)
  for (genvar n = 1; n < NP; n++) begin : g_node
    localparam int unsigned LV = L - ($clog2(n + 1) - 1);   // level above the leaves
    logic [CW-1:0] v, a, b;
    if (2 * n >= NP) begin : g_from_leaf
      assign a = g_leaf[2*n - NP].v;
      assign b = g_leaf[2*n + 1 - NP].v;
    end else begin : g_from_node
      assign a = g_node[2*n].v;
      assign b = g_node[2*n + 1].v;
    end
    if (LV % 2 == 0) begin : g_reg
      always_ff @(posedge clk) v <= a + b;
    end else begin : g_comb
      assign v = a + b;
    end
  end

  if (NP == 1) begin : g_root_leaf
    assign cnt = g_leaf[0].v;
  end else begin : g_root_node
    assign cnt = g_node[1].v;
  end

  logic [LAT-1:0] tag_sr;
  always_ff @(posedge clk) begin
    if (rst) tag_sr <= '0;
    else     tag_sr <= LAT'({tag_sr, tag_in});
  end
  assign tag_out = tag_sr[LAT-1];
endmodule
