// bb1: "Building Block 1" of the bit-serial adder tree, two 6:3 reductions and
// a 3-bit adder sharing one carry chain.
//
// Cell order on the chain (carry runs from the 3-bit adder towards the left):
//   [0] [C1,C2 | E,F | S,S]yellow [C1,C2 | E,F | S,S]blue [2bit 2bit 2bit]
// * The 3-bit adder adds two 3-bit values add_a + add_b.  Its carry-out enters
//   the blue block's S,S cell, whose sum output is therefore bit 3 of the
//   4-bit adder result (a hidden carry).
// * The blue reduction's bit 2 leaves on the chain into the yellow block's
//   S,S cell and is revealed there (hidden carry again).
// * The yellow reduction's bit 2 is revealed by a cell with constant-0 inputs.
// The six cells of the two reductions are registered (red_a, red_b); the
// 4-bit adder output is registered only if REG_SUM is set (the figure's
// "Optional FF").  The add_a/add_b inputs are free: an adder tree feeds them
// with registered reduction outputs, of this block or of another.
//
// Interface: x[5:0] = yellow A..F, x[11:6] = blue A..F.
//   red_a = count of x[5:0], red_b = count of x[11:6], one clock after x.
//   sum   = add_a + add_b, combinational (REG_SUM=0) or one clock later.
// The cell placement follows the paper's figure; the separation into ports
// and the reset-free datapath registers are this design's own.
module bb1 #(
  parameter bit REG_SUM = 1'b0
) (
  input  logic        clk,
  input  logic [11:0] x,
  input  logic [2:0]  add_a,
  input  logic [2:0]  add_b,
  output logic [2:0]  red_a,
  output logic [2:0]  red_b,
  output logic [3:0]  sum
);
  logic [3:0] k;        // carries of the 3-bit adder, k[0] = 0
  logic [2:0] s3;
  logic       hid_b, hid_y, cout_b, cout_y;
  logic [1:0] lo_b, lo_y;
  logic [3:0] sum_c;

  // 3-bit adder (rightmost three cells)
  assign k[0] = 1'b0;
  for (genvar i = 0; i < 3; i++) begin : g_add
    assign s3[i]  = add_a[i] ^ add_b[i] ^ k[i];
    assign k[i+1] = (add_a[i] & add_b[i]) | (add_a[i] & k[i]) | (add_b[i] & k[i]);
  end

  // blue 6:3 reduction: its S,S cell reveals the adder's carry-out
  red63 u_blue (.x(x[11:6]), .cin(k[3]), .hid(hid_b), .cnt_lo(lo_b), .cout(cout_b));
  // yellow 6:3 reduction: its S,S cell reveals the blue block's bit 2
  red63 u_yel  (.x(x[5:0]),  .cin(cout_b), .hid(hid_y), .cnt_lo(lo_y), .cout(cout_y));

  assign sum_c = {hid_b, s3};

  always_ff @(posedge clk) begin
    red_b <= {hid_y, lo_b};
    red_a <= {cout_y, lo_y};   // the constant-0 cell: sum = carry in
  end

  if (REG_SUM) begin : g_reg
    always_ff @(posedge clk) sum <= sum_c;
  end else begin : g_comb
    assign sum = sum_c;
  end
endmodule
