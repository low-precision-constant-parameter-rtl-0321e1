// cfmm: Common Factor Mass Multiplication block for one input channel.
//
// The input activation x (the common factor) arrives bit-serially, LSB first.
// The block produces, also bit-serially, every product x*m for the 64 weight
// magnitudes m = 0..63 of an INT7 weight (the sign is applied later, in the
// adder tree).  Only the 32 odd multiples need arithmetic:
//   x*1 is x itself; x*(k+2) = x*k + 2x for k = 1,3,...,61, one bit-serial
//   adder (sum combinational, carry in a flip-flop) per odd product;
//   2x is x delayed one clock.
// Even products are odd products shifted left, which in bit-serial form is a
// one-flop delay per shift: p[2m] is p[m] delayed one clock.  Multiplication
// by 0 is a constant zero stream.  All products leave aligned, one clock after
// the input bit (the odd products are registered once; each shift adds its
// own flop and is taken from an already-aligned product).
//
// Interface: x = input bit; p[m] = bit of x*m, one clock later.  Unused
// products are left for synthesis to remove.  Products of an 8-bit activation
// are below 2^14, so after 14+ clocks of zero input all streams and carries
// return to zero by themselves: back-to-back words need no clearing.
// The structure follows the paper; the chained order of the incremental
// adders is this design's own choice.
module cfmm (
  input  logic        clk,
  input  logic        rst,
  input  logic        x,
  output logic [63:0] p
);
  logic        x2;            // 2x: x delayed one clock
  logic [63:0] q;             // combinational odd products (odd indices used)
  logic [63:0] cy;            // carry flops of the incremental adders
  logic [63:0] podd;          // registered odd products

  assign q[1] = x;
  for (genvar k = 1; k < 63; k += 2) begin : g_inc
    assign q[k+2] = q[k] ^ x2 ^ cy[k];
    always_ff @(posedge clk) begin
      if (rst) cy[k] <= 1'b0;
      else     cy[k] <= (q[k] & x2) | (q[k] & cy[k]) | (x2 & cy[k]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) x2 <= 1'b0;
    else     x2 <= x;
  end

  for (genvar m = 0; m < 64; m++) begin : g_out
    if (m == 0) begin : g_zero
      assign p[m]    = 1'b0;
      assign q[m]    = 1'b0;
      assign cy[m]   = 1'b0;
      assign podd[m] = 1'b0;
    end else if (m % 2 == 1) begin : g_odd
      always_ff @(posedge clk) begin
        if (rst) podd[m] <= 1'b0;
        else     podd[m] <= q[m];
      end
      assign p[m] = podd[m];
      if (m == 63) begin : g_last
        assign cy[m] = 1'b0;
      end
    end else begin : g_even
      assign q[m]    = 1'b0;
      assign cy[m]   = 1'b0;
      assign podd[m] = 1'b0;
      // shift left by one = one more flop behind the half-size product
      logic d;
      always_ff @(posedge clk) begin
        if (rst) d <= 1'b0;
        else     d <= p[m/2];
      end
      assign p[m] = d;
    end
  end
endmodule
