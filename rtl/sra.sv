// sra: shift right accumulator ("Shr Acc Yn") at the end of an adder tree.
//
// The adder tree delivers, once per clock, the column sum c_t of bit t of all
// its bit-serial inputs, LSB first.  The accumulator keeps a word of T+CW bits
// and each clock shifts it right by one while adding c_t at weight 2^(T-1):
//   acc <= (acc >> 1) + (c_t << (T-1)),   acc starts from c_0 << (T-1).
// After T clocks acc = sum_t c_t * 2^t exactly.  Because the trees add in
// one's complement over a T-bit word, the result is read as a T-bit two's
// complement number (the one's complement offset is removed later, in the
// collector's bias adder).
//
// Interface: cnt/first from the tree (first marks bit 0 of a word).  y is the
// T-bit result, y_valid pulses for one clock, one clock after bit T-1; y holds
// until the next result.  A new word may start right after the previous one.
module sra #(
  parameter int unsigned T  = 24,
  parameter int unsigned CW = 8
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [CW-1:0]       cnt,
  input  logic                first,
  output logic signed [T-1:0] y,
  output logic                y_valid
);
  localparam int unsigned AW = T + CW;

  logic [AW-1:0]        acc, acc_next, addend;
  logic [$clog2(T+1)-1:0] k;      // bits taken so far in the current word
  logic                 busy;

  assign addend   = AW'(cnt) << (T - 1);
  assign acc_next = first ? addend : (acc >> 1) + addend;

  always_ff @(posedge clk) begin
    if (rst) begin
      acc     <= '0;
      k       <= '0;
      busy    <= 1'b0;
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= 1'b0;
      if (first || busy) begin
        acc <= acc_next;
        if (first) k <= 1;
        else       k <= k + 1'b1;
        if ((first ? 1 : int'(k) + 1) == T) begin
          y       <= signed'(acc_next[T-1:0]);
          y_valid <= 1'b1;
          busy    <= 1'b0;
        end else begin
          busy <= 1'b1;
        end
      end
    end
  end
endmodule
