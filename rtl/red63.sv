// red63: one 6:3 reduction block of the bit-serial adder tree.
//
// It counts six 1-bit inputs A..F into a 3-bit sum, built the way an adaptive
// logic module's carry chain is used in the paper's hand-placed "Building
// Block 1":
//   * A,B,C,D are reduced by two 4-input functions into a sum bit
//     S = A^B^C^D and two carry bits C1,C2 of weight 2, so that
//     A+B+C+D = S + 2*(C1+C2).
//   * Three full-adder cells on a carry chain then add the pieces:
//       cell "S,S": adds S/2 twice, so its carry-out is S and its sum-out is
//                   simply the carry arriving from the previous adder on the
//                   chain (the "hidden carry": that adder's top bit leaves
//                   through this cell for free);
//       cell "E,F": E + F + S  -> count bit 0;
//       cell "C1,C2": C1 + C2 + carry -> count bit 1, carry-out = count bit 2.
//   * Count bit 2 leaves on the chain (cout); the next cell on the chain
//     reveals it on its sum output.
// The split of A..D into S, C1, C2 follows the paper's figure; the exact
// 4-input functions chosen for C1 and C2 are this design's own:
//   C1 = A&B | (A^B)&(C^D),  C2 = C&D.
//
// Interface (purely combinational):
//   x[5:0] = {F,E,D,C,B,A}; cin = carry from the previous adder on the chain;
//   hid    = that previous adder's top bit (= cin), passed out through the S cell;
//   cnt_lo = bits [1:0] of A+..+F; cout = bit [2] of A+..+F.
module red63 (
  input  logic [5:0] x,
  input  logic       cin,
  output logic       hid,
  output logic [1:0] cnt_lo,
  output logic       cout
);
  logic a, b, c, d, e, f;
  logic s, c1, c2;
  logic k_s, k_ef;

  assign {f, e, d, c, b, a} = x;

  // 4-input LUT functions
  assign s  = a ^ b ^ c ^ d;
  assign c1 = (a & b) | ((a ^ b) & (c ^ d));
  assign c2 = c & d;

  // carry-chain cells: sum = p^q^ci, carry = majority(p,q,ci)
  // cell S,S
  assign hid = s ^ s ^ cin;
  assign k_s = (s & s) | (s & cin) | (s & cin);
  // cell E,F
  assign cnt_lo[0] = e ^ f ^ k_s;
  assign k_ef      = (e & f) | (e & k_s) | (f & k_s);
  // cell C1,C2
  assign cnt_lo[1] = c1 ^ c2 ^ k_ef;
  assign cout      = (c1 & c2) | (c1 & k_ef) | (c2 & k_ef);
endmodule
