// 6-2 compressor tree.
//
// Reduces six W-bit operands to a sum and a carry vector whose total equals
// the sum of the six (mod 2^W). In the OPT4E PE group its inputs are the four
// partial products of the group's PEs and the accumulator's own sum and carry,
// so the accumulation is done in carry-save form and its delay does not grow
// with W (the paper's point against a carry-propagate accumulator).
// Structure (this design's choice; the paper names the tree, not its cells):
// two 3:2 rows take 6 -> 4, then a 4-2 stage of two 3:2 rows takes 4 -> 2.
// Combinational.
module compressor_6_2 #(
  parameter int unsigned W = 32
) (
  input  logic [5:0][W-1:0] in,
  output logic [W-1:0]      sum,
  output logic [W-1:0]      carry
);
  logic [W-1:0] s0, c0, s1, c1, s2, c2;

  csa32 #(.W(W)) u_l1a (.x(in[0]), .y(in[1]), .z(in[2]), .sum(s0), .carry(c0));
  csa32 #(.W(W)) u_l1b (.x(in[3]), .y(in[4]), .z(in[5]), .sum(s1), .carry(c1));
  csa32 #(.W(W)) u_l2  (.x(s0),    .y(c0),    .z(s1),    .sum(s2), .carry(c2));
  csa32 #(.W(W)) u_l3  (.x(s2),    .y(c2),    .z(c1),    .sum(sum), .carry(carry));
endmodule
