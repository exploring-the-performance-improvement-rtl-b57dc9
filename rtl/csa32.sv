// One row of 3:2 carry-save compressors (full adders without a carry chain).
//
// Three W-bit operands become a sum and a carry vector with
// x + y + z = sum + carry (mod 2^W). The carry is returned already shifted
// left by one place. Delay is one full-adder cell whatever W is.
//
// Lint note: the majority bit of the MSB is computed but not used, since
// the shifted carry drops it (arithmetic is modulo 2^W). Verilator lists
// it as an unused bit; it is intended.
module csa32 #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] z,
  output logic [W-1:0] sum,
  output logic [W-1:0] carry
);
  logic [W-1:0] maj;
  assign sum   = x ^ y ^ z;
  assign maj   = (x & y) | (x & z) | (y & z);
  assign carry = {maj[W-2:0], 1'b0};
endmodule
