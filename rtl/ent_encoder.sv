// EN-T style radix-4 encoder for an INT8 multiplicand.
//
// The multiplicand A (two's complement) is rewritten as
//   A = d3*4^3 + d2*4^2 + d1*4^1 + d0*4^0
// with d0..d2 in {-1, 0, 1, 2} and d3 in {-2..2}. Walking from the least
// significant 2-bit slice upwards, slice value v = bits + carry_in; v = 3 is
// emitted as -1 and v = 4 as 0, both with a carry into the next slice. The top
// slice is read as signed and absorbs the last carry. This rule reproduces all
// encodings printed in the paper (91 -> {1,2,-1,-1}, 124 -> {2,0,-1,0},
// 39, 48, 60, 79); the carry rule itself is this design's reconstruction,
// since the paper cites the encoder rather than describing its gates.
//
// Purely combinational. `digits[i]` is the digit of bit weight 4^i; `digit`
// is the one selected by `bw`, the bit weight the array is working on.
module ent_encoder
  import tpe_pkg::*;
(
  input  a_t                a,
  input  logic [1:0]        bw,
  output digit_t [BW-1:0]   digits,
  output digit_t            digit
);
  always_comb begin
    logic       carry;
    logic [2:0] v;
    carry = 1'b0;
    for (int i = 0; i < BW - 1; i++) begin
      v = {1'b0, a[2*i+1 -: 2]} + {2'b00, carry};
      if (v >= 3'd3) begin
        digits[i] = digit_t'(v - 3'd4);   // 3 -> -1, 4 -> 0 (mod 8)
        carry     = 1'b1;
      end else begin
        digits[i] = digit_t'(v);
        carry     = 1'b0;
      end
    end
    // Most significant slice: signed value -2..1 plus carry.
    digits[BW-1] = digit_t'($signed(a[A_W-1 -: 2])) + digit_t'({2'b00, carry});
  end

  assign digit = digits[bw];
endmodule
