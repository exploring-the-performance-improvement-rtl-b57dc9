// Candidate partial product generator (CPPG).
//
// From the INT8 multiplier B it forms the candidates that a radix-4 digit can
// select: B, 2B, -B and -2B, each sign-extended to the 10-bit partial product
// width printed in the paper's OPT4C figure. (The digit 0 needs no candidate;
// the multiplexer in the PE outputs zero for it.) Combinational.
module cppg
  import tpe_pkg::*;
(
  input  b_t        b,
  output pp_t       pos1,
  output pp_t       pos2,
  output pp_t       neg1,
  output pp_t       neg2
);
  assign pos1 = pp_t'(b);
  assign pos2 = pp_t'(b) <<< 1;
  assign neg1 = -pp_t'(b);
  assign neg2 = -(pp_t'(b) <<< 1);
endmodule
