// OPT4E processing element: CPPG plus multiplexer.
//
// After the encoder and sparse encoder have been moved out of the array, a PE
// is only the candidate generator and a multiplexer: the 3-bit digit `sel`
// (from the column's shared encoder) picks which candidate of B becomes the
// partial product. `sel` = 0 (also used for "no digit this cycle") gives 0.
// The partial product is not shifted by the bit weight: that shift is done
// once per output by the SIMD core. Combinational; the registers on `sel`
// and `b` sit in the column front end.
module pe
  import tpe_pkg::*;
(
  input  digit_t sel,
  input  b_t     b,
  output pp_t    pp
);
  pp_t pos1, pos2, neg1, neg2;

  cppg u_cppg (.b(b), .pos1(pos1), .pos2(pos2), .neg1(neg1), .neg2(neg2));

  always_comb begin
    unique case (sel)
      3'sd1:   pp = pos1;
      3'sd2:   pp = pos2;
      -3'sd1:  pp = neg1;
      -3'sd2:  pp = neg2;
      default: pp = '0;
    endcase
  end
endmodule
