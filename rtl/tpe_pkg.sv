// Shared types and constants of the OPT4E tensor processing engine.
//
// The engine multiplies INT8 matrices by splitting every multiplicand A into
// four radix-4 signed digits (one per bit weight, bw = 0..3) and feeding only
// the non-zero digits to the processing elements. A digit is carried as a
// 3-bit two's complement number in -2..2. Its low two bits equal the 2-bit
// codes printed in the paper's encoding example (00 = 0, 01 = 1, 10 = 2,
// 11 = -1); the third bit is this design's addition, needed because the most
// significant digit of an INT8 value can also be -2 (for example -128) or 2.
package tpe_pkg;
  localparam int unsigned A_W   = 8;   // multiplicand width (INT8)
  localparam int unsigned B_W   = 8;   // multiplier width (INT8)
  localparam int unsigned BW    = 4;   // radix-4 digits per INT8 multiplicand
  localparam int unsigned PP_W  = 10;  // partial product width (|digit| <= 2)
  localparam int unsigned DIG_W = 3;   // signed digit width

  typedef logic signed [DIG_W-1:0] digit_t;
  typedef logic signed [PP_W-1:0]  pp_t;
  typedef logic signed [A_W-1:0]   a_t;
  typedef logic signed [B_W-1:0]   b_t;

  // One selected digit travelling with its prefetched B row.
  typedef struct packed {
    logic   valid;
    digit_t sel;
  } sel_t;
endpackage
