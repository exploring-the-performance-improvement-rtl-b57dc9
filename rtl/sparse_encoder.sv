// Sparse encoder: index of the next non-zero encoded digit.
//
// The paper's sparse() primitive returns the indices of the non-zero inputs,
// e.g. [1,3] = sparse([0,1,0,2]). In hardware the column consumes those
// indices one per clock, so this block is a priority encoder over the
// non-zero mask: it returns the lowest set index and the mask with that bit
// removed. The column register that holds the mask, fed back through `rest`,
// produces the index list in ascending order, one index per cycle.
//
// Purely combinational.
module sparse_encoder #(
  parameter int unsigned KP = 4,
  localparam int unsigned IW = (KP > 1) ? $clog2(KP) : 1
) (
  input  logic [KP-1:0] mask,
  output logic          valid,
  output logic [IW-1:0] idx,
  output logic [KP-1:0] rest
);
  always_comb begin
    valid = |mask;
    idx   = '0;
    for (int i = KP - 1; i >= 0; i--)
      if (mask[i]) idx = IW'(i);
    rest = mask;
    if (valid) rest[idx] = 1'b0;
  end
endmodule
