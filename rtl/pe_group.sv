// OPT4E PE group (PE_g): G PEs sharing one compressor tree and one accumulator.
//
// Each of the G PEs turns its (digit, B) pair into a partial product. The G
// partial products, sign-extended to ACC_W, and the accumulator's sum and
// carry registers enter one 6-2 compressor tree (G = 4 as in the paper) whose
// outputs are written back to the registers every cycle. The registers
// therefore hold acc_s + acc_c = sum of all partial products since `clear`.
// No carry-propagate addition is done here; the SIMD core adds acc_s and
// acc_c once per output.
//
// Timing: sel/b are taken in the cycle they are presented and are visible in
// acc_s/acc_c one cycle later. `clear` restarts the sum: the partial products
// presented in the same cycle become the first terms of the new sum.
// The capture register (cap_s/cap_c, loaded together with `clear`) holds the
// finished sum for the SIMD core while the group already works on the next
// bit weight; this extra register is this design's choice.
module pe_group
  import tpe_pkg::*;
#(
  parameter int unsigned G     = 4,
  parameter int unsigned ACC_W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  digit_t [G-1:0]      sel,
  input  b_t     [G-1:0]      b,
  input  logic                clear,
  output logic   [ACC_W-1:0]  acc_s,
  output logic   [ACC_W-1:0]  acc_c,
  output logic   [ACC_W-1:0]  cap_s,
  output logic   [ACC_W-1:0]  cap_c
);
  pp_t [G-1:0]             pp;
  logic [5:0][ACC_W-1:0]   ops;
  logic [ACC_W-1:0]        nxt_s, nxt_c;

  for (genvar g = 0; g < G; g++) begin : g_pe
    pe u_pe (.sel(sel[g]), .b(b[g]), .pp(pp[g]));
  end

  always_comb begin
    ops = '0;
    for (int g = 0; g < G; g++) ops[g] = ACC_W'(signed'(pp[g]));
    ops[4] = clear ? '0 : acc_s;
    ops[5] = clear ? '0 : acc_c;
  end

  compressor_6_2 #(.W(ACC_W)) u_tree (.in(ops), .sum(nxt_s), .carry(nxt_c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_s <= '0;
      acc_c <= '0;
      cap_s <= '0;
      cap_c <= '0;
    end else begin
      acc_s <= nxt_s;
      acc_c <= nxt_c;
      if (clear) begin
        cap_s <= acc_s;
        cap_c <= acc_c;
      end
    end
  end

  initial assert (G == 4) else $error("pe_group: the 6-2 tree takes exactly 4 partial products");
endmodule
