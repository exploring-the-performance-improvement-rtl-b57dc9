// OPT4E PE array: MP group columns by NP group rows of PE groups.
//
// Group column mp is fed by G column front ends (one per PE of a group),
// each delivering one (digit, B row) pair per cycle. PE group (mp, np) takes
// digit g and byte np of B row g for each g, so the four PEs of a group
// consume four non-zero partial products of the same output C[m][n] per
// cycle and reduce them in the group's shared 6-2 compressor tree. The whole
// array is cleared at once (after a sync); the finished carry-save sums of
// all groups stay in the capture registers for the SIMD core.
//
// Lint note: the groups' running accumulators acc_s/acc_c are left
// unread here (only the capture registers leave the array); Verilator
// reports them as unused signals.
module pe_array
  import tpe_pkg::*;
#(
  parameter int unsigned MP    = 32,
  parameter int unsigned NP    = 32,
  parameter int unsigned G     = 4,
  parameter int unsigned ACC_W = 32
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  sel_t [MP-1:0][G-1:0]                  sel,
  input  b_t   [MP-1:0][G-1:0][NP-1:0]          brow,
  input  logic                                  clear,
  output logic [MP-1:0][NP-1:0][ACC_W-1:0]      cap_s,
  output logic [MP-1:0][NP-1:0][ACC_W-1:0]      cap_c
);
  for (genvar mp = 0; mp < MP; mp++) begin : g_col
    digit_t [G-1:0] dsel;
    for (genvar g = 0; g < G; g++) begin : g_sel
      assign dsel[g] = sel[mp][g].valid ? sel[mp][g].sel : '0;
    end
    for (genvar np = 0; np < NP; np++) begin : g_row
      b_t [G-1:0] bg;
      logic [ACC_W-1:0] acc_s, acc_c;
      for (genvar g = 0; g < G; g++) begin : g_b
        assign bg[g] = brow[mp][g][np];
      end
      pe_group #(.G(G), .ACC_W(ACC_W)) u_grp (
        .clk, .rst_n, .sel(dsel), .b(bg), .clear,
        .acc_s, .acc_c, .cap_s(cap_s[mp][np]), .cap_c(cap_c[mp][np]));
    end
  end
endmodule
