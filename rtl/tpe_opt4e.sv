// OPT4E tensor processing engine: C = A x B for INT8 A and B, INT32 C.
//
// Idea: every INT8 multiplicand A[m][k] is split into four radix-4 signed
// digits d_bw (EN-T encoding, bw = 0..3), so
//   C[m][n] = sum_bw 4^bw * sum_k d_bw(A[m][k]) * B[k][n].
// The engine runs one bit weight at a time. Within a bit weight only the
// non-zero digits are sent to the array, so a reduction over K costs about
// as many cycles as there are non-zero digits, not K. The multiply is
// therefore reduced to a CPPG + multiplexer per PE, and accumulation is done
// in carry-save form; the one carry-propagate add and the shift by 2*bw per
// output happen later in the SIMD core.
//
// Structure (default sizes as in the paper's OPT4E array):
//   * MP x NP = 32 x 32 PE groups of G = 4 PEs (4096 PEs), pe_array.
//   * MP*G = 128 column front ends (encoder + sparse encoder + prefetch B),
//     four per group column, each covering one quarter of K.
//   * A and B memories of G*MP banks each; bank (l, j) holds quarter l of K,
//     part j. Two networks on chip (one per operand and quarter) connect the
//     column front ends with the banks.
//   * sync_ctrl (loops over tiles and bit weights, sync of the columns) and
//     simd_core (add, shift, accumulate over bit weights).
//
// Memory layout the host must write (K = G*MP*KP*dks, dks = cfg_dks):
//   KQ = K/G; for k: l = k / KQ, r = k % KQ, j = r / (dks*KP),
//   off = (r % (dks*KP)) / KP, i = r % KP.
//   A bank l*MP+j, address m*dks + off, byte i   = A[m][k]
//   B bank l*MP+j, address nt*dks*KP + off*KP + i, byte np = B[k][nt*NP+np]
// A shorter K is padded with zero rows/columns; zero digits cost no cycles.
//
// Operation: write A and B, set cfg_*, pulse `start`. Results leave on the
// c_* stream (up to V per cycle, each with its global row and column) during
// the last bit-weight pass of each tile; `done` pulses at the end.
// Sizes of memories, the tile loop order and all port formats are this
// design's choices; the paper gives the array, the PE, the encoder/sparse
// encoder sharing, the bank staggering and the SIMD core's work.
module tpe_opt4e
  import tpe_pkg::*;
#(
  parameter int unsigned MP      = 32,
  parameter int unsigned NP      = 32,
  parameter int unsigned G       = 4,
  parameter int unsigned KP      = 4,
  parameter int unsigned ACC_W   = 32,
  parameter int unsigned V       = 32,
  parameter int unsigned DKS_MAX = 4,
  parameter int unsigned M_MAX   = 128,
  parameter int unsigned N_MAX   = 128,
  localparam int unsigned NT_MAX = N_MAX / NP,
  localparam int unsigned MT_MAX = M_MAX / MP,
  localparam int unsigned NCOL   = MP * G,
  localparam int unsigned BKW    = (MP > 1) ? $clog2(MP) : 1,
  localparam int unsigned GBW    = $clog2(G * MP),
  localparam int unsigned OW     = (DKS_MAX > 1) ? $clog2(DKS_MAX) : 1,
  localparam int unsigned MW     = (M_MAX > 1) ? $clog2(M_MAX) : 1,
  localparam int unsigned NW     = (N_MAX > 1) ? $clog2(N_MAX) : 1,
  localparam int unsigned MTW    = (MT_MAX > 1) ? $clog2(MT_MAX) : 1,
  localparam int unsigned NTW    = (NT_MAX > 1) ? $clog2(NT_MAX) : 1,
  localparam int unsigned AAW    = $clog2(M_MAX * DKS_MAX),
  localparam int unsigned BAW    = $clog2(NT_MAX * DKS_MAX * KP),
  localparam int unsigned EW     = $clog2(MP * NP + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host write port, A memory
  input  logic                     a_wr_en,
  input  logic [GBW-1:0]           a_wr_bank,
  input  logic [AAW-1:0]           a_wr_addr,
  input  a_t   [KP-1:0]            a_wr_data,
  // host write port, B memory
  input  logic                     b_wr_en,
  input  logic [GBW-1:0]           b_wr_bank,
  input  logic [BAW-1:0]           b_wr_addr,
  input  b_t   [NP-1:0]            b_wr_data,
  // command
  input  logic                     start,
  input  logic [MTW:0]             cfg_m_tiles,  // M / MP
  input  logic [NTW:0]             cfg_n_tiles,  // N / NP
  input  logic [OW:0]              cfg_dks,      // K / (G*MP*KP)
  output logic                     busy,
  output logic                     done,
  // results
  output logic [V-1:0]             c_valid,
  output logic [V-1:0][MW-1:0]     c_row,
  output logic [V-1:0][NW-1:0]     c_col,
  output logic [V-1:0][31:0]       c_data,
  // status
  output logic                     sync_wait,
  output logic                     simd_stall
);
  // ---------------- sequencer ----------------
  logic [NCOL-1:0] col_done;
  logic            col_start, clear, simd_go, simd_ready;
  logic [1:0]      bw;
  logic [MTW-1:0]  mt;
  logic [NTW-1:0]  nt;

  sync_ctrl #(.NCOL(NCOL), .MTW(MTW), .NTW(NTW)) u_sync (
    .clk, .rst_n, .start, .m_tiles(cfg_m_tiles), .n_tiles(cfg_n_tiles),
    .col_done, .simd_ready, .col_start, .bw, .mt, .nt, .clear, .simd_go,
    .busy, .done, .sync_wait, .simd_stall);

  // ---------------- column front ends ----------------
  // front end c = mp*G + l serves PE g = l of group column mp and reads the
  // banks of quarter l through network l (requester index mp).
  logic [G-1:0][MP-1:0]             a_req, a_gnt, b_req, b_gnt;
  logic [G-1:0][MP-1:0][BKW-1:0]    a_bank, b_bank;
  logic [G-1:0][MP-1:0][AAW-1:0]    a_addr;
  logic [G-1:0][MP-1:0][BAW-1:0]    b_addr;
  logic [G-1:0][MP-1:0][KP*8-1:0]   a_rd;
  logic [G-1:0][MP-1:0][NP*8-1:0]   b_rd;
  sel_t [MP-1:0][G-1:0]             sel;
  b_t   [MP-1:0][G-1:0][NP-1:0]     brow;

  for (genvar mp = 0; mp < MP; mp++) begin : g_mp
    for (genvar l = 0; l < G; l++) begin : g_l
      column_frontend #(.MP(MP), .KP(KP), .DKS_MAX(DKS_MAX), .M_MAX(M_MAX), .NT_MAX(NT_MAX)) u_col (
        .clk, .rst_n, .start(col_start), .bw,
        .m_row(MW'(32'(mt) * MP + mp)), .nt, .dks(cfg_dks), .col_idx(BKW'(mp)),
        .a_req(a_req[l][mp]), .a_bank(a_bank[l][mp]), .a_addr(a_addr[l][mp]),
        .a_gnt(a_gnt[l][mp]), .a_rdata(a_rd[l][mp]),
        .b_req(b_req[l][mp]), .b_bank(b_bank[l][mp]), .b_addr(b_addr[l][mp]),
        .b_gnt(b_gnt[l][mp]),
        .sel_out(sel[mp][l]), .done(col_done[mp*G+l]));
      assign brow[mp][l] = b_rd[l][mp];
    end
  end

  // ---------------- memories and networks ----------------
  for (genvar l = 0; l < G; l++) begin : g_q
    logic [MP-1:0]             a_re, b_re;
    logic [MP-1:0][AAW-1:0]    a_ra;
    logic [MP-1:0][BAW-1:0]    b_ra;
    logic [MP-1:0][KP*8-1:0]   a_bd;
    logic [MP-1:0][NP*8-1:0]   b_bd;

    noc_xbar #(.NREQ(MP), .NBANK(MP), .AW(AAW), .DW(KP*8)) u_noc_a (
      .clk, .rst_n, .req(a_req[l]), .req_bank(a_bank[l]), .req_addr(a_addr[l]),
      .gnt(a_gnt[l]), .rdata(a_rd[l]), .bank_re(a_re), .bank_addr(a_ra), .bank_rdata(a_bd));
    noc_xbar #(.NREQ(MP), .NBANK(MP), .AW(BAW), .DW(NP*8)) u_noc_b (
      .clk, .rst_n, .req(b_req[l]), .req_bank(b_bank[l]), .req_addr(b_addr[l]),
      .gnt(b_gnt[l]), .rdata(b_rd[l]), .bank_re(b_re), .bank_addr(b_ra), .bank_rdata(b_bd));

    for (genvar j = 0; j < MP; j++) begin : g_bank
      sram_bank #(.DEPTH(M_MAX * DKS_MAX), .W(KP*8)) u_a (
        .clk, .we(a_wr_en && 32'(a_wr_bank) == l*MP + j), .waddr(a_wr_addr), .wdata(a_wr_data),
        .re(a_re[j]), .raddr(a_ra[j]), .rdata(a_bd[j]));
      sram_bank #(.DEPTH(NT_MAX * DKS_MAX * KP), .W(NP*8)) u_b (
        .clk, .we(b_wr_en && 32'(b_wr_bank) == l*MP + j), .waddr(b_wr_addr), .wdata(b_wr_data),
        .re(b_re[j]), .raddr(b_ra[j]), .rdata(b_bd[j]));
    end
  end

  // ---------------- PE array ----------------
  logic [MP-1:0][NP-1:0][ACC_W-1:0] cap_s, cap_c;
  pe_array #(.MP(MP), .NP(NP), .G(G), .ACC_W(ACC_W)) u_array (
    .clk, .rst_n, .sel, .brow, .clear, .cap_s, .cap_c);

  // ---------------- SIMD vector core ----------------
  logic [V-1:0][EW-1:0]       s_idx;
  logic [MTW+NTW-1:0]         s_tag;
  simd_core #(.MP(MP), .NP(NP), .V(V), .ACC_W(ACC_W), .C_W(32), .TAG_W(MTW+NTW)) u_simd (
    .clk, .rst_n, .go(simd_go), .bw, .tag({mt, nt}), .cap_s, .cap_c,
    .ready(simd_ready), .c_valid, .c_idx(s_idx), .c_data, .c_tag(s_tag));

  always_comb
    for (int v = 0; v < V; v++) begin
      c_row[v] = MW'(32'(s_tag[MTW+NTW-1:NTW]) * MP + 32'(s_idx[v]) / NP);
      c_col[v] = NW'(32'(s_tag[NTW-1:0]) * NP + 32'(s_idx[v]) % NP);
    end
endmodule
