// Column front end: shared encoder, sparse encoder and B prefetch of one
// physical PE column.
//
// For one bit weight `bw` the column walks KT = dks*MP steps of its K range.
// In every step it reads KP INT8 multiplicands of row `m_row` from an A bank,
// encodes them (KP EN-T encoders, only digit bw is kept) and records which
// digits are non-zero. Steps whose digits are all zero are dropped at once;
// the others wait in a 2-entry queue. The current step's non-zero digits are
// issued one per cycle, lowest index first (sparse encoder), each together
// with a read of the matching B row (prefetch_b). A digit leaves only when
// the network grants its B read, so a bank conflict simply stalls it.
//
// Bank walk (paper: column mp starts its K loop at k = mp*dk so that columns
// sit in different banks): the column starts in bank `col_idx` at offset 0,
// advances the offset each step and moves to the next bank (mod MP) after
// dks steps. A word of an A bank is KP values of one row:
//   A address = m_row*dks + off.
//
// Interface: `start` (one cycle) begins a pass for `bw`, `m_row`, `nt`;
// `done` is high whenever the column is idle and no digit is on `sel_out`.
// `sel_out` (digit, valid) is aligned with the B row on the network's rdata.
//
// Lint notes: the encoders' all-digit outputs (all_dig) are not used,
// only the digit of the current bw is. The queue-depth assertion is
// clocked by clk and disabled by rst_n, which Verilator reports as a
// signal used both synchronously and asynchronously; it is a check only.
module column_frontend
  import tpe_pkg::*;
#(
  parameter int unsigned MP      = 32,
  parameter int unsigned KP      = 4,
  parameter int unsigned DKS_MAX = 4,
  parameter int unsigned M_MAX   = 128,
  parameter int unsigned NT_MAX  = 4,
  localparam int unsigned BKW = (MP > 1) ? $clog2(MP) : 1,
  localparam int unsigned OW  = (DKS_MAX > 1) ? $clog2(DKS_MAX) : 1,
  localparam int unsigned MW  = (M_MAX > 1) ? $clog2(M_MAX) : 1,
  localparam int unsigned NTW = (NT_MAX > 1) ? $clog2(NT_MAX) : 1,
  localparam int unsigned AAW = $clog2(M_MAX * DKS_MAX),
  localparam int unsigned BAW = $clog2(NT_MAX * DKS_MAX * KP),
  localparam int unsigned KTW = $clog2(DKS_MAX * MP + 1),
  localparam int unsigned IW  = (KP > 1) ? $clog2(KP) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [1:0]           bw,
  input  logic [MW-1:0]        m_row,
  input  logic [NTW-1:0]       nt,
  input  logic [OW:0]          dks,      // KP-steps per bank, 1..DKS_MAX
  input  logic [BKW-1:0]       col_idx,
  // A read port (through the network)
  output logic                 a_req,
  output logic [BKW-1:0]       a_bank,
  output logic [AAW-1:0]       a_addr,
  input  logic                 a_gnt,
  input  a_t [KP-1:0]          a_rdata,
  // B read port (through the network)
  output logic                 b_req,
  output logic [BKW-1:0]       b_bank,
  output logic [BAW-1:0]       b_addr,
  input  logic                 b_gnt,
  // to the PEs of this column
  output sel_t                 sel_out,
  output logic                 done
);
  typedef struct packed {
    logic [KP-1:0]          mask;
    digit_t [KP-1:0]        dig;
    logic [BKW-1:0]         bank;
    logic [OW-1:0]          off;
  } step_t;

  logic               busy;
  logic [1:0]         bw_q;
  logic [MW-1:0]      m_q;
  logic [NTW-1:0]     nt_q;
  logic [OW:0]        dks_q;
  logic [KTW-1:0]     fcnt;           // steps fetched
  logic [BKW-1:0]     f_bank;
  logic [OW-1:0]      f_off;
  logic               a_pend;         // an A word arrives this cycle
  logic [BKW-1:0]     p_bank;
  logic [OW-1:0]      p_off;
  step_t              q [2];          // step queue
  logic [1:0]         qcnt;
  step_t              cur;

  // ---- encode the arriving A word at bit weight bw ----
  step_t  enc;
  digit_t [KP-1:0][BW-1:0] all_dig;
  for (genvar i = 0; i < KP; i++) begin : g_enc
    ent_encoder u_enc (.a(a_rdata[i]), .bw(bw_q), .digits(all_dig[i]), .digit(enc.dig[i]));
    assign enc.mask[i] = (enc.dig[i] != '0);
  end
  assign enc.bank = p_bank;
  assign enc.off  = p_off;

  // ---- sparse encoder over the current step ----
  logic          sp_valid;
  logic [IW-1:0] sp_idx;
  logic [KP-1:0] sp_rest;
  sparse_encoder #(.KP(KP)) u_sparse (.mask(cur.mask), .valid(sp_valid), .idx(sp_idx), .rest(sp_rest));

  prefetch_b #(.KP(KP), .BKW(BKW), .OW(OW), .NTW(NTW), .BAW(BAW)) u_pref (
    .clk, .rst_n,
    .issue(sp_valid), .idx(sp_idx), .digit(cur.dig[sp_idx]),
    .bank(cur.bank), .off(cur.off), .nt(nt_q), .dks(dks_q),
    .b_req, .b_bank, .b_addr, .b_gnt, .sel_out);

  // current step is used up after this cycle
  logic cur_free, pop, push;
  assign cur_free = !sp_valid || (b_gnt && sp_rest == '0);
  assign pop      = cur_free && (qcnt != 0);
  assign push     = a_pend && (enc.mask != '0);

  // ---- A fetch: keep at most two steps queued or in flight ----
  assign a_req  = busy && (fcnt < KTW'(dks_q * MP)) &&
                  ((32'(qcnt) + 32'(a_pend) - 32'(pop)) < 2);
  assign a_bank = f_bank;
  assign a_addr = AAW'(m_q * dks_q + f_off);

  assign done = !busy && !sel_out.valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; bw_q <= '0; m_q <= '0; nt_q <= '0; dks_q <= '0;
      fcnt <= '0; f_bank <= '0; f_off <= '0;
      a_pend <= 1'b0; p_bank <= '0; p_off <= '0;
      q[0] <= '0; q[1] <= '0; qcnt <= '0; cur <= '0;
    end else if (start) begin
      busy <= 1'b1; bw_q <= bw; m_q <= m_row; nt_q <= nt; dks_q <= dks;
      fcnt <= '0; f_bank <= col_idx; f_off <= '0;
      a_pend <= 1'b0; qcnt <= '0; cur <= '0;
    end else if (busy) begin
      // fetch side
      a_pend <= a_req && a_gnt;
      if (a_req && a_gnt) begin
        p_bank <= f_bank;
        p_off  <= f_off;
        fcnt   <= fcnt + 1'b1;
        if (32'(f_off) == 32'(dks_q) - 1) begin
          f_off  <= '0;
          f_bank <= (32'(f_bank) == MP - 1) ? '0 : f_bank + 1'b1;
        end else begin
          f_off <= f_off + 1'b1;
        end
      end
      // issue side
      if (sp_valid && b_gnt) cur.mask <= sp_rest;
      if (pop) cur <= q[0];
      else if (cur_free) cur.mask <= '0;
      // queue
      unique case ({push, pop})
        2'b10: begin q[qcnt[0]] <= enc; qcnt <= qcnt + 1'b1; end
        2'b01: begin q[0] <= q[1]; qcnt <= qcnt - 1'b1; end
        2'b11: begin
          if (qcnt == 2'd1) q[0] <= enc;
          else begin q[0] <= q[1]; q[1] <= enc; end
        end
        default: ;
      endcase
      // finished: everything fetched, nothing queued or pending
      if (fcnt == KTW'(dks_q * MP) && !a_pend && !push && qcnt == 0 && cur_free)
        busy <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) qcnt <= 2'd2)
    else $error("column_frontend: step queue overflow");
endmodule
