// Prefetch B: fetch only the B rows that a non-zero digit needs.
//
// The sparse encoder of a column gives the index `idx` (0..KP-1) of the next
// non-zero digit inside the current group of KP multiplicands. This block
// turns it into a read of the B bank that holds that reduction index k and
// keeps the digit aside for one cycle, so that the digit (`sel_out`) and the
// B row (returned by the network one cycle after the grant) reach the PEs of
// the column together. The paper states only that B is prefetched by the
// non-zero indices of A; the address arithmetic follows this design's bank
// layout:
//   B bank word = NP INT8 values of one row k and one column tile nt,
//   address     = nt * (dks*KP) + off*KP + idx,
// where `off` counts KP-steps inside the bank and dks is the number of
// KP-steps per bank.
module prefetch_b
  import tpe_pkg::*;
#(
  parameter int unsigned KP  = 4,
  parameter int unsigned BKW = 5,
  parameter int unsigned OW  = 2,   // width of the KP-step offset in a bank
  parameter int unsigned NTW = 2,   // width of the column-tile index
  parameter int unsigned BAW = 6,   // width of a B bank address
  localparam int unsigned IW = (KP > 1) ? $clog2(KP) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           issue,     // a non-zero digit is waiting
  input  logic [IW-1:0]  idx,
  input  digit_t         digit,
  input  logic [BKW-1:0] bank,
  input  logic [OW-1:0]  off,
  input  logic [NTW-1:0] nt,
  input  logic [OW:0]    dks,
  output logic           b_req,
  output logic [BKW-1:0] b_bank,
  output logic [BAW-1:0] b_addr,
  input  logic           b_gnt,
  output sel_t           sel_out
);
  assign b_req  = issue;
  assign b_bank = bank;
  assign b_addr = BAW'(nt * dks * KP + off * KP + idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel_out <= '0;
    else begin
      sel_out.valid <= issue && b_gnt;
      sel_out.sel   <= (issue && b_gnt) ? digit : '0;
    end
  end
endmodule
