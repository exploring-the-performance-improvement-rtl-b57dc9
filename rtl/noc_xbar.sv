// Network on chip between PE columns and operand memory banks.
//
// A read crossbar: each of NREQ requesters asks for one word of one bank per
// cycle. A bank serves one request per cycle; when several requesters name
// the same bank the lowest-numbered one wins and the others see gnt = 0 and
// must repeat the request (a bank-conflict stall). The word of a granted
// request returns on `rdata[r]` one cycle after the grant, matching the
// registered read of sram_bank, and stays there until the next grant.
// The paper names the network and arranges the data so that columns rarely
// meet in one bank; the crossbar and its fixed-priority arbitration are this
// design's choice.
module noc_xbar #(
  parameter int unsigned NREQ  = 32,
  parameter int unsigned NBANK = 32,
  parameter int unsigned AW    = 9,
  parameter int unsigned DW    = 32,
  localparam int unsigned BKW  = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // requester side
  input  logic [NREQ-1:0]           req,
  input  logic [NREQ-1:0][BKW-1:0]  req_bank,
  input  logic [NREQ-1:0][AW-1:0]   req_addr,
  output logic [NREQ-1:0]           gnt,
  output logic [NREQ-1:0][DW-1:0]   rdata,
  // bank side
  output logic [NBANK-1:0]          bank_re,
  output logic [NBANK-1:0][AW-1:0]  bank_addr,
  input  logic [NBANK-1:0][DW-1:0]  bank_rdata
);
  logic [NREQ-1:0][BKW-1:0] src_q;

  always_comb begin
    bank_re   = '0;
    bank_addr = '0;
    gnt       = '0;
    for (int r = 0; r < NREQ; r++) begin
      if (req[r] && !bank_re[req_bank[r]]) begin
        bank_re[req_bank[r]]   = 1'b1;
        bank_addr[req_bank[r]] = req_addr[r];
        gnt[r]                 = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) src_q <= '0;
    else
      for (int r = 0; r < NREQ; r++)
        if (gnt[r]) src_q[r] <= req_bank[r];
  end

  always_comb
    for (int r = 0; r < NREQ; r++) rdata[r] = bank_rdata[src_q[r]];

  // A grant is only ever given to a requester that asked.
  always_comb
    for (int r = 0; r < NREQ; r++)
      assert (!gnt[r] || req[r]) else $error("noc_xbar: grant without request");
endmodule
