// One bank of the operand memory (A or B).
//
// A plain single-port-read, single-port-write array: the host writes one
// word per cycle, the network on chip reads one word per cycle. The read is
// registered: data addressed in cycle t is on `rdata` in cycle t+1 and stays
// there until the next read. The paper draws the banks (Bank 0 .. Bank i)
// but gives no size, port count or latency; all of those are this design's
// choice. Written as an array so that synthesis can map it to an SRAM macro.
module sram_bank #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned W     = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
