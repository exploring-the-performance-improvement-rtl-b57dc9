// Self-checking test of the network on chip: 8 requesters, 4 banks modelled
// in the testbench with a registered read. Checks the fixed-priority grant
// (lowest requester wins a bank), one grant per bank, bank read enables and
// that each granted requester gets its word one cycle later.
module noc_xbar_tb;
  int checks = 0, failures = 0, conflicts = 0;
  localparam int NR = 8, NB = 4;
  logic clk = 0, rst_n = 0;
  logic [NR-1:0] req, gnt;
  logic [NR-1:0][1:0] req_bank;
  logic [NR-1:0][3:0] req_addr;
  logic [NR-1:0][15:0] rdata;
  logic [NB-1:0] bank_re;
  logic [NB-1:0][3:0] bank_addr;
  logic [NB-1:0][15:0] bank_rdata;

  noc_xbar #(.NREQ(NR), .NBANK(NB), .AW(4), .DW(16)) dut (.*);
  always #5 clk = ~clk;

  // bank model: word = {bank, addr}
  always_ff @(posedge clk)
    for (int j = 0; j < NB; j++) if (bank_re[j]) bank_rdata[j] <= {8'(j), 8'(bank_addr[j])};

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [NR-1:0] exp_g;
    logic [NR-1:0][15:0] exp_d;
    logic [NR-1:0] g_q;
    req = '0; req_bank = '0; req_addr = '0; bank_rdata = '0; g_q = '0; exp_d = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      logic [NB-1:0] taken;
      @(negedge clk);
      // words granted in the previous cycle are visible now
      for (int r = 0; r < NR; r++) if (g_q[r]) begin
        checks++;
        if (rdata[r] != exp_d[r]) begin failures++; $display("FAIL data r=%0d", r); end
      end
      for (int r = 0; r < NR; r++) begin
        req[r] = $urandom % 2; req_bank[r] = 2'($urandom); req_addr[r] = 4'($urandom);
      end
      #1;
      taken = '0; exp_g = '0;
      for (int r = 0; r < NR; r++)
        if (req[r] && !taken[req_bank[r]]) begin taken[req_bank[r]] = 1; exp_g[r] = 1; end
        else if (req[r]) conflicts++;
      checks++;
      if (gnt != exp_g) begin failures++; $display("FAIL grant %b vs %b", gnt, exp_g); end
      checks++;
      if (bank_re != taken) begin failures++; $display("FAIL bank_re"); end
      for (int r = 0; r < NR; r++) if (exp_g[r]) exp_d[r] = {8'(req_bank[r]), 8'(req_addr[r])};
      g_q = exp_g;
    end
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no conflict exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
