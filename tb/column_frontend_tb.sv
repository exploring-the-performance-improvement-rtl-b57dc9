// Self-checking test of a column front end (MP = 4 banks, KP = 4, dks = 2).
// The A banks are modelled here with a registered read. For several passes
// (bit weight, row, column tile, start bank, with and without refused grants)
// the test works out the expected list of non-zero digits in bank-walk
// order and checks every B request (bank, address) and every digit on
// sel_out against it, that zero digits are skipped, and, when every request
// is granted, that the pass takes no more cycles than non-zero digits plus
// all-zero steps plus a small fixed overhead.
module column_frontend_tb;
  import tpe_pkg::*;
  localparam int MP = 4, KP = 4, DKS = 2, M_MAX = 8, NT_MAX = 2;
  int checks = 0, failures = 0, skipped_zero = 0, stalls = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [1:0] bw; logic [2:0] m_row; logic [0:0] nt; logic [1:0] dks; logic [1:0] col_idx;
  logic a_req, a_gnt, b_req, b_gnt, done;
  logic [1:0] a_bank, b_bank; logic [3:0] a_addr; logic [4:0] b_addr;
  a_t [KP-1:0] a_rdata; sel_t sel_out;
  a_t amem [MP][M_MAX*DKS][KP];
  logic deny;

  column_frontend #(.MP(MP), .KP(KP), .DKS_MAX(DKS), .M_MAX(M_MAX), .NT_MAX(NT_MAX)) dut (.*);
  always #5 clk = ~clk;

  assign a_gnt = a_req && !(deny && ($urandom % 3 == 0));
  assign b_gnt = b_req && !(deny && ($urandom % 3 == 0));
  always_ff @(posedge clk)
    if (a_req && a_gnt) for (int i = 0; i < KP; i++) a_rdata[i] <= amem[a_bank][a_addr][i];

  // expected stream
  int exp_bank [$], exp_addr [$], exp_dig [$], dig_q [$];

  function automatic int digit_of(int v, int w);
    int u, c, s, d;
    u = v & 255; c = 0; d = 0;
    for (int i = 0; i <= w; i++) begin
      if (i == 3) begin s = (u >> 6) & 3; if (s >= 2) s -= 4; d = s + c; end
      else begin s = ((u >> (2*i)) & 3) + c; if (s >= 3) begin d = s - 4; c = 1; end else begin d = s; c = 0; end end
    end
    return d;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (b_req && b_gnt) begin
      checks++;
      if (exp_bank.size() == 0) begin failures++; $display("FAIL unexpected request"); end
      else begin
        if (int'(b_bank) != exp_bank[0] || int'(b_addr) != exp_addr[0]) begin
          failures++; $display("FAIL request bank %0d addr %0d, expected %0d %0d", b_bank, b_addr, exp_bank[0], exp_addr[0]);
        end
        dig_q.push_back(exp_dig[0]);
        void'(exp_bank.pop_front()); void'(exp_addr.pop_front()); void'(exp_dig.pop_front());
      end
    end
    if (b_req && !b_gnt) stalls++;
    if (sel_out.valid) begin
      checks++;
      if (dig_q.size() == 0 || int'(sel_out.sel) != dig_q[0]) begin failures++; $display("FAIL digit"); end
      if (dig_q.size() != 0) void'(dig_q.pop_front());
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int j = 0; j < MP; j++)
      for (int w = 0; w < M_MAX*DKS; w++)
        for (int i = 0; i < KP; i++) begin
          int r;
          r = int'($urandom % 256) - 128;
          if ($urandom % 4 == 0) r = 0;
          amem[j][w][i] = a_t'(r);
        end
    // one all-zero word in every bank, row 1 offset 0
    for (int j = 0; j < MP; j++) for (int i = 0; i < KP; i++) amem[j][1*DKS][i] = 0;
    deny = 0; bw = 0; m_row = 0; nt = 0; dks = 2'(DKS); col_idx = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 16; pass++) begin
      int nnz, zsteps, cyc;
      @(negedge clk);
      bw = 2'(pass % 4); m_row = 3'(pass % 3); nt = 1'(pass / 8); col_idx = 2'(pass % MP);
      deny = (pass >= 12);
      nnz = 0; zsteps = 0;
      for (int kt = 0; kt < MP*DKS; kt++) begin
        int s, bk, off, any;
        s = (int'(col_idx) * DKS + kt) % (MP*DKS); bk = s / DKS; off = s % DKS; any = 0;
        for (int i = 0; i < KP; i++) begin
          int d; d = digit_of(int'(amem[bk][int'(m_row)*DKS+off][i]), int'(bw));
          if (d != 0) begin
            exp_bank.push_back(bk); exp_addr.push_back(int'(nt)*DKS*KP + off*KP + i); exp_dig.push_back(d);
            nnz++; any = 1;
          end else skipped_zero++;
        end
        if (!any) zsteps++;
      end
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (exp_bank.size() != 0 || dig_q.size() != 0) begin failures++; $display("FAIL pass %0d left %0d", pass, exp_bank.size()); end
      if (!deny) begin
        checks++;
        if (cyc > nnz + zsteps + 6) begin failures++; $display("FAIL pass %0d took %0d cycles for %0d digits", pass, cyc, nnz); end
      end
    end
    checks++;
    if (skipped_zero == 0 || stalls == 0) begin failures++; $display("FAIL mechanism not exercised"); end
    $display("zero digits skipped %0d, refused B requests %0d", skipped_zero, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
