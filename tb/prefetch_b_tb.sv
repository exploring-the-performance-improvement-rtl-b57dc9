// Self-checking test of prefetch B: the B address formula
// nt*dks*KP + off*KP + idx, the bank pass-through, and that the digit
// appears on sel_out exactly one cycle after a granted request (and not
// after a refused one).
module prefetch_b_tb;
  import tpe_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic issue, b_req, b_gnt;
  logic [1:0] idx; digit_t digit;
  logic [4:0] bank, b_bank; logic [1:0] off; logic [1:0] nt; logic [2:0] dks;
  logic [5:0] b_addr; sel_t sel_out;

  prefetch_b #(.KP(4), .BKW(5), .OW(2), .NTW(2), .BAW(6)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic exp_v; digit_t exp_d;
    issue = 0; b_gnt = 0; idx = 0; digit = 0; bank = 0; off = 0; nt = 0; dks = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      issue = $urandom % 2; b_gnt = $urandom % 2; idx = 2'($urandom); digit = digit_t'(int'($urandom % 5) - 2);
      bank = 5'($urandom); dks = 3'(1 + $urandom % 4); off = 2'($urandom % dks); nt = 2'($urandom % 2);
      #1;
      checks++;
      if (b_req != issue || b_bank != bank || int'(b_addr) != (int'(nt) * int'(dks) * 4 + int'(off) * 4 + int'(idx)) % 64) begin
        failures++; $display("FAIL addr t=%0d", t);
      end
      exp_v = issue && b_gnt; exp_d = exp_v ? digit : '0;
      @(posedge clk); #1;
      checks++;
      if (sel_out.valid != exp_v || sel_out.sel != exp_d) begin failures++; $display("FAIL align t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
