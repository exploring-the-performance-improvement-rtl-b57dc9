// Self-checking test of a memory bank: random writes, then reads with the
// one-cycle registered latency, against a model array.
module sram_bank_tb;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [15:0] wdata = 0, rdata;
  logic [15:0] model [64];
  sram_bank #(.DEPTH(64), .W(16)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = 16'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 200; t++) begin
      int a; a = $urandom % 64;
      @(negedge clk); re = 1; raddr = 6'(a);
      @(negedge clk); re = 0;
      checks++;
      if (rdata != model[a]) begin failures++; $display("FAIL addr %0d", a); end
      // the read data holds while no read is issued
      @(negedge clk);
      checks++;
      if (rdata != model[a]) begin failures++; $display("FAIL hold %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
