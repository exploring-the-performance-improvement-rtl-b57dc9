// Self-checking test of a PE group: random digit/B streams into the four PEs;
// acc_s + acc_c must track the running sum of digit*B, `clear` must restart
// it and copy the finished sum into the capture registers.
module pe_group_tb;
  import tpe_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear;
  digit_t [3:0] sel; b_t [3:0] b;
  logic [31:0] acc_s, acc_c, cap_s, cap_c;
  int ref_acc, ref_cap;

  pe_group #(.G(4), .ACC_W(32)) dut (.clk, .rst_n, .sel, .b, .clear, .acc_s, .acc_c, .cap_s, .cap_c);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    sel = '0; b = '0; clear = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ref_acc = 0; ref_cap = 0;
    for (int t = 0; t < 1000; t++) begin
      int add;
      @(negedge clk);
      clear = ($urandom % 50) == 0;
      add = 0;
      for (int g = 0; g < 4; g++) begin
        int d; d = int'($urandom % 5) - 2;
        sel[g] = digit_t'(d);
        b[g]   = b_t'($urandom);
        add   += d * int'(b[g]);
      end
      @(posedge clk);
      if (clear) begin ref_cap = ref_acc; ref_acc = add; end
      else ref_acc += add;
      #1;
      checks++;
      if (int'(acc_s + acc_c) != ref_acc) begin failures++; $display("FAIL acc t=%0d %0d vs %0d", t, int'(acc_s+acc_c), ref_acc); end
      checks++;
      if (int'(cap_s + cap_c) != ref_cap) begin failures++; $display("FAIL cap t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
