// Self-checking test of the PE array at MP = 2, NP = 3, G = 4: random digit
// streams per (column, PE) and random B rows; after each clear the capture
// registers of group (mp, np) must hold sum of digit*B[np] over its column's
// four streams since the previous clear. Invalid slots must add nothing.
module pe_array_tb;
  import tpe_pkg::*;
  localparam int MP = 2, NP = 3, G = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear;
  sel_t [MP-1:0][G-1:0] sel;
  b_t [MP-1:0][G-1:0][NP-1:0] brow;
  logic [MP-1:0][NP-1:0][31:0] cap_s, cap_c;
  int acc [MP][NP];

  pe_array #(.MP(MP), .NP(NP), .G(G), .ACC_W(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    sel = '0; brow = '0; clear = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    foreach (acc[i, j]) acc[i][j] = 0;
    for (int blk = 0; blk < 20; blk++) begin
      int len; len = 1 + $urandom % 30;
      for (int t = 0; t < len; t++) begin
        for (int mp = 0; mp < MP; mp++) for (int g = 0; g < G; g++) begin
          sel[mp][g].valid = $urandom % 3 != 0;
          sel[mp][g].sel   = digit_t'(int'($urandom % 5) - 2);
          for (int np = 0; np < NP; np++) begin
            brow[mp][g][np] = b_t'($urandom);
            if (sel[mp][g].valid) acc[mp][np] += int'(sel[mp][g].sel) * int'(brow[mp][g][np]);
          end
        end
        @(negedge clk);
      end
      sel = '0;
      clear = 1; @(negedge clk); clear = 0;
      for (int mp = 0; mp < MP; mp++) for (int np = 0; np < NP; np++) begin
        checks++;
        if (int'(cap_s[mp][np] + cap_c[mp][np]) != acc[mp][np]) begin
          failures++; $display("FAIL blk %0d group %0d,%0d", blk, mp, np);
        end
        acc[mp][np] = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
