// Self-checking test of the CPPG: all 256 values of B.
module cppg_tb;
  import tpe_pkg::*;
  int checks = 0, failures = 0;
  b_t b; pp_t pos1, pos2, neg1, neg2;
  cppg dut (.b, .pos1, .pos2, .neg1, .neg2);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int v = -128; v < 128; v++) begin
      b = b_t'(v); #1;
      checks++;
      if (int'(pos1) != v || int'(pos2) != 2*v || int'(neg1) != -v || int'(neg2) != -2*v) begin
        failures++; $display("FAIL b=%0d: %0d %0d %0d %0d", v, pos1, pos2, neg1, neg2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
