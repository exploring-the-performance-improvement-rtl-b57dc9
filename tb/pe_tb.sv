// Self-checking test of the PE (CPPG + multiplexer): every B and every digit.
module pe_tb;
  import tpe_pkg::*;
  int checks = 0, failures = 0;
  digit_t sel; b_t b; pp_t pp;
  pe dut (.sel, .b, .pp);
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int v = -128; v < 128; v++)
      for (int d = -2; d <= 2; d++) begin
        b = b_t'(v); sel = digit_t'(d); #1;
        checks++;
        if (int'(pp) != d * v) begin failures++; $display("FAIL %0d*%0d = %0d", d, v, pp); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
