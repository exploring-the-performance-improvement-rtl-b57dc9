// Self-checking test of the EN-T encoder: all 256 INT8 values.
// Checks that the digits rebuild the value, that each digit lies in its
// range, that the output for `bw` is digit bw, the worked examples
// (91, 124, 39, 48, 60, 79) and the histogram of non-zero digits.
module ent_encoder_tb;
  import tpe_pkg::*;
  int checks = 0, failures = 0;
  a_t a; logic [1:0] bw; digit_t [BW-1:0] digits; digit_t digit;
  int hist [5];

  ent_encoder dut (.a, .bw, .digits, .digit);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic expect_digits(int val, int d3, int d2, int d1, int d0);
    a = a_t'(val); bw = 0; #1;
    chk(int'(digits[3]) == d3 && int'(digits[2]) == d2 && int'(digits[1]) == d1 && int'(digits[0]) == d0,
        $sformatf("example %0d -> %0d %0d %0d %0d", val, digits[3], digits[2], digits[1], digits[0]));
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (hist[i]) hist[i] = 0;
    for (int v = -128; v < 128; v++) begin
      int s, nz;
      a = a_t'(v);
      for (int b = 0; b < 4; b++) begin
        bw = 2'(b); #1;
        chk(digit == digits[b], "digit select");
      end
      s = 0; nz = 0;
      for (int i = 0; i < 4; i++) begin
        s += int'(digits[i]) * (1 << (2*i));
        if (digits[i] != 0) nz++;
        if (i < 3) chk(digits[i] >= -1 && digits[i] <= 2, $sformatf("range low digit %0d of %0d", i, v));
        else       chk(digits[i] >= -2 && digits[i] <= 2, $sformatf("range top digit of %0d", v));
      end
      chk(s == v, $sformatf("value %0d rebuilt as %0d", v, s));
      hist[nz]++;
    end
    expect_digits(91, 1, 2, -1, -1);
    expect_digits(124, 2, 0, -1, 0);
    expect_digits(39, 0, 2, 2, -1);
    expect_digits(48, 1, -1, 0, 0);
    expect_digits(60, 1, 0, -1, 0);
    expect_digits(79, 1, 1, 0, -1);
    // histogram of non-zero digits over INT8 (4,3,2,1,0 digits)
    chk(hist[4] == 81 && hist[3] == 108 && hist[2] == 54 && hist[1] == 12 && hist[0] == 1,
        $sformatf("histogram %0d %0d %0d %0d %0d", hist[4], hist[3], hist[2], hist[1], hist[0]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
