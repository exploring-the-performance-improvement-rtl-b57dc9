// Self-checking test of the 6-2 compressor tree: random and corner operands;
// sum + carry must equal the sum of the six inputs modulo 2^32.
module compressor_6_2_tb;
  int checks = 0, failures = 0;
  logic [5:0][31:0] in; logic [31:0] sum, carry;
  compressor_6_2 #(.W(32)) dut (.in, .sum, .carry);
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [31:0] ref_sum;
      ref_sum = '0;
      for (int i = 0; i < 6; i++) begin
        in[i] = (t < 16) ? ((t[i % 4]) ? 32'hFFFF_FFFF : 32'h0) : $urandom;
        ref_sum += in[i];
      end
      #1;
      checks++;
      if (sum + carry != ref_sum) begin failures++; $display("FAIL t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
