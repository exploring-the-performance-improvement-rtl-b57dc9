// Self-checking test of the sparse encoder: every mask for KP = 4 and KP = 8;
// the index list is also walked to check that it matches sparse() of the paper,
// e.g. [1,3] = sparse([0,1,0,2]).
module sparse_encoder_tb;
  int checks = 0, failures = 0;
  logic [3:0] m4, r4; logic v4; logic [1:0] i4;
  logic [7:0] m8, r8; logic v8; logic [2:0] i8;

  sparse_encoder #(.KP(4)) dut4 (.mask(m4), .valid(v4), .idx(i4), .rest(r4));
  sparse_encoder #(.KP(8)) dut8 (.mask(m8), .valid(v8), .idx(i8), .rest(r8));

  task automatic chk(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int m = 0; m < 16; m++) begin
      int lo; lo = -1;
      for (int i = 3; i >= 0; i--) if (m[i]) lo = i;
      m4 = 4'(m); #1;
      chk(v4 == (m != 0), "valid4");
      if (m != 0) chk(int'(i4) == lo && r4 == (4'(m) & ~(4'b1 << lo)), $sformatf("mask %b", m));
    end
    for (int m = 0; m < 256; m++) begin
      int lo; lo = -1;
      for (int i = 7; i >= 0; i--) if (m[i]) lo = i;
      m8 = 8'(m); #1;
      chk(v8 == (m != 0), "valid8");
      if (m != 0) chk(int'(i8) == lo && r8 == (8'(m) & ~(8'b1 << lo)), $sformatf("mask8 %b", m));
    end
    // walk [0,1,0,2] -> indices 1 then 3
    m4 = 4'b1010; #1;
    chk(v4 && i4 == 2'd1, "walk first");
    m4 = r4; #1;
    chk(v4 && i4 == 2'd3, "walk second");
    m4 = r4; #1;
    chk(!v4, "walk end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
