// Self-checking test of the SIMD core at MP = 2, NP = 4, V = 3 (8 outputs,
// three per cycle, last batch partial). Four passes (bw = 0..3) over random
// carry-save pairs; every output must equal sum_bw (s+c) << 2*bw, appear
// exactly once, carry the tile tag, and a pass must take ceil(8/3) = 3 cycles.
module simd_core_tb;
  localparam int MP = 2, NP = 4, V = 3, N = MP * NP;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, go = 0, ready;
  logic [1:0] bw; logic [3:0] tag, c_tag;
  logic [MP-1:0][NP-1:0][31:0] cap_s, cap_c;
  logic [V-1:0] c_valid; logic [V-1:0][3:0] c_idx; logic [V-1:0][31:0] c_data;
  logic [31:0] expc [N];
  int seen [N];

  simd_core #(.MP(MP), .NP(NP), .V(V), .ACC_W(32), .C_W(32), .TAG_W(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n)
    for (int v = 0; v < V; v++) if (c_valid[v]) begin
      checks++;
      if (c_data[v] != expc[c_idx[v]] || c_tag != tag) begin
        failures++; $display("FAIL out %0d: %0h vs %0h", c_idx[v], c_data[v], expc[c_idx[v]]);
      end
      seen[c_idx[v]]++;
    end

  initial begin
    bw = 0; tag = 4'd9; cap_s = '0; cap_c = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int tile = 0; tile < 3; tile++) begin
      foreach (expc[i]) begin expc[i] = 0; seen[i] = 0; end
      for (int b = 0; b < 4; b++) begin
        int cyc;
        @(negedge clk);
        for (int i = 0; i < N; i++) begin
          cap_s[i / NP][i % NP] = $urandom;
          cap_c[i / NP][i % NP] = $urandom;
          expc[i] += (cap_s[i / NP][i % NP] + cap_c[i / NP][i % NP]) << (2 * b);
        end
        bw = 2'(b); go = 1; @(negedge clk); go = 0;
        cyc = 0;
        while (!ready) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != 3) begin failures++; $display("FAIL pass took %0d cycles", cyc); end
      end
      @(negedge clk);
      foreach (seen[i]) begin
        checks++;
        if (seen[i] != 1) begin failures++; $display("FAIL output %0d seen %0d times", i, seen[i]); end
      end
      tag = tag + 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
