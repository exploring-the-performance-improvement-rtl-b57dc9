// Self-checking test of the sequencer at 8 columns, 2 row tiles, 2 column
// tiles. Columns finish after random delays and the SIMD core is modelled as
// busy for a random time. Checks the (mt, nt, bw) order of the passes, that
// no pass is handed over before every column is done and the SIMD core is
// ready, that sync waits and SIMD stalls both happen, and the final done.
module sync_ctrl_tb;
  localparam int NCOL = 8;
  int checks = 0, failures = 0, syncs = 0, stalls = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [1:0] m_tiles, n_tiles;
  logic [NCOL-1:0] col_done;
  logic simd_ready, col_start, clear, simd_go, busy, done, sync_wait, simd_stall;
  logic [1:0] bw; logic [0:0] mt, nt;
  int left [NCOL];
  int simd_left;

  sync_ctrl #(.NCOL(NCOL), .MTW(1), .NTW(1)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // column and SIMD models
  always @(posedge clk) begin
    if (col_start) foreach (left[i]) left[i] = 1 + $urandom % 20;
    else foreach (left[i]) if (left[i] > 0) left[i]--;
    if (simd_go) simd_left = 10 + $urandom % 25;
    else if (simd_left > 0) simd_left--;
  end
  always_comb begin
    foreach (left[i]) col_done[i] = (left[i] == 0);
    simd_ready = (simd_left == 0);
  end

  initial begin
    int exp_pass;
    foreach (left[i]) left[i] = 0;
    simd_left = 0; m_tiles = 2; n_tiles = 2;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    exp_pass = 0;
    while (!done) begin
      @(posedge clk); #1;
      if (sync_wait) syncs++;
      if (simd_stall) stalls++;
      if (clear) begin
        checks++;
        if (!(&col_done) || !simd_ready) begin failures++; $display("FAIL early hand-over"); end
        checks++;
        if (int'(bw) != exp_pass % 4 || int'(nt) != (exp_pass / 4) % 2 || int'(mt) != exp_pass / 8) begin
          failures++; $display("FAIL pass %0d order mt=%0d nt=%0d bw=%0d", exp_pass, mt, nt, bw);
        end
        exp_pass++;
      end
    end
    checks++;
    if (exp_pass != 16) begin failures++; $display("FAIL %0d passes", exp_pass); end
    checks++;
    if (syncs == 0 || stalls == 0) begin failures++; $display("FAIL sync %0d stall %0d", syncs, stalls); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
