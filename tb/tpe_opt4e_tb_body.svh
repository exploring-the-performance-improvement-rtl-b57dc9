// Body shared by the end-to-end testbenches of tpe_opt4e. The including
// module defines MP, NP, G, KP, V, DKS_MAX, M_MAX, N_MAX, the list of runs
// REQUIRE_ALL (fail if a mechanism never happened), the list of runs
// (RUNS, run_m_tiles, run_n_tiles, run_dks, run_zero_pct: share of A that
// is zero, run_kval: number of K values that carry data, the rest being zero
// padding, 0 for all of K, run_sigma: 0 for uniform A, otherwise A drawn
// from a normal distribution with that standard deviation, as DNN weights
// roughly are) and instantiates the DUT as `dut`.
//
// For every run it fills random INT8 matrices (with zero values, zero rows
// of A and a zero K-step so that zero digits and all-zero steps occur),
// writes them in the bank layout of tpe_opt4e, starts the engine, collects
// the C stream and compares every element with a reference product computed
// here. It counts the mechanisms of the design and fails if one never
// happened: zero digits skipped, B reads refused on a bank conflict, columns
// waiting at a sync, the array waiting for the SIMD core, several tiles.
// It also checks the cycle count against the bound
//   sum over passes of (max over columns of the column's work + SIMD pass
//   + fixed overhead) + refused reads,
// where a column's work is its non-zero digits plus one cycle per all-zero
// KP-step.

  localparam int NT_MAX = N_MAX / NP;
  localparam int GBW    = $clog2(G * MP);
  localparam int AAW    = $clog2(M_MAX * DKS_MAX);
  localparam int BAW    = $clog2(NT_MAX * DKS_MAX * KP);
  localparam int MW     = $clog2(M_MAX);
  localparam int NW     = $clog2(N_MAX);
  localparam int MTW    = (M_MAX / MP > 1) ? $clog2(M_MAX / MP) : 1;
  localparam int NTW    = (NT_MAX > 1) ? $clog2(NT_MAX) : 1;
  localparam int OW     = (DKS_MAX > 1) ? $clog2(DKS_MAX) : 1;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic a_wr_en, b_wr_en, start, busy, done, sync_wait, simd_stall;
  logic [GBW-1:0] a_wr_bank, b_wr_bank;
  logic [AAW-1:0] a_wr_addr; logic [BAW-1:0] b_wr_addr;
  a_t [KP-1:0] a_wr_data; b_t [NP-1:0] b_wr_data;
  logic [MTW:0] cfg_m_tiles; logic [NTW:0] cfg_n_tiles; logic [OW:0] cfg_dks;
  logic [V-1:0] c_valid; logic [V-1:0][MW-1:0] c_row; logic [V-1:0][NW-1:0] c_col;
  logic [V-1:0][31:0] c_data;

  always #5 clk = ~clk;

  int amat [M_MAX][G*MP*KP*DKS_MAX];
  int bmat [G*MP*KP*DKS_MAX][N_MAX];
  int cref [M_MAX][N_MAX];
  int cseen [M_MAX][N_MAX];
  int n_skip = 0, n_conf = 0, n_sync = 0, n_stall = 0, n_tiles_done = 0, n_zero_step = 0;

  function automatic int digit_of(int v, int w);
    int u, c, s, d;
    u = v & 255; c = 0; d = 0;
    for (int i = 0; i <= w; i++) begin
      if (i == 3) begin s = (u >> 6) & 3; if (s >= 2) s -= 4; d = s + c; end
      else begin s = ((u >> (2*i)) & 3) + c; if (s >= 3) begin d = s - 4; c = 1; end else begin d = s; c = 0; end end
    end
    return d;
  endfunction

  // result collection
  always @(posedge clk) if (rst_n) begin
    for (int v = 0; v < V; v++) if (c_valid[v]) begin
      checks++;
      if (int'(c_data[v]) != cref[c_row[v]][c_col[v]]) begin
        failures++;
        if (failures < 10) $display("FAIL C[%0d][%0d] = %0d, expected %0d", c_row[v], c_col[v], int'(c_data[v]), cref[c_row[v]][c_col[v]]);
      end
      cseen[c_row[v]][c_col[v]]++;
    end
    if (sync_wait) n_sync++;
    if (simd_stall) n_stall++;
  end

  initial begin
    a_wr_en = 0; b_wr_en = 0; start = 0; a_wr_bank = '0; b_wr_bank = '0;
    a_wr_addr = '0; b_wr_addr = '0; a_wr_data = '0; b_wr_data = '0;
    cfg_m_tiles = '0; cfg_n_tiles = '0; cfg_dks = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int run = 0; run < RUNS; run++) begin
      int M, N, K, dks, KQ, cyc, bound, conf0, kreal, nzd;
      M = run_m_tiles[run] * MP; N = run_n_tiles[run] * NP; dks = run_dks[run];
      K = G * MP * KP * dks; KQ = K / G;
      // ---- data ----
      for (int m = 0; m < M; m++) for (int k = 0; k < K; k++) begin
        int r;
        if (run_sigma[run] == 0) r = int'($urandom % 256) - 128;
        else begin
          // sum of 12 uniform values: close to normal, sigma = 1000
          int s; s = 0;
          for (int i = 0; i < 12; i++) s += int'($urandom % 1001);
          r = (s - 6000) * run_sigma[run] / 1000;
          if (r > 127) r = 127;
          if (r < -128) r = -128;
        end
        if ($urandom % 100 < run_zero_pct[run]) r = 0;
        if (run_kval[run] == 0) begin
          if (m == 1) r = 0;                  // an all-zero row of A
          if (k >= KP && k < 2 * KP) r = 0;   // one all-zero KP-step
        end else if (k >= run_kval[run]) r = 0;  // zero padding of K
        amat[m][k] = r;
      end
      for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) bmat[k][n] = int'($urandom % 256) - 128;
      for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
        cref[m][n] = 0; cseen[m][n] = 0;
        for (int k = 0; k < K; k++) cref[m][n] += amat[m][k] * bmat[k][n];
      end
      kreal = (run_kval[run] == 0) ? K : run_kval[run];
      nzd = 0;
      for (int m = 0; m < M; m++) for (int k = 0; k < K; k++)
        for (int w = 0; w < 4; w++) begin
          if (digit_of(amat[m][k], w) == 0) n_skip++;
          else nzd++;
        end
      // ---- cycle bound: per pass, the slowest column ----
      bound = 0;
      for (int mt = 0; mt < M / MP; mt++) for (int w = 0; w < 4; w++) begin
        int worst; worst = 0;
        for (int mp = 0; mp < MP; mp++) for (int l = 0; l < G; l++) begin
          int work; work = 0;
          for (int s = 0; s < KQ / KP; s++) begin
            int nz; nz = 0;
            for (int i = 0; i < KP; i++) if (digit_of(amat[mt*MP+mp][l*KQ + s*KP + i], w) != 0) nz++;
            work += (nz == 0) ? 1 : nz;
            if (nz == 0) n_zero_step++;
          end
          if (work > worst) worst = work;
        end
        bound += (worst + 8 + (MP * NP + V - 1) / V) * (N / NP);
      end
      // ---- write memories in bank layout ----
      for (int m = 0; m < M; m++) for (int ks = 0; ks < K / KP; ks++) begin
        int k, l, r, j, off;
        k = ks * KP; l = k / KQ; r = k % KQ; j = r / (dks * KP); off = (r % (dks * KP)) / KP;
        @(negedge clk);
        a_wr_en = 1; a_wr_bank = GBW'(l * MP + j); a_wr_addr = AAW'(m * dks + off);
        for (int i = 0; i < KP; i++) a_wr_data[i] = a_t'(amat[m][k + i]);
      end
      @(negedge clk); a_wr_en = 0;
      for (int nt = 0; nt < N / NP; nt++) for (int k = 0; k < K; k++) begin
        int l, r, j, off, i;
        l = k / KQ; r = k % KQ; j = r / (dks * KP); off = (r % (dks * KP)) / KP; i = r % KP;
        @(negedge clk);
        b_wr_en = 1; b_wr_bank = GBW'(l * MP + j); b_wr_addr = BAW'(nt * dks * KP + off * KP + i);
        for (int np = 0; np < NP; np++) b_wr_data[np] = b_t'(bmat[k][nt * NP + np]);
      end
      @(negedge clk); b_wr_en = 0;
      // ---- run ----
      cfg_m_tiles = (MTW+1)'(M / MP); cfg_n_tiles = (NTW+1)'(N / NP); cfg_dks = (OW+1)'(dks);
      conf0 = n_conf;
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      n_tiles_done += (M / MP) * (N / NP);
      for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
        checks++;
        if (cseen[m][n] != 1) begin failures++; if (failures < 10) $display("FAIL C[%0d][%0d] delivered %0d times", m, n, cseen[m][n]); end
      end
      // a refused read delays its column by one cycle at most
      bound += n_conf - conf0;
      checks++;
      if (cyc > bound) begin failures++; $display("FAIL run %0d took %0d cycles, bound %0d", run, cyc, bound); end
      $display("run %0d: M=%0d N=%0d K=%0d (%0d with data), %0d cycles (bound %0d, refused reads %0d)",
               run, M, N, K, kreal, cyc, bound, n_conf - conf0);
      // Reference point: the same PEs taking every digit, zero or not, need
      // 4 passes of K/G cycles per tile.
      $display("run %0d: non-zero digits per A value %0d/1000, digit-dense schedule %0d cycles",
               run, nzd * 1000 / (M * kreal), (M / MP) * (N / NP) * 4 * (kreal + G - 1) / G);
    end
    $display("mechanisms: zero digits skipped %0d, all-zero steps %0d, bank conflicts %0d, sync waits %0d, SIMD stalls %0d, tiles %0d",
             n_skip, n_zero_step, n_conf, n_sync, n_stall, n_tiles_done);
    if (REQUIRE_ALL) begin
    checks++; if (n_skip == 0)       begin failures++; $display("FAIL no zero digit skipped"); end
    checks++; if (n_zero_step == 0)  begin failures++; $display("FAIL no all-zero step"); end
    checks++; if (n_conf == 0)       begin failures++; $display("FAIL no bank conflict"); end
    checks++; if (n_sync == 0)       begin failures++; $display("FAIL no sync wait"); end
    checks++; if (n_stall == 0)      begin failures++; $display("FAIL SIMD core never stalled the array"); end
    checks++; if (n_tiles_done < 2)  begin failures++; $display("FAIL fewer than two tiles"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
