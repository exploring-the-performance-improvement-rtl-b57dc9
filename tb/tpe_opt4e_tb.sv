// End-to-end test of tpe_opt4e at reduced size: 4 x 4 PE groups of 4 PEs,
// 16 column front ends, a one-lane SIMD core (so that it stalls the array), 2 x 2 tiles of C (M = N = 8) with K = 128, then one
// tile with K = 64, then a very sparse A (90% zeros). All results are compared with a reference product, and
// every mechanism of the design is required to happen (see the body file).
module tpe_opt4e_tb;
  import tpe_pkg::*;
  localparam int MP = 4, NP = 4, G = 4, KP = 4, V = 1, DKS_MAX = 2, M_MAX = 8, N_MAX = 8;
  localparam bit REQUIRE_ALL = 1;
  localparam int RUNS = 3;
  int run_m_tiles  [RUNS] = '{2, 1, 1};
  int run_n_tiles  [RUNS] = '{2, 1, 2};
  int run_dks      [RUNS] = '{2, 1, 1};
  int run_zero_pct [RUNS] = '{20, 20, 90};
  int run_kval     [RUNS] = '{0, 0, 0};
  int run_sigma    [RUNS] = '{0, 0, 0};

  `include "tpe_opt4e_tb_body.svh"

  tpe_opt4e #(.MP(MP), .NP(NP), .G(G), .KP(KP), .ACC_W(32), .V(V), .DKS_MAX(DKS_MAX),
              .M_MAX(M_MAX), .N_MAX(N_MAX)) dut (.*);

  // A and B reads refused because two columns met in one bank
  always @(posedge clk) if (rst_n) begin
    n_conf += $countones(dut.g_q[0].u_noc_a.req & ~dut.g_q[0].u_noc_a.gnt);
    n_conf += $countones(dut.g_q[1].u_noc_a.req & ~dut.g_q[1].u_noc_a.gnt);
    n_conf += $countones(dut.g_q[2].u_noc_a.req & ~dut.g_q[2].u_noc_a.gnt);
    n_conf += $countones(dut.g_q[3].u_noc_a.req & ~dut.g_q[3].u_noc_a.gnt);
    n_conf += $countones(dut.g_q[0].u_noc_b.req & ~dut.g_q[0].u_noc_b.gnt);
    n_conf += $countones(dut.g_q[1].u_noc_b.req & ~dut.g_q[1].u_noc_b.gnt);
    n_conf += $countones(dut.g_q[2].u_noc_b.req & ~dut.g_q[2].u_noc_b.gnt);
    n_conf += $countones(dut.g_q[3].u_noc_b.req & ~dut.g_q[3].u_noc_b.gnt);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
