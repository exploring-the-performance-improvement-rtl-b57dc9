// Workload test of tpe_opt4e: reduction lengths of real network layers on a
// reduced array (8 x 8 PE groups of 4 PEs), with normally distributed A as
// trained weights roughly are (standard deviation 25 on the INT8 scale).
//
// Runs (K values with data; K is padded with zeros to a multiple of
// G*MP*KP = 128 on this array):
//   0: ResNet-18 middle layer, K = 576 = 192 x 3 x 3 -> 640, 16 x 16 outputs
//   1: GPT-2 projection, K = 768,                             8 x 8 outputs
//   2: MobileNetV3 depthwise 3 x 3, K = 9 -> 128,             8 x 8 outputs
//   3: MobileNetV3 pointwise, K = 960 -> 1024,                8 x 8 outputs
// The ResNet-18 reduction length is the one worked through in the paper's
// analysis of column synchronisation; the other lengths are the usual sizes
// of those layers. Every output is compared with a reference product, each
// must arrive exactly once, and the cycle count is bounded as in the
// end-to-end test. The run summary prints the measured non-zero digits per
// value and the cycles a schedule that also spends a cycle on every zero
// digit would need, for comparison.
module tpe_opt4e_workload_tb;
  import tpe_pkg::*;
  localparam int MP = 8, NP = 8, G = 4, KP = 4, V = 8, DKS_MAX = 8, M_MAX = 16, N_MAX = 16;
  localparam bit REQUIRE_ALL = 0;
  localparam int RUNS = 4;
  int run_m_tiles  [RUNS] = '{2, 1, 1, 1};
  int run_n_tiles  [RUNS] = '{2, 1, 1, 1};
  int run_dks      [RUNS] = '{5, 6, 1, 8};
  int run_zero_pct [RUNS] = '{0, 0, 0, 0};
  int run_kval     [RUNS] = '{576, 768, 9, 960};
  int run_sigma    [RUNS] = '{25, 25, 25, 25};

  `include "tpe_opt4e_tb_body.svh"

  tpe_opt4e #(.MP(MP), .NP(NP), .G(G), .KP(KP), .V(V), .DKS_MAX(DKS_MAX),
              .M_MAX(M_MAX), .N_MAX(N_MAX)) dut (.*);

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
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
