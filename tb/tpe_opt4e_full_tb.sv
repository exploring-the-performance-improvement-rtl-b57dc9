// Full-size test of tpe_opt4e with every parameter at its default (32 x 32
// PE groups of 4 PEs, 128 column front ends, 256 memory banks, V = 32):
// one complete 32 x 512 by 512 x 32 INT8 product, checked element by
// element against a reference, with the cycle count reported and bounded.
module tpe_opt4e_full_tb;
  import tpe_pkg::*;
  localparam int MP = 32, NP = 32, G = 4, KP = 4, V = 32, DKS_MAX = 4, M_MAX = 128, N_MAX = 128;
  localparam bit REQUIRE_ALL = 0;
  localparam int RUNS = 1;
  int run_m_tiles  [RUNS] = '{1};
  int run_n_tiles  [RUNS] = '{1};
  int run_dks      [RUNS] = '{1};
  int run_zero_pct [RUNS] = '{20};
  int run_kval     [RUNS] = '{0};
  int run_sigma    [RUNS] = '{0};

  `include "tpe_opt4e_tb_body.svh"

  tpe_opt4e dut (.*);

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
