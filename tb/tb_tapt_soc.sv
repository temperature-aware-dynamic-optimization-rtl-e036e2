// tb_tapt_soc: end-to-end test of the two-core system at reduced sizes (short
// intervals and transition delay, a population of 6 over 2 generations, archive
// of 3, 4 table entries).
//
// Each core runs phase A, then phase B, then phase A again. The test checks that
// every phase is classified on the base configuration, that A and B are each
// tuned once, that the return of A reuses the stored configuration without a new
// search, that every value the cores read is correct across all the cache
// reconfigurations, that the chosen configurations respect the temperature
// threshold, and counts each mechanism (tuning, reuse, phase change, frequency
// change, I- and D-cache reconfiguration, multi-line fills, misses), failing if
// one never happened.
module tb_tapt_soc;
  import tapt_pkg::*;
  localparam int NC = 2, IVL = 6000, S = 6, G = 2;
  `include "tb_soc_env.svh"

  tapt_soc #(.NCORES(NC), .INTERVAL_CYCLES(IVL), .TRANS_CYCLES(50), .S(S), .G(G),
             .ASIZE(3), .NENT(4), .PHASE_THR(4096)) dut (.*);

  phase_t pa [NC], pb [NC];
  int finished = 0;
  initial begin
    pa[0] = '{ifoot: 1024,  dfoot: 2048,  extra: 2, dper: 3};
    pb[0] = '{ifoot: 20000, dfoot: 60000, extra: 0, dper: 1};
    pa[1] = '{ifoot: 512,   dfoot: 40000, extra: 1, dper: 2};
    pb[1] = '{ifoot: 30000, dfoot: 1024,  extra: 2, dper: 4};
    for (int c = 0; c < NC; c++) cur_ph[c] = pa[c];
    thr_en = 1; thr = 8'd80; prio = PRIO_S;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int c = 0; c < NC; c++) fork
        automatic int cc = c;
        begin
          wait_cond_mode(cc, 3'd3, 40 * IVL * S * G);
          repeat (4 * IVL) @(posedge clk);
          cur_ph[cc] = pb[cc];
          wait_cond_mode(cc, 3'd1, 4 * IVL);
          wait_cond_mode(cc, 3'd3, 40 * IVL * S * G);
          repeat (4 * IVL) @(posedge clk);
          cur_ph[cc] = pa[cc];
          wait_cond_mode(cc, 3'd1, 4 * IVL);
          wait_cond_mode(cc, 3'd3, 40 * IVL);
          repeat (3 * IVL) @(posedge clk);
          finished++;
        end
      join_none
    wait (finished == NC);
    for (int c = 0; c < NC; c++) begin
      $display("core %0d: tuned=%0d reused=%0d changes=%0d evals=%0d cfg=%p", c,
               n_tuned[c], n_reused[c], n_changes[c], n_evals[c], cur_cfg[c]);
      check(n_tuned[c] == 2, $sformatf("core %0d tuned two phases", c));
      check(n_reused[c] == 1, $sformatf("core %0d reused one phase", c));
      check(n_changes[c] == 2, $sformatf("core %0d saw two phase changes", c));
      check(n_evals[c] == 2 * S * G, $sformatf("core %0d ran %0d configurations", c, n_evals[c]));
    end
    $display("mechanisms: dfs=%0d icfg=%0d dcfg=%0d imiss=%0d dmiss=%0d multifill=%0d reads=%0d thr=%0d/%0d",
             ev_dfs, ev_icfg, ev_dcfg, ev_imiss, ev_dmiss, ev_multi_fill, reads_checked, thr_met, thr_checked);
    check(data_errors == 0, $sformatf("%0d wrong values read", data_errors));
    check(reads_checked > 1000, "reads checked");
    check(ev_dfs > 0, "frequency transitions happened");
    check(ev_icfg > 0 && ev_dcfg > 0, "cache reconfigurations happened");
    check(ev_imiss > 0 && ev_dmiss > 0, "misses happened");
    check(ev_multi_fill > 0, "multi-line fills happened");
    check(thr_checked == 2 * NC && thr_met == thr_checked, "chosen configurations under the threshold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
