// tb_tapt_soc_full: system test of tapt_soc at its full, default size.
//
// The system is built with no parameter overrides: two cores, 32 KB four-bank
// caches, a 1,000,000-cycle tuning interval (10 ms at 100 MHz), an 1824-cycle
// frequency transition, a 20-member population over 3 generations, an archive
// of 5 and a 32-entry phase history table. Each core runs one phase program
// (the models of tb_soc_env.svh) with a 80 degree threshold enabled. The test
// waits until both cores have characterised their phase (one classification
// interval plus 60 evaluation intervals, about 62 million cycles) and then runs
// two more intervals. It checks one tuning with S*G = 60 evaluations per core,
// no phase change, a chosen configuration under the threshold, and that cache
// reconfigurations, frequency transitions, misses and multi-line fills all
// happened with every value read back correct.
module tb_tapt_soc_full;
  import tapt_pkg::*;
  localparam int NC = 2, IVL = 1000000, EVALS = 20 * 3;
  `include "tb_soc_env.svh"

  tapt_soc dut (.*);

  int finished = 0;
  initial begin
    cur_ph[0] = '{ifoot: 1024, dfoot: 2048,  extra: 2, dper: 3};
    cur_ph[1] = '{ifoot: 512,  dfoot: 40000, extra: 1, dper: 2};
    thr_en = 1; thr = 8'd80; prio = PRIO_S;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int c = 0; c < NC; c++) fork
        automatic int cc = c;
        begin
          wait_cond_mode(cc, 3'd1, 4 * IVL);
          wait_cond_mode(cc, 3'd3, (EVALS + 4) * IVL);
          repeat (2 * IVL) @(posedge clk);
          finished++;
        end
      join_none
    wait (finished == NC);
    for (int c = 0; c < NC; c++) begin
      $display("core %0d: tuned=%0d reused=%0d changes=%0d evals=%0d cfg=%p", c,
               n_tuned[c], n_reused[c], n_changes[c], n_evals[c], cur_cfg[c]);
      check(n_tuned[c] == 1, $sformatf("core %0d tuned its phase once", c));
      check(n_changes[c] == 0, $sformatf("core %0d saw no phase change", c));
      check(n_evals[c] == EVALS, $sformatf("core %0d ran %0d configurations", c, n_evals[c]));
      check(mode[c] == 3'd3, $sformatf("core %0d running", c));
    end
    $display("mechanisms: dfs=%0d icfg=%0d dcfg=%0d imiss=%0d dmiss=%0d multifill=%0d reads=%0d thr=%0d/%0d",
             ev_dfs, ev_icfg, ev_dcfg, ev_imiss, ev_dmiss, ev_multi_fill, reads_checked, thr_met, thr_checked);
    check(data_errors == 0, $sformatf("%0d wrong values read", data_errors));
    check(reads_checked > 1000, "reads checked");
    check(ev_dfs > 0, "frequency transitions happened");
    check(ev_icfg > 0 && ev_dcfg > 0, "cache reconfigurations happened");
    check(ev_imiss > 0 && ev_dmiss > 0, "misses happened");
    check(ev_multi_fill > 0, "multi-line fills happened");
    check(thr_checked == NC && thr_met == thr_checked, "chosen configurations under the threshold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat ((EVALS + 12) * IVL) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
