// tb_tapt_controller: checks the tuning flow of the controller with scripted
// stand-ins for the other parts (cache tuner, DFS controller, interval counters,
// classifier, phase history table and engine, all modelled here).
//
// Scenario: after reset the base configuration must be applied and classified; the
// first phase is new (empty table), so the engine must be started with an empty
// archive and every configuration it asks for must be applied before one whole
// interval is measured and answered with the estimator's values and the peak
// temperature; the result must be written to the table and applied. Then a phase
// change must bring back the base configuration; a phase close to a stored one
// must reuse the stored configuration (no engine run); a phase far from all must
// start the engine with the nearest phase's archive.
module tb_tapt_controller;
  import tapt_pkg::*;
  localparam int unsigned A = 2, NENT = 4, IW = 2, IVL = 40, NEV = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ivl_end = 0; perf_snap_t snap; logic ivl_restart;
  logic [15:0] est_time, est_energy;
  logic sig_valid = 0; sig_t sig; logic phase_change = 0; logic track, clear_ref;
  logic search_start, search_done = 0, search_found = 0; sig_t search_sig;
  logic [IW-1:0] search_idx = 0; logic [DIST2_W-1:0] search_dist2 = 0;
  logic [IW-1:0] rd_idx; sys_cfg_t rd_best; indiv_t rd_arch [A];
  logic wr_en; sig_t wr_sig; sys_cfg_t wr_best; indiv_t wr_arch [A];
  logic eng_start; indiv_t eng_init [A]; logic eng_eval_req = 0; sys_cfg_t eng_eval_cfg;
  logic eng_eval_done; obj_t eng_eval_obj; logic eng_done = 0; sys_cfg_t eng_best;
  indiv_t eng_arch [A];
  logic tun_start, tun_done = 0, dfs_start, dfs_done = 0;
  cache_cfg_t tun_icfg, tun_dcfg; logic [2:0] dfs_level;
  sys_cfg_t cur_cfg; logic [2:0] mode; logic [15:0] n_tuned, n_reused, n_changes, n_evals;

  tapt_controller #(.ASIZE(A), .NENT(NENT), .MATCH_THR(100)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask

  // ---- tuner and DFS stand-ins: done 3 cycles after start; track configuration
  sys_cfg_t applied; int applies = 0, tcnt = 0, dcnt = 0;
  always @(posedge clk) begin
    tun_done <= 0; dfs_done <= 0;
    if (!rst_n) begin tcnt <= 0; dcnt <= 0; end
    else if (tun_start) begin
      applied.icfg <= tun_icfg; applied.dcfg <= tun_dcfg; applied.freq <= dfs_level; applies++;
      tcnt <= 3; dcnt <= 5;
    end else begin
      if (tcnt > 0) begin tcnt <= tcnt - 1; if (tcnt == 1) tun_done <= 1; end
      if (dcnt > 0) begin dcnt <= dcnt - 1; if (dcnt == 1) dfs_done <= 1; end
    end
  end
  // ---- interval counters stand-in: whole intervals of IVL cycles, restartable
  int tmr = 0, whole = 0;
  logic [7:0] peak = 70;
  always @(posedge clk) begin
    ivl_end <= 0;
    if (!rst_n) tmr <= 0;
    else if (ivl_restart) begin tmr <= 0; whole <= 1; end
    else if (tmr == IVL - 1) begin tmr <= 0; ivl_end <= 1; end
    else tmr <= tmr + 1;
  end
  always @(posedge clk) if (ivl_end) begin snap.peak_temp <= peak; peak <= peak + 1; end
  assign est_time   = 16'(1000 + applied.freq * 7);
  assign est_energy = 16'(400 + applied.icfg.line * 9);
  // ---- classifier stand-in: signature 2 cycles after each interval end
  sig_t cur_phase; sig_t ref_sig; bit have_ref = 0;
  int ccnt = 0;
  always @(posedge clk) begin
    if (clear_ref) have_ref <= 0;
    sig_valid <= 0; phase_change <= 0;
    if (!rst_n) ccnt <= 0;
    else if (ivl_end) ccnt <= 2;
    else if (ccnt > 0) begin
      ccnt <= ccnt - 1;
      if (ccnt == 1) begin
        sig <= cur_phase; sig_valid <= 1;
        if (track) begin
          if (!have_ref) begin ref_sig <= cur_phase; have_ref <= 1; end
          else if (ref_sig != cur_phase) phase_change <= 1;
        end
      end
    end
  end
  // ---- phase history table stand-in
  sig_t tsig [NENT]; sys_cfg_t tbest [NENT]; indiv_t tarch [NENT][A]; int tn = 0;
  int scnt = 0, s_bi; longint s_bd;
  always @(posedge clk) begin
    search_done <= 0;
    if (!rst_n) scnt <= 0;
    else if (search_start) begin
      s_bi = -1; s_bd = 0;
      for (int e = 0; e < tn; e++) begin
        if (s_bi < 0 || longint'(sig_dist2(search_sig, tsig[e])) < s_bd) begin
          s_bi = e; s_bd = longint'(sig_dist2(search_sig, tsig[e]));
        end
      end
      scnt <= 3;
    end else if (scnt > 0) begin
      scnt <= scnt - 1;
      if (scnt == 1) begin
        search_found <= (s_bi >= 0); search_idx <= IW'(s_bi < 0 ? 0 : s_bi);
        search_dist2 <= DIST2_W'(s_bd); search_done <= 1;
      end
    end
    if (rst_n && wr_en) begin
      tsig[tn] <= wr_sig; tbest[tn] <= wr_best;
      for (int a = 0; a < A; a++) tarch[tn][a] <= wr_arch[a];
      tn <= tn + 1;
    end
  end
  assign rd_best = tbest[rd_idx];
  always_comb for (int a = 0; a < A; a++) rd_arch[a] = tarch[rd_idx][a];
  // ---- engine stand-in: asks for NEV configurations, best = the second one
  int engine_runs = 0, evals_ok = 0, evals_bad = 0; indiv_t init_seen [A];
  always @(posedge clk) if (rst_n && eng_start) for (int a = 0; a < A; a++) init_seen[a] <= eng_init[a];
  initial begin
    eng_best = '0;
    for (int a = 0; a < A; a++) eng_arch[a] = '0;
    forever begin
      @(posedge clk);
      if (rst_n && eng_start) begin
        sys_cfg_t c [NEV];
        engine_runs++;
        for (int k = 0; k < NEV; k++) begin
          c[k] = '{icfg: cache_cfg_from_idx(5'($urandom_range(0, 17))),
                   dcfg: cache_cfg_from_idx(5'($urandom_range(0, 17))), freq: 3'($urandom_range(0, 6))};
          @(negedge clk); eng_eval_cfg = c[k]; eng_eval_req = 1;
          do @(posedge clk); while (!eng_eval_done);
          #1;
          if (applied == c[k] && eng_eval_obj.etime == 16'(1000 + c[k].freq * 7) &&
              eng_eval_obj.energy == 16'(400 + c[k].icfg.line * 9) && eng_eval_obj.temp == snap.peak_temp)
            evals_ok++;
          else evals_bad++;
          eng_arch[k % A] = '{valid: 1'b1, cfg: c[k], obj: eng_eval_obj};
          @(negedge clk); eng_eval_req = 0;
        end
        eng_best = c[1];
        @(negedge clk); eng_done = 1; @(negedge clk); eng_done = 0;
      end
    end
  end

  task automatic wait_mode(input logic [2:0] m, input int lim);
    int n = 0;
    while (mode != m && n < lim) begin @(posedge clk); n++; end
    check(mode == m, $sformatf("reached mode %0d", m));
  endtask

  sig_t ph1, ph2, ph3;
  initial begin
    ph1 = '{imr: 9'd20, dmr: 9'd30, ipc: 11'd400};
    ph2 = '{imr: 9'd21, dmr: 9'd31, ipc: 11'd405};   // within the match threshold of ph1
    ph3 = '{imr: 9'd120, dmr: 9'd10, ipc: 11'd150};
    cur_phase = ph1;
    repeat (3) @(negedge clk); rst_n = 1;
    wait_mode(3'd1, 200);
    check(applied == BASE_CFG, "base configuration applied for classification");
    // phase 1: new
    wait_mode(3'd2, 400);
    repeat (3) @(posedge clk);
    check(engine_runs == 1 && !init_seen[0].valid && !init_seen[1].valid, "engine started with empty archive");
    wait_mode(3'd3, 2000);
    check(evals_ok == NEV && evals_bad == 0, $sformatf("evaluations ok=%0d bad=%0d", evals_ok, evals_bad));
    check(tn == 1 && tsig[0] == ph1, "phase written to the table");
    repeat (20) @(posedge clk);
    check(applied == tbest[0] && cur_cfg == tbest[0], "best configuration applied");
    check(n_tuned == 1 && n_evals == NEV, "counters after tuning");
    // run a few intervals, then a phase close to phase 1: reuse
    repeat (3 * IVL) @(posedge clk);
    check(mode == 3'd3 && n_changes == 0, "stable phase keeps running");
    cur_phase = ph2;
    wait_mode(3'd1, 400);
    check(n_changes == 1 && applied == BASE_CFG, "phase change returns to base configuration");
    wait_mode(3'd3, 400);
    repeat (20) @(posedge clk);
    check(n_reused == 1 && engine_runs == 1, "known phase reused without tuning");
    check(applied == tbest[0], "stored configuration applied");
    // a far phase: engine gets the nearest archive
    repeat (3 * IVL) @(posedge clk);
    cur_phase = ph3;
    wait_mode(3'd2, 800);
    repeat (3) @(posedge clk);
    check(engine_runs == 2 && init_seen[0] == tarch[0][0] && init_seen[1] == tarch[0][1],
          "engine started with the nearest phase's archive");
    wait_mode(3'd3, 2000);
    check(tn == 2 && n_tuned == 2 && n_changes == 2, "second phase tuned and stored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
