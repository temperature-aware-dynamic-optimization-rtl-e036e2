// tb_tapt_module: self-checking test of the per-core tuning module on its own.
//
// The caches, core, temperature sensor and power/performance estimator are
// replaced by small behavioural models so the module can be run over many
// intervals quickly:
//   * each cycle the core (unless halted) makes one instruction and one data
//     access; each misses with a probability set by the running phase and
//     scaled up for smaller cache sizes ($urandom draws). A cycle with a miss
//     retires nothing, otherwise one instruction retires;
//   * the cache models take a configuration write only while their idle flag
//     (driven at random) is high, and the test flags any write made while busy;
//   * temperature is 40 + 5 * frequency level degrees, time and energy follow
//     from the interval counts, the clock frequency and the cache sizes.
// The test runs phase A, phase B and phase A again with a 60 degree threshold.
// It checks that A and B are each characterised once (S*G evaluations each),
// that the return of A reuses the stored configuration and reinstates it
// exactly, that every chosen configuration meets the threshold, that the core
// is halted for exactly TRANS cycles per frequency change, and that no cache
// was written while busy, and that the interval snapshots carry the
// instruction- and data-cache events on the right fields. Short intervals and a small engine keep the run short.
module tb_tapt_module;
  import tapt_pkg::*;
  localparam int IVL = 3000, TRANS = 40, S = 6, G = 2, ASIZE = 3, NENT = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  prio_e       prio;
  logic        thr_en;
  logic [7:0]  thr;
  logic [2:0]  instr_retired;
  logic [7:0]  temp;
  logic [2:0]  freq_sel;
  logic [11:0] freq_mhz;
  logic        core_halt, ivl_end;
  perf_snap_t  snap;
  logic [15:0] est_time, est_energy;
  logic        ic_access, ic_miss, dc_access, dc_miss;
  cache_cfg_t  ic_cur, dc_cur, ic_cfg, dc_cfg;
  logic        ic_idle, dc_idle, ic_cfg_we, dc_cfg_we;
  sys_cfg_t    cur_cfg;
  logic [2:0]  mode;
  logic [15:0] n_tuned, n_reused, n_changes, n_evals;

  tapt_module #(.INTERVAL_CYCLES(IVL), .TRANS_CYCLES(TRANS), .S(S), .G(G),
                .ASIZE(ASIZE), .NENT(NENT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // ---- phase model: miss probabilities in 1/1000 for a 32 KB cache ----------
  int imiss_pm, dmiss_pm;
  function automatic int scale(input int pm, input cache_cfg_t c);
    unique case (c.size)
      SZ_8K:   return pm * 2;
      SZ_16K:  return pm * 3 / 2;
      default: return pm;
    endcase
  endfunction

  // ---- core and cache models -------------------------------------------------
  int busy_writes = 0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ic_cur <= BASE_CACHE;
      dc_cur <= BASE_CACHE;
      ic_idle <= 1'b1;
      dc_idle <= 1'b1;
    end else begin
      if (ic_cfg_we) begin
        if (!ic_idle) busy_writes++;
        ic_cur <= ic_cfg;
      end
      if (dc_cfg_we) begin
        if (!dc_idle) busy_writes++;
        dc_cur <= dc_cfg;
      end
      ic_idle <= ($urandom % 4) != 0;
      dc_idle <= ($urandom % 4) != 0;
    end
  end

  always_comb begin
    ic_access = rst_n && !core_halt;
    dc_access = rst_n && !core_halt;
  end
  always_ff @(negedge clk) begin
    ic_miss <= ic_access && (int'($urandom % 1000) < scale(imiss_pm, ic_cur));
    dc_miss <= dc_access && (int'($urandom % 1000) < scale(dmiss_pm, dc_cur));
  end
  assign instr_retired = (ic_access && !ic_miss && !dc_miss) ? 3'd1 : 3'd0;

  // ---- sensor and estimator ---------------------------------------------------
  assign temp = 8'd40 + 8'd5 * {5'd0, freq_sel};
  logic [31:0] work, t_est, banks;
  always_comb begin
    work       = snap.cycles + 32'd20 * (snap.imiss + snap.dmiss);
    t_est      = (work * 32'd2000 / {20'd0, freq_mhz}) >> 4;
    banks      = (32'd1 << cur_cfg.icfg.size) + (32'd1 << cur_cfg.dcfg.size);
    est_time   = (t_est > 32'hffff) ? 16'hffff : t_est[15:0];
    est_energy = 16'((t_est * ({20'd0, freq_mhz} / 32'd100 + 32'd4 * banks)) >> 8);
  end

  // ---- halt length checks -----------------------------------------------------
  int halt_run = 0, halt_ok = 0, halt_bad = 0, freq_changes = 0;
  logic [2:0] freq_prev;
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (core_halt) halt_run++;
      else if (halt_run != 0) begin
        if (halt_run == TRANS) halt_ok++; else halt_bad++;
        halt_run = 0;
      end
      if (freq_sel != freq_prev) freq_changes++;
    end
    freq_prev <= freq_sel;
  end

  // ---- interval counter wiring: in phase A the data cache misses more -------
  // (4 % against at most 2 %), so every snapshot taken in phase A must show
  // more data-cache misses than instruction-cache misses.
  logic in_a, ivl_end_q;
  int snaps_a = 0, snaps_bad = 0;
  always_ff @(posedge clk) begin
    ivl_end_q <= ivl_end;
    if (ivl_end_q && in_a) begin
      snaps_a++;
      if (!(snap.dmiss > snap.imiss) || snap.iacc != snap.dacc) snaps_bad++;
    end
  end

  task automatic wait_mode(input logic [2:0] m, input int limit);
    int n = 0;
    while (mode != m && n < limit) begin
      @(posedge clk);
      n++;
    end
    check(mode == m, $sformatf("reached mode %0d", m));
  endtask

  sys_cfg_t cfg_a, cfg_b;
  initial begin
    prio = PRIO_S; thr_en = 1'b1; thr = 8'd60;
    imiss_pm = 10; dmiss_pm = 40;            // phase A
    in_a = 1'b1;
    freq_prev = 3'd6;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // phase A: characterised from scratch
    wait_mode(3'd1, 4 * IVL);
    wait_mode(3'd3, 20 * IVL * S * G);
    check(n_tuned == 1 && n_evals == S * G, "phase A characterised once");
    check(n_reused == 0, "nothing reused yet");
    cfg_a = cur_cfg;
    check(cfg_a.freq <= 3'd4, "phase A choice meets the threshold");
    check(ic_cur == cfg_a.icfg && dc_cur == cfg_a.dcfg, "phase A cache settings applied");
    check(freq_sel == cfg_a.freq, "phase A frequency applied");
    repeat (5 * IVL) @(posedge clk);
    check(n_changes == 0, "no change while phase A runs");
    check(cur_cfg == cfg_a, "phase A configuration kept");
    // phase B
    imiss_pm = 150; dmiss_pm = 300;
    in_a = 1'b0;
    wait_mode(3'd1, 4 * IVL);
    wait_mode(3'd3, 20 * IVL * S * G);
    check(n_changes == 1, "change to phase B seen");
    check(n_tuned == 2 && n_evals == 2 * S * G, "phase B characterised");
    cfg_b = cur_cfg;
    check(cfg_b.freq <= 3'd4, "phase B choice meets the threshold");
    repeat (5 * IVL) @(posedge clk);
    // phase A again: configuration comes from the history table
    imiss_pm = 10; dmiss_pm = 40;
    repeat (2) @(posedge clk);
    in_a = 1'b1;
    wait_mode(3'd1, 4 * IVL);
    wait_mode(3'd3, 8 * IVL);
    check(n_changes == 2, "return to phase A seen");
    check(n_reused == 1 && n_tuned == 2, "phase A reused, not re-characterised");
    check(n_evals == 2 * S * G, "no new evaluations");
    check(cur_cfg == cfg_a, "stored phase A configuration reinstated");
    check(ic_cur == cfg_a.icfg && dc_cur == cfg_a.dcfg, "stored cache settings applied");
    repeat (3 * IVL) @(posedge clk);
    check(busy_writes == 0, "no configuration write while a cache was busy");
    check(halt_bad == 0, "every halt lasted TRANS cycles");
    check(halt_ok == freq_changes, "one halt per frequency change");
    check(halt_ok > 0, "frequency changes happened");
    check(snaps_a > 10 && snaps_bad == 0,
          $sformatf("phase A snapshots: %0d of %0d with wrong miss counts", snaps_bad, snaps_a));
    $display("tuned=%0d reused=%0d changes=%0d evals=%0d halts=%0d cfgA=%p cfgB=%p",
             n_tuned, n_reused, n_changes, n_evals, halt_ok, cfg_a, cfg_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200 * IVL * S * G) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
