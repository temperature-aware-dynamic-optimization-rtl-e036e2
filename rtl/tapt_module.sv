// tapt_module: the temperature-aware phase-based tuning hardware attached to one
// core.
//
// It gathers the parts that decide and apply a core's configuration: the
// performance counters and interval timer, the phase classifier (signature and
// phase-change detection), the phase history table, the characterization engine,
// the controller that sequences them, the cache tuner that writes the L1
// configuration registers and the DFS controller that sets the core clock. The
// tuning hardware is drawn as one module beside the cores; here one such set is
// built per core and each core is tuned on its own, since nothing is shared between
// the cores' caches.
//
// Interface: the core's retire count, the caches' access/miss events and idle
// flags, a temperature-sensor reading and the designer's priority setting and
// optional temperature threshold come in. The interval counters (snap, with
// ivl_end) go out to the power/performance estimator, whose time and energy
// estimates come back on est_time/est_energy, valid in the cycle after ivl_end.
// Cache configuration writes, the frequency select and the core halt go out.
module tapt_module
  import tapt_pkg::*;
#(
  parameter int unsigned INTERVAL_CYCLES = 1000000,
  parameter int unsigned TRANS_CYCLES    = 1824,
  parameter int unsigned S               = 20,
  parameter int unsigned G               = 3,
  parameter int unsigned ASIZE           = 5,
  parameter int unsigned NENT            = 32,
  parameter int unsigned PHASE_THR       = 1024,
  parameter logic [31:0] SEED            = 32'h1234_5678
) (
  input  logic        clk,
  input  logic        rst_n,
  // designer settings
  input  prio_e       prio,
  input  logic        thr_en,
  input  logic [7:0]  thr,
  // core and sensor
  input  logic [2:0]  instr_retired,
  input  logic [7:0]  temp,
  output logic [2:0]  freq_sel,
  output logic [11:0] freq_mhz,
  output logic        core_halt,
  // estimator
  output logic        ivl_end,
  output perf_snap_t  snap,
  input  logic [15:0] est_time,
  input  logic [15:0] est_energy,
  // caches
  input  logic        ic_access,
  input  logic        ic_miss,
  input  logic        dc_access,
  input  logic        dc_miss,
  input  cache_cfg_t  ic_cur,
  input  cache_cfg_t  dc_cur,
  input  logic        ic_idle,
  input  logic        dc_idle,
  output logic        ic_cfg_we,
  output logic        dc_cfg_we,
  output cache_cfg_t  ic_cfg,
  output cache_cfg_t  dc_cfg,
  // status
  output sys_cfg_t    cur_cfg,
  output logic [2:0]  mode,
  output logic [15:0] n_tuned,
  output logic [15:0] n_reused,
  output logic [15:0] n_changes,
  output logic [15:0] n_evals
);
  localparam int unsigned IW = (NENT > 1) ? $clog2(NENT) : 1;

  logic               ivl_restart, snap_valid;
  logic               sig_valid, phase_change, track, clear_ref;
  sig_t               sig, search_sig, wr_sig;
  logic [DIST2_W-1:0] ref_dist2, search_dist2;
  logic               search_start, search_done, search_found, wr_en;
  logic [IW-1:0]      search_idx, rd_idx, wr_slot;
  logic [IW:0]        n_valid;
  sys_cfg_t           rd_best, wr_best, eng_best, eng_eval_cfg;
  indiv_t             rd_arch [ASIZE];
  indiv_t             wr_arch [ASIZE];
  indiv_t             eng_init [ASIZE];
  indiv_t             eng_arch [ASIZE];
  logic               eng_start, eng_eval_req, eng_eval_done, eng_done, eng_busy;
  obj_t               eng_eval_obj, eng_best_obj;
  logic               tun_start, tun_done, dfs_start, dfs_done;
  cache_cfg_t         tun_icfg, tun_dcfg;
  logic [2:0]         dfs_level;

  tapt_perf_counters #(.INTERVAL_CYCLES(INTERVAL_CYCLES)) u_perf (
    .clk, .rst_n, .restart(ivl_restart), .instr_retired,
    .ic_access, .ic_miss, .dc_access, .dc_miss, .temp, .ivl_end, .snap_valid, .snap);

  tapt_phase_classifier #(.PHASE_THR(PHASE_THR)) u_class (
    .clk, .rst_n, .snap_valid, .snap, .track, .clear_ref,
    .sig_valid, .sig, .phase_change, .ref_dist2);

  tapt_pht #(.NENT(NENT), .ASIZE(ASIZE)) u_pht (
    .clk, .rst_n, .search_start, .search_sig, .search_done, .search_found,
    .search_idx, .search_dist2, .rd_idx, .rd_best, .rd_arch,
    .wr_en, .wr_sig, .wr_best, .wr_arch, .wr_slot, .n_valid);

  tapt_spea2 #(.S(S), .G(G), .ASIZE(ASIZE), .SEED(SEED)) u_eng (
    .clk, .rst_n, .start(eng_start), .prio, .thr_en, .thr, .init_arch(eng_init),
    .eval_req(eng_eval_req), .eval_cfg(eng_eval_cfg), .eval_done(eng_eval_done),
    .eval_obj(eng_eval_obj), .busy(eng_busy), .done(eng_done), .best_cfg(eng_best),
    .best_obj(eng_best_obj), .final_arch(eng_arch));

  tapt_controller #(.ASIZE(ASIZE), .NENT(NENT), .MATCH_THR(PHASE_THR)) u_ctrl (
    .clk, .rst_n, .ivl_end, .snap, .ivl_restart, .est_time, .est_energy,
    .sig_valid, .sig, .phase_change, .track, .clear_ref,
    .search_start, .search_sig, .search_done, .search_found, .search_idx,
    .search_dist2, .rd_idx, .rd_best, .rd_arch, .wr_en, .wr_sig, .wr_best, .wr_arch,
    .eng_start, .eng_init, .eng_eval_req, .eng_eval_cfg, .eng_eval_done,
    .eng_eval_obj, .eng_done, .eng_best, .eng_arch,
    .tun_start, .tun_icfg, .tun_dcfg, .tun_done, .dfs_start, .dfs_level, .dfs_done,
    .cur_cfg, .mode, .n_tuned, .n_reused, .n_changes, .n_evals);

  tapt_cache_tuner u_tuner (
    .clk, .rst_n, .start(tun_start), .icfg(tun_icfg), .dcfg(tun_dcfg),
    .ic_cur, .dc_cur, .ic_idle, .dc_idle, .ic_cfg_we, .dc_cfg_we,
    .ic_cfg, .dc_cfg, .done(tun_done));

  tapt_dfs_ctrl #(.TRANS_CYCLES(TRANS_CYCLES)) u_dfs (
    .clk, .rst_n, .start(dfs_start), .level(dfs_level), .freq_sel, .freq_mhz,
    .core_halt, .done(dfs_done));
endmodule
