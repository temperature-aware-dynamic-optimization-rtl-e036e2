// tapt_controller: the sequencing of phase-based tuning for one core.
//
// Flow (the tuning scheme's overview flow):
//   * CLASSIFY: the core runs on the base configuration (32 KB, 4-way, 64-byte
//     lines for both caches, 2 GHz) for one whole interval; the interval's
//     signature (iMR, dMR, IPC) identifies the phase.
//   * SEARCH: the phase history table is searched for the nearest stored phase.
//     If its squared distance is at most MATCH_THR the phase is known: its stored
//     configuration is applied and the core goes to RUN (a reuse).
//   * TUNE: otherwise the phase is new. The characterization engine is started
//     with the nearest phase's archive (or an empty archive if the table is empty);
//     every configuration it asks for is applied (caches through the cache tuner,
//     clock through the DFS controller), run for one whole interval, and answered
//     with the estimated execution time and energy and the interval's peak
//     temperature. When the engine finishes, the phase's signature, best
//     configuration and archive are written into the table and the best
//     configuration is applied.
//   * RUN: the phase executes with its configuration. The classifier compares each
//     interval with the second one of the run (the first follows a cache flush);
//     a phase change returns to CLASSIFY.
// Applying a configuration starts the cache tuner and the DFS controller together,
// waits for both, and restarts the interval counters, so every measurement covers
// one whole interval of a single configuration.
//
// Timing: est_time and est_energy must be valid in the cycle after ivl_end (they
// are derived from the interval's counters, which are presented then).
// The flow, the base configuration and the reuse of the most similar phase's
// archive follow the tuning scheme; the matching threshold, the whole-interval
// restarts and the reference-interval rule are this design's own.
module tapt_controller
  import tapt_pkg::*;
#(
  parameter int unsigned ASIZE     = 5,
  parameter int unsigned NENT      = 32,
  parameter int unsigned MATCH_THR = 1024,
  localparam int unsigned IW       = (NENT > 1) ? $clog2(NENT) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // interval counters
  input  logic               ivl_end,
  input  perf_snap_t         snap,
  output logic               ivl_restart,
  input  logic [15:0]        est_time,
  input  logic [15:0]        est_energy,
  // classifier
  input  logic               sig_valid,
  input  sig_t               sig,
  input  logic               phase_change,
  output logic               track,
  output logic               clear_ref,
  // phase history table
  output logic               search_start,
  output sig_t               search_sig,
  input  logic               search_done,
  input  logic               search_found,
  input  logic [IW-1:0]      search_idx,
  input  logic [DIST2_W-1:0] search_dist2,
  output logic [IW-1:0]      rd_idx,
  input  sys_cfg_t           rd_best,
  input  indiv_t             rd_arch [ASIZE],
  output logic               wr_en,
  output sig_t               wr_sig,
  output sys_cfg_t           wr_best,
  output indiv_t             wr_arch [ASIZE],
  // characterization engine
  output logic               eng_start,
  output indiv_t             eng_init [ASIZE],
  input  logic               eng_eval_req,
  input  sys_cfg_t           eng_eval_cfg,
  output logic               eng_eval_done,
  output obj_t               eng_eval_obj,
  input  logic               eng_done,
  input  sys_cfg_t           eng_best,
  input  indiv_t             eng_arch [ASIZE],
  // cache tuner and DFS controller
  output logic               tun_start,
  output cache_cfg_t         tun_icfg,
  output cache_cfg_t         tun_dcfg,
  input  logic               tun_done,
  output logic               dfs_start,
  output logic [2:0]         dfs_level,
  input  logic               dfs_done,
  // status
  output sys_cfg_t           cur_cfg,
  output logic [2:0]         mode,
  output logic [15:0]        n_tuned,
  output logic [15:0]        n_reused,
  output logic [15:0]        n_changes,
  output logic [15:0]        n_evals
);
  typedef enum logic [3:0] {T_RESET, T_APPLY, T_APPLY_WAIT, T_CLASSIFY, T_SEARCH,
                            T_TUNE, T_EVAL, T_EVAL2, T_RUN} tstate_e;

  tstate_e  state, ret_q;
  sys_cfg_t apply_q;
  logic     tdone_q, ddone_q, seen_end_q;
  sig_t     sig_q;
  logic     nearest_q;
  logic [IW-1:0] rd_idx_q;

  // the table is read at the search result while it arrives, then at the held index
  assign rd_idx = (state == T_SEARCH) ? search_idx : rd_idx_q;

  assign search_sig = sig_q;
  assign wr_sig     = sig_q;
  assign wr_best    = eng_best;
  always_comb for (int a = 0; a < ASIZE; a++) begin
    wr_arch[a]  = eng_arch[a];
    eng_init[a] = nearest_q ? rd_arch[a] : '0;
  end
  assign tun_icfg      = apply_q.icfg;
  assign tun_dcfg      = apply_q.dcfg;
  assign dfs_level     = apply_q.freq;
  assign track         = (state == T_RUN) && seen_end_q;
  assign eng_eval_done = (state == T_EVAL2);
  assign eng_eval_obj  = '{etime: est_time, energy: est_energy, temp: snap.peak_temp};
  assign mode          = (state == T_RUN) ? 3'd3 :
                         (state == T_TUNE || state == T_EVAL || state == T_EVAL2) ? 3'd2 :
                         (state == T_CLASSIFY || state == T_SEARCH) ? 3'd1 : 3'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= T_RESET;
      ret_q        <= T_CLASSIFY;
      apply_q      <= BASE_CFG;
      cur_cfg      <= BASE_CFG;
      tdone_q      <= 1'b0;
      ddone_q      <= 1'b0;
      seen_end_q   <= 1'b0;
      sig_q        <= '0;
      nearest_q    <= 1'b0;
      rd_idx_q     <= '0;
      ivl_restart  <= 1'b0;
      clear_ref    <= 1'b0;
      search_start <= 1'b0;
      wr_en        <= 1'b0;
      eng_start    <= 1'b0;
      tun_start    <= 1'b0;
      dfs_start    <= 1'b0;
      n_tuned      <= '0;
      n_reused     <= '0;
      n_changes    <= '0;
      n_evals      <= '0;
    end else begin
      ivl_restart  <= 1'b0;
      clear_ref    <= 1'b0;
      search_start <= 1'b0;
      wr_en        <= 1'b0;
      eng_start    <= 1'b0;
      tun_start    <= 1'b0;
      dfs_start    <= 1'b0;
      unique case (state)
        T_RESET: begin
          apply_q <= BASE_CFG;
          ret_q   <= T_CLASSIFY;
          state   <= T_APPLY;
        end
        T_APPLY: begin
          tun_start <= 1'b1;
          dfs_start <= 1'b1;
          tdone_q   <= 1'b0;
          ddone_q   <= 1'b0;
          state     <= T_APPLY_WAIT;
        end
        T_APPLY_WAIT: begin
          if (tun_done) tdone_q <= 1'b1;
          if (dfs_done) ddone_q <= 1'b1;
          if ((tdone_q || tun_done) && (ddone_q || dfs_done)) begin
            cur_cfg     <= apply_q;
            ivl_restart <= 1'b1;
            seen_end_q  <= 1'b0;
            if (ret_q == T_RUN) clear_ref <= 1'b1;
            state       <= ret_q;
          end
        end
        T_CLASSIFY: begin
          if (ivl_end) seen_end_q <= 1'b1;
          if (seen_end_q && sig_valid) begin
            sig_q        <= sig;
            search_start <= 1'b1;
            state        <= T_SEARCH;
          end
        end
        T_SEARCH: if (search_done) begin
          rd_idx_q  <= search_idx;
          nearest_q <= search_found;
          if (search_found && search_dist2 <= DIST2_W'(MATCH_THR)) begin
            n_reused <= n_reused + 1'b1;
            apply_q  <= rd_best;
            ret_q    <= T_RUN;
            state    <= T_APPLY;
          end else begin
            eng_start <= 1'b1;
            state     <= T_TUNE;
          end
        end
        T_TUNE: begin
          if (eng_done) begin
            wr_en   <= 1'b1;
            n_tuned <= n_tuned + 1'b1;
            apply_q <= eng_best;
            ret_q   <= T_RUN;
            state   <= T_APPLY;
          end else if (eng_eval_req && !eng_start) begin
            apply_q <= eng_eval_cfg;
            ret_q   <= T_EVAL;
            state   <= T_APPLY;
          end
        end
        T_EVAL: if (ivl_end) state <= T_EVAL2;
        T_EVAL2: begin
          n_evals <= n_evals + 1'b1;
          state   <= T_TUNE;
        end
        T_RUN: begin
          if (ivl_end) seen_end_q <= 1'b1;
          if (phase_change) begin
            n_changes <= n_changes + 1'b1;
            apply_q   <= BASE_CFG;
            ret_q     <= T_CLASSIFY;
            state     <= T_APPLY;
          end
        end
        default: state <= T_RESET;
      endcase
    end
  end

endmodule
