// tapt_spea2: the characterization engine, a hardware form of the strength-Pareto
// evolutionary search that finds a phase's best configuration.
//
// Algorithm. The working set U holds a population of S configurations and an
// archive of ASIZE configurations, each with its three measured costs (execution
// time, energy, peak temperature). On start the archive is loaded from init_arch
// (the archive of the most similar earlier phase, or all entries invalid). Then,
// for each of G generations:
//   1. S configurations are drawn uniformly at random (instruction-cache setting,
//      data-cache setting, frequency level) and each is run on the system through
//      the eval_req/eval_done handshake, which returns its costs;
//   2. strength: every member counts the members it Pareto-dominates (one pair per
//      cycle, S+ASIZE squared cycles), keeping the dominance matrix;
//   3. fitness: every member's raw fitness R is the sum of the strengths of the
//      members that dominate it (R = 0 means non-dominated; another S+ASIZE squared
//      cycles);
//   4. the new archive is the ASIZE members with the lowest R (ties: old archive
//      members first, then lower index), which keeps the non-dominated set,
//      trimmed or topped up with the fittest dominated members.
// After the last generation the archive member that minimises the chosen priority
// (EDP, energy, temperature or time) is reported on best_cfg with done.
//
// Temperature threshold: with thr_en, a member whose peak temperature exceeds thr
// gets a fitness penalty above any reachable R, so the archive prefers members
// under the threshold, and the final choice is taken among members under the
// threshold (the coolest member if none is).
//
// Follows the tuning scheme: population, archive, strength and fitness rules,
// priority settings, threshold, the S = 20 / G = 3 / ASIZE = 5 defaults, and an
// inherited archive that keeps its stored costs (only S x G configurations are
// run). This design's own choices: costs instead of "higher is better" objectives
// in the dominance test, the tie order in archive selection, the threshold
// penalty, and a xorshift pseudo-random generator scaled to 18 x 18 x 7 choices.
module tapt_spea2
  import tapt_pkg::*;
#(
  parameter int unsigned S     = 20,
  parameter int unsigned G     = 3,
  parameter int unsigned ASIZE = 5,
  parameter logic [31:0] SEED  = 32'h1234_5678
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  prio_e       prio,
  input  logic        thr_en,
  input  logic [7:0]  thr,
  input  indiv_t      init_arch [ASIZE],
  // configuration evaluation
  output logic        eval_req,
  output sys_cfg_t    eval_cfg,
  input  logic        eval_done,
  input  obj_t        eval_obj,
  // result
  output logic        busy,
  output logic        done,
  output sys_cfg_t    best_cfg,
  output obj_t        best_obj,
  output indiv_t      final_arch [ASIZE]
);
  localparam int unsigned M  = S + ASIZE;
  localparam int unsigned MW = $clog2(M + 1);
  localparam int unsigned RW = 16;
  localparam logic [RW-1:0] PENALTY = RW'(M * M);   // above any reachable R
  localparam logic [RW-1:0] RMAX    = '1;

  typedef enum logic [3:0] {E_IDLE, E_GEN, E_WAIT, E_DOM, E_FITINIT, E_FIT,
                            E_SEL, E_COPY, E_BEST, E_DONE} estate_e;

  estate_e          state;
  indiv_t           u_q    [M];
  indiv_t           na_q   [ASIZE];
  logic [M-1:0]     dom_q  [M];
  logic [MW-1:0]    str_q  [M];
  logic [RW-1:0]    r_q    [M];
  logic [M-1:0]     taken_q;
  logic [MW-1:0]    i_q, j_q, p_q;
  logic [$clog2(ASIZE+1)-1:0] k_q;
  logic [$clog2(G+1)-1:0]     t_q;
  logic [31:0]      rng1_q, rng2_q;
  sys_cfg_t         cand_q;
  // archive-selection scan
  logic             sfound_q;
  logic [MW-1:0]    sbest_q;
  logic [RW-1:0]    sbestr_q;
  // final choice
  logic             bfound_q, bfeas_q;
  logic [31:0]      bkey_q;

  function automatic logic [31:0] xorshift(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  // uniform draw: high bits of (random x range)
  sys_cfg_t draw;
  always_comb begin
    logic [20:0] ic, dc, fr;
    ic = rng1_q[15:0]  * 5'd18;
    dc = rng1_q[31:16] * 5'd18;
    fr = rng2_q[15:0]  * 5'd7;
    draw.icfg = cache_cfg_from_idx(ic[20:16]);
    draw.dcfg = cache_cfg_from_idx(dc[20:16]);
    draw.freq = fr[18:16];
  end

  assign busy     = (state != E_IDLE);
  assign eval_req = (state == E_WAIT);
  assign eval_cfg = cand_q;
  always_comb for (int a = 0; a < ASIZE; a++) final_arch[a] = u_q[S + a];

  // scan helpers
  logic [MW-1:0] sel_e;
  logic          sel_better;
  always_comb begin
    sel_e      = MW'((32'(p_q) + S >= M) ? 32'(p_q) + S - M : 32'(p_q) + S);
    sel_better = u_q[sel_e].valid && !taken_q[sel_e] && r_q[sel_e] != RMAX &&
                 (!sfound_q || r_q[sel_e] < sbestr_q);
  end

  indiv_t        bc;
  logic          bc_feas, bc_better;
  logic [31:0]   bc_key;
  always_comb begin
    bc        = u_q[S + 32'(p_q)];
    bc_feas   = !thr_en || (bc.obj.temp <= thr);
    bc_key    = bc_feas ? prio_key(prio, bc.obj) : {24'd0, bc.obj.temp};
    bc_better = bc.valid && (!bfound_q || (bc_feas && !bfeas_q) ||
                             (bc_feas == bfeas_q && bc_key < bkey_q));
  end

  logic pair_dom;
  assign pair_dom = (i_q != j_q) && u_q[i_q].valid && u_q[j_q].valid &&
                    dominates(u_q[i_q].obj, u_q[j_q].obj);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= E_IDLE;
      done     <= 1'b0;
      i_q <= '0; j_q <= '0; p_q <= '0; k_q <= '0; t_q <= '0;
      rng1_q   <= SEED;
      rng2_q   <= ~SEED ^ 32'h9e37_79b9;
      cand_q   <= BASE_CFG;
      taken_q  <= '0;
      sfound_q <= 1'b0; sbest_q <= '0; sbestr_q <= '0;
      bfound_q <= 1'b0; bfeas_q <= 1'b0; bkey_q <= '0;
      best_cfg <= BASE_CFG;
      best_obj <= '0;
      for (int e = 0; e < M; e++) begin
        u_q[e] <= '0; dom_q[e] <= '0; str_q[e] <= '0; r_q[e] <= '0;
      end
      for (int a = 0; a < ASIZE; a++) na_q[a] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        E_IDLE: if (start) begin
          for (int a = 0; a < ASIZE; a++) u_q[S + a] <= init_arch[a];
          t_q   <= '0;
          i_q   <= '0;
          state <= E_GEN;
        end
        E_GEN: begin                      // draw one population member
          cand_q <= draw;
          rng1_q <= xorshift(rng1_q);
          rng2_q <= xorshift(rng2_q);
          state  <= E_WAIT;
        end
        E_WAIT: if (eval_done) begin      // member has been run on the system
          u_q[i_q] <= '{valid: 1'b1, cfg: cand_q, obj: eval_obj};
          if (i_q == MW'(S - 1)) begin
            i_q <= '0; j_q <= '0;
            for (int e = 0; e < M; e++) str_q[e] <= '0;
            state <= E_DOM;
          end else begin
            i_q   <= i_q + 1'b1;
            state <= E_GEN;
          end
        end
        E_DOM: begin                      // strength, Eq. (2)
          dom_q[i_q][j_q] <= pair_dom;
          if (pair_dom) str_q[i_q] <= str_q[i_q] + 1'b1;
          if (j_q == MW'(M - 1)) begin
            j_q <= '0;
            if (i_q == MW'(M - 1)) begin i_q <= '0; state <= E_FITINIT; end
            else i_q <= i_q + 1'b1;
          end else j_q <= j_q + 1'b1;
        end
        E_FITINIT: begin
          for (int e = 0; e < M; e++)
            r_q[e] <= !u_q[e].valid ? RMAX :
                      (thr_en && u_q[e].obj.temp > thr) ? PENALTY : '0;
          state <= E_FIT;
        end
        E_FIT: begin                      // raw fitness, Eq. (3)
          if (dom_q[j_q][i_q] && r_q[i_q] != RMAX)
            r_q[i_q] <= r_q[i_q] + RW'(str_q[j_q]);
          if (j_q == MW'(M - 1)) begin
            j_q <= '0;
            if (i_q == MW'(M - 1)) begin
              i_q <= '0; p_q <= '0; k_q <= '0;
              taken_q <= '0; sfound_q <= 1'b0;
              state <= E_SEL;
            end else i_q <= i_q + 1'b1;
          end else j_q <= j_q + 1'b1;
        end
        E_SEL: begin                      // archive = ASIZE lowest-R members
          if (sel_better) begin
            sfound_q <= 1'b1; sbest_q <= sel_e; sbestr_q <= r_q[sel_e];
          end
          if (p_q == MW'(M - 1)) begin
            p_q      <= '0;
            sfound_q <= 1'b0;
            if (sel_better) begin
              na_q[k_q] <= u_q[sel_e]; taken_q[sel_e] <= 1'b1;
            end else if (sfound_q) begin
              na_q[k_q] <= u_q[sbest_q]; taken_q[sbest_q] <= 1'b1;
            end else begin
              na_q[k_q] <= '0;
            end
            if (k_q == ($clog2(ASIZE+1))'(ASIZE - 1)) state <= E_COPY;
            else k_q <= k_q + 1'b1;
          end else p_q <= p_q + 1'b1;
        end
        E_COPY: begin
          for (int a = 0; a < ASIZE; a++) u_q[S + a] <= na_q[a];
          if (t_q == ($clog2(G+1))'(G - 1)) begin
            p_q <= '0; bfound_q <= 1'b0;
            state <= E_BEST;
          end else begin
            t_q <= t_q + 1'b1; i_q <= '0;
            state <= E_GEN;
          end
        end
        E_BEST: begin                     // Algorithm 1 line 24
          if (bc_better) begin
            bfound_q <= 1'b1; bfeas_q <= bc_feas; bkey_q <= bc_key;
            best_cfg <= bc.cfg; best_obj <= bc.obj;
          end
          if (p_q == MW'(ASIZE - 1)) state <= E_DONE;
          else p_q <= p_q + 1'b1;
        end
        E_DONE: begin
          done  <= 1'b1;
          state <= E_IDLE;
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  a_eval_cfg_legal: assert property (@(posedge clk) disable iff (!rst_n)
    eval_req |-> (cache_cfg_legal(eval_cfg.icfg) && cache_cfg_legal(eval_cfg.dcfg) &&
                  eval_cfg.freq < 3'(N_FREQ)));
endmodule
