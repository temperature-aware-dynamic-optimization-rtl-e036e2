// tb_tapt_spea2: checks the characterization engine against a reference model of
// the same algorithm written here with queues and integer arithmetic.
//
// The testbench answers each evaluation with costs from a fixed synthetic
// landscape (higher frequency: faster, more energy, hotter; larger lines and
// associativity: hotter). It records every configuration the engine runs, then
// recomputes dominance, strength, raw fitness, the archive of each generation and
// the final choice for the priority setting and threshold, and compares the final
// archive and best configuration. It also checks that exactly S x G
// configurations are run, that all are legal, and that an inherited archive is used.
module tb_tapt_spea2;
  import tapt_pkg::*;
  localparam int unsigned S = 8, G = 3, A = 3, M = S + A;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0; prio_e prio = PRIO_S; logic thr_en = 0; logic [7:0] thr = 0;
  indiv_t init_arch [A];
  logic eval_req, eval_done = 0; sys_cfg_t eval_cfg; obj_t eval_obj;
  logic busy, done; sys_cfg_t best_cfg; obj_t best_obj; indiv_t final_arch [A];
  tapt_spea2 #(.S(S), .G(G), .ASIZE(A)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask

  function automatic obj_t landscape(sys_cfg_t c);
    obj_t o; int h;
    h = int'(c) * 2654435761;
    h = (h >>> 8) & 63;
    o.etime  = 16'(2000 - 200 * c.freq + 40 * (2 - c.icfg.size) + 30 * (2 - c.dcfg.line) + h);
    o.energy = 16'(500 + 80 * c.freq + 30 * c.icfg.size + 30 * c.dcfg.size + 20 * c.icfg.line + (h ^ 21));
    o.temp   = 8'(60 + 3 * c.freq + 3 * c.icfg.line + 3 * c.dcfg.line + 2 * c.icfg.assoc +
                  2 * c.dcfg.assoc + c.icfg.size + c.dcfg.size);
    return o;
  endfunction

  // answer evaluations after a random delay
  int nevals = 0, illegal = 0;
  indiv_t pop [S];
  always begin
    @(negedge clk);
    if (eval_req && !eval_done) begin
      repeat ($urandom_range(0, 4)) @(negedge clk);
      if (!(cache_cfg_legal(eval_cfg.icfg) && cache_cfg_legal(eval_cfg.dcfg) && eval_cfg.freq < 7)) illegal++;
      pop[nevals % S] = '{valid: 1'b1, cfg: eval_cfg, obj: landscape(eval_cfg)};
      eval_obj = landscape(eval_cfg); eval_done = 1; nevals++;
      @(negedge clk); eval_done = 0;
    end
  end

  // ---- reference model of one generation's archive update ----
  function automatic void update_archive(ref indiv_t arch [A], input indiv_t p [S],
                                         input bit ten, input logic [7:0] th);
    indiv_t u [M]; int str [M]; int r [M]; bit taken [M]; indiv_t na [A];
    for (int e = 0; e < S; e++) u[e] = p[e];
    for (int a = 0; a < A; a++) u[S + a] = arch[a];
    for (int i = 0; i < M; i++) begin
      str[i] = 0;
      for (int j = 0; j < M; j++)
        if (i != j && u[i].valid && u[j].valid && dominates(u[i].obj, u[j].obj)) str[i]++;
    end
    for (int i = 0; i < M; i++) begin
      r[i] = !u[i].valid ? 65535 : (ten && u[i].obj.temp > th) ? M * M : 0;
      if (u[i].valid)
        for (int j = 0; j < M; j++)
          if (i != j && u[j].valid && dominates(u[j].obj, u[i].obj)) r[i] += str[j];
      taken[i] = 0;
    end
    for (int k = 0; k < A; k++) begin
      int best = -1;
      for (int p2 = 0; p2 < M; p2++) begin
        int e = (p2 + S) % M;
        if (u[e].valid && !taken[e] && r[e] != 65535 && (best < 0 || r[e] < r[best])) best = e;
      end
      if (best >= 0) begin na[k] = u[best]; taken[best] = 1; end else na[k] = '0;
    end
    for (int a = 0; a < A; a++) arch[a] = na[a];
  endfunction

  task automatic run(input prio_e pr, input bit ten, input logic [7:0] th, input bit inherit);
    indiv_t arch [A]; int n0 = nevals; sys_cfg_t exp_best; bit bf, bfe; longint bk;
    @(negedge clk);
    prio = pr; thr_en = ten; thr = th;
    $display("run prio=%s thr_en=%0d thr=%0d inherit=%0d", pr.name(), ten, th, inherit);
    if (!inherit) for (int a = 0; a < A; a++) init_arch[a] = '0;
    else for (int a = 0; a < A; a++) init_arch[a] = final_arch[a];
    for (int a = 0; a < A; a++) arch[a] = init_arch[a];
    start = 1; @(negedge clk); start = 0;
    for (int g = 0; g < G; g++) begin
      wait (nevals == n0 + S * (g + 1));
      update_archive(arch, pop, ten, th);
    end
    wait (done); #1;
    check(nevals - n0 == S * G, $sformatf("%0d evaluations, expected %0d", nevals - n0, S * G));
    for (int a = 0; a < A; a++)
      check(final_arch[a] == arch[a], $sformatf("archive[%0d] %0d/%0d/%0d expected %0d/%0d/%0d", a, final_arch[a].obj.etime, final_arch[a].obj.energy, final_arch[a].obj.temp, arch[a].obj.etime, arch[a].obj.energy, arch[a].obj.temp));
    bf = 0; bfe = 0; bk = 0; exp_best = '0;
    for (int a = 0; a < A; a++) if (arch[a].valid) begin
      bit fe = !ten || arch[a].obj.temp <= th;
      longint key = fe ? longint'(prio_key(pr, arch[a].obj)) : longint'(arch[a].obj.temp);
      if (!bf || (fe && !bfe) || (fe == bfe && key < bk)) begin bf = 1; bfe = fe; bk = key; exp_best = arch[a].cfg; end
    end
    check(best_cfg == exp_best, $sformatf("best %p expected %p", best_cfg, exp_best));
    if (ten && bfe) check(best_obj.temp <= th, "best meets the threshold");
    @(negedge clk);
  endtask

  initial begin
    for (int a = 0; a < A; a++) init_arch[a] = '0;
    eval_obj = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(PRIO_S, 0, 0, 0);
    run(PRIO_T, 1, 8'd72, 1);
    run(PRIO_X, 0, 0, 1);
    run(PRIO_N, 1, 8'd70, 0);
    run(PRIO_S, 1, 8'd60, 0);   // threshold no configuration meets
    check(illegal == 0, "all evaluated configurations legal");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
