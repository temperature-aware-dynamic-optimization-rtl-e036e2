// tb_tapt_pht: fills a small phase history table, checks that each stored entry
// reads back, that the search returns the nearest entry (distance worked out
// here), its timing of NENT+1 cycles, and first-free then round-robin replacement.
module tb_tapt_pht;
  import tapt_pkg::*;
  localparam int unsigned NENT = 4, ASIZE = 2, IW = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic search_start = 0, search_done, search_found; sig_t search_sig;
  logic [IW-1:0] search_idx, rd_idx = 0, wr_slot; logic [DIST2_W-1:0] search_dist2;
  sys_cfg_t rd_best, wr_best; indiv_t rd_arch [ASIZE]; indiv_t wr_arch [ASIZE];
  logic wr_en = 0; sig_t wr_sig; logic [IW:0] n_valid;
  tapt_pht #(.NENT(NENT), .ASIZE(ASIZE)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask

  sig_t msig [NENT]; sys_cfg_t mbest [NENT]; bit mvalid [NENT];

  function automatic sig_t rsig();
    sig_t s; s.imr = 9'($urandom_range(0, 256)); s.dmr = 9'($urandom_range(0, 256));
    s.ipc = 11'($urandom_range(0, 1024)); return s;
  endfunction
  function automatic longint d2(sig_t a, sig_t b);
    return (longint'(a.imr) - b.imr) ** 2 + (longint'(a.dmr) - b.dmr) ** 2 + (longint'(a.ipc) - b.ipc) ** 2;
  endfunction

  task automatic write(input int exp_slot);
    @(negedge clk);
    wr_sig = rsig(); wr_best = sys_cfg_t'($urandom);
    for (int a = 0; a < ASIZE; a++) wr_arch[a] = indiv_t'({$urandom, $urandom, $urandom});
    check(wr_slot == IW'(exp_slot), $sformatf("slot %0d expected %0d", wr_slot, exp_slot));
    msig[exp_slot] = wr_sig; mbest[exp_slot] = wr_best; mvalid[exp_slot] = 1;
    wr_en = 1; @(negedge clk); wr_en = 0;
    rd_idx = IW'(exp_slot); #1;
    check(rd_best == mbest[exp_slot] && rd_arch[ASIZE-1] == wr_arch[ASIZE-1], "read back");
  endtask

  task automatic search(input sig_t key);
    int lat = 0, bi = -1; longint bd = 0;
    for (int e = 0; e < NENT; e++)
      if (mvalid[e] && (bi < 0 || d2(key, msig[e]) < bd)) begin bi = e; bd = d2(key, msig[e]); end
    @(negedge clk); search_sig = key; search_start = 1;
    @(negedge clk); search_start = 0; lat = 1;
    while (!search_done) begin @(negedge clk); lat++; if (lat > 40) break; end
    check(lat == NENT + 1, $sformatf("search latency %0d", lat));
    check(search_found == (bi >= 0), "found flag");
    if (bi >= 0) check(search_idx == IW'(bi) && search_dist2 == DIST2_W'(bd),
                       $sformatf("nearest %0d/%0d expected %0d/%0d", search_idx, search_dist2, bi, bd));
  endtask

  initial begin
    for (int e = 0; e < NENT; e++) mvalid[e] = 0;
    search_sig = '0; wr_sig = '0; wr_best = '0;
    for (int a = 0; a < ASIZE; a++) wr_arch[a] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    search(rsig());
    for (int e = 0; e < NENT; e++) begin write(e); search(rsig()); end
    check(n_valid == NENT, "table full");
    search(msig[2]);
    check(search_dist2 == 0, "exact match has distance 0");
    for (int k = 0; k < 6; k++) begin write(k % NENT); search(rsig()); end
    repeat (20) search(rsig());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
