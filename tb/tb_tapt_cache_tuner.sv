// tb_tapt_cache_tuner: checks that the tuner writes a cache's configuration
// register only when the setting changes, only while that cache is idle, with the
// requested value, and reports done after the writes.
module tb_tapt_cache_tuner;
  import tapt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0; cache_cfg_t icfg, dcfg, ic_cur, dc_cur, ic_cfg, dc_cfg;
  logic ic_idle = 1, dc_idle = 1, ic_cfg_we, dc_cfg_we, done;
  tapt_cache_tuner dut (.*);

  int checks = 0, failures = 0, iw = 0, dw = 0, bad = 0;
  task automatic check(input bit c, input string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask
  // the two "caches": registers written by the tuner
  always @(posedge clk) begin
    if (ic_cfg_we) begin if (!ic_idle) bad++; ic_cur <= ic_cfg; iw++; end
    if (dc_cfg_we) begin if (!dc_idle) bad++; dc_cur <= dc_cfg; dw++; end
  end

  task automatic tune(input cache_cfg_t i, input cache_cfg_t d, input int ibusy, input int dbusy);
    int i0 = iw, d0 = dw, cyc = 0;
    bit ich = (i != ic_cur), dch = (d != dc_cur);
    @(negedge clk); icfg = i; dcfg = d; start = 1; ic_idle = (ibusy == 0); dc_idle = (dbusy == 0);
    @(negedge clk); start = 0;
    while (!done) begin
      cyc++;
      if (cyc >= ibusy) ic_idle = 1;
      if (cyc >= dbusy) dc_idle = 1;
      @(negedge clk);
      check(cyc < 100, "done arrives");
      if (cyc >= 100) break;
    end
    check(ic_cur == i && dc_cur == d, "caches hold the requested settings");
    check(iw - i0 == int'(ich) && dw - d0 == int'(dch), "only changed caches written");
    check(bad == 0, "no write while busy");
    if (ich || dch) check(cyc >= ((ich ? ibusy : 0) > (dch ? dbusy : 0) ? (ich ? ibusy : 0) : (dch ? dbusy : 0)), "waited for idle");
  endtask

  initial begin
    ic_cur = BASE_CACHE; dc_cur = BASE_CACHE;
    repeat (3) @(negedge clk); rst_n = 1;
    tune('{SZ_8K, AS_1, LN_16}, '{SZ_16K, AS_2, LN_32}, 0, 0);
    tune('{SZ_8K, AS_1, LN_16}, '{SZ_32K, AS_4, LN_64}, 0, 5);
    tune('{SZ_32K, AS_2, LN_32}, '{SZ_32K, AS_4, LN_64}, 7, 0);
    tune('{SZ_32K, AS_2, LN_32}, '{SZ_32K, AS_4, LN_64}, 0, 0);
    tune('{SZ_16K, AS_1, LN_64}, '{SZ_8K, AS_1, LN_32}, 4, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
