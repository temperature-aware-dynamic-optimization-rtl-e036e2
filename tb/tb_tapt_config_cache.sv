// tb_tapt_config_cache: self-checking test of the configurable L1 cache.
//
// A behavioural main memory returns each word as a fixed function of its address
// (or the last value written there). The test sets several configurations and
// checks, against expectations worked out from the cache geometry: read data;
// hit or miss of each access; the number of 16-byte lines fetched per miss
// (1, 2, 4 for 16/32/64-byte lines); conflicts that exist only for a given size
// and associativity (way shutdown, way concatenation); write-through; that a
// reconfiguration empties the cache; and the one-cycle hit latency.
module tb_tapt_config_cache;
  import tapt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we; cache_cfg_t cfg_in, cfg; logic idle;
  logic cpu_req, cpu_we, cpu_ack; logic [31:0] cpu_addr, cpu_wdata, cpu_rdata;
  logic mem_req, mem_we, mem_ack; logic [31:0] mem_addr, mem_wdata; logic [127:0] mem_rdata;
  logic ev_access, ev_miss;

  tapt_config_cache dut (.*);

  int checks = 0, failures = 0;
  int line_reads = 0, mem_writes = 0, misses = 0, accesses = 0;
  logic [31:0] written [logic [31:0]];

  function automatic logic [31:0] memword(logic [31:0] a);
    if (written.exists(a)) return written[a];
    return (a * 32'h9E37_79B1) ^ 32'hA5A5_0F0F;
  endfunction

  // memory: acknowledges two cycles after a request
  logic [1:0] mdly = 0;
  initial mem_rdata = 0;
  always @(posedge clk) begin
    mem_ack <= 1'b0;
    if (mem_req && !mem_ack) begin
      if (mdly == 2'd2) begin
        mem_ack <= 1'b1; mdly <= 0;
        if (mem_we) begin written[mem_addr] = mem_wdata; mem_writes++; end
        else begin
          line_reads++;
          for (int w = 0; w < 4; w++) mem_rdata[32*w +: 32] <= memword({mem_addr[31:4], 4'b0} + 32'(4*w));
        end
      end else mdly <= mdly + 1;
    end else mdly <= 0;
    if (ev_access) accesses++;
    if (ev_miss) misses++;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic setcfg(input csize_e s, input cassoc_e a, input cline_e l);
    @(negedge clk); wait (idle);
    cfg_in = '{size: s, assoc: a, line: l}; cfg_we = 1;
    @(negedge clk); cfg_we = 0;
    check(cfg == cfg_in, "config register");
  endtask

  // one access; returns whether it hit and the latency in cycles
  task automatic access(input logic [31:0] a, input bit we, input logic [31:0] wd,
                        output bit hit, output int lat, output logic [31:0] rd);
    int m0, r0;
    @(negedge clk);
    m0 = misses; r0 = line_reads;
    cpu_req = 1; cpu_we = we; cpu_addr = a; cpu_wdata = wd; lat = 0;
    do begin @(posedge clk); lat++; #1; end while (!cpu_ack);
    rd = cpu_rdata;
    @(posedge clk); #1 cpu_req = 0;
    hit = (misses == m0);
  endtask

  task automatic rd_expect(input logic [31:0] a, input bit exp_hit, input int exp_lines, input string what);
    bit h; int lat, r0; logic [31:0] d;
    r0 = line_reads;
    access(a, 0, 0, h, lat, d);
    check(d == memword(a), $sformatf("%s: data at %h", what, a));
    check(h == exp_hit, $sformatf("%s: hit=%0d expected %0d at %h", what, h, exp_hit, a));
    check(line_reads - r0 == exp_lines, $sformatf("%s: %0d lines fetched, expected %0d", what, line_reads - r0, exp_lines));
    if (exp_hit) check(lat == 1, $sformatf("%s: hit latency %0d", what, lat));
  endtask

  initial begin
    bit h; int lat, w0; logic [31:0] d;
    cfg_we = 0; cfg_in = BASE_CACHE; cpu_req = 0; cpu_we = 0; cpu_addr = 0; cpu_wdata = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    check(cfg == BASE_CACHE, "reset configuration is the base one");

    // 8 KB direct-mapped, 16-byte lines
    setcfg(SZ_8K, AS_1, LN_16);
    rd_expect(32'h0000_1000, 0, 1, "8K/1/16 first");
    rd_expect(32'h0000_1004, 1, 0, "8K/1/16 same line");
    rd_expect(32'h0000_1010, 0, 1, "8K/1/16 next line misses");
    rd_expect(32'h0000_3000, 0, 1, "8K/1/16 conflict 8KB apart");
    rd_expect(32'h0000_1000, 0, 1, "8K/1/16 evicted");

    // 16 KB direct-mapped: two banks concatenated, 8 KB apart no conflict
    setcfg(SZ_16K, AS_1, LN_16);
    rd_expect(32'h0000_1000, 0, 1, "16K/1 after reconfig empty");
    rd_expect(32'h0000_3000, 0, 1, "16K/1 other bank");
    rd_expect(32'h0000_1000, 1, 0, "16K/1 no conflict at 8KB");
    rd_expect(32'h0000_5000, 0, 1, "16K/1 16KB apart");
    rd_expect(32'h0000_1000, 0, 1, "16K/1 evicted by 16KB conflict");

    // 16 KB 2-way: addresses 8 KB apart share a set, both kept
    setcfg(SZ_16K, AS_2, LN_16);
    rd_expect(32'h0000_1000, 0, 1, "16K/2 a");
    rd_expect(32'h0000_3000, 0, 1, "16K/2 b");
    rd_expect(32'h0000_1000, 1, 0, "16K/2 a kept");
    rd_expect(32'h0000_3000, 1, 0, "16K/2 b kept");
    rd_expect(32'h0000_5000, 0, 1, "16K/2 third");

    // 32 KB 4-way, 64-byte lines: 4 lines fetched per miss
    setcfg(SZ_32K, AS_4, LN_64);
    rd_expect(32'h0000_1024, 0, 4, "32K/4/64 miss fetches 4");
    rd_expect(32'h0000_1000, 1, 0, "32K/4/64 same logical line");
    rd_expect(32'h0000_1034, 1, 0, "32K/4/64 last quarter");
    rd_expect(32'h0000_1040, 0, 4, "32K/4/64 next logical line");
    for (int k = 1; k < 4; k++) rd_expect(32'h0000_1000 + 32'(k) * 32'h2000, 0, 4, "32K/4 fill ways");
    for (int k = 0; k < 4; k++) rd_expect(32'h0000_1000 + 32'(k) * 32'h2000, 1, 0, "32K/4 all ways kept");

    // 32-byte lines fetch 2
    setcfg(SZ_32K, AS_2, LN_32);
    rd_expect(32'h0000_2010, 0, 2, "32K/2/32 miss fetches 2");
    rd_expect(32'h0000_2000, 1, 0, "32K/2/32 pair line");
    rd_expect(32'h0000_2020, 0, 2, "32K/2/32 next");

    // write-through, no write allocate
    w0 = mem_writes;
    access(32'h0000_2004, 1, 32'hDEAD_BEEF, h, lat, d);
    check(mem_writes == w0 + 1 && written[32'h0000_2004] == 32'hDEAD_BEEF, "write reaches memory");
    rd_expect(32'h0000_2004, 1, 0, "write hit updated line");
    access(32'h0000_7F00, 1, 32'h1234_5678, h, lat, d);
    check(!h, "write miss counted as miss");
    rd_expect(32'h0000_7F00, 0, 2, "no write allocate");

    check(accesses > 30 && misses > 10, "event counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
