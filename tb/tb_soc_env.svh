// tb_soc_env.svh: test environment shared by the system-level testbenches of
// tapt_soc. Included inside a testbench module that declares localparams NC
// (cores) and IVL (interval cycles) and instantiates the system as "dut".
//
// It provides behavioural models of what lies outside the RTL:
//   * a core per slot running a phase program: an instruction-fetch loop over a
//     footprint and loads/stores to pseudo-random addresses in a data footprint,
//     retiring one instruction per fetch (plus up to 2 more per fetch, by phase);
//     it stops while core_halt is high;
//   * main memory: every word is a fixed function of its address unless written;
//     reads take 4 cycles, and every value read back by a core is checked;
//   * a temperature sensor: hotter with frequency, line size, associativity and
//     size, in that order of weight among the cache knobs (line size strongest);
//   * a power/performance estimator turning the interval counters into time per
//     instruction (scaled by 2 GHz / f) and energy (power x time).
// It counts every mechanism the design has: tunings, reuses, phase changes,
// frequency transitions, cache reconfigurations, multi-line fills, misses.

logic clk = 0, rst_n = 0;
always #5 clk = ~clk;
prio_e prio = PRIO_S; logic thr_en = 0; logic [7:0] thr = 8'd255;
logic         ic_req [NC];  logic [31:0] ic_addr [NC]; logic ic_ack [NC]; logic [31:0] ic_rdata [NC];
logic         dc_req [NC];  logic dc_we [NC]; logic [31:0] dc_addr [NC]; logic [31:0] dc_wdata [NC];
logic         dc_ack [NC];  logic [31:0] dc_rdata [NC];
logic         icm_req [NC]; logic icm_we [NC]; logic [31:0] icm_addr [NC]; logic [31:0] icm_wdata [NC];
logic         icm_ack [NC]; logic [127:0] icm_rdata [NC];
logic         dcm_req [NC]; logic dcm_we [NC]; logic [31:0] dcm_addr [NC]; logic [31:0] dcm_wdata [NC];
logic         dcm_ack [NC]; logic [127:0] dcm_rdata [NC];
logic [2:0]   instr_retired [NC]; logic [7:0] temp [NC];
logic         ivl_end [NC]; perf_snap_t snap [NC];
logic [15:0]  est_time [NC]; logic [15:0] est_energy [NC];
logic [2:0]   freq_sel [NC]; logic [11:0] freq_mhz [NC]; logic core_halt [NC];
sys_cfg_t     cur_cfg [NC]; logic [2:0] mode [NC];
logic [15:0]  n_tuned [NC], n_reused [NC], n_changes [NC], n_evals [NC];

int checks = 0, failures = 0;
task automatic check(input bit c, input string w);
  checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
endtask

// ---- main memory ---------------------------------------------------------
logic [31:0] mem_written [logic [31:0]];
function automatic logic [31:0] memword(logic [31:0] a);
  if (mem_written.exists(a)) return mem_written[a];
  return (a * 32'h9E37_79B1) ^ 32'h5A5A_F00F;
endfunction
int ev_fill_lines [NC];      // lines fetched by the data cache
int ev_multi_fill = 0;       // misses that fetched more than one line
int ev_dfs = 0, ev_icfg = 0, ev_dcfg = 0, ev_imiss = 0, ev_dmiss = 0, data_errors = 0, reads_checked = 0;

for (genvar c = 0; c < NC; c++) begin : g_mem
  int icnt = 0, dcnt = 0;
  always @(posedge clk) begin
    icm_ack[c] <= 1'b0; dcm_ack[c] <= 1'b0;
    if (icm_req[c] && !icm_ack[c]) begin
      if (icnt == 3) begin
        icnt <= 0; icm_ack[c] <= 1'b1;
        for (int w = 0; w < 4; w++) icm_rdata[c][32*w +: 32] <= memword({icm_addr[c][31:4], 4'b0} + 32'(4*w));
      end else icnt <= icnt + 1;
    end
    if (dcm_req[c] && !dcm_ack[c]) begin
      if (dcnt == 3) begin
        dcnt <= 0; dcm_ack[c] <= 1'b1;
        if (dcm_we[c]) mem_written[dcm_addr[c]] = dcm_wdata[c];
        else begin
          ev_fill_lines[c]++;
          for (int w = 0; w < 4; w++) dcm_rdata[c][32*w +: 32] <= memword({dcm_addr[c][31:4], 4'b0} + 32'(4*w));
        end
      end else dcnt <= dcnt + 1;
    end
  end
end

// ---- cores -----------------------------------------------------------------
// phase program: instruction footprint, data footprint, store share (1/8 units),
// extra instructions per fetch, data access every n fetches
typedef struct { int ifoot; int dfoot; int extra; int dper; } phase_t;
phase_t cur_ph [NC];
logic [31:0] pc [NC];
int retired_total [NC];

for (genvar c = 0; c < NC; c++) begin : g_core
  int fetches = 0; logic [31:0] lfsr = 32'hACE1 + c;
  logic [31:0] dbase;
  assign dbase = 32'h0010_0000 * (c + 1);
  always @(posedge clk) begin
    instr_retired[c] <= 3'd0;
    if (!rst_n) begin
      ic_req[c] <= 0; dc_req[c] <= 0; pc[c] <= 32'h0000_1000 * (c + 1);
    end else begin
      // instruction side
      if (ic_req[c] && ic_ack[c]) begin
        if (ic_rdata[c] != memword(ic_addr[c])) data_errors++;
        reads_checked++;
        ic_req[c] <= 1'b0;
        instr_retired[c] <= 3'(1 + (fetches % (cur_ph[c].extra + 1)));
        retired_total[c] += 1;
        fetches++;
        pc[c] <= (pc[c] + 4 >= 32'h0000_1000 * (c + 1) + 32'(cur_ph[c].ifoot)) ? 32'h0000_1000 * (c + 1) : pc[c] + 4;
      end else if (!ic_req[c] && !core_halt[c]) begin
        ic_req[c] <= 1'b1; ic_addr[c] <= pc[c];
      end
      // data side
      if (dc_req[c] && dc_ack[c]) begin
        if (!dc_we[c]) begin
          if (dc_rdata[c] != memword(dc_addr[c])) data_errors++;
          reads_checked++;
        end
        dc_req[c] <= 1'b0;
      end else if (!dc_req[c] && !core_halt[c] && (fetches % cur_ph[c].dper == 0)) begin
        lfsr = {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
        dc_req[c] <= 1'b1;
        dc_we[c] <= (lfsr[2:0] == 3'd0);
        dc_addr[c] <= dbase + ((lfsr >> 3) % 32'(cur_ph[c].dfoot) & ~32'd3);
        dc_wdata[c] <= lfsr;
      end
    end
  end
end

// ---- sensor and estimator --------------------------------------------------
function automatic int temp_model(sys_cfg_t k);
  return 45 + 4 * k.freq + 5 * (k.icfg.line + k.dcfg.line) + 3 * (k.icfg.assoc + k.dcfg.assoc) +
         (k.icfg.size + k.dcfg.size);
endfunction
for (genvar c = 0; c < NC; c++) begin : g_env
  assign temp[c] = 8'(temp_model(cur_cfg[c]) + ((c + $time / 10) % 3 == 0 ? 1 : 0));
  always_comb begin
    longint cpi, t, pw;
    cpi = (snap[c].instr == 0) ? 4000 : longint'(snap[c].cycles) * 1000 / longint'(snap[c].instr);
    t   = cpi * 2000 / longint'(freq_mhz[c]) / 4;
    pw  = 20 + longint'(freq_mhz[c]) / 50 + 2 * (cur_cfg[c].icfg.size + cur_cfg[c].dcfg.size);
    est_time[c]   = 16'(t > 65535 ? 65535 : t);
    est_energy[c] = 16'((t * pw / 64) > 65535 ? 65535 : (t * pw / 64));
  end
  always @(posedge clk) begin
    if (dut.g_core[c].u_tapt.u_dfs.start && dut.g_core[c].u_tapt.u_dfs.level != freq_sel[c]) ev_dfs++;
    if (dut.g_core[c].u_icache.cfg_we) ev_icfg++;
    if (dut.g_core[c].u_dcache.cfg_we) ev_dcfg++;
    if (dut.g_core[c].u_icache.ev_miss) ev_imiss++;
    if (dut.g_core[c].u_dcache.ev_miss) ev_dmiss++;
    if (dut.g_core[c].u_dcache.state == 2 && dut.g_core[c].u_dcache.fcnt_q == 1 && dcm_ack[c]) ev_multi_fill++;
  end
end

// every time a tuning ends, the chosen configuration must be the best archive
// member for the priority among those under the threshold
int thr_met = 0, thr_checked = 0;
for (genvar c = 0; c < NC; c++) begin : g_thr
  always @(posedge clk) if (rst_n && dut.g_core[c].u_tapt.u_eng.done) begin
    thr_checked++;
    if (!thr_en || dut.g_core[c].u_tapt.u_eng.best_obj.temp <= thr) thr_met++;
  end
end

task automatic wait_cond_mode(input int c, input logic [2:0] m, input int lim_cycles);
  int n = 0;
  while (mode[c] != m && n < lim_cycles) begin @(posedge clk); n++; end
  check(mode[c] == m, $sformatf("core %0d reached mode %0d", c, m));
endtask
