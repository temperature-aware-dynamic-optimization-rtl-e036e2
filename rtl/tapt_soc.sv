// tapt_soc: top level of a multi-core embedded system with temperature-aware
// phase-based tuning (NCORES = 2 by default, as in the sample dual-core system).
//
// Each core slot has a configurable L1 instruction cache and a configurable L1 data
// cache, both connected straight to off-chip main memory, and its own tuning module
// that picks the caches' size, associativity and line size and the core's clock
// frequency for every phase of the running program. The processing cores, main
// memory, temperature sensors, power/performance estimator and clock generator are
// outside this RTL: their signals are ports.
//
// Ports per core c (arrays indexed by c): the core's instruction-fetch port
// (ic_*) and load/store port (dc_*) with the cache handshake (request held until a
// one-cycle ack); the two caches' main-memory ports (icm_*, dcm_*, one 16-byte line
// per read, one word per write); instr_retired, the core's retire count per cycle;
// temp, the core's sensor reading in degrees C; snap/ivl_end, the interval counters
// for the estimator, and est_time/est_energy back from it; freq_sel to the clock
// generator and core_halt to the core during a frequency change. prio, thr_en and
// thr are the designer's priority setting and temperature threshold, shared by all
// cores. cur_cfg, mode and the n_* counters report what the tuning does.
module tapt_soc
  import tapt_pkg::*;
#(
  parameter int unsigned NCORES          = 2,
  parameter int unsigned BANK_BYTES      = 8192,
  parameter int unsigned INTERVAL_CYCLES = 1000000,
  parameter int unsigned TRANS_CYCLES    = 1824,
  parameter int unsigned S               = 20,
  parameter int unsigned G               = 3,
  parameter int unsigned ASIZE           = 5,
  parameter int unsigned NENT            = 32,
  parameter int unsigned PHASE_THR       = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  prio_e        prio,
  input  logic         thr_en,
  input  logic [7:0]   thr,
  // core instruction side
  input  logic         ic_req    [NCORES],
  input  logic [31:0]  ic_addr   [NCORES],
  output logic         ic_ack    [NCORES],
  output logic [31:0]  ic_rdata  [NCORES],
  // core data side
  input  logic         dc_req    [NCORES],
  input  logic         dc_we     [NCORES],
  input  logic [31:0]  dc_addr   [NCORES],
  input  logic [31:0]  dc_wdata  [NCORES],
  output logic         dc_ack    [NCORES],
  output logic [31:0]  dc_rdata  [NCORES],
  // main memory, instruction caches
  output logic         icm_req   [NCORES],
  output logic         icm_we    [NCORES],
  output logic [31:0]  icm_addr  [NCORES],
  output logic [31:0]  icm_wdata [NCORES],
  input  logic         icm_ack   [NCORES],
  input  logic [127:0] icm_rdata [NCORES],
  // main memory, data caches
  output logic         dcm_req   [NCORES],
  output logic         dcm_we    [NCORES],
  output logic [31:0]  dcm_addr  [NCORES],
  output logic [31:0]  dcm_wdata [NCORES],
  input  logic         dcm_ack   [NCORES],
  input  logic [127:0] dcm_rdata [NCORES],
  // core status, sensors, estimator, clock generator
  input  logic [2:0]   instr_retired [NCORES],
  input  logic [7:0]   temp          [NCORES],
  output logic         ivl_end       [NCORES],
  output perf_snap_t   snap          [NCORES],
  input  logic [15:0]  est_time      [NCORES],
  input  logic [15:0]  est_energy    [NCORES],
  output logic [2:0]   freq_sel      [NCORES],
  output logic [11:0]  freq_mhz      [NCORES],
  output logic         core_halt     [NCORES],
  // tuning status
  output sys_cfg_t     cur_cfg   [NCORES],
  output logic [2:0]   mode      [NCORES],
  output logic [15:0]  n_tuned   [NCORES],
  output logic [15:0]  n_reused  [NCORES],
  output logic [15:0]  n_changes [NCORES],
  output logic [15:0]  n_evals   [NCORES]
);
  for (genvar c = 0; c < NCORES; c++) begin : g_core
    logic       ic_access, ic_miss, dc_access, dc_miss;
    logic       ic_idle, dc_idle, ic_cfg_we, dc_cfg_we;
    cache_cfg_t ic_cur, dc_cur, ic_cfg, dc_cfg;

    tapt_config_cache #(.BANK_BYTES(BANK_BYTES)) u_icache (
      .clk, .rst_n, .cfg_we(ic_cfg_we), .cfg_in(ic_cfg), .cfg(ic_cur), .idle(ic_idle),
      .cpu_req(ic_req[c]), .cpu_we(1'b0), .cpu_addr(ic_addr[c]), .cpu_wdata(32'd0),
      .cpu_ack(ic_ack[c]), .cpu_rdata(ic_rdata[c]),
      .mem_req(icm_req[c]), .mem_we(icm_we[c]), .mem_addr(icm_addr[c]),
      .mem_wdata(icm_wdata[c]), .mem_ack(icm_ack[c]), .mem_rdata(icm_rdata[c]),
      .ev_access(ic_access), .ev_miss(ic_miss));

    tapt_config_cache #(.BANK_BYTES(BANK_BYTES)) u_dcache (
      .clk, .rst_n, .cfg_we(dc_cfg_we), .cfg_in(dc_cfg), .cfg(dc_cur), .idle(dc_idle),
      .cpu_req(dc_req[c]), .cpu_we(dc_we[c]), .cpu_addr(dc_addr[c]),
      .cpu_wdata(dc_wdata[c]), .cpu_ack(dc_ack[c]), .cpu_rdata(dc_rdata[c]),
      .mem_req(dcm_req[c]), .mem_we(dcm_we[c]), .mem_addr(dcm_addr[c]),
      .mem_wdata(dcm_wdata[c]), .mem_ack(dcm_ack[c]), .mem_rdata(dcm_rdata[c]),
      .ev_access(dc_access), .ev_miss(dc_miss));

    tapt_module #(
      .INTERVAL_CYCLES(INTERVAL_CYCLES), .TRANS_CYCLES(TRANS_CYCLES), .S(S), .G(G),
      .ASIZE(ASIZE), .NENT(NENT), .PHASE_THR(PHASE_THR),
      .SEED(32'h1234_5678 + 32'h0101_0101 * c)
    ) u_tapt (
      .clk, .rst_n, .prio, .thr_en, .thr,
      .instr_retired(instr_retired[c]), .temp(temp[c]),
      .freq_sel(freq_sel[c]), .freq_mhz(freq_mhz[c]), .core_halt(core_halt[c]),
      .ivl_end(ivl_end[c]), .snap(snap[c]),
      .est_time(est_time[c]), .est_energy(est_energy[c]),
      .ic_access, .ic_miss, .dc_access, .dc_miss, .ic_cur, .dc_cur, .ic_idle, .dc_idle,
      .ic_cfg_we, .dc_cfg_we, .ic_cfg, .dc_cfg,
      .cur_cfg(cur_cfg[c]), .mode(mode[c]), .n_tuned(n_tuned[c]), .n_reused(n_reused[c]),
      .n_changes(n_changes[c]), .n_evals(n_evals[c]));
  end
endmodule
