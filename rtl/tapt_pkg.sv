// tapt_pkg: types, constants and helper functions shared by the temperature-aware
// phase-based tuning (TaPT) hardware.
//
// A system configuration is one L1 instruction-cache setting, one L1 data-cache
// setting and one of seven core clock frequencies. A cache setting is a total size
// (8, 16 or 32 KB), an associativity (1, 2 or 4 ways) and a line size (16, 32 or
// 64 bytes). These ranges and the 800 MHz to 2 GHz frequency range in 200 MHz steps
// follow the evaluated system. Because the cache is built from four 8 KB banks,
// only size/associativity pairs with at most one way per bank exist, which leaves
// 6 x 3 = 18 settings per cache and 18 x 18 x 7 = 2268 system configurations. (The
// evaluated system was reported as 1,701 configurations; that count cannot be
// reproduced from the listed ranges and is not used here.)
//
// Objectives are costs: execution time and energy as 16-bit estimates and the peak
// temperature over an interval in whole degrees Celsius. Smaller is better.
package tapt_pkg;

  typedef enum logic [1:0] {SZ_8K = 2'd0, SZ_16K = 2'd1, SZ_32K = 2'd2} csize_e;
  typedef enum logic [1:0] {AS_1 = 2'd0, AS_2 = 2'd1, AS_4 = 2'd2} cassoc_e;
  typedef enum logic [1:0] {LN_16 = 2'd0, LN_32 = 2'd1, LN_64 = 2'd2} cline_e;

  typedef struct packed {
    csize_e  size;
    cassoc_e assoc;
    cline_e  line;
  } cache_cfg_t;

  typedef struct packed {
    cache_cfg_t icfg;
    cache_cfg_t dcfg;
    logic [2:0] freq;   // 0 = 800 MHz ... 6 = 2 GHz
  } sys_cfg_t;

  typedef struct packed {
    logic [15:0] etime;
    logic [15:0] energy;
    logic [7:0]  temp;
  } obj_t;

  // One member of a population or archive.
  typedef struct packed {
    logic     valid;
    sys_cfg_t cfg;
    obj_t     obj;
  } indiv_t;

  // Priority settings: S = energy-delay product (default), N = energy,
  // T = temperature, X = execution time.
  typedef enum logic [1:0] {PRIO_S = 2'd0, PRIO_N = 2'd1, PRIO_T = 2'd2, PRIO_X = 2'd3} prio_e;

  // Phase signature. All three axes in units of 1/256: miss rates 0..256,
  // IPC 0..4 (0..1024).
  typedef struct packed {
    logic [8:0]  imr;
    logic [8:0]  dmr;
    logic [10:0] ipc;
  } sig_t;

  // Counts of one tuning interval.
  typedef struct packed {
    logic [31:0] cycles;
    logic [31:0] instr;
    logic [31:0] iacc;
    logic [31:0] imiss;
    logic [31:0] dacc;
    logic [31:0] dmiss;
    logic [7:0]  peak_temp;
  } perf_snap_t;

  localparam int unsigned N_CACHE_CFG = 18;
  localparam int unsigned N_FREQ      = 7;
  localparam int unsigned DIST2_W     = 24;

  localparam cache_cfg_t BASE_CACHE = '{size: SZ_32K, assoc: AS_4, line: LN_64};
  localparam sys_cfg_t   BASE_CFG   = '{icfg: BASE_CACHE, dcfg: BASE_CACHE, freq: 3'd6};

  // Cache setting number 0..17: (size, assoc) pair = idx / 3, line = idx % 3.
  // Pairs: 8K/1, 16K/1, 16K/2, 32K/1, 32K/2, 32K/4.
  function automatic cache_cfg_t cache_cfg_from_idx(input logic [4:0] idx);
    cache_cfg_t c;
    logic [4:0] pair;
    pair   = idx / 5'd3;
    c.line = cline_e'(idx % 5'd3);
    unique case (pair)
      5'd0:    begin c.size = SZ_8K;  c.assoc = AS_1; end
      5'd1:    begin c.size = SZ_16K; c.assoc = AS_1; end
      5'd2:    begin c.size = SZ_16K; c.assoc = AS_2; end
      5'd3:    begin c.size = SZ_32K; c.assoc = AS_1; end
      5'd4:    begin c.size = SZ_32K; c.assoc = AS_2; end
      default: begin c.size = SZ_32K; c.assoc = AS_4; end
    endcase
    return c;
  endfunction

  function automatic logic cache_cfg_legal(input cache_cfg_t c);
    return (c.size <= SZ_32K) && (c.line <= LN_64) && (c.assoc <= AS_4) &&
           (c.assoc <= cassoc_e'(c.size));
  endfunction

  function automatic logic [11:0] level_mhz(input logic [2:0] f);
    return 12'd800 + 12'd200 * {9'd0, f};
  endfunction

  // Pareto dominance for cost objectives: a is no worse in every objective and
  // strictly better in at least one.
  function automatic logic dominates(input obj_t a, input obj_t b);
    logic no_worse, better;
    no_worse = (a.etime <= b.etime) && (a.energy <= b.energy) && (a.temp <= b.temp);
    better   = (a.etime <  b.etime) || (a.energy <  b.energy) || (a.temp <  b.temp);
    return no_worse && better;
  endfunction

  // Squared Euclidean distance between two signatures (phase distance squared).
  function automatic logic [DIST2_W-1:0] sig_dist2(input sig_t a, input sig_t b);
    logic signed [11:0] di, dd, dp;
    di = $signed({3'b0, a.imr}) - $signed({3'b0, b.imr});
    dd = $signed({3'b0, a.dmr}) - $signed({3'b0, b.dmr});
    dp = $signed({1'b0, a.ipc}) - $signed({1'b0, b.ipc});
    return DIST2_W'(di * di) + DIST2_W'(dd * dd) + DIST2_W'(dp * dp);
  endfunction

  // Value minimised for a priority setting (EDP for S).
  function automatic logic [31:0] prio_key(input prio_e p, input obj_t o);
    unique case (p)
      PRIO_N:  return {16'd0, o.energy};
      PRIO_T:  return {24'd0, o.temp};
      PRIO_X:  return {16'd0, o.etime};
      default: return o.etime * o.energy;
    endcase
  endfunction

endpackage
