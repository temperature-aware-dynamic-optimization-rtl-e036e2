// tapt_config_cache: runtime-configurable L1 cache (used for both the instruction
// and the data cache of a core).
//
// Structure. The cache is four banks of BANK_BYTES each (8 KB by default, 32 KB in
// all), each bank holding SETS physical lines of 16 bytes with a tag and a valid
// bit. Three knobs are set through a small configuration register:
//   * size: 8/16/32 KB switches on 1, 2 or 4 banks; the others are shut down and
//     never looked up or filled (way shutdown);
//   * associativity: the active banks are grouped into 1, 2 or 4 ways. With fewer
//     ways than active banks, the banks of one way are concatenated and one or two
//     address bits above the bank index choose the bank (way concatenation);
//   * line size: a miss fetches 1, 2 or 4 neighbouring 16-byte physical lines into
//     consecutive sets of one bank, forming a 16/32/64-byte logical line.
// This organisation follows the configurable cache the tuning scheme builds on.
// Legal settings have at most as many ways as active banks (8 KB is direct-mapped).
//
// Own choices: write-through with no write allocation (so a reconfiguration only has
// to clear the valid bits, done in one cycle); victim = an invalid candidate bank,
// else a rotating way pointer; a hit answers in the cycle after the request.
//
// Interface and timing. cpu_req/cpu_we/cpu_addr/cpu_wdata are held until cpu_ack,
// which is a one-cycle pulse carrying cpu_rdata; a hit is acknowledged in the
// clock cycle after the one in which the request is first seen. The requester
// keeps the request up through the ack cycle and may start the next one after it,
// so back-to-back hits take two cycles each. The memory port moves one 16-byte line per read (mem_req held until
// mem_ack) and one 32-bit word per write. cfg_we is taken only while idle is high
// and clears the whole cache. ev_access pulses once per processor access and
// ev_miss once per access that misses, for the performance counters.
module tapt_config_cache
  import tapt_pkg::*;
#(
  parameter int unsigned BANK_BYTES = 8192
) (
  input  logic         clk,
  input  logic         rst_n,
  // configuration register
  input  logic         cfg_we,
  input  cache_cfg_t   cfg_in,
  output cache_cfg_t   cfg,
  output logic         idle,
  // processor side
  input  logic         cpu_req,
  input  logic         cpu_we,
  input  logic [31:0]  cpu_addr,
  input  logic [31:0]  cpu_wdata,
  output logic         cpu_ack,
  output logic [31:0]  cpu_rdata,
  // main-memory side
  output logic         mem_req,
  output logic         mem_we,
  output logic [31:0]  mem_addr,
  output logic [31:0]  mem_wdata,
  input  logic         mem_ack,
  input  logic [127:0] mem_rdata,
  // events
  output logic         ev_access,
  output logic         ev_miss
);
  localparam int unsigned NBANKS = 4;
  localparam int unsigned SETS   = BANK_BYTES / 16;
  localparam int unsigned IDXW   = $clog2(SETS);
  localparam int unsigned TAGLO  = 4 + IDXW;
  localparam int unsigned TAGW   = 32 - TAGLO;

  typedef enum logic [1:0] {C_IDLE, C_RESP, C_FILL, C_WRITE} cstate_e;

  cstate_e                 state;
  logic [127:0]            data_q  [NBANKS][SETS];
  logic [TAGW-1:0]         tag_q   [NBANKS][SETS];
  logic [NBANKS-1:0][SETS-1:0] valid_q;
  logic [1:0]              rr_q;
  logic                    refill_q;
  logic [1:0]              victim_q;
  logic [2:0]              fcnt_q;

  // ---- configuration decode --------------------------------------------------
  logic [2:0] nact, nlines;
  logic [1:0] bpw_log;          // log2 banks per way
  logic [1:0] bpw_mask, way_mask;
  always_comb begin
    nact     = 3'd1 << cfg.size;
    nlines   = 3'd1 << cfg.line;
    bpw_log  = 2'(cfg.size) - 2'(cfg.assoc);
    bpw_mask = 2'((3'd1 << bpw_log) - 3'd1);
    way_mask = 2'((3'd1 << cfg.assoc) - 3'd1);
  end

  // ---- lookup ----------------------------------------------------------------
  logic [IDXW-1:0]   idx;
  logic [TAGW-1:0]   tagb;
  logic [1:0]        bsel;
  logic [NBANKS-1:0] cand, hitv, freev;
  logic              hit;
  logic [1:0]        hitbank, victim;
  logic [31:0]       hitword;

  always_comb begin
    idx  = cpu_addr[4 +: IDXW];
    tagb = cpu_addr[31:TAGLO];
    bsel = cpu_addr[TAGLO +: 2] & bpw_mask;
    hit = 1'b0; hitbank = '0; freev = '0;
    for (int b = 0; b < NBANKS; b++) begin
      cand[b]  = (3'(b) < nact) && ((2'(b) & bpw_mask) == bsel);
      hitv[b]  = cand[b] && valid_q[b][idx] && (tag_q[b][idx] == tagb);
      freev[b] = cand[b] && !valid_q[b][idx];
      if (hitv[b]) begin hit = 1'b1; hitbank = 2'(b); end
    end
    hitword = data_q[hitbank][idx][32*cpu_addr[3:2] +: 32];
    // victim: an invalid candidate bank, else the way the pointer names
    victim = ((rr_q & way_mask) << bpw_log) | bsel;
    for (int b = NBANKS - 1; b >= 0; b--)
      if (freev[b]) victim = 2'(b);
  end

  // base set of the logical line being filled and the set of this fill beat
  logic [IDXW-1:0] fill_base, fill_idx;
  always_comb begin
    fill_base = idx & ~IDXW'(nlines - 3'd1);
    fill_idx  = fill_base + IDXW'(fcnt_q);
  end

  assign idle      = (state == C_IDLE);
  assign cpu_ack   = (state == C_RESP);
  assign mem_req   = (state == C_FILL) || (state == C_WRITE);
  assign mem_we    = (state == C_WRITE);
  assign mem_addr  = (state == C_WRITE) ? cpu_addr
                                         : {cpu_addr[31:TAGLO], fill_idx, 4'b0000};
  assign mem_wdata = cpu_wdata;
  assign ev_access = (state == C_IDLE) && cpu_req && !refill_q && !cfg_we;
  assign ev_miss   = ev_access && !hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_IDLE;
      cfg       <= BASE_CACHE;
      valid_q   <= '0;
      rr_q      <= '0;
      refill_q  <= 1'b0;
      victim_q  <= '0;
      fcnt_q    <= '0;
      cpu_rdata <= '0;
    end else begin
      unique case (state)
        C_IDLE: begin
          if (cfg_we) begin
            cfg     <= cfg_in;
            valid_q <= '0;
          end else if (cpu_req) begin
            if (cpu_we) begin
              state <= C_WRITE;
            end else if (hit) begin
              cpu_rdata <= hitword;
              state     <= C_RESP;
            end else begin
              victim_q <= victim;
              fcnt_q   <= '0;
              state    <= C_FILL;
            end
          end
        end
        C_RESP: begin
          refill_q <= 1'b0;
          state    <= C_IDLE;
        end
        C_FILL: begin
          if (mem_ack) begin
            valid_q[victim_q][fill_idx] <= 1'b1;
            if (fcnt_q == nlines - 3'd1) begin
              rr_q     <= rr_q + 2'd1;
              refill_q <= 1'b1;
              state    <= C_IDLE;
            end else begin
              fcnt_q <= fcnt_q + 3'd1;
            end
          end
        end
        C_WRITE: begin
          if (mem_ack) state <= C_RESP;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // data and tag arrays (no reset: valid bits guard them)
  always_ff @(posedge clk) begin
    if (state == C_IDLE && !cfg_we && cpu_req && cpu_we && hit)
      data_q[hitbank][idx][32*cpu_addr[3:2] +: 32] <= cpu_wdata;
    if (state == C_FILL && mem_ack) begin
      data_q[victim_q][fill_idx] <= mem_rdata;
      tag_q[victim_q][fill_idx]  <= tagb;
    end
  end

  // A held request may not change while it waits.
  property p_req_stable;
    @(posedge clk) disable iff (!rst_n)
      (cpu_req && !cpu_ack) |=> (cpu_req && $stable(cpu_addr) && $stable(cpu_we));
  endproperty
  a_req_stable: assert property (p_req_stable);
  a_cfg_legal: assert property (@(posedge clk) disable iff (!rst_n)
                                cfg_we |-> cache_cfg_legal(cfg_in));

endmodule
