// tapt_pht: phase history table.
//
// Each of NENT entries describes one phase that has already been characterised:
// its signature (iMR, dMR, IPC), the best system configuration found for it and the
// final archive of the tuning algorithm (ASIZE configurations with their measured
// objectives). A later occurrence of the phase reuses the stored configuration
// directly; a new phase starts its search from the archive of the most similar
// stored phase.
//
// Search: search_start with search_sig scans all entries, one per cycle, computing
// the squared Euclidean distance of the signatures; NENT+1 cycles later
// search_done pulses with search_found (any valid entry), search_idx and
// search_dist2 of the nearest entry (lowest index on ties). Read: rd_idx selects an
// entry whose best configuration and archive appear combinationally on rd_best and
// rd_arch. Write: wr_en stores a new entry in the first free slot, or, when the
// table is full, in the slot a round-robin pointer names; wr_slot tells which.
// What an entry holds follows the tuning scheme; the table size, the replacement
// rule and the scan timing are this design's own.
module tapt_pht
  import tapt_pkg::*;
#(
  parameter int unsigned NENT  = 32,
  parameter int unsigned ASIZE = 5,
  localparam int unsigned IW   = (NENT > 1) ? $clog2(NENT) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // nearest-phase search
  input  logic               search_start,
  input  sig_t               search_sig,
  output logic               search_done,
  output logic               search_found,
  output logic [IW-1:0]      search_idx,
  output logic [DIST2_W-1:0] search_dist2,
  // read
  input  logic [IW-1:0]      rd_idx,
  output sys_cfg_t           rd_best,
  output indiv_t             rd_arch [ASIZE],
  // write
  input  logic               wr_en,
  input  sig_t               wr_sig,
  input  sys_cfg_t           wr_best,
  input  indiv_t             wr_arch [ASIZE],
  output logic [IW-1:0]      wr_slot,
  output logic [IW:0]        n_valid
);
  logic [NENT-1:0] valid_q;
  sig_t            sig_q  [NENT];
  sys_cfg_t        best_q [NENT];
  indiv_t          arch_q [NENT][ASIZE];
  logic [IW-1:0]   rr_q;

  // ---- allocation ----------------------------------------------------------
  always_comb begin
    wr_slot = rr_q;
    for (int e = NENT - 1; e >= 0; e--)
      if (!valid_q[e]) wr_slot = IW'(e);
    n_valid = '0;
    for (int e = 0; e < NENT; e++) n_valid = n_valid + (IW+1)'(valid_q[e]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      rr_q    <= '0;
    end else if (wr_en) begin
      valid_q[wr_slot] <= 1'b1;
      if (&valid_q) rr_q <= (rr_q == IW'(NENT - 1)) ? '0 : rr_q + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      sig_q[wr_slot]  <= wr_sig;
      best_q[wr_slot] <= wr_best;
      for (int a = 0; a < ASIZE; a++) arch_q[wr_slot][a] <= wr_arch[a];
    end
  end

  assign rd_best = best_q[rd_idx];
  always_comb for (int a = 0; a < ASIZE; a++) rd_arch[a] = arch_q[rd_idx][a];

  // ---- sequential nearest search --------------------------------------------
  logic               busy_q;
  logic [IW:0]        scan_q;
  sig_t               key_q;
  logic [DIST2_W-1:0] d2;
  logic [IW-1:0]      scan_idx;
  assign scan_idx = scan_q[IW-1:0];
  assign d2 = sig_dist2(key_q, sig_q[scan_idx]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q       <= 1'b0;
      scan_q       <= '0;
      key_q        <= '0;
      search_done  <= 1'b0;
      search_found <= 1'b0;
      search_idx   <= '0;
      search_dist2 <= '0;
    end else begin
      search_done <= 1'b0;
      if (search_start) begin
        busy_q       <= 1'b1;
        scan_q       <= '0;
        key_q        <= search_sig;
        search_found <= 1'b0;
        search_idx   <= '0;
        search_dist2 <= '1;
      end else if (busy_q) begin
        if (valid_q[scan_idx] && (!search_found || d2 < search_dist2)) begin
          search_found <= 1'b1;
          search_idx   <= scan_idx;
          search_dist2 <= d2;
        end
        if (scan_q == (IW+1)'(NENT - 1)) begin
          busy_q      <= 1'b0;
          search_done <= 1'b1;
        end
        scan_q <= scan_q + 1'b1;
      end
    end
  end
endmodule
