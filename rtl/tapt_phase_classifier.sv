// tapt_phase_classifier: phase signature and phase-change detection of one core.
//
// At the end of every tuning interval (snap_valid) the block divides the interval's
// counters into the three execution characteristics that describe a phase:
// instruction-cache miss rate iMR = imiss/iacc, data-cache miss rate
// dMR = dmiss/dacc and instructions per cycle IPC = instr/cycles, each in units of
// 1/256 (three fixed-point dividers working in parallel). sig_valid pulses with the
// signature 13 cycles after snap_valid.
//
// While track is high the block also watches for a phase change: the first
// signature after clear_ref is skipped (the caches were just flushed by a
// reconfiguration, so its miss rates are cold-start values), the second becomes
// the running phase's reference, and every later
// one is compared with it through the squared Euclidean distance of
// (iMR, dMR, IPC). A squared distance above PHASE_THR pulses phase_change (with
// sig_valid). Comparing the square avoids a square root and gives the same
// decisions. The choice of characteristics and of the Euclidean distance is the
// tuning scheme's; the fixed-point units, the fixed threshold and the
// reference-signature rule for spotting a new phase are this design's own.
module tapt_phase_classifier
  import tapt_pkg::*;
#(
  parameter int unsigned PHASE_THR = 1024
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       snap_valid,
  input  perf_snap_t snap,
  input  logic       track,
  input  logic       clear_ref,
  output logic       sig_valid,
  output sig_t       sig,
  output logic       phase_change,
  output logic [DIST2_W-1:0] ref_dist2
);
  logic        di, dd, dp;
  logic [10:0] qi, qd, qp;

  tapt_frac_div u_imr (.clk, .rst_n, .start(snap_valid), .num(snap.imiss),
                       .den(snap.iacc),   .done(di), .q(qi));
  tapt_frac_div u_dmr (.clk, .rst_n, .start(snap_valid), .num(snap.dmiss),
                       .den(snap.dacc),   .done(dd), .q(qd));
  tapt_frac_div u_ipc (.clk, .rst_n, .start(snap_valid), .num(snap.instr),
                       .den(snap.cycles), .done(dp), .q(qp));

  sig_t sig_now;
  sig_t ref_q;
  logic ref_valid_q;
  logic warm_q;        // the warm-up interval after clear_ref has been seen

  always_comb begin
    sig_now.imr = (qi > 11'd256) ? 9'd256 : qi[8:0];
    sig_now.dmr = (qd > 11'd256) ? 9'd256 : qd[8:0];
    sig_now.ipc = qp;
  end

  assign ref_dist2 = sig_dist2(sig_now, ref_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sig_valid    <= 1'b0;
      sig          <= '0;
      phase_change <= 1'b0;
      ref_q        <= '0;
      ref_valid_q  <= 1'b0;
      warm_q       <= 1'b0;
    end else begin
      sig_valid    <= 1'b0;
      phase_change <= 1'b0;
      if (clear_ref) begin
        ref_valid_q <= 1'b0;
        warm_q      <= 1'b0;
      end
      if (di && dd && dp) begin
        sig_valid <= 1'b1;
        sig       <= sig_now;
        if (track && !clear_ref) begin
          if (!warm_q) begin
            warm_q      <= 1'b1;
          end else if (!ref_valid_q) begin
            ref_q       <= sig_now;
            ref_valid_q <= 1'b1;
          end else if (ref_dist2 > DIST2_W'(PHASE_THR)) begin
            phase_change <= 1'b1;
          end
        end
      end
    end
  end
endmodule
