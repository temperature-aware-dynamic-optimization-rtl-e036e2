// tapt_cache_tuner: writes new settings into the configuration registers of a
// core's L1 instruction and data caches.
//
// On start the tuner latches the requested instruction- and data-cache settings.
// For each cache whose setting differs from the one it holds, it waits until that
// cache is idle (no access in flight) and pulses its cfg_we for one cycle with the
// new setting, which also empties that cache. A cache whose setting is unchanged is
// left alone, so its contents survive. done pulses one cycle after the last write
// (or after start, if nothing changes).
//
// The tuner's role, setting the cache configurations chosen by the tuning
// algorithm, is the tuning scheme's; this simple sequencer is this design's own.
module tapt_cache_tuner
  import tapt_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  cache_cfg_t icfg,
  input  cache_cfg_t dcfg,
  input  cache_cfg_t ic_cur,
  input  cache_cfg_t dc_cur,
  input  logic       ic_idle,
  input  logic       dc_idle,
  output logic       ic_cfg_we,
  output logic       dc_cfg_we,
  output cache_cfg_t ic_cfg,
  output cache_cfg_t dc_cfg,
  output logic       done
);
  logic busy_q, ipend_q, dpend_q;

  assign ic_cfg_we = busy_q && ipend_q && ic_idle;
  assign dc_cfg_we = busy_q && dpend_q && dc_idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      ipend_q <= 1'b0;
      dpend_q <= 1'b0;
      ic_cfg  <= BASE_CACHE;
      dc_cfg  <= BASE_CACHE;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy_q) begin
        if (start) begin
          busy_q  <= 1'b1;
          ic_cfg  <= icfg;
          dc_cfg  <= dcfg;
          ipend_q <= (icfg != ic_cur);
          dpend_q <= (dcfg != dc_cur);
        end
      end else begin
        if (ic_cfg_we) ipend_q <= 1'b0;
        if (dc_cfg_we) dpend_q <= 1'b0;
        if ((!ipend_q || ic_cfg_we) && (!dpend_q || dc_cfg_we)) begin
          busy_q <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end
endmodule
