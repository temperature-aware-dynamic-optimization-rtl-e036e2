// tapt_perf_counters: hardware performance counters and tuning-interval timer of
// one core.
//
// Over each tuning interval the block counts clock cycles, retired instructions
// (0 to 4 per cycle for a 4-wide core), instruction- and data-cache accesses and
// misses, and keeps the highest temperature-sensor reading. When the interval timer
// reaches INTERVAL_CYCLES it pulses ivl_end for one cycle, presents the finished
// interval's counts on snap from the next cycle on (marked by a one-cycle
// snap_valid, and held until the next interval ends) and starts counting afresh. restart throws away a partly counted interval and starts a new one; the
// controller uses it after every reconfiguration so that each measurement covers a
// whole interval of one configuration.
//
// The 10 ms tuning interval is the evaluated system's; the 100 MHz clock of this
// hardware, which turns it into 1,000,000 cycles, is this design's assumption, as
// is taking the peak sensor reading as an interval's temperature.
module tapt_perf_counters
  import tapt_pkg::*;
#(
  parameter int unsigned INTERVAL_CYCLES = 1000000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       restart,
  input  logic [2:0] instr_retired,
  input  logic       ic_access,
  input  logic       ic_miss,
  input  logic       dc_access,
  input  logic       dc_miss,
  input  logic [7:0] temp,
  output logic       ivl_end,
  output logic       snap_valid,
  output perf_snap_t snap
);
  perf_snap_t  cnt;
  logic [31:0] timer;

  assign ivl_end = !restart && (timer == INTERVAL_CYCLES - 1);

  // counts including the current cycle
  perf_snap_t nxt;
  always_comb begin
    nxt           = cnt;
    nxt.cycles    = cnt.cycles + 32'd1;
    nxt.instr     = cnt.instr + 32'(instr_retired);
    nxt.iacc      = cnt.iacc  + 32'(ic_access);
    nxt.imiss     = cnt.imiss + 32'(ic_miss);
    nxt.dacc      = cnt.dacc  + 32'(dc_access);
    nxt.dmiss     = cnt.dmiss + 32'(dc_miss);
    nxt.peak_temp = (temp > cnt.peak_temp) ? temp : cnt.peak_temp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt   <= '0;
      timer <= '0;
      snap  <= '0;
      snap_valid <= 1'b0;
    end else if (restart) begin
      snap_valid <= 1'b0;
      cnt   <= '0;
      timer <= '0;
    end else if (ivl_end) begin
      snap_valid <= 1'b1;
      snap  <= nxt;
      cnt   <= '0;
      timer <= '0;
    end else begin
      snap_valid <= 1'b0;
      cnt   <= nxt;
      timer <= timer + 32'd1;
    end
  end

  a_retire_width: assert property (@(posedge clk) disable iff (!rst_n) instr_retired <= 3'd4);
endmodule
