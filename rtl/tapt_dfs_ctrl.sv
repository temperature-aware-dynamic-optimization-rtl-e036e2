// tapt_dfs_ctrl: dynamic frequency scaling controller of one core.
//
// The core clock takes one of seven levels, 800 MHz to 2 GHz in 200 MHz steps
// (level 0..6); freq_sel goes to the clock generator and freq_mhz gives the same
// value in MHz. A request (start with level) that changes the level drives the new
// freq_sel and holds the core (core_halt) for TRANS_CYCLES, the frequency
// transition delay, then pulses done. A request for the current level pulses done
// one cycle later without halting. After reset the core runs at 2 GHz.
//
// The seven levels and the 18.24 us transition delay are those of the evaluated
// system; the 100 MHz controller clock that makes the delay 1824 cycles, and
// halting the core for the whole delay, are this design's choices.
module tapt_dfs_ctrl
  import tapt_pkg::*;
#(
  parameter int unsigned TRANS_CYCLES = 1824
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [2:0]  level,
  output logic [2:0]  freq_sel,
  output logic [11:0] freq_mhz,
  output logic        core_halt,
  output logic        done
);
  logic [31:0] wait_q;
  logic        busy_q;

  assign freq_mhz  = level_mhz(freq_sel);
  assign core_halt = busy_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      freq_sel <= 3'd6;
      wait_q   <= '0;
      busy_q   <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (busy_q) begin
        if (wait_q == 32'd1) begin
          busy_q <= 1'b0;
          done   <= 1'b1;
        end
        wait_q <= wait_q - 32'd1;
      end else if (start) begin
        if (level != freq_sel) begin
          freq_sel <= level;
          busy_q   <= 1'b1;
          wait_q   <= TRANS_CYCLES;
        end else begin
          done <= 1'b1;
        end
      end
    end
  end

  a_level: assert property (@(posedge clk) disable iff (!rst_n) start |-> level < 3'(N_FREQ));
endmodule
