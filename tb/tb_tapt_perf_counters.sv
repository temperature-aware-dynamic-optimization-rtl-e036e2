// tb_tapt_perf_counters: checks the interval counters against counts kept by the
// testbench from the same random event stream: interval length, every count, the
// peak temperature, and that restart discards a partial interval.
module tb_tapt_perf_counters;
  import tapt_pkg::*;
  localparam int unsigned IC = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic restart = 0; logic [2:0] instr_retired = 0;
  logic ic_access = 0, ic_miss = 0, dc_access = 0, dc_miss = 0; logic [7:0] temp = 0;
  logic ivl_end, snap_valid; perf_snap_t snap;
  tapt_perf_counters #(.INTERVAL_CYCLES(IC)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask

  perf_snap_t model;
  int cyc_since = 0, ends = 0;
  initial begin
    model = '0;
    repeat (3) @(negedge clk); rst_n = 1; #1;
    for (int n = 0; n < 5 * IC + 40; n++) begin
      if (n > 0) @(negedge clk);
      instr_retired = 3'($urandom_range(0, 4));
      ic_access = $urandom_range(0, 1); ic_miss = ic_access & ($urandom_range(0, 3) == 0);
      dc_access = $urandom_range(0, 1); dc_miss = dc_access & ($urandom_range(0, 2) == 0);
      temp = 8'($urandom_range(60, 90));
      restart = (n == 3 * IC + 17);
      #1;
      if (restart) begin model = '0; cyc_since = 0; end
      else begin
        model.cycles++; model.instr += instr_retired; model.iacc += ic_access;
        model.imiss += ic_miss; model.dacc += dc_access; model.dmiss += dc_miss;
        if (temp > model.peak_temp) model.peak_temp = temp;
        cyc_since++;
        check(ivl_end == (cyc_since == IC), $sformatf("ivl_end at %0d", cyc_since));
        if (ivl_end) begin
          @(posedge clk); #1;
          check(snap_valid, "snap_valid follows ivl_end");
          check(snap == model, "snapshot equals model");
          check(snap.cycles == IC, "interval length");
          ends++; model = '0; cyc_since = 0;
        end
      end
    end
    check(ends == 5, $sformatf("5 full intervals, got %0d", ends));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
