// tb_tapt_dfs_ctrl: checks the frequency levels (800 MHz + 200 MHz x level), the
// exact length of the core halt on a level change, and that a request for the
// current level completes at once without halting.
module tb_tapt_dfs_ctrl;
  import tapt_pkg::*;
  localparam int unsigned TC = 25;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0; logic [2:0] level = 0;
  logic [2:0] freq_sel; logic [11:0] freq_mhz; logic core_halt, done;
  tapt_dfs_ctrl #(.TRANS_CYCLES(TC)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask

  task automatic req(input logic [2:0] l, input int exp_halt);
    int halt = 0, cyc = 0;
    @(negedge clk); start = 1; level = l;
    @(negedge clk); start = 0;
    while (!done) begin if (core_halt) halt++; cyc++; @(negedge clk); end
    check(freq_sel == l, "freq_sel follows request");
    check(freq_mhz == 12'(800 + 200 * l), $sformatf("freq_mhz %0d for level %0d", freq_mhz, l));
    check(halt == exp_halt, $sformatf("halt %0d cycles, expected %0d", halt, exp_halt));
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    check(freq_sel == 3'd6 && freq_mhz == 12'd2000 && !core_halt, "reset at 2 GHz");
    req(3'd0, TC);
    req(3'd0, 0);
    req(3'd3, TC);
    req(3'd6, TC);
    req(3'd6, 0);
    for (int l = 0; l < 7; l++) req(3'(l), TC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
