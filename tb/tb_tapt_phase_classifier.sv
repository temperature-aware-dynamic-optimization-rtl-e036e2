// tb_tapt_phase_classifier: checks the signature (iMR, dMR, IPC in units of 1/256,
// worked out here with integer arithmetic), its latency of 13 cycles, saturation
// and divide-by-zero handling, and the phase-change decision against the squared
// distance computed here.
module tb_tapt_phase_classifier;
  import tapt_pkg::*;
  localparam int unsigned THR = 500;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic snap_valid = 0, track = 0, clear_ref = 0; perf_snap_t snap;
  logic sig_valid, phase_change; sig_t sig; logic [DIST2_W-1:0] ref_dist2;
  tapt_phase_classifier #(.PHASE_THR(THR)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string w);
    checks++; if (!c) begin failures++; $display("FAIL: %s", w); end
  endtask

  function automatic int ratio(longint n, longint d, int sat);
    longint q;
    if (d == 0) return 0;
    q = (n * 256) / d;
    if (q > 2047) q = 2047;
    if (q > sat) q = sat;
    return int'(q);
  endfunction

  sig_t refsig; bit have_ref;
  task automatic run(input int cyc, input int ins, input int ia, input int im,
                     input int da, input int dm, input bit exp_change_known);
    int lat = 0; sig_t e; longint d2;
    @(negedge clk);
    snap = '0; snap.cycles = cyc; snap.instr = ins; snap.iacc = ia; snap.imiss = im;
    snap.dacc = da; snap.dmiss = dm; snap_valid = 1;
    @(negedge clk); snap_valid = 0; lat = 1;
    while (!sig_valid) begin @(negedge clk); lat++; if (lat > 50) break; end
    e.imr = 9'(ratio(im, ia, 256)); e.dmr = 9'(ratio(dm, da, 256)); e.ipc = 11'(ratio(ins, cyc, 2047));
    check(lat == 13, $sformatf("latency %0d", lat));
    check(sig == e, $sformatf("signature %p expected %p", sig, e));
    if (track) begin
      if (!have_ref) begin
        check(!phase_change, "first tracked interval is the reference");
        refsig = e; have_ref = 1;
      end else begin
        d2 = (longint'(e.imr) - refsig.imr) ** 2 + (longint'(e.dmr) - refsig.dmr) ** 2 +
             (longint'(e.ipc) - refsig.ipc) ** 2;
        check(phase_change == (d2 > THR), $sformatf("phase change %0d for d2 %0d", phase_change, d2));
      end
    end else check(!phase_change, "no change when not tracking");
  endtask

  initial begin
    snap = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(1000, 2000, 500, 50, 300, 30, 0);
    run(1000, 0, 0, 0, 0, 0, 0);              // divide by zero gives 0
    run(10, 5000, 10, 10, 10, 20, 0);         // saturation
    track = 1; have_ref = 0;
    run(1000, 1500, 400, 40, 200, 10, 0);     // reference
    run(1000, 1510, 400, 41, 200, 11, 0);     // near: same phase
    run(1000, 3000, 400, 40, 200, 10, 0);     // IPC jump: change
    run(1000, 1500, 400, 200, 200, 10, 0);    // iMR jump: change
    for (int k = 0; k < 20; k++)
      run($urandom_range(1000, 5000), $urandom_range(0, 8000), $urandom_range(1, 3000),
          $urandom_range(0, 300), $urandom_range(1, 3000), $urandom_range(0, 300), 0);
    @(negedge clk); clear_ref = 1; @(negedge clk); clear_ref = 0; have_ref = 0;
    run(1000, 1500, 400, 40, 200, 10, 0);
    run(1000, 1500, 400, 40, 200, 10, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
