// tb_sipc_monitor: self-checking test of the break-even loop classifier.
// Several loops are run with chosen pre-DSMT and full-DSMT commit rates; the
// expected label (full IPC >= pre IPC), the SIPC value 16*insts/cycles and
// the one-cycle result latency after loop_end are checked. A loop that never
// reached full-DSMT mode must give no result.
//
// Interface: no ports; a local clock and reset drive the unit under test.
// Timing: inputs change away from the rising clock edge and outputs are
// sampled after they settle; a watchdog ends a hung run. The run ends with
// one TB_RESULT line giving the number of checks and failures. Expected
// behaviour follows the paper's description of the unit (and, where the
// paper is silent, this design's documented choices); the stimulus values,
// sizes and sequences are this testbench's own.
module tb_sipc_monitor;
  import dsmt_pkg::*;
  logic clk = 0, rst_n = 0;
  dsmt_mode_e mode;
  logic [4:0] cc;
  logic le, rv, rg;
  logic [7:0] sipc;
  int checks = 0, failures = 0;

  sipc_monitor dut (.clk, .rst_n, .mode, .commit_cnt(cc), .loop_end(le),
                    .res_valid(rv), .res_good(rg), .sipc);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_loop(int pre_cyc, int pre_rate, int full_cyc, int full_rate);
    int pi, fi, exp_sipc;
    pi = 0; fi = 0;
    @(negedge clk); mode = MODE_PRE;
    for (int c = 0; c < pre_cyc; c++) begin
      cc = 5'((c % 4 < pre_rate) ? 2 : 0); pi += int'(cc); @(negedge clk);
    end
    mode = MODE_FULL;
    for (int c = 0; c < full_cyc; c++) begin
      cc = 5'((c % 4 < full_rate) ? 4 : 0); fi += int'(cc); @(negedge clk);
    end
    cc = 0; mode = MODE_NON; le = 1;
    @(negedge clk); le = 0;
    checks++;
    if (full_cyc == 0) begin
      if (rv) failures++;
    end else begin
      exp_sipc = (fi * 16) / full_cyc; if (exp_sipc > 255) exp_sipc = 255;
      if (!rv || rg !== (fi * pre_cyc >= pi * full_cyc) || sipc !== 8'(exp_sipc)) begin
        failures++;
        $display("loop mismatch rv=%0b rg=%0b sipc=%0d exp_good=%0b exp_sipc=%0d", rv, rg, sipc,
                 (fi * pre_cyc >= pi * full_cyc), exp_sipc);
      end
    end
    @(negedge clk); checks++; if (rv) failures++;
  endtask

  initial begin
    mode = MODE_NON; cc = 0; le = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    run_loop(40, 4, 40, 4);    // 2 IPC vs 4 IPC: good
    run_loop(40, 4, 40, 1);    // 2 vs 1: bad
    run_loop(37, 2, 53, 3);
    run_loop(20, 3, 0, 0);     // no full-DSMT phase: no result
    run_loop(16, 4, 16, 2);    // break even exactly: good
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
