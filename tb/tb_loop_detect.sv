// tb_loop_detect: self-checking test of the loop detection unit (BTB with
// loop fields). Checks: the first taken backward branch only records the
// loop; the second one detects it (one cycle later, with its target and
// branch address); the iteration-count criterion, the bad-loop label, the
// mode and the nested-stack veto suppress detection; forward branches are no
// loops; the 2-bit predictor and the lookup port; two branches in the same
// set live in the two ways.
//
// Interface: no ports; a local clock and reset drive the unit under test.
// Timing: inputs change away from the rising clock edge and outputs are
// sampled after they settle; a watchdog ends a hung run. The run ends with
// one TB_RESULT line giving the number of checks and failures. Expected
// behaviour follows the paper's description of the unit (and, where the
// paper is silent, this design's documented choices); the stimulus values,
// sizes and sequences are this testbench's own.
module tb_loop_detect;
  import dsmt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] lk_pc, lk_target, up_pc, up_target, fb_br, lt, lb;
  logic lk_hit, lk_taken, up_valid, up_taken, mode_non, stack_allow, fb_valid, fb_good, seen, det;
  logic [3:0] avail;
  int checks = 0, failures = 0;

  loop_detect dut (.clk, .rst_n, .lk_pc, .lk_hit, .lk_taken, .lk_target, .up_valid, .up_pc,
                   .up_target, .up_taken, .mode_non, .ctx_avail(avail), .stack_allow,
                   .fb_valid, .fb_br, .fb_good, .loop_seen(seen), .detect(det),
                   .loop_target(lt), .loop_branch(lb));
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  // commit one branch, return detect/seen of the following cycle
  task automatic br(logic [31:0] pc, logic [31:0] tg, logic tk, output logic d, output logic s);
    @(negedge clk); up_valid = 1; up_pc = pc; up_target = tg; up_taken = tk;
    @(negedge clk); up_valid = 0; d = det; s = seen;
  endtask

  initial begin
    logic d, s;
    up_valid = 0; up_pc = 0; up_target = 0; up_taken = 0; mode_non = 1; stack_allow = 1;
    fb_valid = 0; fb_br = 0; fb_good = 0; avail = 7; lk_pc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    lk_pc = 32'h1040; #1 chk("empty BTB misses", !lk_hit);
    br(32'h1040, 32'h1020, 1, d, s); chk("first backward branch only recorded", !d && !s);
    br(32'h1040, 32'h1020, 1, d, s); chk("second one detects the loop", d && s && lt == 32'h1020 && lb == 32'h1040);
    chk("detect is a one-cycle pulse", 1); @(negedge clk); chk("pulse ends", !det);
    #1 chk("lookup hit, predicted taken, target", lk_hit && lk_taken && lk_target == 32'h1020);
    br(32'h1040, 32'h1020, 1, d, s);
    br(32'h1040, 32'h1020, 0, d, s); chk("loop exit: no detect", !d);   // past = 3
    br(32'h1040, 32'h1020, 1, d, s);
    br(32'h1040, 32'h1020, 1, d, s); chk("3 past iterations < 7 free contexts: seen, not detected", s && !d);
    for (int i = 0; i < 8; i++) br(32'h1040, 32'h1020, 1, d, s);
    br(32'h1040, 32'h1020, 0, d, s);                                    // past = 10
    br(32'h1040, 32'h1020, 1, d, s);
    br(32'h1040, 32'h1020, 1, d, s); chk("10 past iterations: detected", d);
    mode_non = 0;
    br(32'h1040, 32'h1020, 1, d, s); chk("not in non-DSMT mode: no detect", !d && s);
    mode_non = 1; stack_allow = 0;
    br(32'h1040, 32'h1020, 1, d, s); chk("stack veto: no detect", !d);
    stack_allow = 1;
    @(negedge clk); fb_valid = 1; fb_br = 32'h1040; fb_good = 0; @(negedge clk); fb_valid = 0;
    br(32'h1040, 32'h1020, 1, d, s); chk("bad loop: no detect", !d && s);
    @(negedge clk); fb_valid = 1; fb_good = 1; @(negedge clk); fb_valid = 0;
    br(32'h1040, 32'h1020, 1, d, s); chk("relabelled good: detect", d);
    br(32'h2000, 32'h2400, 1, d, s);
    br(32'h2000, 32'h2400, 1, d, s); chk("forward branch is no loop", !d && !s);
    // same set (index bits 9:2 equal), other tag: both ways usable
    br(32'h5040, 32'h5000, 1, d, s);
    lk_pc = 32'h1040; #1 chk("way 0 kept", lk_hit && lk_target == 32'h1020);
    lk_pc = 32'h5040; #1 chk("way 1 filled", lk_hit && lk_target == 32'h5000);
    // predictor: two not-taken executions flip the prediction
    br(32'h5040, 32'h5000, 0, d, s);
    br(32'h5040, 32'h5000, 0, d, s);
    lk_pc = 32'h5040; #1 chk("2-bit counter predicts not taken", lk_hit && !lk_taken);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
