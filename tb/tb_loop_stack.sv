// tb_loop_stack: self-checking test of the nested-loop stack. An inner loop,
// then two enclosing loops are pushed; duplicates are ignored; SIPC values
// are recorded; the query must allow unknown levels and the best level only;
// an unrelated loop starts a new nest.
//
// Interface: no ports; a local clock and reset drive the unit under test.
// Timing: inputs change away from the rising clock edge and outputs are
// sampled after they settle; a watchdog ends a hung run. The run ends with
// one TB_RESULT line giving the number of checks and failures. Expected
// behaviour follows the paper's description of the unit (and, where the
// paper is silent, this design's documented choices); the stimulus values,
// sizes and sequences are this testbench's own.
module tb_loop_stack;
  import dsmt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic pv, uv, qa, bv;
  logic [31:0] pb, pt, ub, qb, bb;
  logic [7:0] us;
  logic [2:0] depth;
  int checks = 0, failures = 0;

  loop_stack dut (.clk, .rst_n, .push_valid(pv), .push_br(pb), .push_tgt(pt),
                  .upd_valid(uv), .upd_br(ub), .upd_sipc(us), .q_br(qb), .q_allow(qa),
                  .depth, .best_valid(bv), .best_br(bb));
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push(logic [31:0] br, logic [31:0] tg);
    @(negedge clk); pv = 1; pb = br; pt = tg; @(negedge clk); pv = 0;
  endtask
  task automatic upd(logic [31:0] br, int s);
    @(negedge clk); uv = 1; ub = br; us = 8'(s); @(negedge clk); uv = 0;
  endtask
  task automatic chk(string what, logic cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    pv = 0; uv = 0; pb = 0; pt = 0; ub = 0; us = 0; qb = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    push(32'h1040, 32'h1020);            // inner loop
    chk("depth 1", depth == 1);
    push(32'h1040, 32'h1020);            // same loop again
    chk("duplicate ignored", depth == 1);
    push(32'h1080, 32'h1000);            // middle loop encloses inner
    push(32'h10C0, 32'h0F00);            // outer loop
    chk("depth 3", depth == 3);
    qb = 32'h1080; #1 chk("unknown level allowed", qa);
    chk("no best yet", !bv);
    upd(32'h1040, 20);
    upd(32'h1080, 45);
    upd(32'h10C0, 30);
    chk("best is middle", bv && bb == 32'h1080);
    qb = 32'h1080; #1 chk("best allowed", qa);
    qb = 32'h1040; #1 chk("inner discarded", !qa);
    qb = 32'h10C0; #1 chk("outer discarded", !qa);
    qb = 32'h5000; #1 chk("other loop allowed", qa);
    push(32'h2040, 32'h2000);            // unrelated loop: new nest
    chk("new nest depth 1", depth == 1);
    chk("new nest has no best", !bv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
