// tb_lsst: self-checking test of the loop stride speculation table.
// Strides are trained as the commit stage would report addi rd,rd,#imm; a
// base is captured from a register snapshot; the predictions
// base + delta*imm of confident entries are checked against values computed
// here, and an entry whose immediate keeps changing must not predict.
//
// Interface: no ports; a local clock and reset drive the unit under test.
// Timing: inputs change away from the rising clock edge and outputs are
// sampled after they settle; a watchdog ends a hung run. The run ends with
// one TB_RESULT line giving the number of checks and failures. Expected
// behaviour follows the paper's description of the unit (and, where the
// paper is silent, this design's documented choices); the stimulus values,
// sizes and sequences are this testbench's own.
module tb_lsst;
  import dsmt_pkg::*;
  localparam int E = 16;
  logic clk = 0, rst_n = 0;
  logic fl, lv, cap;
  logic [5:0] lop, lrd;
  logic [15:0] limm, delta;
  logic [31:0] regs [64];
  logic [E-1:0] pv;
  logic [5:0] prd [E];
  logic [31:0] pval [E];
  int checks = 0, failures = 0;

  lsst dut (.clk, .rst_n, .flush(fl), .learn_valid(lv), .learn_op(lop), .learn_rd(lrd),
            .learn_imm(limm), .capture(cap), .regs_i(regs), .delta, .pred_valid(pv),
            .pred_rd(prd), .pred_val(pval));
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic learn(int rd, int imm);
    @(negedge clk); lv = 1; lrd = 6'(rd); limm = 16'(imm); lop = 6'h08; @(negedge clk); lv = 0;
  endtask
  // returns 1 and the value if some valid prediction exists for rd
  function automatic logic lookup(int rd, output logic [31:0] val);
    lookup = 0; val = 0;
    for (int e = 0; e < E; e++) if (pv[e] && prd[e] == 6'(rd)) begin lookup = 1; val = pval[e]; end
  endfunction
  task automatic chk(string what, logic cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [31:0] v; logic h;
    fl = 0; lv = 0; cap = 0; lop = 0; lrd = 0; limm = 0; delta = 0;
    for (int r = 0; r < 64; r++) regs[r] = 32'(r * 1000);
    repeat (2) @(posedge clk); rst_n = 1;
    // iteration 1
    learn(5, 4); learn(7, -8); learn(9, 1);
    #1 h = lookup(5, v); chk("not confident after one iteration", !h);
    // iteration 2
    learn(5, 4); learn(7, -8); learn(9, 3);
    regs[5] = 100; regs[7] = 5000; regs[9] = 77;
    @(negedge clk); cap = 1; @(negedge clk); cap = 0;
    for (int d = 1; d < 8; d++) begin
      delta = 16'(d); #1;
      h = lookup(5, v); chk("rd5 predicted", h && v == 32'(100 + 4 * d));
      h = lookup(7, v); chk("rd7 predicted", h && v == 32'(5000 - 8 * d));
      h = lookup(9, v); chk("rd9 unstable stride not predicted", !h);
    end
    // more iterations keep confidence; a new base is captured
    learn(5, 4); learn(7, -8);
    regs[5] = 104;
    @(negedge clk); cap = 1; @(negedge clk); cap = 0;
    delta = 3; #1 h = lookup(5, v); chk("rd5 from new base", h && v == 32'(104 + 12));
    // flush forgets everything
    @(negedge clk); fl = 1; @(negedge clk); fl = 0; #1;
    chk("flushed", pv == '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
