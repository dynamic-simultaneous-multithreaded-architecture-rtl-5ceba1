// tb_context_file: self-checking test of the context ring (4 contexts,
// 16 registers). A directed sequence plays the thread controller and the
// core: commit writes in the Head, cloning with a stride prediction, reads
// that go to the own context, to the nearest writer, or wait for the
// immediate predecessor (D_Anchor), the second-level search after the
// predecessor joined, L/D bit setting, violation reports (oldest successor),
// the Head-to-successor register transfer that keeps the successor's own
// values, squash and clear. Expected values are worked out by hand below.
//
// Interface: no ports; a local clock and reset drive the unit under test.
// Timing: inputs change away from the rising clock edge and outputs are
// sampled after they settle; a watchdog ends a hung run. The run ends with
// one TB_RESULT line giving the number of checks and failures. Expected
// behaviour follows the paper's description of the unit (and, where the
// paper is silent, this design's documented choices); the stimulus values,
// sizes and sequences are this testbench's own.
module tb_context_file;
  import dsmt_pkg::*;
  localparam int N = 4, NR = 16, RP = 2, WP = 2, NP = 2;
  logic clk = 0, rst_n = 0;
  logic [1:0] head;
  logic [N-1:0] joined, v, s, h, sq;
  logic [NR-1:0] da, ra, cl;
  logic [RP-1:0] rreq, rpend, rrdy;
  logic [1:0] rctx [RP], rsrc [RP];
  logic [3:0] rreg [RP];
  logic [31:0] rdat [RP];
  logic [WP-1:0] wen;
  logic [1:0] wctx [WP];
  logic [3:0] wreg [WP];
  logic [31:0] wdat [WP];
  logic vv; logic [1:0] vc; logic [3:0] vr;
  logic ce, xe, cle; logic [1:0] cctx, clctx; logic [31:0] cpc;
  logic [NP-1:0] pv; logic [3:0] prd [NP]; logic [31:0] pval [NP];
  logic [1:0] pue; logic [1:0] puc [2]; logic [31:0] puv [2];
  logic [31:0] pco [N];
  logic [NR-1:0] rb [N], db [N], lb [N];
  logic [31:0] hregs [NR];
  int checks = 0, failures = 0;

  context_file #(.N(N), .NR(NR), .RPORTS(RP), .WPORTS(WP), .NPRED(NP)) dut (
    .clk, .rst_n, .reset_pc(32'h400), .head, .joined, .d_anchor(da), .r_anchor(ra), .conf_low(cl),
    .rd_req(rreq), .rd_ctx(rctx), .rd_reg(rreg), .rd_pending(rpend), .rd_ready(rrdy), .rd_src(rsrc),
    .rd_data(rdat), .wr_en(wen), .wr_ctx(wctx), .wr_reg(wreg), .wr_data(wdat),
    .viol_valid(vv), .viol_ctx(vc), .viol_reg(vr), .clone_en(ce), .clone_ctx(cctx), .clone_pc(cpc),
    .pred_valid(pv), .pred_rd(prd), .pred_val(pval), .xfer_en(xe), .clear_en(cle), .clear_ctx(clctx),
    .squash_mask(sq), .pc_upd_en(pue), .pc_upd_ctx(puc), .pc_upd_val(puv), .pc_o(pco), .v_o(v),
    .s_o(s), .h_o(h), .rbits_o(rb), .dbits_o(db), .lbits_o(lb), .head_regs_o(hregs));
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
  task automatic idle();
    rreq = 0; rpend = 0; wen = 0; ce = 0; xe = 0; cle = 0; sq = 0; pv = 0; pue = 0;
    for (int p = 0; p < 2; p++) begin rctx[p] = 0; rreg[p] = 0; wctx[p] = 0; wreg[p] = 0; wdat[p] = 0;
      prd[p] = 0; pval[p] = 0; puc[p] = 0; puv[p] = 0; end
  endtask
  task automatic wr(int c, int r, int d);
    @(negedge clk); wen[0] = 1; wctx[0] = 2'(c); wreg[0] = 4'(r); wdat[0] = 32'(d);
    @(negedge clk); idle();
  endtask
  // combinational read on port 0, committed at the next edge
  task automatic rd(int c, int r, output logic rdy, output int src, output int dat);
    @(negedge clk); rreq[0] = 1; rctx[0] = 2'(c); rreg[0] = 4'(r); #1;
    rdy = rrdy[0]; src = int'(rsrc[0]); dat = rdat[0];
    @(negedge clk); idle();
  endtask

  initial begin
    logic rdy; int src, dat;
    idle(); head = 0; joined = 0; da = 0; ra = 0; cl = 0; cpc = 32'h100; cctx = 0; clctx = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    chk("reset: ctx0 valid, non-speculative head", v == 4'b0001 && s == 0 && h == 4'b0001 && pco[0] == 32'h400);
    wr(0, 1, 10); wr(0, 2, 20); wr(0, 3, 30); wr(0, 7, 70);
    chk("commit sets R", rb[0] == 16'b0000_0000_1000_1110);
    // clone ctx1 with a stride prediction r4 = 44, then ctx2
    @(negedge clk); ce = 1; cctx = 1; pv = 2'b01; prd[0] = 4; pval[0] = 44;
    @(negedge clk); idle(); ce = 1; cctx = 2;
    @(negedge clk); idle();
    chk("clones valid and speculative", v == 4'b0111 && s == 4'b0110 && pco[1] == 32'h100);
    chk("predicted register marked R", rb[1] == 16'h0010 && rb[2] == 16'h0000);
    rd(1, 4, rdy, src, dat); chk("predicted register read locally", rdy && src == 1 && dat == 44);
    rd(2, 1, rdy, src, dat); chk("D_Anchor=0: nearest writer is Head", rdy && src == 0 && dat == 10);
    chk("speculative read sets L", lb[2][1]);
    // D_Anchor on r3: ctx2 waits for ctx1
    da[3] = 1;
    rd(2, 3, rdy, src, dat); chk("D_Anchor=1: waits for predecessor", !rdy);
    chk("waiting read sets no L", !lb[2][3]);
    wr(1, 3, 31);
    rd(2, 3, rdy, src, dat); chk("D_Anchor=1: reads predecessor when ready", rdy && src == 1 && dat == 31);
    // second level after the predecessor joined without writing r7
    da[7] = 1;
    rd(2, 7, rdy, src, dat); chk("r7 waits for ctx1", !rdy);
    joined[1] = 1;
    rd(2, 7, rdy, src, dat); chk("second level: search back to Head", rdy && src == 0 && dat == 70);
    joined[1] = 0;
    // low confidence acts like D_Anchor
    cl[2] = 1;
    rd(2, 2, rdy, src, dat); chk("low confidence waits for predecessor", !rdy);
    cl[2] = 0;
    // pending ROB write: local, no L
    @(negedge clk); rreq[0] = 1; rpend[0] = 1; rctx[0] = 2; rreg[0] = 9; #1;
    chk("pending own write: local", rrdy[0] && rsrc[0] == 2);
    @(negedge clk); idle();
    chk("pending read sets no L", !lb[2][9]);
    // D bit: R_Anchor set and R = 0
    ra[5] = 1;
    rd(2, 5, rdy, src, dat); chk("D bit set on inter-thread dependence", db[2][5] && lb[2][5]);
    // violation: ctx1 writes r5 that ctx2 read early
    @(negedge clk); wen[0] = 1; wctx[0] = 1; wreg[0] = 5; wdat[0] = 55; #1;
    chk("violation reported for ctx2 reg5", vv && vc == 2 && vr == 5);
    @(negedge clk); idle();
    // oldest successor: ctx1 and ctx2 both read r6 early, Head writes r6
    rd(1, 6, rdy, src, dat); rd(2, 6, rdy, src, dat);
    @(negedge clk); wen[1] = 1; wctx[1] = 0; wreg[1] = 6; wdat[1] = 66; #1;
    chk("oldest violating successor is ctx1", vv && vc == 1 && vr == 6);
    @(negedge clk); idle();
    // no violation for a write in the youngest context
    @(negedge clk); wen[0] = 1; wctx[0] = 2; wreg[0] = 1; wdat[0] = 11; #1;
    chk("write with no younger reader: no violation", !vv);
    @(negedge clk); idle();
    // transfer Head 0 -> 1: r1,r2,r6,r7 copied; r3,r4,r5 kept (written by ctx1)
    @(negedge clk); xe = 1; @(negedge clk); idle(); head = 1; #1;
    chk("transfer: V/S/H moved", v == 4'b0110 && s == 4'b0100 && h == 4'b0010);
    chk("transfer: copied values", hregs[1] == 10 && hregs[2] == 20 && hregs[6] == 66 && hregs[7] == 70);
    chk("transfer: own values kept", hregs[3] == 31 && hregs[4] == 44 && hregs[5] == 55);
    // squash ctx2, clear ctx1's bits, PC update
    @(negedge clk); sq = 4'b0100; pue[0] = 1; puc[0] = 1; puv[0] = 32'h180;
    @(negedge clk); idle(); cle = 1; clctx = 1;
    @(negedge clk); idle();
    chk("squash clears V", v == 4'b0010);
    chk("clear resets R/L/D", rb[1] == 0 && lb[1] == 0 && db[1] == 0);
    chk("PC update", pco[1] == 32'h180);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
