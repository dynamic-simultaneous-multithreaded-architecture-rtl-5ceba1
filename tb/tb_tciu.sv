// tb_tciu: self-checking test of the Thread Creation and Initiation Unit
// (4 contexts). The testbench plays the context file (V bits follow the
// clone / transfer / squash commands) and the commit stage. Checked: entry to
// pre-DSMT on a detected loop with the Continuation latched, anchor capture
// from the Head's R/D bits at each iteration end, the switch to full-DSMT
// after two iterations, cloning one context per cycle with the iteration
// distances for the stride table, J-bit synchronisation (a finished
// speculative thread waits and joins right after the Head), Head/Tail
// movement, squash of a context and its successors with reinitiation, the
// choice of the older of a register and a memory violation, and the return
// to non-DSMT mode on loop exit.
//
// Interface: no ports; a local clock and reset drive the unit under test.
// Timing: inputs change away from the rising clock edge and outputs are
// sampled after they settle; a watchdog ends a hung run. The run ends with
// one TB_RESULT line giving the number of checks and failures. Expected
// behaviour follows the paper's description of the unit (and, where the
// paper is silent, this design's documented choices); the stimulus values,
// sizes and sequences are this testbench's own.
module tb_tciu;
  import dsmt_pkg::*;
  localparam int N = 4, NR = 8;
  logic clk = 0, rst_n = 0;
  logic ld; logic [31:0] lt, lb;
  logic [N-1:0] idone, stpend; logic lexit;
  logic vrv, vmv; logic [1:0] vrc, vmc;
  logic [N-1:0] cv;
  logic [NR-1:0] rb [N], db [N];
  dsmt_mode_e mode; logic m, fs, le;
  logic [31:0] cont, lbr, cpc;
  logic [1:0] head, tail, cctx, clctx, jctx;
  logic [N-1:0] joined, sqm;
  logic [NR-1:0] da, ra;
  logic [15:0] itc, cdelta;
  logic [2:0] nfree;
  logic ce, xe, cle, cap, jev;
  int checks = 0, failures = 0;
  int clones = 0, joins = 0, squashes = 0;

  tciu #(.N(N), .NR(NR)) dut (.clk, .rst_n, .loop_detect(ld), .loop_target(lt), .loop_branch(lb),
    .iter_done(idone), .loop_exit(lexit), .st_pending(stpend), .viol_reg_valid(vrv), .viol_reg_ctx(vrc),
    .viol_mem_valid(vmv), .viol_mem_ctx(vmc), .ctx_v(cv), .rbits(rb), .dbits(db),
    .mode, .m_bit(m), .full_start(fs), .loop_end(le), .continuation(cont), .loop_br(lbr),
    .head, .tail, .joined, .d_anchor(da), .r_anchor(ra), .iter_cnt(itc), .n_free(nfree),
    .clone_en(ce), .clone_ctx(cctx), .clone_pc(cpc), .clone_delta(cdelta), .xfer_en(xe),
    .clear_en(cle), .clear_ctx(clctx), .squash_mask(sqm), .capture(cap), .join_ev(jev), .join_ctx(jctx));
  always #5 clk = ~clk;

  // context file stand-in: V bits
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) cv <= 4'b0001;
    else begin
      logic [N-1:0] n; n = cv;
      if (ce) n[cctx] = 1;
      if (xe) n[head] = 0;
      n &= ~sqm;
      cv <= n;
    end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask
  task automatic done(int c);
    @(negedge clk); idone[c] = 1; @(negedge clk); idone = 0;
  endtask

  initial begin
    ld = 0; lt = 0; lb = 0; idone = 0; stpend = 0; lexit = 0; vrv = 0; vmv = 0; vrc = 0; vmc = 0;
    for (int c = 0; c < N; c++) begin rb[c] = 0; db[c] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    chk("reset: non-DSMT, head 0", mode == MODE_NON && !m && head == 0 && tail == 0);
    // loop detected
    ld = 1; lt = 32'h100; lb = 32'h140; #1 chk("clear head bits on loop entry", cle && clctx == 0);
    @(negedge clk); ld = 0;
    chk("pre-DSMT, M set, Continuation latched", mode == MODE_PRE && m && cont == 32'h100 && lbr == 32'h140);
    // iteration 1 ends: anchors from the Head's bits
    rb[0] = 8'b0000_0110; db[0] = 8'b0000_0100;
    done(0);
    #1 chk("J bit set one cycle after iter_done; join", joined[0] && jev && cap && cle && !xe);
    @(negedge clk);
    chk("anchors captured", ra == 8'b0000_0110 && da == 8'b0000_0100 && mode == MODE_PRE);
    chk("no clone in pre-DSMT", cv == 4'b0001);
    rb[0] = 8'b0001_0010; db[0] = 8'b0001_0000;
    done(0);
    @(negedge clk);
    chk("full-DSMT after two iterations", mode == MODE_FULL && ra == 8'b0001_0010 && da == 8'b0001_0000);
    // cloning: one per cycle, contexts 1,2,3 with distances 1,2,3
    for (int k = 1; k < N; k++) begin
      #1 chk("clone command", ce && cctx == 2'(k) && cdelta == 16'(k) && cpc == 32'h100);
      @(negedge clk);
    end
    #1 chk("all contexts running, tail 3", cv == 4'b1111 && tail == 3 && !ce && nfree == 0);
    // speculative ctx2 finishes first: it waits
    done(2);
    #1 chk("speculative J waits", joined[2] && !jev && head == 0);
    // head finishes with a store still in its queue: join waits for the drain
    stpend[0] = 1;
    done(0);
    #1 chk("join waits for store drain", joined[0] && !jev && !xe);
    @(negedge clk);
    stpend[0] = 0;
    // drained: transfer to ctx1, then clone ctx0 (3 iterations ahead)
    #1 chk("head join transfers", jev && xe && jctx == 0);
    @(negedge clk);
    chk("head moved to 1", head == 1 && !joined[0]);
    #1 chk("re-clone into freed ctx0", ce && cctx == 0 && cdelta == 3);
    @(negedge clk);
    chk("tail 0", tail == 0);
    // ctx1 finishes; ctx2 already joined -> two joins in a row
    done(1);
    #1 chk("join 1", jev && jctx == 1);
    @(negedge clk);
    #1 chk("joined ctx2 joins at once (join before clone)", jev && jctx == 2 && head == 2 && !ce);
    @(negedge clk);
    chk("head 3", head == 3);
    #1 chk("clone after joins", ce && cctx == 1);
    @(negedge clk); @(negedge clk);
    chk("ring refilled, tail 2", cv == 4'b1111 && tail == 2);
    // register violation on ctx1 (ring order 3,0,1,2): squash 1 and 2
    vrv = 1; vrc = 1; #1 chk("squash mask 1,2", sqm == 4'b0110);
    @(negedge clk); vrv = 0;
    chk("tail back to 0", tail == 0 && cv == 4'b1001);
    #1 chk("reinitiate ctx1", ce && cctx == 1 && cdelta == 2);
    @(negedge clk); @(negedge clk);
    chk("reinitiated", cv == 4'b1111 && tail == 2);
    // both violations: memory on ctx0 (older) wins over register on ctx2
    vrv = 1; vrc = 2; vmv = 1; vmc = 0; #1 chk("older violation chosen", sqm == 4'b0111);
    @(negedge clk); vrv = 0; vmv = 0;
    repeat (3) @(negedge clk);
    // loop exit
    lexit = 1; #1 chk("exit squashes all speculative", sqm == 4'b0111);
    @(negedge clk); lexit = 0;
    chk("back to non-DSMT", mode == MODE_NON && !m && le && cv == 4'b1000 && tail == 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
