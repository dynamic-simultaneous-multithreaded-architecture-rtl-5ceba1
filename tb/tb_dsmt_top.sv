// tb_dsmt_top: end-to-end test of the DSMT thread speculation machinery at
// its default size (8 contexts, 64 registers, 64-entry MDRT, 512-entry BTB).
//
// The testbench plays the generic out-of-order core. It runs this loop
// (branch at 0x1040, body from 0x1000), iteration k of K:
//     x  = r1            ; induction variable, 4*k
//     y  = r2            ; running sum (true dependence on every iteration)
//     z  = r3            ; counter written only when k % 5 == 4
//     addi r1, r1, 4
//     r2 = y + x
//     if (k % 5 == 4) r3 = z + 1
//     10 loads from a per-iteration array, 1 load of A[x]
//     store to A[x+4]    ; the word the next iteration loads
//     bne  r1, LIMIT, loop
// (the loads come right after the induction update, before r2 and r3 are
// read, so speculative iterations keep many loads in the MDRT at once).
// Each cycle up to two runnable contexts perform one step of their iteration
// (read port / write port 0 or 1), in random order, so iterations overlap and
// finish out of order. A store commits locally into the context's queue and
// drains to memory once the context is the non-speculative Head (before its
// loads); the context cannot join until it has drained. The final not-taken
// branch waits until the context is Head. Squash, clone and join
// commands from the design restart or retire the testbench's per-context
// state.
//
// Checked: the architectural result after the loop equals the sequential
// one (r1 = 4K, r2 = sum of 4k, r3 = number of k with k % 5 == 4), which
// holds only if dependence speculation, stride prediction, squash and
// register transfer all work; the design returns to non-DSMT mode; and each
// mechanism happened at least once: loop detection (pre-DSMT), full-DSMT,
// cloning, joins, a speculative thread waiting on its J bit, a read waiting
// for its predecessor (D_Anchor), a register misspeculation squash, a memory
// misspeculation squash, the MDRT full, two fetch ports in use with the Head
// first, a BTB hit and the good/bad label at loop exit.
//
// Interface: no ports; a local clock and reset drive the unit under test.
// Timing: inputs change away from the rising clock edge and outputs are
// sampled after they settle; a watchdog ends a hung run. The run ends with
// one TB_RESULT line giving the number of checks and failures. Expected
// behaviour follows the paper's description of the unit (and, where the
// paper is silent, this design's documented choices); the stimulus values,
// sizes and sequences are this testbench's own.
module tb_dsmt_top;
  import dsmt_pkg::*;
  localparam int N = NCTX, NR = NREGS, RP = 2, WP = 2, FP = FETCH_PORTS, DP = DC_PORTS;
  localparam int K = 60, LIMIT = 4 * K, NLD = 10;

  logic clk = 0, rst_n = 0;
  logic [31:0] reset_pc = 32'h1000;
  logic [N-1:0] br_valid, br_taken;
  logic [31:0] br_pc [N], br_target [N];
  logic [31:0] lk_pc, lk_target; logic lk_hit, lk_taken;
  logic addi_valid; logic [5:0] addi_op, addi_rd; logic [15:0] addi_imm;
  logic [4:0] commit_cnt;
  logic [RP-1:0] rd_req, rd_pending, rd_ready;
  logic [2:0] rd_ctx [RP], rd_src [RP];
  logic [5:0] rd_reg [RP];
  logic [31:0] rd_data [RP];
  logic [WP-1:0] wr_en;
  logic [2:0] wr_ctx [WP];
  logic [5:0] wr_reg [WP];
  logic [31:0] wr_data [WP];
  logic [7:0] icount [N];
  logic [N-1:0] fetch_stall;
  logic [FP-1:0] fetch_valid, pc_upd_en;
  logic [2:0] fetch_ctx [FP], pc_upd_ctx [FP];
  logic [31:0] fetch_pc [FP], pc_upd_val [FP];
  logic [N-1:0] lsq_valid, lsq_store, lsq_grant, lsq_st_pending;
  logic [31:0] lsq_addr [N], lsq_data [N];
  logic [DP-1:0] dc_valid, dc_store;
  logic [2:0] dc_ctx [DP];
  logic [31:0] dc_addr [DP], dc_data [DP];
  dsmt_mode_e mode;
  logic [2:0] head, tail, clone_ctx;
  logic [N-1:0] ctx_v, ctx_s, ctx_j, squash_mask;
  logic clone_en, join_ev, viol_reg, viol_mem, mdrt_full, loop_label_valid, loop_label_good;

  dsmt_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_pre = 0, n_full = 0, n_clone = 0, n_join = 0, n_jwait = 0, n_dwait = 0;
  int n_vreg = 0, n_vmem = 0, n_mfull = 0, n_fetch2 = 0, n_btb = 0, n_label = 0, n_exit = 0, n_drain = 0;
  int cycles = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: no completion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // per-context testbench state
  typedef enum int {S_IDLE, S_RD1, S_WR1, S_LD, S_LDA, S_RD2, S_RD3, S_WR2, S_WR3, S_ST, S_BR,
                    S_WAIT, S_DONE} st_e;
  st_e st [N];
  int  x [N], y [N], z [N], ldn [N];
  // stores committed locally and waiting in the queue until the context is Head
  logic [N-1:0] stp, st_drv;
  logic [31:0]  st_addr [N], st_data [N];
  assign lsq_st_pending = stp;

  task automatic chk(string what, logic cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic runnable(int c);
    return ctx_v[c] && !ctx_j[c] && st[c] != S_IDLE && st[c] != S_WAIT && st[c] != S_DONE;
  endfunction

  // drive one step of context c on slot p; returns 1 if the step completed
  // (evaluated after the combinational outputs settled)
  logic [1:0] slot_used;
  int slot_ctx [2];

  task automatic drive(int p, int c);
    case (st[c])
      S_RD1: begin rd_req[p] = 1; rd_ctx[p] = 3'(c); rd_reg[p] = 1; end
      S_RD2: begin rd_req[p] = 1; rd_ctx[p] = 3'(c); rd_reg[p] = 2; end
      S_RD3: begin rd_req[p] = 1; rd_ctx[p] = 3'(c); rd_reg[p] = 3; end
      S_WR1: begin
        wr_en[p] = 1; wr_ctx[p] = 3'(c); wr_reg[p] = 1; wr_data[p] = 32'(x[c] + 4);
        if (c == int'(head)) begin addi_valid = 1; addi_rd = 1; addi_imm = 4; addi_op = 6'h08; end
      end
      S_WR2: begin wr_en[p] = 1; wr_ctx[p] = 3'(c); wr_reg[p] = 2; wr_data[p] = 32'(y[c] + x[c]); end
      S_WR3: begin wr_en[p] = 1; wr_ctx[p] = 3'(c); wr_reg[p] = 3; wr_data[p] = 32'(z[c] + 1); end
      S_LD:  if (!stp[c]) begin lsq_valid[c] = 1; lsq_store[c] = 0; lsq_addr[c] = 32'h20000 + 32'(x[c] * 64 + ldn[c] * 4); end
      S_LDA: if (!stp[c]) begin lsq_valid[c] = 1; lsq_store[c] = 0; lsq_addr[c] = 32'h8000 + 32'(x[c]); end
      S_BR:  if (x[c] + 4 < LIMIT || c == int'(head)) begin
               br_valid[c] = 1; br_pc[c] = 32'h1040; br_target[c] = 32'h1000;
               br_taken[c] = (x[c] + 4 < LIMIT);
             end
      default: ;
    endcase
  endtask

  function automatic logic completed(int p, int c);
    case (st[c])
      S_RD1, S_RD2, S_RD3: return rd_ready[p];
      S_WR1, S_WR2, S_WR3, S_ST: return 1'b1;
      S_LD, S_LDA:         return lsq_grant[c] && !st_drv[c];
      S_BR:                return br_valid[c];
      default:             return 1'b0;
    endcase
  endfunction

  task automatic advance(int p, int c);
    int k;
    k = x[c] / 4;
    case (st[c])
      S_RD1: begin x[c] = rd_data[p]; st[c] = S_WR1; end
      S_WR1: st[c] = S_LD;
      S_LD:  begin ldn[c]++; if (ldn[c] == NLD) st[c] = S_LDA; end
      S_LDA: st[c] = S_RD2;
      S_RD2: begin y[c] = rd_data[p]; st[c] = S_RD3; end
      S_RD3: begin z[c] = rd_data[p]; st[c] = S_WR2; end
      S_WR2: st[c] = (k % 5 == 4) ? S_WR3 : S_ST;
      S_WR3: st[c] = S_ST;
      S_ST:  begin
        stp[c] = 1; st_addr[c] = 32'h8000 + 32'(x[c] + 4); st_data[c] = 32'(x[c]);
        st[c] = S_BR;
      end
      S_BR:  begin
        if (x[c] + 4 >= LIMIT) begin st[c] = S_DONE; n_exit++; end
        else if (mode == MODE_NON) restart(c);
        else st[c] = S_WAIT;
      end
      default: ;
    endcase
  endtask

  task automatic restart(int c);
    st[c] = S_RD1; ldn[c] = 0; stp[c] = 0;
  endtask

  task automatic idle_inputs();
    br_valid = 0; br_taken = 0; addi_valid = 0; addi_op = 0; addi_rd = 0; addi_imm = 0;
    rd_req = 0; rd_pending = 0; wr_en = 0; lsq_valid = 0; lsq_store = 0; commit_cnt = 0;
    for (int c = 0; c < N; c++) begin
      br_pc[c] = 0; br_target[c] = 0; lsq_addr[c] = 0; lsq_data[c] = 0;
    end
    for (int p = 0; p < 2; p++) begin
      rd_ctx[p] = 0; rd_reg[p] = 0; wr_ctx[p] = 0; wr_reg[p] = 0; wr_data[p] = 0;
    end
  endtask

  // fetch side: icount = steps left in the iteration, PC advances on fetch
  always_comb begin
    for (int c = 0; c < N; c++) begin
      icount[c] = 8'(int'(S_DONE) - int'(st[c]));
      fetch_stall[c] = 1'b0;
    end
    for (int p = 0; p < FP; p++) begin
      pc_upd_en[p]  = fetch_valid[p];
      pc_upd_ctx[p] = fetch_ctx[p];
      pc_upd_val[p] = (fetch_pc[p] >= 32'h1040) ? 32'h1000 : fetch_pc[p] + 32;
    end
  end

  initial begin
    logic done;
    int   ord [N];
    idle_inputs();
    lk_pc = 32'h1040;
    for (int c = 0; c < N; c++) begin
      st[c] = S_IDLE; x[c] = 0; y[c] = 0; z[c] = 0; ldn[c] = 0; st_addr[c] = 0; st_data[c] = 0;
    end
    stp = 0; st_drv = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    restart(0);
    done = 0;
    while (!done) begin
      @(negedge clk);
      cycles++;
      idle_inputs();
      // choose up to two runnable contexts in random order
      for (int c = 0; c < N; c++) ord[c] = c;
      ord.shuffle();
      slot_used = 0;
      for (int i = 0; i < N; i++) begin
        int c; c = ord[i];
        if (runnable(c) && !slot_used[1]) begin
          int p; p = slot_used[0] ? 1 : 0;
          slot_used[p] = 1; slot_ctx[p] = c;
          drive(p, c);
        end
      end
      // the Head drains its buffered store ahead of its loads
      st_drv = 0;
      if (stp[head]) begin
        st_drv[head] = 1;
        lsq_valid[head] = 1; lsq_store[head] = 1;
        lsq_addr[head] = st_addr[head]; lsq_data[head] = st_data[head];
      end
      #1;
      // observe
      if (lk_hit && lk_taken && lk_target == 32'h1000) n_btb++;
      if (fetch_valid == 2'b11) n_fetch2++;
      if (fetch_valid[0]) chk("fetch port 0 serves the Head when it can fetch",
                              fetch_ctx[0] == head || !runnable(int'(head)) || ctx_j[head]);
      for (int c = 0; c < N; c++) if (ctx_v[c] && ctx_j[c] && c != int'(head)) n_jwait++;
      if (mdrt_full && |(lsq_valid & ~lsq_grant)) n_mfull++;
      for (int p = 0; p < 2; p++) if (slot_used[p] && rd_req[p] && !rd_ready[p]) n_dwait++;
      if (viol_reg) n_vreg++;
      if ((viol_reg || viol_mem) && mode == MODE_FULL)
        chk("misspeculation squashes a context", squash_mask != 0);
      if (viol_mem) n_vmem++;
      if (clone_en) n_clone++;
      if (join_ev) n_join++;
      if (loop_label_valid) n_label++;
      // complete steps and count commits
      for (int p = 0; p < 2; p++)
        if (slot_used[p] && completed(p, slot_ctx[p])) begin
          if (st[slot_ctx[p]] inside {S_WR1, S_WR2, S_WR3, S_ST, S_BR}) commit_cnt++;
        end
      if (st_drv[head] && lsq_grant[head]) n_drain++;
      #1;
      if (st_drv[head] && lsq_grant[head]) stp[head] = 0;
      for (int p = 0; p < 2; p++)
        if (slot_used[p] && completed(p, slot_ctx[p])) advance(p, slot_ctx[p]);
      // thread controller commands take effect at the clock edge
      begin
        logic [N-1:0] sq; logic ce, je; int cc, jc;
        sq = squash_mask; ce = clone_en; cc = int'(clone_ctx); je = join_ev; jc = int'(head);
        @(posedge clk); #1;
        for (int c = 0; c < N; c++) if (sq[c]) begin st[c] = S_IDLE; stp[c] = 0; end
        if (ce) restart(cc);
        if (je) begin
          if (head == 3'(jc)) restart(jc);     // Head continues with the next iteration
          else st[jc] = S_IDLE;               // transferred to its successor
        end
      end
      if (mode == MODE_PRE && n_pre == 0) n_pre = 1;
      if (mode == MODE_FULL) n_full++;
      if (st[head] == S_DONE && !stp[head] && mode == MODE_NON) done = 1;
    end
    // let the label come out
    repeat (3) begin @(negedge clk); if (loop_label_valid) n_label++; end
    // architectural result, read from the Head
    begin
      int exp_r2, exp_r3;
      exp_r2 = 0; exp_r3 = 0;
      for (int k = 0; k < K; k++) begin exp_r2 += 4 * k; if (k % 5 == 4) exp_r3++; end
      idle_inputs();
      @(negedge clk);
      rd_req = 2'b11; rd_ctx[0] = head; rd_reg[0] = 1; rd_ctx[1] = head; rd_reg[1] = 2; #1;
      chk($sformatf("r1 = %0d (expected %0d)", rd_data[0], LIMIT), rd_data[0] == LIMIT);
      chk($sformatf("r2 = %0d (expected %0d)", rd_data[1], exp_r2), rd_data[1] == 32'(exp_r2));
      @(negedge clk); rd_reg[0] = 3; #1;
      chk($sformatf("r3 = %0d (expected %0d)", rd_data[0], exp_r3), rd_data[0] == 32'(exp_r3));
      idle_inputs();
    end
    chk("back in non-DSMT mode with one context", mode == MODE_NON && $countones(ctx_v) == 1);
    $display("cycles=%0d pre=%0d full_cycles=%0d clones=%0d joins=%0d jwait=%0d dwait=%0d vreg=%0d vmem=%0d mdrt_full=%0d fetch2=%0d btb=%0d label=%0d",
             cycles, n_pre, n_full, n_clone, n_join, n_jwait, n_dwait, n_vreg, n_vmem, n_mfull, n_fetch2, n_btb, n_label);
    chk("loop detected (pre-DSMT)", n_pre > 0);
    chk("full-DSMT mode", n_full > 0);
    chk("threads cloned", n_clone > 0);
    chk("iterations joined", n_join > 0);
    chk("speculative thread waited on J", n_jwait > 0);
    chk("read waited for predecessor", n_dwait > 0);
    chk("register misspeculation squash", n_vreg > 0);
    chk("memory misspeculation squash", n_vmem > 0);
    chk("MDRT full stalled a load", n_mfull > 0);
    chk("two fetch ports used", n_fetch2 > 0);
    chk("BTB predicted the loop branch", n_btb > 0);
    chk("loop labelled at exit", n_label > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
