// dsmt_top: the thread-level speculation machinery of a DSMT processor.
//
// DSMT runs the iterations of a loop as speculative threads on the contexts
// of an SMT core. This module holds everything DSMT adds to a generic
// out-of-order SMT core and wires it together:
//   loop_detect   - BTB with loop fields: finds loops, branch prediction;
//   loop_stack    - nested loops, picks the level with the highest SIPC;
//   sipc_monitor  - IPC before/during DSMT, break-even good/bad label;
//   tciu          - modes, Continuation, anchors, J bits, Head/Tail, cloning;
//   lsst          - stride prediction of induction registers for clones;
//   rrct          - confidence of speculative register reads;
//   context_file  - per-context PC/V/S/H and registers with R/L/D bits;
//   mdrt          - memory dependence check of speculative loads;
//   ls_select     - load/store selection onto the data-cache ports;
//   icount_sched  - ICount2.8-modified fetch scheduler.
// The generic core (caches, fetch, decode, reservation stations, execution
// units, reorder buffers, load/store queues) is outside; its signals are the
// ports of this module:
//   * br_*     - branches committed by each context (trains the BTB from the
//                Head; the committed loop branch ends an iteration, taken,
//                or leaves the loop, not taken by the Head);
//   * addi_*   - an addi rd,rd,#imm committed by the Head (trains the LSST);
//   * rd_*/wr_* - register operand reads at dispatch and commit writes;
//   * lsq_*    - the oldest ready memory operation of each context's queue,
//                and whether it still holds stores that committed locally
//                while the context was speculative; dc_* are the operations
//                sent to the data cache;
//   * icount/fetch_* - fetch scheduling; pc_upd_* - the fetch unit's next PC.
//   * squash_mask - contexts whose in-flight instructions the core must
//                flush; clone_* - a context that was just (re)started.
// All state changes on the rising clock edge; rst_n is an asynchronous
// active-low reset after which context 0 runs non-speculatively at reset_pc.
module dsmt_top
  import dsmt_pkg::*;
#(
  parameter int unsigned N      = NCTX,
  parameter int unsigned NR     = NREGS,
  parameter int unsigned W      = XLEN,
  parameter int unsigned PCW    = AW,
  parameter int unsigned RPORTS = 2,
  parameter int unsigned WPORTS = 2,
  parameter int unsigned FPORTS = FETCH_PORTS,
  parameter int unsigned DPORTS = DC_PORTS,
  parameter int unsigned LSST_N = 16,
  parameter int unsigned MDRT_N = 64,
  parameter int unsigned BTB_SETS = 256,
  parameter int unsigned ICW    = 8,
  parameter int unsigned COMW   = 5,
  localparam int unsigned CW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned RW    = $clog2(NR)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PCW-1:0]    reset_pc,

  // committed branches, one per context
  input  logic [N-1:0]      br_valid,
  input  logic [PCW-1:0]    br_pc     [N],
  input  logic [PCW-1:0]    br_target [N],
  input  logic [N-1:0]      br_taken,
  // branch prediction lookup
  input  logic [PCW-1:0]    lk_pc,
  output logic              lk_hit,
  output logic              lk_taken,
  output logic [PCW-1:0]    lk_target,
  // committed addi rd,rd,#imm of the Head
  input  logic              addi_valid,
  input  logic [5:0]        addi_op,
  input  logic [RW-1:0]     addi_rd,
  input  logic [15:0]       addi_imm,
  // instructions committed this cycle (all contexts)
  input  logic [COMW-1:0]   commit_cnt,

  // register reads
  input  logic [RPORTS-1:0] rd_req,
  input  logic [CW-1:0]     rd_ctx     [RPORTS],
  input  logic [RW-1:0]     rd_reg     [RPORTS],
  input  logic [RPORTS-1:0] rd_pending,
  output logic [RPORTS-1:0] rd_ready,
  output logic [CW-1:0]     rd_src     [RPORTS],
  output logic [W-1:0]      rd_data    [RPORTS],
  // register commit writes
  input  logic [WPORTS-1:0] wr_en,
  input  logic [CW-1:0]     wr_ctx     [WPORTS],
  input  logic [RW-1:0]     wr_reg     [WPORTS],
  input  logic [W-1:0]      wr_data    [WPORTS],

  // fetch
  input  logic [ICW-1:0]    icount     [N],
  input  logic [N-1:0]      fetch_stall,
  output logic [FPORTS-1:0] fetch_valid,
  output logic [CW-1:0]     fetch_ctx  [FPORTS],
  output logic [PCW-1:0]    fetch_pc   [FPORTS],
  input  logic [FPORTS-1:0] pc_upd_en,
  input  logic [CW-1:0]     pc_upd_ctx [FPORTS],
  input  logic [PCW-1:0]    pc_upd_val [FPORTS],

  // memory operations
  input  logic [N-1:0]      lsq_valid,
  input  logic [N-1:0]      lsq_store,
  input  logic [PCW-1:0]    lsq_addr   [N],
  input  logic [W-1:0]      lsq_data   [N],
  input  logic [N-1:0]      lsq_st_pending,   // stores committed locally, not yet in memory
  output logic [N-1:0]      lsq_grant,
  output logic [DPORTS-1:0] dc_valid,
  output logic [DPORTS-1:0] dc_store,
  output logic [CW-1:0]     dc_ctx     [DPORTS],
  output logic [PCW-1:0]    dc_addr    [DPORTS],
  output logic [W-1:0]      dc_data    [DPORTS],

  // status
  output dsmt_mode_e        mode,
  output logic [CW-1:0]     head,
  output logic [CW-1:0]     tail,
  output logic [N-1:0]      ctx_v,
  output logic [N-1:0]      ctx_s,
  output logic [N-1:0]      ctx_j,
  output logic [N-1:0]      squash_mask,
  output logic              clone_en,
  output logic [CW-1:0]     clone_ctx,
  output logic              join_ev,
  output logic              viol_reg,
  output logic              viol_mem,
  output logic              mdrt_full,
  output logic              loop_label_valid,
  output logic              loop_label_good
);

  // ------------------------------------------------------------ wiring
  logic              m_bit, full_start, loop_end, capture;
  logic [PCW-1:0]    continuation, loop_br, clone_pc;
  logic [NR-1:0]     d_anchor, r_anchor, conf_low;
  logic [15:0]       iter_cnt, clone_delta;
  logic [CW:0]       n_free;
  logic              xfer_en, clear_en;
  logic [CW-1:0]     clear_ctx, join_ctx;

  logic              ld_seen, ld_detect, stack_allow;
  logic [PCW-1:0]    ld_target, ld_branch;
  logic              sipc_valid, sipc_good;
  logic [7:0]        sipc;

  logic              cf_viol;
  logic [CW-1:0]     cf_viol_ctx;
  logic [RW-1:0]     cf_viol_reg;
  logic [PCW-1:0]    pc_o [N];
  logic [N-1:0]      h_o;
  logic [NR-1:0]     rbits [N], dbits [N], lbits [N];
  logic [W-1:0]      head_regs [NR];

  logic [LSST_N-1:0] pred_valid;
  logic [RW-1:0]     pred_rd  [LSST_N];
  logic [W-1:0]      pred_val [LSST_N];

  logic              mem_sq;
  logic [CW-1:0]     mem_sq_ctx;

  // iterations end / the loop is left when the loop branch commits
  logic [N-1:0] iter_done;
  logic         loop_exit;
  always_comb begin
    for (int c = 0; c < N; c++)
      iter_done[c] = (mode != MODE_NON) && br_valid[c] && br_taken[c] &&
                     br_pc[c] == loop_br;
    loop_exit = (mode != MODE_NON) && br_valid[head] && !br_taken[head] &&
                br_pc[head] == loop_br;
  end

  // ------------------------------------------------------------ loop detection
  loop_detect #(.SETS(BTB_SETS), .PCW(PCW), .CNW(CW + 1)) u_ldu (
    .clk, .rst_n,
    .lk_pc, .lk_hit, .lk_taken, .lk_target,
    .up_valid   (br_valid[head]),
    .up_pc      (br_pc[head]),
    .up_target  (br_target[head]),
    .up_taken   (br_taken[head]),
    .mode_non   (mode == MODE_NON),
    .ctx_avail  (n_free),
    .stack_allow(stack_allow),
    .fb_valid   (sipc_valid),
    .fb_br      (loop_br),
    .fb_good    (sipc_good),
    .loop_seen  (ld_seen),
    .detect     (ld_detect),
    .loop_target(ld_target),
    .loop_branch(ld_branch)
  );

  loop_stack #(.PCW(PCW)) u_stack (
    .clk, .rst_n,
    .push_valid (ld_seen),
    .push_br    (ld_branch),
    .push_tgt   (ld_target),
    .upd_valid  (sipc_valid),
    .upd_br     (loop_br),
    .upd_sipc   (sipc),
    .q_br       (br_pc[head]),
    .q_allow    (stack_allow),
    .depth      (),
    .best_valid (),
    .best_br    ()
  );

  sipc_monitor #(.COMW(COMW)) u_sipc (
    .clk, .rst_n, .mode, .commit_cnt, .loop_end,
    .res_valid(sipc_valid), .res_good(sipc_good), .sipc
  );
  assign loop_label_valid = sipc_valid;
  assign loop_label_good  = sipc_good;

  // ------------------------------------------------------------ TCIU
  tciu #(.N(N), .NR(NR), .PCW(PCW)) u_tciu (
    .clk, .rst_n,
    .loop_detect   (ld_detect),
    .loop_target   (ld_target),
    .loop_branch   (ld_branch),
    .iter_done, .loop_exit, .st_pending(lsq_st_pending),
    .viol_reg_valid(cf_viol),
    .viol_reg_ctx  (cf_viol_ctx),
    .viol_mem_valid(mem_sq),
    .viol_mem_ctx  (mem_sq_ctx),
    .ctx_v, .rbits, .dbits,
    .mode, .m_bit, .full_start, .loop_end, .continuation, .loop_br,
    .head, .tail, .joined(ctx_j), .d_anchor, .r_anchor, .iter_cnt, .n_free,
    .clone_en, .clone_ctx, .clone_pc, .clone_delta, .xfer_en,
    .clear_en, .clear_ctx, .squash_mask, .capture, .join_ev, .join_ctx
  );

  lsst #(.ENTRIES(LSST_N), .NR(NR), .W(W)) u_lsst (
    .clk, .rst_n,
    .flush      (ld_detect && mode == MODE_NON),
    .learn_valid(addi_valid && mode != MODE_NON),
    .learn_op   (addi_op),
    .learn_rd   (addi_rd),
    .learn_imm  (addi_imm),
    .capture,
    .regs_i     (head_regs),
    .delta      (clone_delta),
    .pred_valid, .pred_rd, .pred_val
  );

  rrct #(.NR(NR)) u_rrct (
    .clk, .rst_n,
    .dec_valid(cf_viol),
    .dec_reg  (cf_viol_reg),
    .inc_valid(join_ev),
    .inc_mask (lbits[join_ctx]),
    .conf_low,
    .conf     ()
  );

  // ------------------------------------------------------------ contexts
  context_file #(.N(N), .NR(NR), .W(W), .PCW(PCW), .RPORTS(RPORTS),
                 .WPORTS(WPORTS), .NPRED(LSST_N), .PCUPD(FPORTS)) u_ctx (
    .clk, .rst_n, .reset_pc,
    .head, .joined(ctx_j), .d_anchor, .r_anchor, .conf_low,
    .rd_req, .rd_ctx, .rd_reg, .rd_pending, .rd_ready, .rd_src, .rd_data,
    .wr_en, .wr_ctx, .wr_reg, .wr_data,
    .viol_valid(cf_viol), .viol_ctx(cf_viol_ctx), .viol_reg(cf_viol_reg),
    .clone_en, .clone_ctx, .clone_pc, .pred_valid, .pred_rd, .pred_val,
    .xfer_en, .clear_en, .clear_ctx, .squash_mask,
    .pc_upd_en, .pc_upd_ctx, .pc_upd_val,
    .pc_o, .v_o(ctx_v), .s_o(ctx_s), .h_o, .rbits_o(rbits), .dbits_o(dbits),
    .lbits_o(lbits), .head_regs_o(head_regs)
  );

  icount_sched #(.N(N), .NPORTS(FPORTS), .PCW(PCW), .ICW(ICW)) u_sched (
    .head, .ctx_v, .ctx_j, .stall(fetch_stall), .icount, .pc(pc_o),
    .port_valid(fetch_valid), .port_ctx(fetch_ctx), .next_pc(fetch_pc)
  );

  // ------------------------------------------------------------ memory
  logic [N-1:0]      sel_grant;
  logic [DPORTS-1:0] sel_valid, sel_store, sel_accept;
  logic [CW-1:0]     sel_ctx  [DPORTS];
  logic [PCW-1:0]    sel_addr [DPORTS];
  logic [W-1:0]      sel_data [DPORTS];
  logic [PCW-3:0]    sel_word [DPORTS];
  logic [N-1:0]      mdrt_clr;

  ls_select #(.N(N), .NPORTS(DPORTS), .AWW(PCW), .W(W)) u_lssel (
    .head, .req_valid(lsq_valid), .req_store(lsq_store), .req_addr(lsq_addr),
    .req_data(lsq_data), .grant(sel_grant), .port_valid(sel_valid),
    .port_store(sel_store), .port_ctx(sel_ctx), .port_addr(sel_addr),
    .port_data(sel_data)
  );

  always_comb begin
    mdrt_clr = squash_mask;
    if (join_ev && xfer_en) mdrt_clr[join_ctx] = 1'b1;
  end
  always_comb begin
    for (int p = 0; p < DPORTS; p++) sel_word[p] = sel_addr[p][PCW-1:2];
  end

  mdrt #(.N(N), .ENTRIES(MDRT_N), .NPORTS(DPORTS), .AWW(PCW - 2), .W(W)) u_mdrt (
    .clk, .rst_n, .head, .clr_mask(mdrt_clr),
    .op_valid(sel_valid), .op_store(sel_store), .op_ctx(sel_ctx),
    .op_addr(sel_word), .op_data(sel_data), .op_accept(sel_accept),
    .squash_valid(mem_sq), .squash_ctx(mem_sq_ctx), .full(mdrt_full), .used()
  );

  always_comb begin
    lsq_grant = '0;
    for (int p = 0; p < DPORTS; p++) begin
      dc_valid[p] = sel_valid[p] && sel_accept[p];
      dc_store[p] = sel_store[p];
      dc_ctx[p]   = sel_ctx[p];
      dc_addr[p]  = sel_addr[p];
      dc_data[p]  = sel_data[p];
      if (dc_valid[p]) lsq_grant[sel_ctx[p]] = 1'b1;
    end
  end

  assign viol_reg = cf_viol;
  assign viol_mem = mem_sq;

endmodule
