// tciu: Thread Creation and Initiation Unit of the DSMT processor.
//
// The TCIU owns the execution mode and the thread bookkeeping registers of
// the context diagram: the M bit, the Continuation register (start PC of the
// loop body), the Iteration Counter, the D_Anchor / R_Anchor bits, one Join
// (J) bit per context and the Head / Tail pointers of the context ring. It
// drives the bulk operations of the context file (clone, transfer, clear,
// squash) and the capture strobe of the loop stride table.
//
// Mode sequence (paper): non-DSMT -> pre-DSMT when the loop detection unit
// reports a loop (Continuation latched, M set); PRE_ITERS iterations run on
// the single non-speculative context to learn the anchor bits and strides;
// then full-DSMT, in which free contexts are cloned from the Continuation and
// every iteration is a thread. PRE_ITERS = 2 stands for the paper's "a couple
// of loop iterations".
//
// Per cycle the controller does at most one of these, in priority order:
//   1. loop exit by the Head (loop_exit): squash all speculative contexts,
//      return to non-DSMT and pulse loop_end;
//   2. misspeculation (register or memory): squash the reported context and
//      every successor up to Tail; Tail moves back to its predecessor, so the
//      squashed iterations are cloned again (reinitiated) afterwards;
//   3. Head has its J bit: the R/D bits of Head become the new anchors, the
//      stride table captures Head's registers as its new base, the register
//      values are transferred to Head's successor, which becomes Head; if no
//      successor exists Head just continues with the next iteration;
//   4. a free context exists in full-DSMT mode: clone the iteration after
//      Tail into it (Tail advances, one clone per cycle).
// J bits are set one cycle after iter_done so that the Head's last commit
// writes are in its register file before the transfer. A Head whose
// load/store queue still holds stores that committed locally while it was
// speculative (st_pending) joins only once they have drained to memory. A
// speculative context whose J bit is set stops fetching and waits to become
// Head.
// Iteration numbers per context and one clone per cycle are this design's
// choices; the paper does not give cloning latency.
module tciu
  import dsmt_pkg::*;
#(
  parameter int unsigned N         = NCTX,
  parameter int unsigned NR        = NREGS,
  parameter int unsigned PCW       = AW,
  parameter int unsigned ITW       = 16,   // iteration counter width
  parameter int unsigned PRE_ITERS = 2,
  localparam int unsigned CW       = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,

  // from the loop detection unit
  input  logic              loop_detect,
  input  logic [PCW-1:0]    loop_target,
  input  logic [PCW-1:0]    loop_branch,

  // from the commit stage
  input  logic [N-1:0]      iter_done,     // context committed the taken loop branch
  input  logic              loop_exit,     // Head left the loop
  input  logic [N-1:0]      st_pending,    // context still has stores to drain

  // misspeculation reports
  input  logic              viol_reg_valid,
  input  logic [CW-1:0]     viol_reg_ctx,
  input  logic              viol_mem_valid,
  input  logic [CW-1:0]     viol_mem_ctx,

  // context state
  input  logic [N-1:0]      ctx_v,
  input  logic [NR-1:0]     rbits [N],
  input  logic [NR-1:0]     dbits [N],

  // mode and bookkeeping
  output dsmt_mode_e        mode,
  output logic              m_bit,
  output logic              full_start,    // pulse: full-DSMT begins
  output logic              loop_end,      // pulse: the loop was left
  output logic [PCW-1:0]    continuation,
  output logic [PCW-1:0]    loop_br,
  output logic [CW-1:0]     head,
  output logic [CW-1:0]     tail,
  output logic [N-1:0]      joined,
  output logic [NR-1:0]     d_anchor,
  output logic [NR-1:0]     r_anchor,
  output logic [ITW-1:0]    iter_cnt,      // iteration of the Head
  output logic [CW:0]       n_free,        // contexts free for cloning

  // commands to the context file / stride table
  output logic              clone_en,
  output logic [CW-1:0]     clone_ctx,
  output logic [PCW-1:0]    clone_pc,
  output logic [ITW-1:0]    clone_delta,   // iteration of the clone - stride base
  output logic              xfer_en,
  output logic              clear_en,
  output logic [CW-1:0]     clear_ctx,
  output logic [N-1:0]      squash_mask,
  output logic              capture,       // stride table: take Head's registers as base
  output logic              join_ev,       // Head completed an iteration
  output logic [CW-1:0]     join_ctx
);

  logic [ITW-1:0] ctx_iter [N];
  logic [ITW-1:0] base_iter;
  logic [CW:0]    pre_cnt;

  function automatic logic [CW-1:0] ring_add(input logic [CW-1:0] a, input int unsigned k);
    return CW'((int'(a) + k) % N);
  endfunction

  function automatic int unsigned ring_pos(input logic [CW-1:0] c, input logic [CW-1:0] hd);
    return (int'(c) + N - int'(hd)) % N;
  endfunction

  // ------------------------------------------------------- decisions
  logic          sq_valid;
  logic [CW-1:0] sq_ctx;
  logic [CW-1:0] nxt_head, nxt_tail;
  logic          do_exit, do_squash, do_join, do_clone;
  int unsigned   nvalid;

  always_comb begin
    // oldest of the two misspeculation reports
    sq_valid = 1'b0;
    sq_ctx   = '0;
    if (viol_reg_valid && viol_reg_ctx != head && ctx_v[viol_reg_ctx]) begin
      sq_valid = 1'b1;
      sq_ctx   = viol_reg_ctx;
    end
    if (viol_mem_valid && viol_mem_ctx != head && ctx_v[viol_mem_ctx] &&
        (!sq_valid || ring_pos(viol_mem_ctx, head) < ring_pos(sq_ctx, head))) begin
      sq_valid = 1'b1;
      sq_ctx   = viol_mem_ctx;
    end
    nvalid = 0;
    for (int c = 0; c < N; c++) nvalid += int'(ctx_v[c]);
    n_free = (mode == MODE_FULL) ? (CW+1)'(N - nvalid) : (CW+1)'(N - 1);

    nxt_head = ring_add(head, 1);
    nxt_tail = ring_add(tail, 1);

    do_exit   = (mode != MODE_NON) && loop_exit;
    do_squash = !do_exit && (mode == MODE_FULL) && sq_valid;
    do_join   = !do_exit && !do_squash && (mode != MODE_NON) && joined[head] &&
                !st_pending[head];
    do_clone  = !do_exit && !do_squash && !do_join && (mode == MODE_FULL) &&
                (nvalid < N) && !ctx_v[nxt_tail];

    // squash mask: everything from the squashed context to Tail
    squash_mask = '0;
    if (do_exit) begin
      squash_mask = ctx_v;
      squash_mask[head] = 1'b0;
    end else if (do_squash) begin
      for (int c = 0; c < N; c++)
        if (ctx_v[c] && ring_pos(CW'(c), head) >= ring_pos(sq_ctx, head))
          squash_mask[c] = 1'b1;
    end

    clone_en    = do_clone;
    clone_ctx   = nxt_tail;
    clone_pc    = continuation;
    clone_delta = ctx_iter[tail] + ITW'(1) - base_iter;

    xfer_en   = do_join && (mode == MODE_FULL) && ctx_v[nxt_head];
    clear_en  = (do_join && !xfer_en) || (mode == MODE_NON && loop_detect);
    clear_ctx = head;
    capture   = do_join;
    join_ev   = do_join;
    join_ctx  = head;
  end

  assign m_bit = (mode != MODE_NON);

  // ------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode         <= MODE_NON;
      continuation <= '0;
      loop_br      <= '0;
      head         <= '0;
      tail         <= '0;
      joined       <= '0;
      d_anchor     <= '0;
      r_anchor     <= '0;
      iter_cnt     <= '0;
      base_iter    <= '0;
      pre_cnt      <= '0;
      full_start   <= 1'b0;
      loop_end     <= 1'b0;
      for (int c = 0; c < N; c++) ctx_iter[c] <= '0;
    end else begin
      full_start <= 1'b0;
      loop_end   <= 1'b0;
      // J bits of contexts that finished their iteration
      if (mode != MODE_NON)
        for (int c = 0; c < N; c++)
          if (iter_done[c] && ctx_v[c] && !squash_mask[c]) joined[c] <= 1'b1;

      case (mode)
        MODE_NON: begin
          if (loop_detect) begin
            mode           <= MODE_PRE;
            continuation   <= loop_target;
            loop_br        <= loop_branch;
            iter_cnt       <= '0;
            base_iter      <= '0;
            pre_cnt        <= '0;
            ctx_iter[head] <= '0;
            tail           <= head;
            joined         <= '0;
          end
        end
        default: ;
      endcase

      if (do_exit) begin
        mode     <= MODE_NON;
        loop_end <= 1'b1;
        tail     <= head;
        joined   <= '0;
      end else if (do_squash) begin
        tail <= CW'((int'(sq_ctx) + N - 1) % N);
        for (int c = 0; c < N; c++)
          if (squash_mask[c]) joined[c] <= 1'b0;
      end else if (do_join) begin
        d_anchor      <= dbits[head];
        r_anchor      <= rbits[head];
        joined[head]  <= 1'b0;
        iter_cnt      <= iter_cnt + ITW'(1);
        base_iter     <= iter_cnt + ITW'(1);
        if (xfer_en) begin
          head <= nxt_head;
        end else begin
          ctx_iter[head] <= ctx_iter[head] + ITW'(1);
        end
        if (mode == MODE_PRE) begin
          pre_cnt <= pre_cnt + 1'b1;
          if (int'(pre_cnt) + 1 >= int'(PRE_ITERS)) begin
            mode       <= MODE_FULL;
            full_start <= 1'b1;
          end
        end
      end else if (do_clone) begin
        tail                <= nxt_tail;
        ctx_iter[nxt_tail]  <= ctx_iter[tail] + ITW'(1);
      end
    end
  end

  // only one bulk operation reaches the context file per cycle
  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot0({clone_en, xfer_en, clear_en}));

endmodule
