// context_file: the ring of hardware contexts of a DSMT processor.
//
// Each context holds a PC, its Valid (V), Speculative (S) and Head (H) bits
// and a private register file of NREGS registers. Each register carries three
// utility bits:
//   R - a value has been committed to the register in this context;
//   L - the register was read speculatively from a predecessor context;
//   D - the register showed an inter-thread dependence (read with R=0 while
//       the R_Anchor bit of the register was set).
// The contexts form a ring; Head is the single non-speculative context and
// ring order from Head is the program order of the loop iterations.
//
// Register reads (RPORTS ports, combinational result, bit updates on the
// clock edge) follow the register dependence speculation of the design:
//   * R=1, or an older instruction of the same context will still write the
//     register (rd_pending), or the reader is the Head: read own context.
//   * D_Anchor=1: wait until the immediate predecessor has R=1 and read it
//     (first level). If that predecessor has already joined without writing
//     the register, search back for the nearest predecessor with R=1 (second
//     level), and fall back to the own copy.
//   * D_Anchor=0: read at once from the nearest predecessor with R=1, or the
//     own copy if none wrote it.
//   A speculative read with R=0 sets L; any read with R=0 and R_Anchor=1
//   sets D. A low register-read confidence (conf_low) makes a D_Anchor=0
//   register behave like D_Anchor=1, i.e. wait for the predecessor; this use
//   of the confidence table is this design's choice.
//
// Commit writes (WPORTS ports) store the value and set R. The L bits of the
// successors of the writer, and speculative reads of the same cycle, are
// checked; the oldest successor that read the
// register early is reported on viol_* and the controller squashes it and
// everything after it.
//
// Bulk operations requested by the thread controller, one per cycle:
//   clone    - copy Head's registers into a free context, clear its R/L/D
//              bits, set V and S, load the PC; the LSST predictions given on
//              pred_* overwrite their registers and mark them R=1.
//   transfer - the Head has finished its iteration: copy each register whose
//              R bit is clear in the successor into the successor (registers
//              the successor produced itself are kept), make the successor
//              the non-speculative Head and free the old Head. The successor
//              also takes over the old Head's R bits: a value committed by the
//              old Head was committed by an instruction logically preceding
//              the successor's, which is what R means. Without this, a younger
//              context cloned before the old Head wrote a register would find
//              no writer and read its own stale copy.
//   clear    - clear the R/L/D bits of one context (start of an iteration in
//              pre-DSMT / single-context mode).
//   squash   - clear V of every context in squash_mask.
// The register copies are done in one cycle; the paper does not say how many
// cycles cloning or transfer take.
module context_file
  import dsmt_pkg::*;
#(
  parameter int unsigned N      = NCTX,
  parameter int unsigned NR     = NREGS,
  parameter int unsigned W      = XLEN,
  parameter int unsigned PCW    = AW,
  parameter int unsigned RPORTS = 2,
  parameter int unsigned WPORTS = 2,
  parameter int unsigned NPRED  = 4,     // LSST prediction slots applied on clone
  parameter int unsigned PCUPD  = FETCH_PORTS,
  localparam int unsigned CW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned RW    = $clog2(NR)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [PCW-1:0]       reset_pc,

  // thread controller state
  input  logic [CW-1:0]        head,
  input  logic [N-1:0]         joined,        // J bits
  input  logic [NR-1:0]        d_anchor,
  input  logic [NR-1:0]        r_anchor,
  input  logic [NR-1:0]        conf_low,      // register read confidence < 2

  // register read ports
  input  logic [RPORTS-1:0]    rd_req,
  input  logic [CW-1:0]        rd_ctx     [RPORTS],
  input  logic [RW-1:0]        rd_reg     [RPORTS],
  input  logic [RPORTS-1:0]    rd_pending,    // own ROB will write this register
  output logic [RPORTS-1:0]    rd_ready,
  output logic [CW-1:0]        rd_src     [RPORTS],
  output logic [W-1:0]         rd_data    [RPORTS],

  // commit write ports
  input  logic [WPORTS-1:0]    wr_en,
  input  logic [CW-1:0]        wr_ctx     [WPORTS],
  input  logic [RW-1:0]        wr_reg     [WPORTS],
  input  logic [W-1:0]         wr_data    [WPORTS],

  // misspeculation found on a commit write
  output logic                 viol_valid,
  output logic [CW-1:0]        viol_ctx,
  output logic [RW-1:0]        viol_reg,

  // bulk operations
  input  logic                 clone_en,
  input  logic [CW-1:0]        clone_ctx,
  input  logic [PCW-1:0]       clone_pc,
  input  logic [NPRED-1:0]     pred_valid,
  input  logic [RW-1:0]        pred_rd    [NPRED],
  input  logic [W-1:0]         pred_val   [NPRED],
  input  logic                 xfer_en,       // Head -> Head+1
  input  logic                 clear_en,
  input  logic [CW-1:0]        clear_ctx,
  input  logic [N-1:0]         squash_mask,

  // PC updates from the fetch unit
  input  logic [PCUPD-1:0]     pc_upd_en,
  input  logic [CW-1:0]        pc_upd_ctx [PCUPD],
  input  logic [PCW-1:0]       pc_upd_val [PCUPD],

  // state views
  output logic [PCW-1:0]       pc_o       [N],
  output logic [N-1:0]         v_o,
  output logic [N-1:0]         s_o,
  output logic [N-1:0]         h_o,
  output logic [NR-1:0]        rbits_o    [N],
  output logic [NR-1:0]        dbits_o    [N],
  output logic [NR-1:0]        lbits_o    [N],
  output logic [W-1:0]         head_regs_o[NR]
);

  logic [W-1:0]   regs  [N][NR];
  logic [NR-1:0]  rbit  [N];
  logic [NR-1:0]  lbit  [N];
  logic [NR-1:0]  dbit  [N];
  logic [PCW-1:0] pc    [N];
  logic [N-1:0]   v, s, h;

  // position of a context in program order (0 = Head)
  function automatic int unsigned ring_pos(input logic [CW-1:0] c, input logic [CW-1:0] hd);
    return (int'(c) + N - int'(hd)) % N;
  endfunction

  // ---------------------------------------------------------------- reads
  logic [RPORTS-1:0] rd_set_l, rd_set_d;

  always_comb begin
    int unsigned c, pred, src, q;
    logic        found, wait_pred;
    c = 0; pred = 0; src = 0; q = 0; found = 1'b0; wait_pred = 1'b0;
    for (int p = 0; p < RPORTS; p++) begin
      c         = int'(rd_ctx[p]);
      pred      = (c + N - 1) % N;
      src       = c;
      found     = 1'b0;
      wait_pred = 1'b0;
      rd_ready[p] = 1'b1;
      rd_set_l[p] = 1'b0;
      rd_set_d[p] = 1'b0;
      if (rd_req[p] && !rbit[c][rd_reg[p]] && !rd_pending[p]) begin
        rd_set_d[p] = r_anchor[rd_reg[p]];
        if (c != int'(head)) begin
          // first level: D_Anchor (or low confidence) -> immediate predecessor
          if (d_anchor[rd_reg[p]] || conf_low[rd_reg[p]]) begin
            if (v[pred] && rbit[pred][rd_reg[p]]) begin
              src   = pred;
              found = 1'b1;
            end else if (v[pred] && !joined[pred]) begin
              wait_pred = 1'b1;     // predecessor may still produce it
            end
          end
          // second level / D_Anchor=0: nearest predecessor that wrote it
          if (!found && !wait_pred) begin
            for (int k = 1; k < N; k++) begin
              q = (c + N - k) % N;
              if (!found && k <= int'(ring_pos(CW'(c), head)) && v[q] && rbit[q][rd_reg[p]]) begin
                src   = q;
                found = 1'b1;
              end
            end
          end
          rd_ready[p] = !wait_pred;
          rd_set_l[p] = !wait_pred;
        end
      end
      rd_src[p]  = CW'(src);
      rd_data[p] = regs[src][rd_reg[p]];
    end
  end

  // --------------------------------------------------- violation detection
  always_comb begin
    int unsigned best, q, dq;
    best       = N;
    q = 0; dq = 0;
    viol_valid = 1'b0;
    viol_ctx   = '0;
    viol_reg   = '0;
    for (int p = 0; p < WPORTS; p++) begin
      if (wr_en[p]) begin
        for (int k = 1; k < N; k++) begin
          q  = (int'(wr_ctx[p]) + k) % N;
          dq = ring_pos(CW'(q), head);
          if (dq > ring_pos(wr_ctx[p], head) && v[q] && lbit[q][wr_reg[p]] && dq < best) begin
            best       = dq;
            viol_valid = 1'b1;
            viol_ctx   = CW'(q);
            viol_reg   = wr_reg[p];
          end
        end
        // a successor reading the register in this very cycle also got the
        // old value
        for (int r = 0; r < RPORTS; r++) begin
          dq = ring_pos(rd_ctx[r], head);
          if (rd_set_l[r] && rd_reg[r] == wr_reg[p] && dq > ring_pos(wr_ctx[p], head) &&
              dq < best) begin
            best       = dq;
            viol_valid = 1'b1;
            viol_ctx   = rd_ctx[r];
            viol_reg   = wr_reg[p];
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ state
  logic [CW-1:0] nxt;
  assign nxt = CW'((int'(head) + 1) % N);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N; c++) begin
        rbit[c] <= '0;
        lbit[c] <= '0;
        dbit[c] <= '0;
        pc[c]   <= reset_pc;
        for (int r = 0; r < NR; r++) regs[c][r] <= '0;
      end
      v <= N'(1);        // context 0 runs the program, non-speculatively
      s <= '0;
      h <= N'(1);
    end else begin
      // bulk operations (the controller issues at most one per cycle)
      if (clear_en) begin
        rbit[clear_ctx] <= '0;
        lbit[clear_ctx] <= '0;
        dbit[clear_ctx] <= '0;
      end
      if (clone_en) begin
        logic [NR-1:0] rnew;
        rnew = '0;
        for (int r = 0; r < NR; r++) regs[clone_ctx][r] <= regs[head][r];
        for (int e = 0; e < NPRED; e++) begin
          if (pred_valid[e]) begin
            regs[clone_ctx][pred_rd[e]] <= pred_val[e];
            rnew[pred_rd[e]] = 1'b1;
          end
        end
        rbit[clone_ctx] <= rnew;
        lbit[clone_ctx] <= '0;
        dbit[clone_ctx] <= '0;
        pc[clone_ctx]   <= clone_pc;
        v[clone_ctx]    <= 1'b1;
        s[clone_ctx]    <= 1'b1;
        h[clone_ctx]    <= 1'b0;
      end
      if (xfer_en) begin
        for (int r = 0; r < NR; r++)
          if (!rbit[nxt][r]) regs[nxt][r] <= regs[head][r];
        rbit[nxt] <= rbit[nxt] | rbit[head];
        v[head] <= 1'b0;
        h[head] <= 1'b0;
        s[nxt]  <= 1'b0;
        h[nxt]  <= 1'b1;
      end
      // reads and commit writes of this cycle come after the bulk
      // operations, so they are not lost
      // reads: L and D bits
      for (int p = 0; p < RPORTS; p++) begin
        if (rd_set_l[p]) lbit[rd_ctx[p]][rd_reg[p]] <= 1'b1;
        if (rd_set_d[p]) dbit[rd_ctx[p]][rd_reg[p]] <= 1'b1;
      end
      // commit writes
      for (int p = 0; p < WPORTS; p++) begin
        if (wr_en[p]) begin
          regs[wr_ctx[p]][wr_reg[p]] <= wr_data[p];
          rbit[wr_ctx[p]][wr_reg[p]] <= 1'b1;
        end
      end
      // fetch PC updates
      for (int p = 0; p < PCUPD; p++)
        if (pc_upd_en[p]) pc[pc_upd_ctx[p]] <= pc_upd_val[p];
      for (int c = 0; c < N; c++)
        if (squash_mask[c]) v[c] <= 1'b0;
    end
  end

  always_comb begin
    for (int c = 0; c < N; c++) begin
      pc_o[c]    = pc[c];
      rbits_o[c] = rbit[c];
      dbits_o[c] = dbit[c];
      lbits_o[c] = lbit[c];
    end
    for (int r = 0; r < NR; r++) head_regs_o[r] = regs[head][r];
  end
  assign v_o = v;
  assign s_o = s;
  assign h_o = h;

  // the Head is never squashed and never cloned over
  assert property (@(posedge clk) disable iff (!rst_n) !squash_mask[head]);
  assert property (@(posedge clk) disable iff (!rst_n) clone_en |-> clone_ctx != head);

endmodule
