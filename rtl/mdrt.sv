// mdrt: Memory Dataflow Resolution Table.
//
// A fully associative table; each entry holds a valid bit, a word address,
// a value and, per context, a load (L) bit and a store (S) bit. It checks the
// load/store operations that the selection logic sends to the data cache,
// NPORTS per cycle, in port order:
//   * a load of the non-speculative Head proceeds normally and touches no
//     entry;
//   * a load of a speculative context looks the address up; it sets that
//     context's L bit in the matching entry, or allocates a free entry for the
//     address. If the table is full the load is refused (op_accept=0) and
//     must be retried: a full table backs up the pipeline;
//   * a store (only the Head may store) writes the value and sets the Head's
//     S bit in a matching entry, and checks the L bits of the other
//     contexts: the oldest context (ring order from Head) that has loaded the
//     word too early is reported on squash_*, and the controller squashes it
//     and all its successors. A store to an address with no entry allocates
//     nothing, since no speculative thread has read it.
// clr_mask clears the L and S bits of contexts that completed or were
// squashed; an entry is freed once no L bit is set. Results are
// combinational, table updates happen at the clock edge. The table size (64)
// and the freeing rule are this design's choices.
module mdrt
  import dsmt_pkg::*;
#(
  parameter int unsigned N       = NCTX,
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned NPORTS  = DC_PORTS,
  parameter int unsigned AWW     = AW - 2,   // word address
  parameter int unsigned W       = XLEN,
  localparam int unsigned CW     = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CW-1:0]     head,
  input  logic [N-1:0]      clr_mask,
  input  logic [NPORTS-1:0] op_valid,
  input  logic [NPORTS-1:0] op_store,
  input  logic [CW-1:0]     op_ctx  [NPORTS],
  input  logic [AWW-1:0]    op_addr [NPORTS],
  input  logic [W-1:0]      op_data [NPORTS],
  output logic [NPORTS-1:0] op_accept,
  output logic              squash_valid,
  output logic [CW-1:0]     squash_ctx,
  output logic              full,
  output logic [$clog2(ENTRIES+1)-1:0] used
);

  typedef struct packed {
    logic           v;
    logic [AWW-1:0] addr;
    logic [W-1:0]   value;
    logic [N-1:0]   l;
    logic [N-1:0]   s;
  } entry_t;

  entry_t tab [ENTRIES];
  entry_t upd [ENTRIES];   // after this cycle's operations
  entry_t nxt [ENTRIES];   // after clearing completed / squashed contexts

  always_comb begin
    int unsigned best, hi, fi, pos;
    logic        hit, got_free;
    best         = N;
    hi = 0; fi = 0; pos = 0; hit = 1'b0; got_free = 1'b0;
    squash_valid = 1'b0;
    squash_ctx   = '0;
    op_accept    = '0;
    for (int e = 0; e < ENTRIES; e++) upd[e] = tab[e];
    for (int p = 0; p < NPORTS; p++) begin
      hit = 1'b0; got_free = 1'b0; hi = 0; fi = 0;
      if (op_valid[p]) begin
        for (int e = ENTRIES - 1; e >= 0; e--) begin
          if (upd[e].v && upd[e].addr == op_addr[p]) begin hit = 1'b1; hi = e; end
          if (!upd[e].v) begin got_free = 1'b1; fi = e; end
        end
        if (op_store[p]) begin
          op_accept[p] = 1'b1;
          if (hit) begin
            upd[hi].value          = op_data[p];
            upd[hi].s[op_ctx[p]]   = 1'b1;
            for (int c = 0; c < N; c++) begin
              pos = (c + N - int'(head)) % N;
              if (c != int'(op_ctx[p]) && upd[hi].l[c] && pos < best) begin
                best         = pos;
                squash_valid = 1'b1;
                squash_ctx   = CW'(c);
              end
            end
          end
        end else if (op_ctx[p] == head) begin
          op_accept[p] = 1'b1;
        end else if (hit) begin
          op_accept[p]          = 1'b1;
          upd[hi].l[op_ctx[p]]  = 1'b1;
        end else if (got_free) begin
          op_accept[p]          = 1'b1;
          upd[fi].v             = 1'b1;
          upd[fi].addr          = op_addr[p];
          upd[fi].value         = '0;
          upd[fi].l             = '0;
          upd[fi].s             = '0;
          upd[fi].l[op_ctx[p]]  = 1'b1;
        end
      end
    end
  end

  // clear the bits of completed / squashed contexts (after the checks, so the
  // squash report does not depend on the squash it causes); entries that no
  // context has loaded any more are freed
  always_comb begin
    for (int e = 0; e < ENTRIES; e++) begin
      nxt[e]   = upd[e];
      nxt[e].l = nxt[e].l & ~clr_mask;
      nxt[e].s = nxt[e].s & ~clr_mask;
      if (nxt[e].l == '0) nxt[e].v = 1'b0;
    end
  end

  always_comb begin
    used = '0;
    for (int e = 0; e < ENTRIES; e++) used += $bits(used)'(tab[e].v);
    full = (int'(used) == ENTRIES);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) tab[e] <= '0;
    end else begin
      for (int e = 0; e < ENTRIES; e++) tab[e] <= nxt[e];
    end
  end

  // only the non-speculative context may store
  always_comb
    for (int p = 0; p < NPORTS; p++)
      if (rst_n && op_valid[p] && op_store[p]) assert (op_ctx[p] == head);

endmodule
