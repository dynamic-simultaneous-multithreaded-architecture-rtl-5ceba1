// icount_sched: fetch scheduler with the ICount2.8-modified policy.
//
// Two fetch ports each fetch up to eight instructions per cycle from one
// context. Port 0 goes to the non-speculative Head context when it can
// fetch; the remaining port(s) go to the speculative contexts with the lowest
// ICount (instructions in decode, rename and issue), as in ICount2.8 but with
// the non-speculative thread always chosen first. A context can fetch when
// its V bit is set, its J bit is clear (a joined thread waits) and the core
// does not stall it (stall). Ties in ICount go to the older iteration (ring
// order from Head), which is this design's choice. The selected context's PC
// is sent to the fetch unit as Next_PC. Purely combinational.
module icount_sched
  import dsmt_pkg::*;
#(
  parameter int unsigned N      = NCTX,
  parameter int unsigned NPORTS = FETCH_PORTS,
  parameter int unsigned PCW    = AW,
  parameter int unsigned ICW    = 8,
  localparam int unsigned CW    = (N > 1) ? $clog2(N) : 1
) (
  input  logic [CW-1:0]   head,
  input  logic [N-1:0]    ctx_v,
  input  logic [N-1:0]    ctx_j,
  input  logic [N-1:0]    stall,
  input  logic [ICW-1:0]  icount [N],
  input  logic [PCW-1:0]  pc     [N],
  output logic [NPORTS-1:0] port_valid,
  output logic [CW-1:0]   port_ctx  [NPORTS],
  output logic [PCW-1:0]  next_pc   [NPORTS]
);

  always_comb begin
    logic [N-1:0] taken;
    taken      = '0;
    port_valid = '0;
    for (int p = 0; p < NPORTS; p++) begin
      port_ctx[p] = '0;
      next_pc[p]  = '0;
    end
    for (int p = 0; p < NPORTS; p++) begin
      logic            found;
      int unsigned     best;
      logic [ICW-1:0]  best_ic;
      found   = 1'b0;
      best    = 0;
      best_ic = '1;
      if (p == 0 && ctx_v[head] && !ctx_j[head] && !stall[head]) begin
        found = 1'b1;
        best  = int'(head);
      end else begin
        for (int k = 1; k < N; k++) begin
          int unsigned c;
          c = (int'(head) + k) % N;
          if (ctx_v[c] && !ctx_j[c] && !stall[c] && !taken[c] &&
              (!found || icount[c] < best_ic)) begin
            found   = 1'b1;
            best    = c;
            best_ic = icount[c];
          end
        end
      end
      if (found) begin
        taken[best]   = 1'b1;
        port_valid[p] = 1'b1;
        port_ctx[p]   = CW'(best);
        next_pc[p]    = pc[best];
      end
    end
  end

endmodule
