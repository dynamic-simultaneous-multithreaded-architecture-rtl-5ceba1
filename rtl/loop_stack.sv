// loop_stack: the stack of nested loops attached to the loop detection unit.
//
// Each level holds the branch and target address of a loop and, once the loop
// has run in full-DSMT mode, its sustained IPC (SIPC). The innermost loop is
// at the bottom, outer loops above it. A loop reported on push_* is
//   * ignored if its branch address is already on the stack;
//   * pushed if the stack is empty or if its address range [target, branch]
//     and that of the top level are nested (one encloses the other);
//   * otherwise it starts a new nest: the stack is cleared and the loop
//     becomes its only level.
// upd_* stores the measured SIPC of a loop in its level. The query port
// answers whether a loop may be chosen for DSMT: a loop not on the stack, a
// level whose SIPC is not yet known (every level is tried once), or the level
// with the highest SIPC of the nest; the other levels are discarded. The
// paper says new loops are compared with the top of the stack and pushed when
// they lie in its range, with inner loops at the bottom; this design accepts
// nesting either way round. Depth (4) is this design's choice; a push onto a
// full stack is dropped.
module loop_stack
  import dsmt_pkg::*;
#(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned PCW   = AW,
  parameter int unsigned SW    = 8,
  localparam int unsigned DW   = $clog2(DEPTH + 1),
  localparam int unsigned IW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            push_valid,
  input  logic [PCW-1:0]  push_br,
  input  logic [PCW-1:0]  push_tgt,
  input  logic            upd_valid,
  input  logic [PCW-1:0]  upd_br,
  input  logic [SW-1:0]   upd_sipc,
  input  logic [PCW-1:0]  q_br,
  output logic            q_allow,
  output logic [DW-1:0]   depth,
  output logic            best_valid,
  output logic [PCW-1:0]  best_br
);

  logic [PCW-1:0] br   [DEPTH];
  logic [PCW-1:0] tgt  [DEPTH];
  logic [SW-1:0]  sipc [DEPTH];
  logic [DEPTH-1:0] known;
  logic [DW-1:0]  sp;            // number of levels in use

  assign depth = sp;

  // best level and query
  logic          q_in, q_known;
  logic [SW-1:0] q_sipc, best_sipc;
  always_comb begin
    best_valid = 1'b0;
    best_br    = '0;
    best_sipc  = '0;
    q_in = 1'b0; q_known = 1'b0; q_sipc = '0;
    for (int i = 0; i < DEPTH; i++) begin
      if (i < int'(sp) && known[i] && (!best_valid || sipc[i] > best_sipc)) begin
        best_valid = 1'b1;
        best_br    = br[i];
        best_sipc  = sipc[i];
      end
      if (i < int'(sp) && br[i] == q_br) begin
        q_in    = 1'b1;
        q_known = known[i];
        q_sipc  = sipc[i];
      end
    end
    q_allow = !q_in || !q_known || (q_sipc >= best_sipc);
  end

  logic push_present, push_nested;
  logic [PCW-1:0] top_br, top_tgt;
  always_comb begin
    push_present = 1'b0;
    for (int i = 0; i < DEPTH; i++)
      if (i < int'(sp) && br[i] == push_br) push_present = 1'b1;
    top_br  = (sp != '0) ? br[IW'(sp - 1'b1)]  : '0;
    top_tgt = (sp != '0) ? tgt[IW'(sp - 1'b1)] : '0;
    push_nested = (push_tgt <= top_tgt && push_br >= top_br) ||
                  (push_tgt >= top_tgt && push_br <= top_br);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp    <= '0;
      known <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        br[i] <= '0; tgt[i] <= '0; sipc[i] <= '0;
      end
    end else begin
      if (upd_valid)
        for (int i = 0; i < DEPTH; i++)
          if (i < int'(sp) && br[i] == upd_br) begin
            sipc[i]  <= upd_sipc;
            known[i] <= 1'b1;
          end
      if (push_valid && !push_present) begin
        if (sp == '0 || !push_nested) begin
          br[0]    <= push_br;
          tgt[0]   <= push_tgt;
          known    <= '0;
          sp       <= DW'(1);
        end else if (int'(sp) < DEPTH) begin
          br[IW'(sp)]    <= push_br;
          tgt[IW'(sp)]   <= push_tgt;
          known[IW'(sp)] <= 1'b0;
          sp        <= sp + 1'b1;
        end
      end
    end
  end

endmodule
