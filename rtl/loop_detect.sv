// loop_detect: the Loop Detection Unit, a branch target buffer extended for
// loop identification.
//
// Besides the usual BTB fields (branch address tag, target address, 2-bit
// saturating branch predictor) every entry holds the loop fields of the
// design: a loop flag (the target is the start of a loop), the number of
// consecutive taken executions of the branch (the current iteration count
// and, once the loop is left, the count of its last execution) and a bad-loop
// label fed back from the break-even measurement.
//
// Branches committed by the non-speculative thread train the table (up_*).
// A taken backward branch (target < branch address) is recorded with its loop
// flag set. When a taken backward branch later hits an entry whose loop flag
// is set and whose target matches, a loop is found: loop_seen pulses (for the
// nested-loop stack) and, if the processor is in non-DSMT mode, the loop is
// not labelled bad, the nested-loop stack allows it, and its last iteration
// count is unknown or at least the number of free contexts, detect
// pulses with the loop's target (start) and branch addresses. Outputs are
// registered (one cycle after the update). A not-taken execution of a loop
// branch saves the iteration count and restarts it. fb_* writes the good/bad
// label of a loop after a DSMT run.
//
// The lookup port (lk_*) is combinational and serves the fetch unit. Size:
// the paper's shared BTB is 2 KB, 2-way; this design reads that as 512
// entries (4 bytes of target each) in 256 sets of 2 ways, with LRU
// replacement. The iteration-count threshold is this design's reading of the
// paper's "number of iterations" and "number of contexts available" criteria.
module loop_detect
  import dsmt_pkg::*;
#(
  parameter int unsigned SETS = 256,
  parameter int unsigned WAYS = 2,
  parameter int unsigned PCW  = AW,
  parameter int unsigned ITW  = 8,
  parameter int unsigned CNW  = 4,      // width of the free-context count
  localparam int unsigned IW  = $clog2(SETS),
  localparam int unsigned TW  = PCW - IW - 2
) (
  input  logic            clk,
  input  logic            rst_n,
  // fetch lookup
  input  logic [PCW-1:0]  lk_pc,
  output logic            lk_hit,
  output logic            lk_taken,
  output logic [PCW-1:0]  lk_target,
  // commit-time training by the non-speculative thread
  input  logic            up_valid,
  input  logic [PCW-1:0]  up_pc,
  input  logic [PCW-1:0]  up_target,
  input  logic            up_taken,
  // loop selection context
  input  logic            mode_non,
  input  logic [CNW-1:0]  ctx_avail,
  input  logic            stack_allow,   // nested-loop stack verdict for up_pc
  // good/bad feedback
  input  logic            fb_valid,
  input  logic [PCW-1:0]  fb_br,
  input  logic            fb_good,
  // results
  output logic            loop_seen,
  output logic            detect,
  output logic [PCW-1:0]  loop_target,
  output logic [PCW-1:0]  loop_branch
);

  typedef struct packed {
    logic           v;
    logic [TW-1:0]  tag;
    logic [PCW-1:0] target;
    logic [1:0]     ctr;
    logic           loop;
    logic           bad;
    logic [ITW-1:0] iters;
    logic [ITW-1:0] past;
  } btb_e;

  btb_e        tab [SETS][WAYS];
  logic [SETS-1:0] lru;          // way to replace next (2 ways)

  function automatic logic [IW-1:0] idx_of(input logic [PCW-1:0] pc);
    return pc[IW+1:2];
  endfunction
  function automatic logic [TW-1:0] tag_of(input logic [PCW-1:0] pc);
    return pc[PCW-1:IW+2];
  endfunction

  // fetch lookup
  always_comb begin
    lk_hit = 1'b0; lk_taken = 1'b0; lk_target = '0;
    for (int w = 0; w < WAYS; w++) begin
      btb_e e;
      e = tab[idx_of(lk_pc)][w];
      if (e.v && e.tag == tag_of(lk_pc)) begin
        lk_hit    = 1'b1;
        lk_taken  = e.ctr[1];
        lk_target = e.target;
      end
    end
  end

  // training lookup
  logic          up_hit;
  int unsigned   up_way;
  btb_e          up_e;
  logic          backward;
  always_comb begin
    up_hit = 1'b0; up_way = 0; up_e = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (tab[idx_of(up_pc)][w].v && tab[idx_of(up_pc)][w].tag == tag_of(up_pc)) begin
        up_hit = 1'b1;
        up_way = w;
        up_e   = tab[idx_of(up_pc)][w];
      end
    end
    backward = up_target < up_pc;
  end

  logic found;
  assign found = up_valid && up_hit && up_taken && backward && up_e.loop &&
                 up_e.target == up_target;

  // feedback lookup
  logic        fb_hit;
  int unsigned fb_way;
  always_comb begin
    fb_hit = 1'b0; fb_way = 0;
    for (int w = 0; w < WAYS; w++)
      if (tab[idx_of(fb_br)][w].v && tab[idx_of(fb_br)][w].tag == tag_of(fb_br)) begin
        fb_hit = 1'b1;
        fb_way = w;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) tab[s][w] <= '0;
      lru         <= '0;
      loop_seen   <= 1'b0;
      detect      <= 1'b0;
      loop_target <= '0;
      loop_branch <= '0;
    end else begin
      loop_seen   <= found;
      detect      <= found && mode_non && !up_e.bad && stack_allow &&
                     (up_e.past == '0 || up_e.past >= ITW'(ctx_avail));
      if (found) begin
        loop_target <= up_target;
        loop_branch <= up_pc;
      end
      if (up_valid) begin
        if (up_hit) begin
          btb_e e;
          e        = up_e;
          e.target = up_target;
          e.ctr    = up_taken ? sat_inc(e.ctr) : sat_dec(e.ctr);
          if (up_taken && backward) begin
            e.loop  = 1'b1;
            e.iters = (e.iters == '1) ? e.iters : e.iters + 1'b1;
          end else if (!up_taken && e.loop) begin
            e.past  = e.iters;
            e.iters = '0;
          end
          tab[idx_of(up_pc)][up_way] <= e;
          lru[idx_of(up_pc)] <= (up_way == 0);
        end else begin
          btb_e e;
          e.v      = 1'b1;
          e.tag    = tag_of(up_pc);
          e.target = up_target;
          e.ctr    = up_taken ? 2'b10 : 2'b01;
          e.loop   = up_taken && backward;
          e.bad    = 1'b0;
          e.iters  = (up_taken && backward) ? ITW'(1) : '0;
          e.past   = '0;
          tab[idx_of(up_pc)][lru[idx_of(up_pc)]] <= e;
          lru[idx_of(up_pc)] <= !lru[idx_of(up_pc)];
        end
      end
      if (fb_valid && fb_hit && !(up_valid && idx_of(up_pc) == idx_of(fb_br)))
        tab[idx_of(fb_br)][fb_way].bad <= !fb_good;
    end
  end

endmodule
