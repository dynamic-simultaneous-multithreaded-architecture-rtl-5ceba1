// rrct: Register Read Confidence Table.
//
// One 2-bit saturating counter per architectural register measures how
// trustworthy speculative reads of that register from a predecessor context
// have been. The paper names the table and its 2-bit counters but not how
// they are trained or used; this design's rule:
//   * a register misspeculation on register r (a predecessor wrote r after a
//     successor had read it) decrements counter r (dec_valid/dec_reg);
//   * when a thread completes its iteration without being squashed, every
//     register it read speculatively (its L bits, inc_mask) increments.
// conf_low[r] is 1 while counter r is below 2; the context file then makes
// reads of r wait for the immediate predecessor instead of reading at once.
// Counters reset to 2 (weakly confident). Updates take effect on the next
// clock edge; a decrement wins over an increment of the same register.
module rrct
  import dsmt_pkg::*;
#(
  parameter int unsigned NR = NREGS,
  localparam int unsigned RW = $clog2(NR)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           dec_valid,
  input  logic [RW-1:0]  dec_reg,
  input  logic           inc_valid,
  input  logic [NR-1:0]  inc_mask,
  output logic [NR-1:0]  conf_low,
  output logic [1:0]     conf [NR]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NR; r++) conf[r] <= 2'b10;
    end else begin
      for (int r = 0; r < NR; r++) begin
        if (dec_valid && dec_reg == RW'(r))
          conf[r] <= sat_dec(conf[r]);
        else if (inc_valid && inc_mask[r])
          conf[r] <= sat_inc(conf[r]);
      end
    end
  end

  always_comb
    for (int r = 0; r < NR; r++) conf_low[r] = !conf[r][1];

endmodule
