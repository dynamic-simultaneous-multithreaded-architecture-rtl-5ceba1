// lsst: Loop Stride Speculation Table.
//
// Each entry holds the fields of the table in the TCIU diagram: a 2-bit
// confidence counter (Conf), the opcode (Op), the register (Rd) and the
// immediate (Immd) of an instruction of the form addi rd,rd,#immd that the
// non-speculative thread commits inside the loop. Training (learn_*): an
// entry for Rd with the same immediate gains confidence, one with a different
// immediate loses it and is retrained with the new immediate once its
// confidence is zero; a new Rd takes a free entry, or else the next entry of
// a round-robin pointer whose confidence is zero, and starts at confidence 1.
//
// Prediction: the table also keeps, per entry, the value of Rd at the start
// of a reference iteration (base), captured from the non-speculative
// registers on each `capture` strobe. For a clone that runs `delta`
// iterations after that reference, entry e predicts
//     Rd = base + delta * Immd
// which is the paper's rd = rd + iteration*immd. Only entries with confidence
// 2 or 3 predict. Prediction is combinational; training and capture take
// effect on the next clock edge. The number of entries (16) and the
// training/replacement rule are this design's choices.
module lsst
  import dsmt_pkg::*;
#(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned NR      = NREGS,
  parameter int unsigned W       = XLEN,
  parameter int unsigned OPW     = 6,
  parameter int unsigned IMMW    = 16,
  parameter int unsigned ITW     = 16,
  localparam int unsigned RW     = $clog2(NR),
  localparam int unsigned EW     = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,           // forget all entries (new loop)
  // training from the commit stage of the non-speculative thread
  input  logic              learn_valid,
  input  logic [OPW-1:0]    learn_op,
  input  logic [RW-1:0]     learn_rd,
  input  logic [IMMW-1:0]   learn_imm,
  // base capture
  input  logic              capture,
  input  logic [W-1:0]      regs_i [NR],
  // prediction for a clone
  input  logic [ITW-1:0]    delta,
  output logic [ENTRIES-1:0] pred_valid,
  output logic [RW-1:0]     pred_rd  [ENTRIES],
  output logic [W-1:0]      pred_val [ENTRIES]
);

  logic [ENTRIES-1:0] ent_v;
  logic [1:0]         conf [ENTRIES];
  logic [OPW-1:0]     op   [ENTRIES];
  logic [RW-1:0]      rd   [ENTRIES];
  logic [IMMW-1:0]    immd [ENTRIES];
  logic [W-1:0]       base [ENTRIES];
  logic [EW-1:0]      rr;

  // lookup / allocation for training
  logic          hit, free_found;
  logic [EW-1:0] hit_idx, free_idx;
  always_comb begin
    hit        = 1'b0;
    hit_idx    = '0;
    free_found = 1'b0;
    free_idx   = rr;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (ent_v[e] && rd[e] == learn_rd) begin
        hit     = 1'b1;
        hit_idx = EW'(e);
      end
      if (!ent_v[e]) begin
        free_found = 1'b1;
        free_idx   = EW'(e);
      end
    end
  end

  always_comb begin
    for (int e = 0; e < ENTRIES; e++) begin
      pred_valid[e] = ent_v[e] && conf[e][1];
      pred_rd[e]    = rd[e];
      pred_val[e]   = base[e] + W'(delta) * W'($signed(immd[e]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ent_v <= '0;
      rr    <= '0;
      for (int e = 0; e < ENTRIES; e++) begin
        conf[e] <= '0;
        op[e]   <= '0;
        rd[e]   <= '0;
        immd[e] <= '0;
        base[e] <= '0;
      end
    end else if (flush) begin
      ent_v <= '0;
    end else begin
      if (capture)
        for (int e = 0; e < ENTRIES; e++) base[e] <= regs_i[rd[e]];
      if (learn_valid) begin
        if (hit) begin
          if (immd[hit_idx] == learn_imm) begin
            conf[hit_idx] <= sat_inc(conf[hit_idx]);
          end else if (conf[hit_idx] == 2'b00) begin
            immd[hit_idx] <= learn_imm;
            op[hit_idx]   <= learn_op;
            conf[hit_idx] <= 2'b01;
          end else begin
            conf[hit_idx] <= sat_dec(conf[hit_idx]);
          end
        end else if (free_found || conf[rr] == 2'b00) begin
          ent_v[free_idx] <= 1'b1;
          conf[free_idx]  <= 2'b01;
          op[free_idx]    <= learn_op;
          rd[free_idx]    <= learn_rd;
          immd[free_idx]  <= learn_imm;
          base[free_idx]  <= regs_i[learn_rd];
          if (!free_found) rr <= EW'((int'(rr) + 1) % ENTRIES);
        end else begin
          // table full of confident entries: age the victim candidate
          conf[rr] <= sat_dec(conf[rr]);
          rr       <= EW'((int'(rr) + 1) % ENTRIES);
        end
      end
    end
  end

endmodule
