// sipc_monitor: measures how well a loop runs in DSMT mode and labels it
// good or bad with the break-even policy.
//
// While the processor is in pre-DSMT mode the monitor counts cycles and
// committed instructions; that is the single-context (non-DSMT) IPC of the
// loop. While in full-DSMT mode it counts the same for the multithreaded
// run. The counters restart when a new loop enters pre-DSMT mode. One cycle
// after the TCIU reports that the loop was left (loop_end), if the loop ran in
// full-DSMT mode at all, the monitor pulses res_valid with
//   res_good = IPC(full-DSMT) >= IPC(pre-DSMT)       (break even)
// computed by cross-multiplying the counts, and reports the loop's sustained
// IPC as sipc = 16 * instructions / cycles of the full-DSMT run (4
// fractional bits, saturated). The paper combines iteration count, free
// contexts and DSMT IPC into its SIPC measure without giving the formula;
// here the first two act as the entry condition of the loop detection unit
// and SIPC is the measured DSMT IPC.
module sipc_monitor
  import dsmt_pkg::*;
#(
  parameter int unsigned CNTW = 24,     // event counter width
  parameter int unsigned COMW = 5,      // committed instructions per cycle
  parameter int unsigned SW   = 8       // SIPC width (4 fractional bits)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  dsmt_mode_e      mode,
  input  logic [COMW-1:0] commit_cnt,
  input  logic            loop_end,
  output logic            res_valid,
  output logic            res_good,
  output logic [SW-1:0]   sipc
);

  logic [CNTW-1:0] pre_i, pre_c, full_i, full_c;
  dsmt_mode_e      mode_q;

  logic [2*CNTW-1:0] lhs, rhs;
  logic [CNTW+3:0]   q;
  assign lhs = full_i * pre_c;
  assign rhs = pre_i * full_c;
  assign q   = (full_c == '0) ? '0 : ({full_i, 4'b0000} / (CNTW+4)'(full_c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre_i <= '0; pre_c <= '0; full_i <= '0; full_c <= '0;
      mode_q    <= MODE_NON;
      res_valid <= 1'b0;
      res_good  <= 1'b0;
      sipc      <= '0;
    end else begin
      mode_q    <= mode;
      res_valid <= 1'b0;
      if (mode == MODE_PRE && mode_q == MODE_NON) begin
        pre_i  <= CNTW'(commit_cnt);
        pre_c  <= CNTW'(1);
        full_i <= '0;
        full_c <= '0;
      end else if (mode == MODE_PRE) begin
        pre_i <= pre_i + CNTW'(commit_cnt);
        pre_c <= pre_c + CNTW'(1);
      end else if (mode == MODE_FULL) begin
        full_i <= full_i + CNTW'(commit_cnt);
        full_c <= full_c + CNTW'(1);
      end
      if (loop_end && full_c != '0) begin
        res_valid <= 1'b1;
        res_good  <= (lhs >= rhs);
        sipc      <= (q > (CNTW+4)'({SW{1'b1}})) ? '1 : SW'(q);
      end
    end
  end

endmodule
