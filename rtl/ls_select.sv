// ls_select: selects load/store operations from the per-context load/store
// queues onto the data-cache ports.
//
// Each context offers at most one operation per cycle (req_*). Up to NPORTS
// operations are granted per cycle, the non-speculative Head context first
// and then the speculative contexts in ring (program) order after Head, so
// older iterations win. A store is only eligible from the Head context (and
// only when its queue says the store has reached the head of its reorder
// buffer, which is the requester's job); stores of speculative contexts stay
// in their queues. The paper gives the priority to the non-speculative
// context and four data-cache ports; the age order among speculative
// contexts is this design's choice. Purely combinational.
module ls_select
  import dsmt_pkg::*;
#(
  parameter int unsigned N      = NCTX,
  parameter int unsigned NPORTS = DC_PORTS,
  parameter int unsigned AWW    = AW,
  parameter int unsigned W      = XLEN,
  localparam int unsigned CW    = (N > 1) ? $clog2(N) : 1
) (
  input  logic [CW-1:0]   head,
  input  logic [N-1:0]    req_valid,
  input  logic [N-1:0]    req_store,
  input  logic [AWW-1:0]  req_addr [N],
  input  logic [W-1:0]    req_data [N],
  output logic [N-1:0]    grant,
  output logic [NPORTS-1:0] port_valid,
  output logic [NPORTS-1:0] port_store,
  output logic [CW-1:0]   port_ctx  [NPORTS],
  output logic [AWW-1:0]  port_addr [NPORTS],
  output logic [W-1:0]    port_data [NPORTS]
);

  always_comb begin
    int unsigned used;
    used       = 0;
    grant      = '0;
    port_valid = '0;
    port_store = '0;
    for (int p = 0; p < NPORTS; p++) begin
      port_ctx[p]  = '0;
      port_addr[p] = '0;
      port_data[p] = '0;
    end
    for (int k = 0; k < N; k++) begin
      int unsigned c;
      c = (int'(head) + k) % N;
      if (req_valid[c] && (!req_store[c] || k == 0) && used < NPORTS) begin
        grant[c]         = 1'b1;
        port_valid[used] = 1'b1;
        port_store[used] = req_store[c];
        port_ctx[used]   = CW'(c);
        port_addr[used]  = req_addr[c];
        port_data[used]  = req_data[c];
        used++;
      end
    end
  end

endmodule
