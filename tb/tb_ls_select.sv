// tb_ls_select: self-checking test of the load/store selection logic.
// Random requests from all contexts; the reference grants the Head first,
// then other contexts' loads in ring order, at most four, and never a store
// of a speculative context.
//
// Interface: no ports; a local clock and reset drive the unit under test.
// Timing: inputs change away from the rising clock edge and outputs are
// sampled after they settle; a watchdog ends a hung run. The run ends with
// one TB_RESULT line giving the number of checks and failures. Expected
// behaviour follows the paper's description of the unit (and, where the
// paper is silent, this design's documented choices); the stimulus values,
// sizes and sequences are this testbench's own.
module tb_ls_select;
  import dsmt_pkg::*;
  localparam int N = 8, P = 4, CW = 3;
  logic [CW-1:0] head;
  logic [N-1:0]  rv, rs, grant;
  logic [31:0]   ra [N], rdat [N];
  logic [P-1:0]  pv, ps;
  logic [CW-1:0] pctx [P];
  logic [31:0]   pa [P], pd [P];
  int checks = 0, failures = 0;

  ls_select dut (.head, .req_valid(rv), .req_store(rs), .req_addr(ra), .req_data(rdat),
                 .grant, .port_valid(pv), .port_store(ps), .port_ctx(pctx),
                 .port_addr(pa), .port_data(pd));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int n; logic [N-1:0] eg;
      head = CW'($urandom_range(0, N - 1));
      for (int c = 0; c < N; c++) begin
        rv[c] = ($urandom_range(0, 1) == 1); rs[c] = ($urandom_range(0, 2) == 0);
        ra[c] = $urandom; rdat[c] = $urandom;
      end
      #1;
      n = 0; eg = '0;
      for (int k = 0; k < N; k++) begin
        int c; c = (int'(head) + k) % N;
        if (rv[c] && (k == 0 || !rs[c]) && n < P) begin
          checks++;
          if (!pv[n] || pctx[n] !== CW'(c) || pa[n] !== ra[c] || pd[n] !== rdat[c] || ps[n] !== rs[c]) failures++;
          eg[c] = 1; n++;
        end
      end
      checks++;
      if (grant !== eg) failures++;
      for (int p = n; p < P; p++) begin checks++; if (pv[p]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
