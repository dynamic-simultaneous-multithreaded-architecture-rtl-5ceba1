// tb_icount_sched: self-checking test of the ICount2.8-modified fetch
// scheduler. Random context states, ICounts and PCs are applied; a reference
// model picks port 0 = Head if it can fetch, then the fetchable speculative
// contexts by increasing (ICount, age) and the outputs are compared.
//
// Interface: no ports; a local clock and reset drive the unit under test.
// Timing: inputs change away from the rising clock edge and outputs are
// sampled after they settle; a watchdog ends a hung run. The run ends with
// one TB_RESULT line giving the number of checks and failures. Expected
// behaviour follows the paper's description of the unit (and, where the
// paper is silent, this design's documented choices); the stimulus values,
// sizes and sequences are this testbench's own.
module tb_icount_sched;
  import dsmt_pkg::*;
  localparam int N = 8, P = 2, CW = 3;
  logic [CW-1:0] head;
  logic [N-1:0]  v, j, st;
  logic [7:0]    ic [N];
  logic [31:0]   pc [N];
  logic [P-1:0]  pv;
  logic [CW-1:0] pctx [P];
  logic [31:0]   npc [P];
  int checks = 0, failures = 0;

  icount_sched dut (.head, .ctx_v(v), .ctx_j(j), .stall(st), .icount(ic), .pc,
                    .port_valid(pv), .port_ctx(pctx), .next_pc(npc));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_ctx [P];
    logic exp_v [P];
    for (int t = 0; t < 3000; t++) begin
      int key [N];
      logic used [N];
      head = CW'($urandom_range(0, N - 1));
      for (int c = 0; c < N; c++) begin
        v[c]  = ($urandom_range(0, 3) != 0);
        j[c]  = ($urandom_range(0, 4) == 0);
        st[c] = ($urandom_range(0, 6) == 0);
        ic[c] = 8'($urandom_range(0, 64));
        pc[c] = $urandom;
        used[c] = 0;
      end
      #1;
      // reference: key = icount*N + age, smallest first
      for (int p = 0; p < P; p++) begin
        int best; best = -1;
        exp_v[p] = 0; exp_ctx[p] = 0;
        if (p == 0 && v[head] && !j[head] && !st[head]) begin
          best = int'(head);
        end else begin
          for (int c = 0; c < N; c++) begin
            int age; age = (c - int'(head) + N) % N;
            key[c] = ic[c] * N + age;
            if (age != 0 && v[c] && !j[c] && !st[c] && !used[c])
              if (best < 0 || key[c] < key[best]) best = c;
          end
        end
        if (best >= 0) begin exp_v[p] = 1; exp_ctx[p] = best; used[best] = 1; end
      end
      for (int p = 0; p < P; p++) begin
        checks++;
        if (pv[p] !== exp_v[p] || (exp_v[p] && (pctx[p] !== CW'(exp_ctx[p]) || npc[p] !== pc[exp_ctx[p]]))) begin
          failures++;
          if (failures < 5) $display("mismatch port %0d: got v=%0b ctx=%0d exp v=%0b ctx=%0d", p, pv[p], pctx[p], exp_v[p], exp_ctx[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
