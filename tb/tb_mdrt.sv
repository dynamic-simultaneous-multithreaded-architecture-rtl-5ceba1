// tb_mdrt: self-checking test of the memory dataflow resolution table.
// Directed cases: non-speculative loads make no entry; speculative loads
// allocate or join an entry; a Head store to a word loaded early by
// speculative contexts reports the oldest of them for squashing; stores to
// unloaded words report nothing; clearing contexts frees entries; a full
// table refuses new speculative loads. Then a random phase compares
// squash reports against a reference model of the table.
//
// Interface: no ports; a local clock and reset drive the unit under test.
// Timing: inputs change away from the rising clock edge and outputs are
// sampled after they settle; a watchdog ends a hung run. The run ends with
// one TB_RESULT line giving the number of checks and failures. Expected
// behaviour follows the paper's description of the unit (and, where the
// paper is silent, this design's documented choices); the stimulus values,
// sizes and sequences are this testbench's own.
module tb_mdrt;
  import dsmt_pkg::*;
  localparam int N = 8, E = 8, P = 4;
  logic clk = 0, rst_n = 0;
  logic [2:0] head;
  logic [N-1:0] clr;
  logic [P-1:0] ov, os, oa;
  logic [2:0] oc [P];
  logic [29:0] ad [P];
  logic [31:0] od [P];
  logic sqv, full;
  logic [2:0] sqc;
  logic [3:0] used;
  int checks = 0, failures = 0;

  mdrt #(.N(N), .ENTRIES(E), .NPORTS(P)) dut (.clk, .rst_n, .head, .clr_mask(clr), .op_valid(ov),
            .op_store(os), .op_ctx(oc), .op_addr(ad), .op_data(od), .op_accept(oa),
            .squash_valid(sqv), .squash_ctx(sqc), .full, .used);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    ov = '0; os = '0; clr = '0;
    for (int p = 0; p < P; p++) begin oc[p] = 0; ad[p] = 0; od[p] = 0; end
  endtask
  task automatic op(int p, logic st, int c, int a);
    ov[p] = 1; os[p] = st; oc[p] = 3'(c); ad[p] = 30'(a); od[p] = 32'(a * 3);
  endtask
  task automatic chk(string what, logic cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference model for the random phase
  logic        m_v [E];
  logic [29:0] m_a [E];
  logic [N-1:0] m_l [E];

  initial begin
    idle(); head = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); op(0, 0, 0, 100); #1 chk("head load accepted", oa[0]);
    @(negedge clk); idle(); chk("head load makes no entry", used == 0);
    op(0, 0, 2, 100); op(1, 0, 3, 100); op(2, 0, 5, 200); #1 chk("spec loads accepted", oa[2:0] == 3'b111);
    @(negedge clk); idle(); chk("two entries", used == 2);
    op(0, 1, 0, 300); #1 chk("store to unloaded word: no squash", !sqv);
    @(negedge clk); idle();
    op(0, 1, 0, 100); #1 chk("store hits early loads: oldest reported", sqv && sqc == 2);
    @(negedge clk); idle();
    op(0, 0, 6, 100); @(negedge clk); idle();
    head = 4; op(0, 1, 4, 100); #1 chk("ring order from head 4: ctx 6 is the oldest reader", sqv && sqc == 6);
    @(negedge clk); idle(); head = 0;
    clr = 8'b0110_1100; @(negedge clk); idle();
    chk("cleared contexts free their entries", used == 0);
    // fill the table
    for (int k = 0; k < E; k += P) begin
      for (int p = 0; p < P; p++) op(p, 0, 1 + p % 3, 1000 + k + p);
      #1 chk("fill accepted", oa == '1);
      @(negedge clk); idle();
    end
    chk("full", full);
    op(0, 0, 1, 5000); op(1, 0, 2, 1000); #1 chk("miss refused when full, hit accepted", oa[1:0] == 2'b10);
    @(negedge clk); idle();
    clr = '1; @(negedge clk); idle();
    // random phase against the model
    for (int e = 0; e < E; e++) begin m_v[e] = 0; m_a[e] = 0; m_l[e] = 0; end
    for (int t = 0; t < 3000; t++) begin
      int best, exp_c; logic exp_sq;
      idle();
      head = 3'($urandom_range(0, N - 1));
      for (int p = 0; p < P; p++)
        if ($urandom_range(0, 1) == 1) begin
          if (p == 0 && $urandom_range(0, 2) == 0) op(p, 1, int'(head), $urandom_range(0, 15));
          else op(p, 0, (int'(head) + $urandom_range(1, N - 1)) % N, $urandom_range(0, 15));
        end
      if ($urandom_range(0, 9) == 0) clr[$urandom_range(0, N - 1)] = 1;
      // model: process ports in order
      exp_sq = 0; exp_c = 0; best = N;
      for (int p = 0; p < P; p++) if (ov[p]) begin
        int hi, fi; hi = -1; fi = -1;
        for (int e = E - 1; e >= 0; e--) begin
          if (m_v[e] && m_a[e] == ad[p]) hi = e;
          if (!m_v[e]) fi = e;
        end
        if (os[p]) begin
          if (hi >= 0) for (int c = 0; c < N; c++) begin
            int pos; pos = (c - int'(head) + N) % N;
            if (c != int'(oc[p]) && m_l[hi][c] && pos < best) begin best = pos; exp_sq = 1; exp_c = c; end
          end
        end else if (oc[p] != head) begin
          if (hi >= 0) m_l[hi][oc[p]] = 1;
          else if (fi >= 0) begin m_v[fi] = 1; m_a[fi] = ad[p]; m_l[fi] = '0; m_l[fi][oc[p]] = 1; end
        end
      end
      for (int e = 0; e < E; e++) begin m_l[e] &= ~clr; if (m_l[e] == '0) m_v[e] = 0; end
      #1;
      checks++;
      if (sqv !== exp_sq || (exp_sq && sqc !== 3'(exp_c))) begin
        failures++;
        if (failures < 5) $display("random mismatch t=%0d sqv=%0b sqc=%0d exp %0b %0d", t, sqv, sqc, exp_sq, exp_c);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
