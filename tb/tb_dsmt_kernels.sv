// tb_dsmt_kernels: runs three loop kernels of the Livermore type through the
// DSMT control at its default size (8 contexts) and checks the results
// against a sequential execution, with a memory model.
//
// The testbench plays the generic core and memory. It runs, one after the
// other, three loops with their own branch addresses, so the loop detection
// unit finds three loops and the design goes through non-DSMT, pre-DSMT and
// full-DSMT mode three times:
//   kernel 1 (hydro fragment)      x[k] = Q + y[k]*(R*z[k+10] + T*z[k+11])
//            independent iterations, stride-predicted index
//   kernel 3 (inner product)       q = q + z[k]*x[k]           (q in r2)
//            a register carried from each iteration to the next
//   kernel 5 (tri-diagonal elim.)  x[k] = z[k]*(y[k] - x[k-1])
//            a value carried through memory, which speculative loads read
//            too early until the memory dependence check squashes them
// Each iteration is a list of steps (register read / commit write / load /
// store / loop branch); r1 is the index, advanced by addi r1, r1, #1. Up to
// two runnable contexts perform one step per cycle, chosen at random. Loads
// read the memory model when the design grants them a data-cache port; a
// store commits locally into the context's queue and is written to memory
// when it drains after the context has become the non-speculative Head.
//
// Checked: the memory arrays of kernels 1 and 5 and r2 after kernel 3 equal
// the sequential result; every kernel reached full-DSMT mode and was
// labelled at its exit; kernel 5 had memory misspeculation squashes; the
// design ends in non-DSMT mode.
//
// Interface: no ports; a local clock and reset drive the design. Timing:
// inputs change at the falling clock edge and outputs are sampled after they
// settle; a watchdog ends a hung run. The run ends with one TB_RESULT line.
// The kernels are the paper's evaluation workload in shape only (loop
// bodies reduced to their data dependences); sizes and values are this
// testbench's own.
module tb_dsmt_kernels;
  import dsmt_pkg::*;
  localparam int N = NCTX, RP = 2, WP = 2, FP = FETCH_PORTS, DP = DC_PORTS;
  localparam int NIT = 40;              // iterations per kernel
  localparam int NSTEP = 9;             // prologue (2) + body (7)

  logic clk = 0, rst_n = 0;
  logic [31:0] reset_pc = 32'h1000;
  logic [N-1:0] br_valid, br_taken;
  logic [31:0] br_pc [N], br_target [N];
  logic [31:0] lk_pc, lk_target; logic lk_hit, lk_taken;
  logic addi_valid; logic [5:0] addi_op, addi_rd; logic [15:0] addi_imm;
  logic [4:0] commit_cnt;
  logic [RP-1:0] rd_req, rd_pending, rd_ready;
  logic [2:0] rd_ctx [RP], rd_src [RP];
  logic [5:0] rd_reg [RP];
  logic [31:0] rd_data [RP];
  logic [WP-1:0] wr_en;
  logic [2:0] wr_ctx [WP];
  logic [5:0] wr_reg [WP];
  logic [31:0] wr_data [WP];
  logic [7:0] icount [N];
  logic [N-1:0] fetch_stall;
  logic [FP-1:0] fetch_valid, pc_upd_en;
  logic [2:0] fetch_ctx [FP], pc_upd_ctx [FP];
  logic [31:0] fetch_pc [FP], pc_upd_val [FP];
  logic [N-1:0] lsq_valid, lsq_store, lsq_grant, lsq_st_pending;
  logic [31:0] lsq_addr [N], lsq_data [N];
  logic [DP-1:0] dc_valid, dc_store;
  logic [2:0] dc_ctx [DP];
  logic [31:0] dc_addr [DP], dc_data [DP];
  dsmt_mode_e mode;
  logic [2:0] head, tail, clone_ctx;
  logic [N-1:0] ctx_v, ctx_s, ctx_j, squash_mask;
  logic clone_en, join_ev, viol_reg, viol_mem, mdrt_full, loop_label_valid, loop_label_good;

  dsmt_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycles = 0;
  int n_full [3], n_vmem [3], n_vreg [3], n_label [3], n_clone [3];

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog: no completion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic cond);
    checks++; if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ memory model
  logic [31:0] mem [logic [31:0]];
  logic [31:0] ref_mem [logic [31:0]];

  function automatic logic [31:0] init_val(logic [31:0] a);
    return ((a * 32'd2654435761) >> 9) & 32'h3f;
  endfunction
  function automatic logic [31:0] mrd(logic [31:0] a);
    return mem.exists(a) ? mem[a] : init_val(a);
  endfunction
  function automatic logic [31:0] rrd(logic [31:0] a);
    return ref_mem.exists(a) ? ref_mem[a] : init_val(a);
  endfunction

  // ------------------------------------------------------------ kernel steps
  typedef enum int {OP_RD, OP_WR, OP_LD, OP_ST, OP_BR, OP_NONE} opk_e;
  typedef struct {
    opk_e        k;
    int          r;      // register (RD/WR)
    int          dst;    // temporary written (RD/LD)
    logic [31:0] a;      // address (LD/ST)
    logic [31:0] v;      // value (WR/ST)
    logic        addi;   // the WR is addi r1, r1, #1
  } op_t;

  localparam logic [31:0] CQ = 7, CR = 3, CT = 5;
  int kern;                              // 0, 1, 2 = kernels 1, 3, 5
  int last_exit = 0;                     // kernel whose loop was left last
  int sp [N];                            // step; -1 idle, NSTEP waiting for join, NSTEP+1 done
  logic [31:0] t [N][4];
  logic [N-1:0] stp, st_drv;
  logic [31:0] st_addr [N], st_data [N];
  assign lsq_st_pending = stp;

  function automatic logic [31:0] body(int kk); return 32'h2000 + 32'(kk) * 32'h1000; endfunction
  function automatic logic [31:0] brpc(int kk); return body(kk) + 32'h40; endfunction
  function automatic logic [31:0] xb(int kk); return 32'h10000 * 32'(kk + 1); endfunction
  function automatic int first_k(int kk); return (kk == 2) ? 1 : 0; endfunction

  function automatic op_t get_op(int c);
    op_t o;
    logic [31:0] k, X, Y, Z;
    o = '{k: OP_NONE, r: 0, dst: 0, a: 0, v: 0, addi: 0};
    k = t[c][0];
    X = xb(kern); Y = X + 32'h1000; Z = X + 32'h2000;
    case (sp[c])
      0: o = '{k: OP_WR, r: 1, dst: 0, a: 0, v: 32'(first_k(kern)), addi: 0};
      1: o = '{k: OP_WR, r: (kern == 1) ? 2 : 5, dst: 0, a: 0, v: 0, addi: 0};
      2: o = '{k: OP_RD, r: 1, dst: 0, a: 0, v: 0, addi: 0};
      3: o = '{k: OP_WR, r: 1, dst: 0, a: 0, v: k + 1, addi: 1};
      8: o = '{k: OP_BR, r: 0, dst: 0, a: 0, v: 0, addi: 0};
      default:
        case (kern)
          0: case (sp[c])
               4: o = '{k: OP_LD, r: 0, dst: 1, a: Y + 4 * k, v: 0, addi: 0};
               5: o = '{k: OP_LD, r: 0, dst: 2, a: Z + 4 * (k + 10), v: 0, addi: 0};
               6: o = '{k: OP_LD, r: 0, dst: 3, a: Z + 4 * (k + 11), v: 0, addi: 0};
               7: o = '{k: OP_ST, r: 0, dst: 0, a: X + 4 * k,
                        v: CQ + t[c][1] * (CR * t[c][2] + CT * t[c][3]), addi: 0};
               default: ;
             endcase
          1: case (sp[c])
               4: o = '{k: OP_LD, r: 0, dst: 1, a: Z + 4 * k, v: 0, addi: 0};
               5: o = '{k: OP_LD, r: 0, dst: 2, a: X + 4 * k, v: 0, addi: 0};
               6: o = '{k: OP_RD, r: 2, dst: 3, a: 0, v: 0, addi: 0};
               7: o = '{k: OP_WR, r: 2, dst: 0, a: 0, v: t[c][3] + t[c][1] * t[c][2], addi: 0};
               default: ;
             endcase
          default: case (sp[c])
               4: o = '{k: OP_LD, r: 0, dst: 1, a: Z + 4 * k, v: 0, addi: 0};
               5: o = '{k: OP_LD, r: 0, dst: 2, a: Y + 4 * k, v: 0, addi: 0};
               6: o = '{k: OP_LD, r: 0, dst: 3, a: X + 4 * (k - 1), v: 0, addi: 0};
               7: o = '{k: OP_ST, r: 0, dst: 0, a: X + 4 * k,
                        v: t[c][1] * (t[c][2] - t[c][3]), addi: 0};
               default: ;
             endcase
        endcase
    endcase
    return o;
  endfunction

  function automatic logic runnable(int c);
    return ctx_v[c] && !ctx_j[c] && sp[c] >= 0 && sp[c] < NSTEP &&
           (sp[c] >= 2 || c == int'(head));
  endfunction

  logic [1:0] slot_used;
  int slot_ctx [2];
  op_t slot_op [2];

  task automatic drive(int p, int c, op_t o);
    case (o.k)
      OP_RD: begin rd_req[p] = 1; rd_ctx[p] = 3'(c); rd_reg[p] = 6'(o.r); end
      OP_WR: begin
        wr_en[p] = 1; wr_ctx[p] = 3'(c); wr_reg[p] = 6'(o.r); wr_data[p] = o.v;
        if (o.addi && c == int'(head)) begin
          addi_valid = 1; addi_rd = 1; addi_imm = 1; addi_op = 6'h08;
        end
      end
      OP_LD: if (!stp[c]) begin
        lsq_valid[c] = 1; lsq_store[c] = 0; lsq_addr[c] = o.a;
      end
      OP_BR: if (t[c][0] + 1 < NIT || c == int'(head)) begin
        br_valid[c] = 1; br_pc[c] = brpc(kern); br_target[c] = body(kern);
        br_taken[c] = (t[c][0] + 1 < NIT);
      end
      default: ;
    endcase
  endtask

  function automatic logic completed(int p, int c, op_t o);
    case (o.k)
      OP_RD: return rd_ready[p];
      OP_WR, OP_ST: return 1'b1;
      OP_LD: return lsq_grant[c] && !st_drv[c];
      OP_BR: return br_valid[c];
      default: return 1'b0;
    endcase
  endfunction

  task automatic restart(int c);
    sp[c] = 2; stp[c] = 0;
  endtask

  logic done;

  task automatic advance(int p, int c, op_t o);
    case (o.k)
      OP_RD: t[c][o.dst] = rd_data[p];
      OP_LD: t[c][o.dst] = mrd(o.a);
      OP_ST: begin stp[c] = 1; st_addr[c] = o.a; st_data[c] = o.v; end
      default: ;
    endcase
    if (o.k == OP_BR) begin
      if (!br_taken[c]) begin
        // loop left by the Head: next kernel, or the end
        last_exit = kern;
        if (kern == 2) begin sp[c] = NSTEP + 1; end
        else begin kern++; sp[c] = 0; end
      end else if (mode == MODE_NON) restart(c);
      else sp[c] = NSTEP;
    end else sp[c]++;
  endtask

  task automatic idle_inputs();
    br_valid = 0; br_taken = 0; addi_valid = 0; addi_op = 0; addi_rd = 0; addi_imm = 0;
    rd_req = 0; rd_pending = 0; wr_en = 0; lsq_valid = 0; lsq_store = 0; commit_cnt = 0;
    for (int c = 0; c < N; c++) begin
      br_pc[c] = 0; br_target[c] = 0; lsq_addr[c] = 0; lsq_data[c] = 0;
    end
    for (int p = 0; p < 2; p++) begin
      rd_ctx[p] = 0; rd_reg[p] = 0; wr_ctx[p] = 0; wr_reg[p] = 0; wr_data[p] = 0;
    end
  endtask

  always_comb begin
    for (int c = 0; c < N; c++) begin
      icount[c] = 8'((sp[c] >= 0 && sp[c] < NSTEP) ? NSTEP - sp[c] : 0);
      fetch_stall[c] = 1'b0;
    end
    for (int p = 0; p < FP; p++) begin
      pc_upd_en[p]  = fetch_valid[p];
      pc_upd_ctx[p] = fetch_ctx[p];
      pc_upd_val[p] = (fetch_pc[p] >= brpc(kern) || fetch_pc[p] < body(kern)) ? body(kern)
                                                                               : fetch_pc[p] + 32;
    end
  end

  initial begin
    int ord [N];
    idle_inputs();
    kern = 0;
    for (int c = 0; c < N; c++) begin
      sp[c] = -1; st_addr[c] = 0; st_data[c] = 0;
      for (int i = 0; i < 4; i++) t[c][i] = 0;
    end
    for (int i = 0; i < 3; i++) begin
      n_full[i] = 0; n_vmem[i] = 0; n_vreg[i] = 0; n_label[i] = 0; n_clone[i] = 0;
    end
    stp = 0; st_drv = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    sp[0] = 0;
    done = 0;
    while (!done) begin
      @(negedge clk);
      cycles++;
      idle_inputs();
      lk_pc = brpc(kern);
      for (int c = 0; c < N; c++) ord[c] = c;
      ord.shuffle();
      slot_used = 0;
      for (int i = 0; i < N; i++) begin
        int c; c = ord[i];
        if (runnable(c) && !slot_used[1]) begin
          int p; p = slot_used[0] ? 1 : 0;
          slot_used[p] = 1; slot_ctx[p] = c; slot_op[p] = get_op(c);
          drive(p, c, slot_op[p]);
        end
      end
      // the Head drains its buffered store ahead of its loads
      st_drv = 0;
      if (stp[head]) begin
        st_drv[head] = 1;
        lsq_valid[head] = 1; lsq_store[head] = 1;
        lsq_addr[head] = st_addr[head]; lsq_data[head] = st_data[head];
      end
      #1;
      for (int p = 0; p < 2; p++)
        if (slot_used[p] && completed(p, slot_ctx[p], slot_op[p]) &&
            slot_op[p].k inside {OP_WR, OP_ST, OP_BR}) commit_cnt++;
      if (mode == MODE_FULL) n_full[kern]++;
      if (viol_mem) n_vmem[kern]++;
      if (viol_reg) n_vreg[kern]++;
      if (clone_en) n_clone[kern]++;
      if (loop_label_valid) n_label[last_exit]++;
      #1;
      // memory: the drained store is written before loads of this cycle read
      if (st_drv[head] && lsq_grant[head]) begin
        mem[st_addr[head]] = st_data[head];
        stp[head] = 0;
      end
      for (int p = 0; p < 2; p++)
        if (slot_used[p] && completed(p, slot_ctx[p], slot_op[p]))
          advance(p, slot_ctx[p], slot_op[p]);
      begin
        logic [N-1:0] sq; logic ce, je; int cc, jc;
        sq = squash_mask; ce = clone_en; cc = int'(clone_ctx); je = join_ev; jc = int'(head);
        @(posedge clk); #1;
        for (int c = 0; c < N; c++) if (sq[c]) begin sp[c] = -1; stp[c] = 0; end
        if (ce) restart(cc);
        if (je) begin
          if (head == 3'(jc)) restart(jc);
          else sp[jc] = -1;
        end
      end
      if (sp[head] == NSTEP + 1 && !stp[head] && mode == MODE_NON) done = 1;
    end
    repeat (3) begin @(negedge clk); if (loop_label_valid) n_label[last_exit]++; end

    // sequential reference
    begin
      logic [31:0] q;
      for (int kk = 0; kk < 3; kk++) begin
        logic [31:0] X, Y, Z;
        X = xb(kk); Y = X + 32'h1000; Z = X + 32'h2000;
        q = 0;
        for (int k = first_k(kk); k < NIT; k++) begin
          logic [31:0] kv; kv = 32'(k);
          case (kk)
            0: ref_mem[X + 4 * kv] = CQ + rrd(Y + 4 * kv) * (CR * rrd(Z + 4 * (kv + 10)) +
                                                           CT * rrd(Z + 4 * (kv + 11)));
            1: q = q + rrd(Z + 4 * kv) * rrd(X + 4 * kv);
            default: ref_mem[X + 4 * kv] = rrd(Z + 4 * kv) * (rrd(Y + 4 * kv) - rrd(X + 4 * (kv - 1)));
          endcase
        end
        if (kk == 0)
          for (int k = 0; k < NIT; k++)
            chk($sformatf("kernel 1: x[%0d]", k), mrd(X + 4 * 32'(k)) == rrd(X + 4 * 32'(k)));
        if (kk == 2)
          for (int k = 1; k < NIT; k++)
            chk($sformatf("kernel 5: x[%0d]", k), mrd(X + 4 * 32'(k)) == rrd(X + 4 * 32'(k)));
        if (kk == 1) begin
          idle_inputs();
          @(negedge clk);
          rd_req = 2'b01; rd_ctx[0] = head; rd_reg[0] = 2; #1;
          chk($sformatf("kernel 3: q = %0d (expected %0d)", rd_data[0], q), rd_data[0] == q);
          idle_inputs();
        end
      end
    end
    chk("back in non-DSMT mode with one context", mode == MODE_NON && $countones(ctx_v) == 1);
    for (int i = 0; i < 3; i++) begin
      $display("kernel %0d: full_cycles=%0d clones=%0d vreg=%0d vmem=%0d labels=%0d",
               i == 0 ? 1 : (i == 1 ? 3 : 5), n_full[i], n_clone[i], n_vreg[i], n_vmem[i], n_label[i]);
      chk($sformatf("kernel %0d ran in full-DSMT mode", i), n_full[i] > 0 && n_clone[i] > 0);
      chk($sformatf("kernel %0d labelled at exit", i), n_label[i] > 0);
    end
    chk("kernel 5: memory misspeculation squashes", n_vmem[2] > 0);
    $display("cycles=%0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
