// tb_rrct: self-checking test of the register read confidence table.
// Random decrement/increment events are applied; a reference array of 2-bit
// saturating counters (reset value 2, decrement wins) is compared with the
// table's counters and conf_low flags every cycle.
//
// Interface: no ports; a local clock and reset drive the unit under test.
// Timing: inputs change away from the rising clock edge and outputs are
// sampled after they settle; a watchdog ends a hung run. The run ends with
// one TB_RESULT line giving the number of checks and failures. Expected
// behaviour follows the paper's description of the unit (and, where the
// paper is silent, this design's documented choices); the stimulus values,
// sizes and sequences are this testbench's own.
module tb_rrct;
  import dsmt_pkg::*;
  localparam int NR = 64;
  logic clk = 0, rst_n = 0;
  logic dv, iv;
  logic [5:0] dr;
  logic [NR-1:0] im, low;
  logic [1:0] conf [NR];
  int ref_c [NR];
  int checks = 0, failures = 0;

  rrct dut (.clk, .rst_n, .dec_valid(dv), .dec_reg(dr), .inc_valid(iv), .inc_mask(im),
            .conf_low(low), .conf);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dv = 0; iv = 0; dr = 0; im = '0;
    for (int r = 0; r < NR; r++) ref_c[r] = 2;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int r = 0; r < NR; r++) begin
        checks++;
        if (conf[r] !== 2'(ref_c[r]) || low[r] !== (ref_c[r] < 2)) failures++;
      end
      dv = ($urandom_range(0, 2) == 0); dr = 6'($urandom_range(0, 7));
      iv = ($urandom_range(0, 1) == 0); im = {$urandom, $urandom} & 64'hFF;
      @(posedge clk);
      for (int r = 0; r < NR; r++) begin
        if (dv && int'(dr) == r) ref_c[r] = (ref_c[r] > 0) ? ref_c[r] - 1 : 0;
        else if (iv && im[r]) ref_c[r] = (ref_c[r] < 3) ? ref_c[r] + 1 : 3;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
