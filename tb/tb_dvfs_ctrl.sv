// tb_dvfs_ctrl: spike-driven performance-level controller.
// For spike counts around the thresholds 17 and 59 it checks the PL picked
// at the tick (count > LTH2 -> PL3, > LTH1 -> PL2, else PL1), that the PE
// wakes at the tick and sleeps at PL1 after CTRL.done, that the PL does not
// change between ticks, reprogrammed thresholds, the per-PL cycle counters
// and the PL change counter.
module tb_dvfs_ctrl;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tick, reg_we, sleep; logic [15:0] sc; logic [7:0] reg_addr; logic [31:0] reg_wdata, reg_rdata;
  pl_e pl;
  dvfs_ctrl dut (.clk, .rst_n, .tick, .spike_count(sc), .reg_we, .reg_addr, .reg_wdata,
    .reg_rdata, .pl, .sleep);
  task automatic wr(int a, int d);
    @(negedge clk); reg_we = 1; reg_addr = 8'(a); reg_wdata = 32'(d);
    @(negedge clk); reg_we = 0;
  endtask
  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk); reg_addr = 8'(a); #1; d = reg_rdata;
  endtask
  int l1 = 17, l2 = 59;
  int exp_awake [3] = '{0, 0, 0};
  task automatic step(int count, int busy);
    pl_e e;
    e = (count > l2) ? PL3 : (count > l1) ? PL2 : PL1;
    @(negedge clk); sc = 16'(count); tick = 1; @(negedge clk); tick = 0;
    chk(pl == e && !sleep, $sformatf("count %0d -> PL%0d (got PL%0d)", count, int'(e) + 1, int'(pl) + 1));
    sc = 16'(count + 30);
    repeat (busy) @(negedge clk);
    chk(pl == e, "PL held during the step");
    exp_awake[int'(e)] += busy + 1;
    @(negedge clk); reg_we = 1; reg_addr = 8'h0C; reg_wdata = 1; @(negedge clk); reg_we = 0;
    chk(sleep && pl == PL1, "sleep at PL1 after done");
  endtask

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [31:0] v;
    int tot;
    tick = 0; sc = 0; reg_we = 0; reg_addr = 0; reg_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); #1;
    chk(sleep && pl == PL1, "reset: sleeping at PL1");
    rd(0, v); chk(v == 17, "LTH1 reset 17");
    rd(4, v); chk(v == 59, "LTH2 reset 59");
    foreach (exp_awake[i]) exp_awake[i] = 0;
    // the counters also count the cycle of the done write; remember totals
    step(0, 5); step(17, 5); step(18, 7); step(59, 3); step(60, 9); step(200, 2); step(5, 4);
    rd(8, v); chk(v[2] && v[1:0] == 2'd0, "STATUS sleep, PL1");
    rd(28, v); chk(v == 8, $sformatf("PL change count (%0d)", v));
    tot = 0;
    for (int p = 0; p < 3; p++) begin
      rd(16 + 4 * p, v);
      chk(int'(v) >= exp_awake[p] && int'(v) <= exp_awake[p] + 8, $sformatf("cycles at PL%0d (%0d vs %0d)", p + 1, v, exp_awake[p]));
    end
    wr(0, 3); wr(4, 6); l1 = 3; l2 = 6;
    step(3, 1); step(4, 1); step(7, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
