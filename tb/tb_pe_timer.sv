// tb_pe_timer: PE time-step timer. Checks the N+1 cycle period in periodic
// mode for several LOAD values, the one-cycle tick, the pending flag and its
// write-1 clear, one-shot mode stopping after one tick, VALUE read-back and
// no tick while disabled.
module tb_pe_timer;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic reg_we, tick, irq; logic [7:0] reg_addr; logic [31:0] reg_wdata, reg_rdata;
  pe_timer dut (.clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .tick, .irq);
  int ticks = 0; time tt [$];
  always @(posedge clk) if (rst_n && tick) begin ticks++; tt.push_back($time); end
  task automatic wr(int a, int d);
    @(negedge clk); reg_we = 1; reg_addr = 8'(a); reg_wdata = 32'(d);
    @(negedge clk); reg_we = 0;
  endtask
  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk); reg_addr = 8'(a); #1; d = reg_rdata;
  endtask

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [31:0] v;
    reg_we = 0; reg_addr = 0; reg_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    wr(0, 20); repeat (40) @(negedge clk);
    chk(ticks == 0, "no tick while disabled");
    for (int n = 3; n < 60; n += 11) begin
      wr(8, 0); wr(0, n); tt.delete(); ticks = 0;
      wr(8, 3);
      repeat (5 * (n + 1) + 3) @(negedge clk);
      chk(ticks >= 4, $sformatf("periodic ticks for N=%0d", n));
      for (int i = 1; i < tt.size(); i++)
        chk(tt[i] - tt[i-1] == 10 * (n + 1), $sformatf("period N+1 for N=%0d", n));
    end
    rd(12, v); chk(v[0], "pending set");
    chk(irq, "irq follows pending");
    wr(12, 1); wr(8, 0); rd(12, v); chk(!v[0], "pending cleared by write 1");
    wr(0, 100); rd(4, v); chk(v == 100, "VALUE after LOAD");
    wr(8, 1); rd(4, v); chk(v < 100 && v > 90, "counts down");
    ticks = 0;
    repeat (400) @(negedge clk);
    chk(ticks == 1, $sformatf("one-shot mode ticks once (%0d)", ticks));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
