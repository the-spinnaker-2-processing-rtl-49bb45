// tb_fifo_sync: random traffic through a 4-deep FIFO against a queue model;
// checks order, one-cycle latency, full at DEPTH and the count output.
module tb_fifo_sync;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ir, ov, orr;
  logic [15:0] id, od;
  logic [2:0] cnt;
  fifo_sync #(.WIDTH(16), .DEPTH(4)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(orr), .out_data(od), .count(cnt));
  logic [15:0] q[$];
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    iv = 0; orr = 0; id = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // latency: push one word, visible next cycle
    @(negedge clk); chk(!ov, "empty after reset"); iv = 1; id = 16'hABCD;
    @(negedge clk); iv = 0; chk(ov && od == 16'hABCD, "one cycle latency");
    orr = 1; @(negedge clk); orr = 0; chk(!ov, "empty again");
    // fill
    for (int i = 0; i < 4; i++) begin iv = 1; id = 16'(i); @(negedge clk); end
    chk(!ir && cnt == 3'd4, "full at 4");
    iv = 0;
    for (int i = 0; i < 4; i++) begin chk(od == 16'(i), "fill order"); orr = 1; @(negedge clk); end
    orr = 0;
    // random
    for (int n = 0; n < 2000; n++) begin
      iv = $urandom_range(0, 1); id = 16'($urandom); orr = $urandom_range(0, 1);
      #1;
      if (ov && orr) begin chk(q.size() > 0 && od == q[0], "random order"); if (q.size() > 0) void'(q.pop_front()); end
      if (iv && ir) q.push_back(id);
      @(negedge clk);
      chk(int'(cnt) == q.size(), "count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
