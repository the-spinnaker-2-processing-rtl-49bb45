// tb_async_fifo: writer at 10 ns and reader at 14 ns clocks with random
// valid/ready; every word must arrive once and in order. Also checks the
// three-cycle latency with one common clock phase relation is at most 4 read
// cycles.
module tb_async_fifo;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic wclk = 0, rclk = 0, rst_n = 0;
  always #5 wclk = ~wclk;
  always #7 rclk = ~rclk;
  logic iv, ir, ov, orr;
  logic [31:0] id, od;
  async_fifo #(.WIDTH(32), .DEPTH(4)) dut (.wclk, .wrst_n(rst_n), .in_valid(iv), .in_ready(ir),
    .in_data(id), .rclk, .rrst_n(rst_n), .out_valid(ov), .out_ready(orr), .out_data(od));
  logic [31:0] q[$];
  int sent = 0, got = 0, lat;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  // latency
  initial begin
    iv = 0; id = 0; orr = 0;
    #30 rst_n = 1;
    @(negedge wclk); iv = 1; id = 32'h1234_5678;
    @(negedge wclk); iv = 0;
    lat = 0;
    while (!ov) begin @(posedge rclk); lat++; end
    chk(lat <= 4, "latency at most 4 read cycles");
    chk(od == 32'h1234_5678, "first word");
    @(negedge rclk); orr = 1; @(negedge rclk); orr = 0;
    fork
      begin
        while (sent < 500) begin
          @(negedge wclk);
          iv = $urandom_range(0, 1); id = $urandom;
          @(posedge wclk);
          if (iv && ir) begin q.push_back(id); sent++; end
        end
        @(negedge wclk); iv = 0;
      end
      begin
        while (got < 500) begin
          @(negedge rclk);
          orr = $urandom_range(0, 1);
          @(posedge rclk);
          if (ov && orr) begin
            chk(q.size() > 0 && od == q[0], "order across clocks");
            if (q.size() > 0) void'(q.pop_front());
            got++;
          end
        end
      end
    join
    chk(q.size() == 0, "nothing left");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
