// tb_sram_bank: one 128-bit SRAM bank with byte strobes. Random writes with
// random strobes and random reads against a model; checks the one-cycle
// read latency and that the output holds when the bank is not enabled.
module tb_sram_bank;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  localparam int W = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, we;
  logic [5:0] addr;
  logic [127:0] wdata, rdata;
  logic [15:0] wstrb;
  sram_bank #(.WORDS(W)) dut (.clk, .en, .we, .addr, .wdata, .wstrb, .rdata);
  logic [127:0] model [W];

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0; wstrb = 0;
    // fill
    for (int i = 0; i < W; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 6'(i); wstrb = '1;
      wdata = {$urandom, $urandom, $urandom, $urandom}; model[i] = wdata;
    end
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      en = 1; addr = 6'($urandom_range(0, W - 1)); we = $urandom_range(0, 1);
      if (we) begin
        wstrb = 16'($urandom); wdata = {$urandom, $urandom, $urandom, $urandom};
        for (int b = 0; b < 16; b++) if (wstrb[b]) model[addr][8*b +: 8] = wdata[8*b +: 8];
      end else begin
        logic [127:0] e;
        e = model[addr];
        @(negedge clk); en = 0;
        chk(rdata == e, "read data after one cycle");
        @(negedge clk);
        chk(rdata == e, "output holds while idle");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
