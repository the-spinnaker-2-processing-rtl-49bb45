// tb_pe_dma: DMA engine with a behavioural SRAM (random grant delay) and a
// NoC sink with random back-pressure. Copies of 1, 5 and 13 lines: every
// packet must carry the header fields from DST, size 4, address
// DST_ADDR+16n and the SRAM line SRC+16n, in order; irq pulses once at the
// end; STATUS busy/done; 3 cycles per line with no stalls; LEN=0 does
// nothing.
module tb_pe_dma;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic reg_we, mem_req, mem_gnt, mem_rvalid, ov, orr, irq;
  logic [7:0] reg_addr; logic [31:0] reg_wdata, reg_rdata, mem_addr;
  logic [127:0] mem_rdata; noc_pkt_t op;
  pe_dma dut (.clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .mem_req, .mem_addr,
    .mem_gnt, .mem_rvalid, .mem_rdata, .out_valid(ov), .out_ready(orr), .out_pkt(op), .irq);
  logic [127:0] sram [256];
  bit stall;
  int nirq = 0;
  noc_pkt_t got [$];
  always @(negedge clk) begin
    mem_gnt = stall ? $urandom_range(0, 1) : 1'b1;
    orr = stall ? ($urandom_range(0, 2) == 0) : 1'b1;
  end
  always @(posedge clk) begin
    mem_rvalid <= 0;
    if (rst_n && mem_req && mem_gnt) begin mem_rdata <= sram[mem_addr[11:4]]; mem_rvalid <= 1; end
    if (rst_n && ov && orr) got.push_back(op);
    if (rst_n && irq) nirq++;
  end
  task automatic wr(int a, int d);
    @(negedge clk); reg_we = 1; reg_addr = 8'(a); reg_wdata = 32'(d);
    @(negedge clk); reg_we = 0;
  endtask
  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk); reg_addr = 8'(a); #1; d = reg_rdata;
  endtask
  task automatic copy(int src_line, int len, int dst, int daddr, bit st);
    time t0;
    int i0;
    logic [31:0] v;
    bit ok;
    stall = st; got.delete(); i0 = nirq;
    wr(0, src_line * 16); wr(4, len); wr(8, dst); wr(12, daddr);
    wr(16, 1); t0 = $time;
    rd(20, v); chk(v[0], "busy");
    while (nirq == i0) @(negedge clk);
    if (!st) chk(($time - t0) / 10 <= 3 * len + 2, $sformatf("3 cycles per line (%0d for %0d)", ($time - t0) / 10, len));
    repeat (3) @(negedge clk);
    chk(nirq == i0 + 1, "one irq");
    rd(20, v); chk(!v[0] && v[1], "done");
    ok = got.size() == len;
    for (int n = 0; ok && n < len; n++)
      ok = got[n].hdr.size == 3'd4 && {got[n].hdr.dx, got[n].hdr.dy, got[n].hdr.r, got[n].hdr.pe, got[n].hdr.c} == 12'(dst)
           && got[n].addr == 32'(daddr + 16 * n) && got[n].data == sram[src_line + n];
    chk(ok, $sformatf("copy of %0d lines (%0d packets)", len, got.size()));
  endtask

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    reg_we = 0; reg_addr = 0; reg_wdata = 0; mem_rdata = 0; stall = 0;
    foreach (sram[i]) sram[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk); rst_n = 1;
    copy(3, 1, 12'b011_010_0_0001_0, 32'h0000_0100, 0);
    copy(10, 5, 12'b101_001_0_0110_0, 32'h1010_0000, 0);
    copy(40, 13, 12'b001_110_1_0000_1, 32'h0000_2000, 1);
    begin
      logic [31:0] v;
      got.delete(); wr(4, 0); wr(16, 1); repeat (10) @(negedge clk);
      rd(20, v); chk(!v[0] && got.size() == 0, "LEN 0 sends nothing");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
