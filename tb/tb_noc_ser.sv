// tb_noc_ser: serialiser from a 192-bit NoC packet to 32-bit CNoC flits.
// For 200 random packets of every size (0..4 words) it checks the flit
// count (2 + size), the flit order (header word, address, data words from
// the lowest), the last marker, and that the output holds while the
// receiver stalls at random.
module tb_noc_ser;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ir, ov, orr;
  noc_pkt_t ip;
  cflit_t of;
  noc_ser dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_pkt(ip),
    .out_valid(ov), .out_ready(orr), .out_flit(of));

  cflit_t got [$];
  always @(posedge clk) if (rst_n && ov && orr) got.push_back(of);
  always @(negedge clk) orr = ($urandom_range(0, 3) != 0);

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    iv = 0; ip = '0;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      noc_pkt_t p;
      int nf, w;
      bit ok;
      p = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      p.hdr.size = 3'(n % 5);
      nf = 2 + n % 5;
      @(negedge clk); iv = 1; ip = p; #1;
      while (!ir) begin @(negedge clk); #1; end
      @(posedge clk); @(negedge clk); iv = 0;
      w = 0;
      while (got.size() < nf && w < 100) begin @(negedge clk); w++; end
      repeat (3) @(negedge clk);
      ok = got.size() == nf;
      for (int k = 0; ok && k < nf; k++) begin
        logic [31:0] e;
        e = (k == 0) ? {p.hdr, p.phdr} : (k == 1) ? p.addr : p.data[32*(k-2) +: 32];
        ok = got[k].data == e && got[k].last == (k == nf - 1);
      end
      chk(ok, $sformatf("packet %0d size %0d serialised", n, n % 5));
      got.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
