// tb_noc_des: deserialiser from 32-bit CNoC flits back to a 192-bit NoC
// packet. For 200 random packets of every size it feeds the flits with
// random gaps and checks the rebuilt packet (unsent data words read as
// zero) and that a full output buffer back-pressures the flit input.
module tb_noc_des;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ir, ov, orr;
  cflit_t ifl;
  noc_pkt_t op;
  noc_des dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_flit(ifl),
    .out_valid(ov), .out_ready(orr), .out_pkt(op));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    iv = 0; ifl = '0; orr = 0;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      noc_pkt_t p, e;
      int nf;
      p = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      p.hdr.size = 3'(n % 5);
      nf = 2 + n % 5;
      e = p;
      for (int k = n % 5; k < 4; k++) e.data[32*k +: 32] = '0;
      for (int k = 0; k < nf; k++) begin
        @(negedge clk);
        iv = ($urandom_range(0, 2) != 0);
        while (!iv) begin @(negedge clk); iv = ($urandom_range(0, 2) != 0); end
        ifl.data = (k == 0) ? {p.hdr, p.phdr} : (k == 1) ? p.addr : p.data[32*(k-2) +: 32];
        ifl.last = (k == nf - 1);
        #1;
        while (!ir) begin @(negedge clk); #1; end
        @(posedge clk);
      end
      @(negedge clk); iv = 0;
      #1;
      chk(ov && op == e, $sformatf("packet %0d size %0d rebuilt", n, n % 5));
      if (n % 50 == 0) begin
        repeat (2) @(negedge clk);
        chk(!ir, "full buffer stalls input");
      end
      orr = 1; @(posedge clk); @(negedge clk); orr = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
