// tb_qpe_regfile: QPE configuration register file written by CNoC packets.
// Writes packets of 1..4 words at several word addresses (including a wrap
// past the last register), checks every register against a model, the
// write counter, that a size-0 packet writes nothing, and that each packet
// takes one cycle per word.
module tb_qpe_regfile;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  localparam int NR = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ir;
  noc_pkt_t ip;
  logic [31:0] cfg [NR];
  logic [15:0] wc;
  qpe_regfile #(.NREGS(NR)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_pkt(ip),
    .cfg, .write_count(wc));
  logic [31:0] model [NR];
  int nwr = 0;

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    iv = 0; ip = '0;
    for (int i = 0; i < NR; i++) model[i] = '0;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    for (int n = 0; n < 60; n++) begin
      int sz, base, cyc;
      sz = n % 5; base = $urandom_range(0, NR - 1);
      ip = '0; ip.hdr.size = 3'(sz); ip.hdr.r = 1; ip.addr = 32'(base * 4);
      ip.data = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk); iv = 1; cyc = 0;
      forever begin
        bit rdy;
        #1; rdy = ir;
        @(posedge clk); cyc++;
        if (rdy || cyc > 10) break;
        @(negedge clk);
      end
      @(negedge clk); iv = 0;
      chk(cyc == (sz == 0 ? 1 : sz), $sformatf("one cycle per word (size %0d took %0d)", sz, cyc));
      for (int k = 0; k < sz; k++) model[(base + k) % NR] = ip.data[32*k +: 32];
      nwr += sz;
      @(negedge clk);
      begin
        bit ok;
        ok = 1;
        for (int i = 0; i < NR; i++) ok &= cfg[i] == model[i];
        chk(ok, $sformatf("registers after packet %0d (base %0d size %0d)", n, base, sz));
      end
      chk(wc == 16'(nwr), "write count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
