// tb_pe: one processing element driven through its core bus and NoC ports.
// The core bus is driven by tasks that stand in for the Arm core; the
// remote-SRAM master port is looped back to the PE's own slave port.
// Mechanisms checked, each counted:
//   SRAM word writes/reads in all four banks; remote access through the
//   crossbar ports; a NoC packet writing SRAM; a NoC register-write packet
//   programming the MAC; a MAC matrix product with operands from SRAM and
//   op_a words from NoC packets, started by the core, with its irq; spike
//   packets filling the spike FIFO (irq, count, pop in order); a spike sent
//   by the core leaving as a NoC packet with marker, key, control byte and
//   target; a DMA copy leaving as NoC packets; a timer tick waking the PE
//   and the DVFS controller choosing PL2 from the spike count, then done
//   returning it to PL1 and sleep; the PRNG.
module tb_pe;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cpu_req, cpu_we, cpu_gnt, cpu_rvalid; logic [31:0] cpu_addr, cpu_wdata, cpu_rdata;
  logic [3:0] cpu_wstrb;
  logic niv, nir, nov, nor_; noc_pkt_t nip, nop;
  logic rm_req, rm_we, rm_gnt, rm_rvalid; logic [31:0] rm_addr; logic [127:0] rm_wdata, rm_rdata;
  logic [15:0] rm_wstrb;
  logic rs_gnt, rs_rvalid; logic [127:0] rs_rdata;
  logic [3:0] irq; pl_e pl; logic sleep;
  pe #(.BANK_WORDS(64), .SPK_DEPTH(32)) dut (.clk, .rst_n,
    .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_wstrb, .cpu_gnt, .cpu_rvalid, .cpu_rdata,
    .noc_in_valid(niv), .noc_in_ready(nir), .noc_in_pkt(nip),
    .noc_out_valid(nov), .noc_out_ready(nor_), .noc_out_pkt(nop),
    .rm_req, .rm_we, .rm_addr, .rm_wdata, .rm_wstrb, .rm_gnt, .rm_rvalid, .rm_rdata,
    .rs_req(rm_req), .rs_we(rm_we), .rs_addr({15'd0, rm_addr[16:0]}), .rs_wdata(rm_wdata),
    .rs_wstrb(rm_wstrb), .rs_gnt, .rs_rvalid, .rs_rdata, .irq, .pl, .sleep);
  assign rm_gnt = rs_gnt; assign rm_rvalid = rs_rvalid; assign rm_rdata = rs_rdata;

  noc_pkt_t out [$];
  always @(posedge clk) if (rst_n && nov && nor_) out.push_back(nop);
  int n_mac_irq = 0;
  int n_dma_irq = 0;
  always @(posedge clk) if (rst_n && irq[0]) n_mac_irq++;
  always @(posedge clk) if (rst_n && irq[2]) n_dma_irq++;

  task automatic wr(logic [31:0] a, logic [31:0] d);
    @(negedge clk); cpu_req = 1; cpu_we = 1; cpu_addr = a; cpu_wdata = d; cpu_wstrb = '1; #1;
    while (!cpu_gnt) begin @(negedge clk); #1; end
    @(posedge clk); @(negedge clk); cpu_req = 0; cpu_we = 0;
  endtask
  task automatic rd(logic [31:0] a, output logic [31:0] d);
    int w;
    @(negedge clk); cpu_req = 1; cpu_we = 0; cpu_addr = a; #1;
    while (!cpu_gnt) begin @(negedge clk); #1; end
    @(posedge clk); @(negedge clk); cpu_req = 0; #1;
    w = 0;
    while (!cpu_rvalid && w < 20) begin @(negedge clk); #1; w++; end
    d = cpu_rdata;
  endtask
  task automatic nsend(noc_pkt_t p);
    @(negedge clk); niv = 1; nip = p; #1;
    while (!nir) begin @(negedge clk); #1; end
    @(posedge clk); @(negedge clk); niv = 0;
  endtask
  function automatic noc_pkt_t mk(int sz, logic [31:0] a, logic [127:0] d, bit spike);
    noc_pkt_t p;
    p = '0; p.hdr.size = 3'(sz); p.addr = a; p.data = d; p.phdr[PHDR_SPIKE] = spike;
    return p;
  endfunction

  int mech [string];
  task automatic mc(string n, bit ok);
    chk(ok, n);
    if (ok) mech[n] = 1;
  endtask

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [31:0] v;
    bit ok;
    cpu_req = 0; cpu_we = 0; cpu_addr = 0; cpu_wdata = 0; cpu_wstrb = 0;
    niv = 0; nip = '0; nor_ = 1;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);

    // SRAM, all four banks (bank = addr[11:10] with 64-line banks)
    ok = 1;
    for (int b = 0; b < 4; b++) for (int w = 0; w < 4; w++) wr(32'(b * 1024 + 16 * b + 4 * w), 32'(b * 100 + w));
    for (int b = 0; b < 4; b++) for (int w = 0; w < 4; w++) begin
      rd(32'(b * 1024 + 16 * b + 4 * w), v); ok &= v == 32'(b * 100 + w);
    end
    mc("SRAM word access in four banks", ok);

    // remote (looped back)
    wr(32'h1010_0200, 32'hCAFE0001); rd(32'h0000_0200, v); ok = v == 32'hCAFE0001;
    rd(32'h1010_0200, v); mc("remote SRAM path", ok && v == 32'hCAFE0001);

    // NoC SRAM write
    nsend(mk(4, 32'h0000_0300, {32'd4, 32'd3, 32'd2, 32'd1}, 0));
    ok = 1; for (int k = 0; k < 4; k++) begin rd(32'(32'h300 + 4 * k), v); ok &= v == 32'(k + 1); end
    mc("NoC packet writes SRAM", ok);

    // MAC: B rows k (16 bytes) at 0x400 + 16k, written by the core
    begin
      byte unsigned A [4][6]; byte unsigned B [6][16];
      int K;
      K = 6;
      for (int k = 0; k < K; k++) for (int w = 0; w < 4; w++) begin
        logic [31:0] d;
        for (int q = 0; q < 4; q++) begin B[k][4*w+q] = 8'($urandom); d[8*q +: 8] = B[k][4*w+q]; end
        wr(32'(32'h400 + 16 * k + 4 * w), d);
      end
      // MAC K register written by a NoC configuration packet
      nsend(mk(1, 32'hE000_0004, 128'(K), 0));
      rd(32'hE000_0004, v); mc("NoC register write programs MAC", v == 32'(K));
      wr(32'hE000_0008, 32'h400); wr(32'hE000_000C, 32'h800);
      // op_a words via NoC
      for (int k = 0; k < K; k += 2) begin
        logic [127:0] d;
        d = '0;
        for (int q = 0; q < 2; q++) for (int i = 0; i < 4; i++) begin
          A[i][k+q] = 8'($urandom); d[32*q + 8*i +: 8] = A[i][k+q];
        end
        nsend(mk(2, 32'h4000_0000, d, 0));
      end
      wr(32'hE000_0000, 1);
      repeat (60) @(negedge clk);
      mc("MAC irq", n_mac_irq == 1);
      ok = 1;
      for (int i = 0; i < 4; i++) for (int j = 0; j < 16; j++) begin
        int e;
        e = 0; for (int k = 0; k < K; k++) e += A[i][k] * B[k][j];
        rd(32'(32'h800 + 4 * (16 * i + j)), v); ok &= v == 32'(e);
      end
      mc("MAC matrix product in SRAM", ok);
    end

    // spikes in
    for (int n = 0; n < 20; n++) nsend(mk(0, 32'(1000 + n), '0, 1));
    rd(32'hE000_0508, v); mc("spike FIFO count", v == 20 && irq[3]);

    // timer tick -> DVFS picks PL2 (20 > 17)
    chk(sleep && pl == PL1, "asleep before tick");
    wr(32'hE000_0100, 10); wr(32'hE000_0108, 1);
    repeat (20) @(negedge clk);
    mc("tick wakes PE at PL2", !sleep && pl == PL2);
    ok = 1;
    for (int n = 0; n < 20; n++) begin rd(32'hE000_0504, v); ok &= v == 32'(1000 + n); end
    mc("spike keys popped in order", ok && !irq[3]);
    wr(32'hE000_040C, 1);
    repeat (2) @(negedge clk);
    mc("done returns to PL1 and sleep", sleep && pl == PL1);

    // spike out
    out.delete();
    wr(32'hE000_050C, 32'b011_010_0_0100_0); wr(32'hE000_0510, 32'h0000_0042);
    wr(32'hE000_0500, 32'hABCD_0001);
    repeat (4) @(negedge clk);
    mc("spike sent as NoC packet", out.size() == 1 && out[0].phdr[PHDR_SPIKE] && out[0].addr == 32'hABCD_0001
       && out[0].phdr[7:0] == 8'h42 && out[0].hdr.dx == 3 && out[0].hdr.dy == 2 && out[0].hdr.pe == 4'b0100);

    // DMA of 3 lines from 0x400
    out.delete();
    wr(32'hE000_0300, 32'h400); wr(32'hE000_0304, 3); wr(32'hE000_0308, 32'b001_001_0_0001_0);
    wr(32'hE000_030C, 32'h0000_1000); wr(32'hE000_0310, 1);
    repeat (30) @(negedge clk);
    ok = out.size() == 3;
    for (int n = 0; ok && n < 3; n++) begin
      logic [31:0] w0;
      rd(32'(32'h400 + 16 * n), w0);
      ok = out[n].addr == 32'(32'h1000 + 16 * n) && out[n].data[31:0] == w0 && !out[n].phdr[PHDR_SPIKE];
    end
    if (!ok) $display("dma: %0d packets %h %h irq %b", out.size(), out.size() ? out[0].addr : 0, out.size() ? out[0].data : 0, irq);
    mc("DMA packets", ok && n_dma_irq == 1);

    // PRNG
    rd(32'hE000_0200, v); ok = v == 32'h2545F491; rd(32'hE000_0200, v);
    mc("PRNG sequence", ok && v != 32'h2545F491);

    chk(mech.size() == 13, $sformatf("all 13 mechanisms seen (%0d)", mech.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
