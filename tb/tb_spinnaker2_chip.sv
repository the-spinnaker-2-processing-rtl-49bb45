// tb_spinnaker2_chip: end-to-end test of the chip top at reduced size: a
// 3 x 1 tile grid at NoC coordinates (1,1)..(3,1) whose third tile is a
// router-only tile carrying the SpiNNaker router, i.e. two QPEs = 8 PEs,
// 64-line SRAM banks and a 16-entry multicast table. PE clocks, NoC clocks
// and the reference clock run at different periods (GALS). The processor
// buses are driven by tasks standing in for the Arm cores; packets enter at
// the mesh edge and on the router's chip-to-chip links.
// Mechanisms, each counted (a failure is counted for one that never occurs):
//   dma        DMA copy PE0 -> PE5 across the mesh
//   xbar       PE0 writes PE1's SRAM through the QPE crossbar
//   mc_route   spike from PE1 through the SpiNNaker router to two PEs and a link
//   default    MC miss from a link default-routed to the opposite link
//   drop       MC miss from a local PE dropped
//   nn         NN packet from a link delivered to the monitor PE 0
//   c2c        C2C packet from a link delivered to PE 6
//   mac_noc    MAC product on PE2 configured and fed only by NoC packets
//   multicast  one DNoC packet written into two PEs (PE bits 0101)
//   cnoc_rf    CNoC flits from the edge writing a QPE register file
//   dnoc2cnoc  DNoC packet with C=1 crossing into the CNoC to a register file
//   cnoc2dnoc  CNoC packet for a PE rebuilt into a DNoC packet into SRAM
//   dvfs       timer tick with waiting spikes raising a PE to PL2, done -> PL1
module tb_spinnaker2_chip;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  localparam int NQX = 3, NQY = 1, NT = 3, NPE = 12, NE = 8, NL = 6, NR = 16;
  logic ref_clk = 0, rst_n = 0, nclk = 0, pclk = 0;
  always #5 ref_clk = ~ref_clk;
  always #4 nclk = ~nclk;
  always #3 pclk = ~pclk;

  logic [NPE-1:0] cpu_req, cpu_we, cpu_gnt, cpu_rvalid, pe_sleep;
  logic [31:0] cpu_addr [NPE], cpu_wdata [NPE], cpu_rdata [NPE];
  logic [3:0] cpu_wstrb [NPE], pe_irq [NPE];
  pl_e pe_pl [NPE];
  logic [NE-1:0] eiv, eir, eov, eor, civ, cir, cov, cor;
  noc_pkt_t eip [NE], eop [NE];
  cflit_t cif [NE], cof [NE];
  logic [NL-1:0] liv, lir, lov, lor;
  sp_pkt_t lip [NL], lop;
  logic tbl_we, tbl_valid; logic [3:0] tbl_idx; logic [31:0] tbl_key, tbl_mask;
  logic [NL+NPE-1:0] tbl_route;
  logic [15:0] sdrop, smiss;
  logic [31:0] qcfg [NT][NR];

  spinnaker2_chip #(.NQX(NQX), .NQY(NQY), .X0(1), .Y0(1), .HOLES(64'b100), .SPR_TILE(2),
    .BANK_WORDS(64), .NLINK(NL), .MC_ENTRIES(16), .NREGS(NR)) dut (
    .ref_clk, .rst_n, .noc_clk({NT{nclk}}), .pe_clk({NPE{pclk}}),
    .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_wstrb, .cpu_gnt, .cpu_rvalid, .cpu_rdata,
    .pe_irq, .pe_pl, .pe_sleep,
    .edge_in_clk({NE{nclk}}), .edge_in_valid(eiv), .edge_in_ready(eir), .edge_in_pkt(eip),
    .edge_out_valid(eov), .edge_out_ready(eor), .edge_out_pkt(eop),
    .cedge_in_valid(civ), .cedge_in_ready(cir), .cedge_in_flit(cif),
    .cedge_out_valid(cov), .cedge_out_ready(cor), .cedge_out_flit(cof),
    .chip_id({8'd0, 8'd0}), .link_in_valid(liv), .link_in_ready(lir), .link_in_pkt(lip),
    .link_out_valid(lov), .link_out_ready(lor), .link_out_pkt(lop),
    .tbl_we, .tbl_idx, .tbl_valid, .tbl_key, .tbl_mask, .tbl_route,
    .spr_drop_count(sdrop), .spr_mc_miss_count(smiss), .qpe_cfg(qcfg));

  int mech [string];
  task automatic mc(string n, bit ok);
    chk(ok, n);
    if (ok) mech[n] = mech.exists(n) ? mech[n] + 1 : 1;
  endtask

  // link outputs
  logic [31:0] lk [NL][$];
  int mac_irqs [NPE];
  always @(posedge nclk) if (rst_n) for (int l = 0; l < NL; l++) if (lov[l] && lor[l]) lk[l].push_back(lop.key);
  always @(posedge pclk) if (rst_n) for (int p = 0; p < NPE; p++) if (pe_irq[p][0]) mac_irqs[p]++;

  // processor bus of PE p
  task automatic wr(int p, logic [31:0] a, logic [31:0] d);
    @(negedge pclk); cpu_req[p] = 1; cpu_we[p] = 1; cpu_addr[p] = a; cpu_wdata[p] = d; cpu_wstrb[p] = '1; #1;
    while (!cpu_gnt[p]) begin @(negedge pclk); #1; end
    @(posedge pclk); @(negedge pclk); cpu_req[p] = 0; cpu_we[p] = 0;
  endtask
  task automatic rd(int p, logic [31:0] a, output logic [31:0] d);
    int w;
    @(negedge pclk); cpu_req[p] = 1; cpu_we[p] = 0; cpu_addr[p] = a; #1;
    while (!cpu_gnt[p]) begin @(negedge pclk); #1; end
    @(posedge pclk); @(negedge pclk); cpu_req[p] = 0; #1;
    w = 0;
    while (!cpu_rvalid[p] && w < 20) begin @(negedge pclk); #1; w++; end
    d = cpu_rdata[p];
  endtask
  // DNoC packet into edge e
  function automatic noc_pkt_t mk(int x, int y, bit r, logic [3:0] pe, bit c, int sz,
                                  logic [31:0] a, logic [127:0] d);
    noc_pkt_t k;
    k = '0; k.hdr.size = 3'(sz); k.hdr.dx = 3'(x); k.hdr.dy = 3'(y); k.hdr.r = r;
    k.hdr.pe = pe; k.hdr.c = c; k.addr = a; k.data = d;
    return k;
  endfunction
  task automatic esend(int e, noc_pkt_t k);
    @(negedge nclk); eiv[e] = 1; eip[e] = k; #1;
    while (!eir[e]) begin @(negedge nclk); #1; end
    @(posedge nclk); @(negedge nclk); eiv[e] = 0;
  endtask
  // CNoC packet into edge e, cut into flits as the routers expect
  task automatic csend(int e, noc_pkt_t k);
    int nf;
    nf = 2 + int'(k.hdr.size);
    for (int f = 0; f < nf; f++) begin
      @(negedge ref_clk);
      civ[e] = 1;
      cif[e].data = (f == 0) ? {k.hdr, k.phdr} : (f == 1) ? k.addr : k.data[32*(f-2) +: 32];
      cif[e].last = f == nf - 1; #1;
      while (!cir[e]) begin @(negedge ref_clk); #1; end
      @(posedge ref_clk);
    end
    @(negedge ref_clk); civ[e] = 0;
  endtask
  task automatic lsend(int l, logic [7:0] ctrl, logic [31:0] key);
    @(negedge nclk); liv[l] = 1; lip[l] = '{ctrl: ctrl, key: key, data: '0}; #1;
    while (!lir[l]) begin @(negedge nclk); #1; end
    @(posedge nclk); @(negedge nclk); liv[l] = 0;
  endtask
  task automatic entry(int idx, logic [31:0] key, logic [NL+NPE-1:0] route);
    @(negedge nclk); tbl_we = 1; tbl_idx = 4'(idx); tbl_valid = 1; tbl_key = key;
    tbl_mask = '1; tbl_route = route; @(negedge nclk); tbl_we = 0;
  endtask
  task automatic settle(int n); repeat (n) @(negedge nclk); endtask

  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  localparam int W_EDGE = 7;   // west edge of row 0, next to tile (1,1)

  initial begin
    logic [31:0] v;
    bit ok;
    cpu_req = '0; cpu_we = '0;
    for (int p = 0; p < NPE; p++) begin cpu_addr[p] = 0; cpu_wdata[p] = 0; cpu_wstrb[p] = 0; mac_irqs[p] = 0; end
    eiv = '0; eor = '1; civ = '0; cor = '1; liv = '0; lor = '1;
    for (int e = 0; e < NE; e++) begin eip[e] = '0; cif[e] = '0; end
    for (int l = 0; l < NL; l++) lip[l] = '0;
    tbl_we = 0; tbl_idx = 0; tbl_valid = 0; tbl_key = 0; tbl_mask = 0; tbl_route = 0;
    repeat (4) @(posedge ref_clk); rst_n = 1; repeat (4) @(posedge ref_clk);

    // dma: PE0 SRAM 0x40.. -> PE5 (tile (2,1), PE1) at 0x200
    for (int k = 0; k < 8; k++) wr(0, 32'(32'h40 + 4 * k), 32'(32'h5A00 + k));
    wr(0, 32'hE000_0300, 32'h40); wr(0, 32'hE000_0304, 2);
    wr(0, 32'hE000_0308, 32'b010_001_0_0010_0); wr(0, 32'hE000_030C, 32'h200);
    wr(0, 32'hE000_0310, 1);
    settle(80);
    ok = 1; for (int k = 0; k < 8; k++) begin rd(5, 32'(32'h200 + 4 * k), v); ok &= v == 32'(32'h5A00 + k); end
    mc("dma", ok);

    // xbar: PE0 -> PE1 SRAM through the crossbar
    wr(0, 32'h1010_0080, 32'hB0B0_0001); rd(1, 32'h80, v);
    mc("xbar", v == 32'hB0B0_0001);

    // mc_route: key 0x1234 -> PE4, PE6 and link 2
    entry(0, 32'h0000_1234, {12'b0000_0101_0000, 6'b000100});
    wr(1, 32'hE000_050C, 32'b011_001_0_0001_0);   // target: router tile (3,1), port PE0
    wr(1, 32'hE000_0500, 32'h0000_1234);
    settle(60);
    rd(4, 32'hE000_0508, v); ok = v == 1;
    rd(6, 32'hE000_0508, v); ok &= v == 1;
    mc("mc_route", ok && lk[2].size() == 1 && lk[2][0] == 32'h1234);

    // default: miss from link 1 -> link 4
    lsend(1, 8'h00, 32'h0000_9999); settle(20);
    mc("default", lk[4].size() == 1 && lk[4][0] == 32'h9999);

    // drop: miss from local
    v = 32'(sdrop);
    wr(1, 32'hE000_0500, 32'h0000_7777); settle(60);
    mc("drop", sdrop == 16'(v + 1));

    // nn: from link 3 to monitor PE 0
    lsend(3, 8'h80, 32'h0000_00AA); settle(60);
    rd(0, 32'hE000_0504, v);
    mc("nn", v == 32'hAA);

    // c2c: from link 5 to PE 6 of this chip (0,0)
    lsend(5, 8'h40, {16'h0000, 8'd6, 8'h00}); settle(60);
    rd(6, 32'hE000_0508, v);
    mc("c2c", v == 2);

    // mac_noc: PE2 (tile (1,1) PE bit 0100), everything over the NoC
    begin
      byte unsigned A [4][4]; byte unsigned B [4][16];
      logic [127:0] d;
      for (int k = 0; k < 4; k++) begin
        for (int j = 0; j < 16; j++) begin B[k][j] = 8'($urandom); d[8*j +: 8] = B[k][j]; end
        esend(W_EDGE, mk(1, 1, 0, 4'b0100, 0, 4, 32'(32'h400 + 16 * k), d));
      end
      for (int k = 0; k < 4; k++) for (int i = 0; i < 4; i++) begin A[i][k] = 8'($urandom); d[32*k + 8*i +: 8] = A[i][k]; end
      esend(W_EDGE, mk(1, 1, 0, 4'b0100, 0, 4, 32'h4000_0000, d));
      esend(W_EDGE, mk(1, 1, 0, 4'b0100, 0, 3, 32'hE000_0004, {32'd0, 32'h800, 32'h400, 32'd4}));
      esend(W_EDGE, mk(1, 1, 0, 4'b0100, 0, 1, 32'hE000_0000, 128'd1));
      settle(100);
      ok = mac_irqs[2] == 1;
      for (int i = 0; i < 4; i++) for (int j = 0; j < 16; j++) begin
        int e;
        e = 0; for (int k = 0; k < 4; k++) e += A[i][k] * B[k][j];
        rd(2, 32'(32'h800 + 4 * (16 * i + j)), v); ok &= v == 32'(e);
      end
      mc("mac_noc", ok);
    end

    // multicast: one packet to PE4 and PE6 of tile (2,1)
    esend(W_EDGE, mk(2, 1, 0, 4'b0101, 0, 1, 32'h0000_0300, 128'h77));
    settle(60);
    rd(4, 32'h300, v); ok = v == 32'h77; rd(6, 32'h300, v);
    mc("multicast", ok && v == 32'h77);

    // cnoc_rf: CNoC flits to the register file of tile (2,1), registers 2..5
    csend(W_EDGE, mk(2, 1, 1, 4'b0000, 0, 4, 32'h8, {32'd44, 32'd33, 32'd22, 32'd11}));
    settle(60);
    mc("cnoc_rf", qcfg[1][2] == 11 && qcfg[1][3] == 22 && qcfg[1][4] == 33 && qcfg[1][5] == 44);

    // dnoc2cnoc: DNoC packet with C=1 to the register file of tile (1,1)
    esend(W_EDGE, mk(2, 1, 1, 4'b0000, 1, 1, 32'h4, 128'h1111));
    settle(80);
    mc("dnoc2cnoc", qcfg[1][1] == 32'h1111);

    // cnoc2dnoc: CNoC packet (R=0) for PE3 of tile (1,1), SRAM write
    csend(W_EDGE, mk(1, 1, 0, 4'b1000, 0, 2, 32'h0000_0500, {64'd0, 32'hC2, 32'hC1}));
    settle(80);
    rd(3, 32'h500, v); ok = v == 32'hC1; rd(3, 32'h504, v);
    mc("cnoc2dnoc", ok && v == 32'hC2);

    // dvfs: PE6 has 2 spikes waiting; LTH1 = 1 -> PL2 at the tick
    wr(6, 32'hE000_0400, 1);
    wr(6, 32'hE000_0100, 20); wr(6, 32'hE000_0108, 1);
    repeat (40) @(negedge pclk);
    ok = pe_pl[6] == PL2 && !pe_sleep[6];
    wr(6, 32'hE000_040C, 1); repeat (3) @(negedge pclk);
    mc("dvfs", ok && pe_pl[6] == PL1 && pe_sleep[6]);

    begin
      string names [13] = '{"dma", "xbar", "mc_route", "default", "drop", "nn", "c2c", "mac_noc",
                            "multicast", "cnoc_rf", "dnoc2cnoc", "cnoc2dnoc", "dvfs"};
      foreach (names[i]) begin
        if (!mech.exists(names[i])) begin failures++; $display("mechanism %s never happened", names[i]); end
        else $display("mechanism %-10s happened %0d time(s)", names[i], mech[names[i]]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
