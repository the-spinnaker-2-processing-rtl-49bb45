// tb_spinnaker2_chip_full: the chip top at its default size (7 x 6 tile grid,
// 38 QPEs = 152 PEs, 128 kB SRAM per PE, 1024-entry multicast table) taken
// through one complete operation: PE 0 in the corner tile (1,1) copies four
// SRAM lines by DMA to a PE in the far corner tile (7,6) across the whole
// mesh, that PE sends a spike whose key the SpiNNaker router multicasts to
// PE 0 and to chip-to-chip link 0, and PE 0 receives it in its spike FIFO.
// Processor buses are driven by tasks standing in for the Arm cores.
module tb_spinnaker2_chip_full;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  localparam int NT = 42, NPE = 168, NE = 26, NL = 6, NR = 16;
  localparam int FAR = 4 * 41 + 1;   // PE1 of tile 41 = (7,6)
  logic ref_clk = 0, rst_n = 0, nclk = 0, pclk = 0;
  always #5 ref_clk = ~ref_clk;
  always #4 nclk = ~nclk;
  always #3 pclk = ~pclk;

  logic [NPE-1:0] cpu_req, cpu_we, cpu_gnt, cpu_rvalid, pe_sleep;
  logic [31:0] cpu_addr [NPE], cpu_wdata [NPE], cpu_rdata [NPE];
  logic [3:0] cpu_wstrb [NPE], pe_irq [NPE];
  pl_e pe_pl [NPE];
  logic [NE-1:0] eiv, eir, eov, civ, cir, cov;
  noc_pkt_t eip [NE], eop [NE];
  cflit_t cif [NE], cof [NE];
  logic [NL-1:0] liv, lir, lov;
  sp_pkt_t lip [NL], lop;
  logic tbl_we, tbl_valid; logic [9:0] tbl_idx; logic [31:0] tbl_key, tbl_mask;
  logic [NL+NPE-1:0] tbl_route;
  logic [15:0] sdrop, smiss;
  logic [31:0] qcfg [NT][NR];

  spinnaker2_chip dut (
    .ref_clk, .rst_n, .noc_clk({NT{nclk}}), .pe_clk({NPE{pclk}}),
    .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_wstrb, .cpu_gnt, .cpu_rvalid, .cpu_rdata,
    .pe_irq, .pe_pl, .pe_sleep,
    .edge_in_clk({NE{nclk}}), .edge_in_valid(eiv), .edge_in_ready(eir), .edge_in_pkt(eip),
    .edge_out_valid(eov), .edge_out_ready({NE{1'b1}}), .edge_out_pkt(eop),
    .cedge_in_valid(civ), .cedge_in_ready(cir), .cedge_in_flit(cif),
    .cedge_out_valid(cov), .cedge_out_ready({NE{1'b1}}), .cedge_out_flit(cof),
    .chip_id(16'h0000), .link_in_valid(liv), .link_in_ready(lir), .link_in_pkt(lip),
    .link_out_valid(lov), .link_out_ready({NL{1'b1}}), .link_out_pkt(lop),
    .tbl_we, .tbl_idx, .tbl_valid, .tbl_key, .tbl_mask, .tbl_route,
    .spr_drop_count(sdrop), .spr_mc_miss_count(smiss), .qpe_cfg(qcfg));

  int link0 = 0;
  always @(posedge nclk) if (rst_n && lov[0] && lop.key == 32'hF00D) link0++;

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

  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [31:0] v;
    bit ok;
    time t0;
    cpu_req = '0; cpu_we = '0;
    for (int p = 0; p < NPE; p++) begin cpu_addr[p] = 0; cpu_wdata[p] = 0; cpu_wstrb[p] = 0; end
    eiv = '0; civ = '0; liv = '0;
    for (int e = 0; e < NE; e++) begin eip[e] = '0; cif[e] = '0; end
    for (int l = 0; l < NL; l++) lip[l] = '0;
    tbl_we = 0; tbl_idx = 0; tbl_valid = 0; tbl_key = 0; tbl_mask = 0; tbl_route = 0;
    repeat (4) @(posedge ref_clk); rst_n = 1; repeat (4) @(posedge ref_clk);

    // four lines at 0x1_0000 (bank 2) of PE 0
    for (int k = 0; k < 16; k++) wr(0, 32'(32'h1_0000 + 4 * k), 32'(32'hD0D0_0000 + k));
    wr(0, 32'hE000_0300, 32'h1_0000); wr(0, 32'hE000_0304, 4);
    wr(0, 32'hE000_0308, 32'b111_110_0_0010_0); wr(0, 32'hE000_030C, 32'h1_F000);
    t0 = $time;
    wr(0, 32'hE000_0310, 1);
    repeat (150) @(negedge nclk);
    ok = 1;
    for (int k = 0; k < 16; k++) begin rd(FAR, 32'(32'h1_F000 + 4 * k), v); ok &= v == 32'(32'hD0D0_0000 + k); end
    chk(ok, "DMA across the mesh from (1,1) to (7,6)");

    // spike from the far PE via the router (tile 17 = (4,3), port PE0)
    @(negedge nclk); tbl_we = 1; tbl_idx = 10'd1000; tbl_valid = 1; tbl_key = 32'hF00D; tbl_mask = '1;
    tbl_route = '0; tbl_route[0] = 1; tbl_route[NL + 0] = 1;
    @(negedge nclk); tbl_we = 0;
    wr(FAR, 32'hE000_050C, 32'b100_011_0_0001_0);
    wr(FAR, 32'hE000_0500, 32'hF00D);
    repeat (150) @(negedge nclk);
    rd(0, 32'hE000_0508, v); chk(v == 1, "spike delivered to PE 0");
    rd(0, 32'hE000_0504, v); chk(v == 32'hF00D, "spike key");
    chk(link0 == 1, "spike copy on link 0");
    chk(sdrop == 0 && smiss == 0, "no drops or misses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
