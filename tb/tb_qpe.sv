// tb_qpe: one quad processing element at NoC coordinates (2,2) with 64-line
// SRAM banks, PE clocks, NoC clock and reference clock at different periods.
// Checks: a DNoC packet entering from the west mesh port written into PE2's
// SRAM; a multicast packet into all four PEs; a DMA from PE0 leaving on the
// east mesh port; a packet for another tile passing through the router
// (north in, south out); CNoC flits from the north writing the QPE register
// file; a DNoC packet with C=1 crossing to the CNoC and leaving north; a
// CNoC packet for PE1 rebuilt and written into its SRAM; PE3 reading PE1's
// SRAM through the crossbar.
module tb_qpe;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic ref_clk = 0, rst_n = 0, nclk = 0, pclk = 0;
  always #5 ref_clk = ~ref_clk;
  always #4 nclk = ~nclk;
  always #3 pclk = ~pclk;
  logic [3:0] miv, mir, mov, mor, civ, cir, cov, cor, cpu_req, cpu_we, cpu_gnt, cpu_rvalid, pe_sleep;
  noc_pkt_t mip [4], mop [4];
  cflit_t cif [4], cof [4];
  logic [31:0] cpu_addr [4], cpu_wdata [4], cpu_rdata [4], cfg [16];
  logic [3:0] cpu_wstrb [4], pe_irq [4];
  pl_e pe_pl [4];
  logic ncko;
  logic [15:0] drops;
  qpe #(.BANK_WORDS(64)) dut (.clk(nclk), .ref_clk, .pe_clk({4{pclk}}), .rst_n, .my_x(3'd2), .my_y(3'd2),
    .mesh_in_clk({4{nclk}}), .mesh_in_valid(miv), .mesh_in_ready(mir), .mesh_in_pkt(mip),
    .noc_clk_out(ncko), .mesh_out_valid(mov), .mesh_out_ready(mor), .mesh_out_pkt(mop),
    .cmesh_in_valid(civ), .cmesh_in_ready(cir), .cmesh_in_flit(cif),
    .cmesh_out_valid(cov), .cmesh_out_ready(cor), .cmesh_out_flit(cof),
    .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_wstrb, .cpu_gnt, .cpu_rvalid, .cpu_rdata,
    .pe_irq, .pe_pl, .pe_sleep, .cfg, .drop_count(drops));

  noc_pkt_t mo [4][$];
  cflit_t co [4][$];
  always @(posedge nclk) if (rst_n) for (int d = 0; d < 4; d++) if (mov[d] && mor[d]) mo[d].push_back(mop[d]);
  always @(posedge ref_clk) if (rst_n) for (int d = 0; d < 4; d++) if (cov[d] && cor[d]) co[d].push_back(cof[d]);

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
  function automatic noc_pkt_t mk(int x, int y, bit r, logic [3:0] pe, bit c, int sz,
                                  logic [31:0] a, logic [127:0] d);
    noc_pkt_t k;
    k = '0; k.hdr.size = 3'(sz); k.hdr.dx = 3'(x); k.hdr.dy = 3'(y); k.hdr.r = r;
    k.hdr.pe = pe; k.hdr.c = c; k.addr = a; k.data = d;
    return k;
  endfunction
  task automatic msend(int d, noc_pkt_t k);
    @(negedge nclk); miv[d] = 1; mip[d] = k; #1;
    while (!mir[d]) begin @(negedge nclk); #1; end
    @(posedge nclk); @(negedge nclk); miv[d] = 0;
  endtask
  task automatic csend(int d, noc_pkt_t k);
    int nf;
    nf = 2 + int'(k.hdr.size);
    for (int f = 0; f < nf; f++) begin
      @(negedge ref_clk); civ[d] = 1;
      cif[d].data = (f == 0) ? {k.hdr, k.phdr} : (f == 1) ? k.addr : k.data[32*(f-2) +: 32];
      cif[d].last = f == nf - 1; #1;
      while (!cir[d]) begin @(negedge ref_clk); #1; end
      @(posedge ref_clk);
    end
    @(negedge ref_clk); civ[d] = 0;
  endtask
  task automatic settle(int n); repeat (n) @(negedge nclk); endtask

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [31:0] v;
    bit ok;
    miv = 0; mor = '1; civ = 0; cor = '1; cpu_req = 0; cpu_we = 0;
    for (int d = 0; d < 4; d++) begin mip[d] = '0; cif[d] = '0; cpu_addr[d] = 0; cpu_wdata[d] = 0; cpu_wstrb[d] = 0; end
    repeat (4) @(posedge ref_clk); rst_n = 1; repeat (4) @(posedge ref_clk);

    msend(DP_W, mk(2, 2, 0, 4'b0100, 0, 2, 32'h100, {64'd0, 32'hA2, 32'hA1}));
    settle(30);
    rd(2, 32'h100, v); ok = v == 32'hA1; rd(2, 32'h104, v);
    chk(ok && v == 32'hA2, "west packet into PE2 SRAM");

    msend(DP_S, mk(2, 2, 0, 4'b1111, 0, 1, 32'h120, 128'h5E));
    settle(30);
    ok = 1; for (int p = 0; p < 4; p++) begin rd(p, 32'h120, v); ok &= v == 32'h5E; end
    chk(ok, "multicast into four PEs");

    wr(0, 32'h200, 32'h1234_5678);
    wr(0, 32'hE000_0300, 32'h200); wr(0, 32'hE000_0304, 1); wr(0, 32'hE000_0308, 32'b110_010_0_0001_0);
    wr(0, 32'hE000_030C, 32'h40); wr(0, 32'hE000_0310, 1);
    settle(40);
    chk(mo[DP_E].size() == 1 && mo[DP_E][0].data[31:0] == 32'h1234_5678 && mo[DP_E][0].hdr.dx == 6,
        "DMA packet leaves east");

    msend(DP_N, mk(2, 0, 0, 4'b0001, 0, 0, 32'h9, '0));
    settle(30);
    chk(mo[DP_S].size() == 1 && mo[DP_S][0].addr == 32'h9, "through traffic north to south");

    csend(CP_N, mk(2, 2, 1, 4'b0000, 0, 2, 32'h10, {64'd0, 32'hF5, 32'hF4}));
    settle(40);
    chk(cfg[4] == 32'hF4 && cfg[5] == 32'hF5, "CNoC register file write");

    msend(DP_W, mk(2, 5, 1, 4'b0000, 1, 1, 32'h0, 128'hC0));
    settle(60);
    chk(co[CP_N].size() == 3 && co[CP_N][2].data == 32'hC0 && co[CP_N][2].last, "C=1 packet crosses to CNoC, leaves north");

    csend(CP_E, mk(2, 2, 0, 4'b0010, 0, 1, 32'h140, 128'hD1));
    settle(60);
    rd(1, 32'h140, v); chk(v == 32'hD1, "CNoC packet rebuilt into PE1 SRAM");

    rd(3, 32'h1010_0140, v); chk(v == 32'hD1, "PE3 reads PE1 SRAM through the crossbar");
    chk(drops == 0, "no drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
