// qpe: quad processing element, the tile of the SpiNNaker2 mesh.
//
// Four PEs, a data-NoC router, a configuration-NoC router with the QPE
// register file, the crossbar that lets neighbouring PEs share SRAM, and the
// clock-domain crossings of the GALS scheme. Clock domains:
//   pe_clk[i]  each PE (its own DVFS clock),
//   clk        the NoC router logic of the QPE,
//   ref_clk    the CNoC and register file (the reference clock, so the
//              CNoC works before any clock generator runs).
// Packets from a PE or a neighbour QPE enter the DNoC router through its
// asynchronous input FIFOs; packets to a PE leave through an asynchronous
// FIFO into the PE clock. DNoC packets with C=1 or for the register file
// cross to the CNoC (async FIFO into ref_clk, then cut into 32-bit flits);
// CNoC packets for a PE are rebuilt into 192-bit packets and enter the DNoC.
// Mesh ports are indexed N=0, E=1, S=2, W=3. A DNoC output to a neighbour
// is in this QPE's clk, exported as noc_clk_out for the neighbour's input
// FIFO; each DNoC input comes with the sender's clock in mesh_in_clk.
// cfg exposes the register file. The PE processor buses are ports because the
// Arm cores are not part of this RTL. The crossbar runs on pe_clk[0] (see
// qpe_xbar). A single asynchronous reset serves all domains; it is assumed
// to be released synchronously to each clock.
// From the paper: 4 PEs + NoC router per QPE, GALS with async FIFOs, DNoC
// 192 bit, CNoC 32 bit on the reference clock, register file behind the CNoC,
// crossbar between neighbouring PEs.
module qpe
  import spinn2_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 2048,
  parameter int unsigned NREGS      = 16
) (
  input  logic               clk,
  input  logic               ref_clk,
  input  logic [3:0]         pe_clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  // DNoC mesh links
  input  logic [3:0]         mesh_in_clk,
  input  logic [3:0]         mesh_in_valid,
  output logic [3:0]         mesh_in_ready,
  input  noc_pkt_t           mesh_in_pkt  [4],
  output logic               noc_clk_out,
  output logic [3:0]         mesh_out_valid,
  input  logic [3:0]         mesh_out_ready,
  output noc_pkt_t           mesh_out_pkt [4],
  // CNoC mesh links (ref_clk)
  input  logic [3:0]         cmesh_in_valid,
  output logic [3:0]         cmesh_in_ready,
  input  cflit_t             cmesh_in_flit  [4],
  output logic [3:0]         cmesh_out_valid,
  input  logic [3:0]         cmesh_out_ready,
  output cflit_t             cmesh_out_flit [4],
  // processor buses of the four PEs (pe_clk[i])
  input  logic [3:0]         cpu_req,
  input  logic [3:0]         cpu_we,
  input  logic [31:0]        cpu_addr  [4],
  input  logic [31:0]        cpu_wdata [4],
  input  logic [3:0]         cpu_wstrb [4],
  output logic [3:0]         cpu_gnt,
  output logic [3:0]         cpu_rvalid,
  output logic [31:0]        cpu_rdata [4],
  output logic [3:0]         pe_irq   [4],
  output pl_e                pe_pl    [4],
  output logic [3:0]         pe_sleep,
  output logic [31:0]        cfg      [NREGS],
  output logic [15:0]        drop_count
);
  localparam int unsigned NP = DNOC_PORTS;

  assign noc_clk_out = clk;

  // ---------------- DNoC router ----------------
  logic [NP-1:0] d_in_clk, d_in_rst_n, d_in_valid, d_in_ready, d_out_valid, d_out_ready;
  noc_pkt_t      d_in_pkt [NP];
  noc_pkt_t      d_out_pkt[NP];

  dnoc_router u_dnoc (
    .clk, .rst_n, .my_x, .my_y,
    .in_clk(d_in_clk), .in_rst_n(d_in_rst_n), .in_valid(d_in_valid), .in_ready(d_in_ready),
    .in_pkt(d_in_pkt), .out_valid(d_out_valid), .out_ready(d_out_ready), .out_pkt(d_out_pkt),
    .drop_count);

  assign d_in_rst_n = {NP{rst_n}};
  for (genvar d = 0; d < 4; d++) begin : g_mesh
    assign d_in_clk[d]     = mesh_in_clk[d];
    assign d_in_valid[d]   = mesh_in_valid[d];
    assign mesh_in_ready[d] = d_in_ready[d];
    assign d_in_pkt[d]     = mesh_in_pkt[d];
    assign mesh_out_valid[d] = d_out_valid[d];
    assign d_out_ready[d]  = mesh_out_ready[d];
    assign mesh_out_pkt[d] = d_out_pkt[d];
  end

  // ---------------- PEs ----------------
  logic [3:0]   pin_valid, pin_ready, pout_valid, pout_ready;
  noc_pkt_t     pin_pkt [4];
  noc_pkt_t     pout_pkt[4];
  logic [3:0]   rm_req, rm_we, rm_gnt, rm_rvalid, rs_req, rs_we, rs_gnt, rs_rvalid;
  logic [31:0]  rm_addr [4], rs_addr [4];
  logic [127:0] rm_wdata[4], rs_wdata[4], rm_rdata[4], rs_rdata[4];
  logic [15:0]  rm_wstrb[4], rs_wstrb[4];

  for (genvar p = 0; p < 4; p++) begin : g_pe
    // PE -> router: the router's async input FIFO crosses from pe_clk
    assign d_in_clk[DP_PE0 + p]   = pe_clk[p];
    assign d_in_valid[DP_PE0 + p] = pout_valid[p];
    assign pout_ready[p]          = d_in_ready[DP_PE0 + p];
    assign d_in_pkt[DP_PE0 + p]   = pout_pkt[p];
    // router -> PE
    async_fifo #(.WIDTH($bits(noc_pkt_t)), .DEPTH(4)) u_to_pe (
      .wclk(clk), .wrst_n(rst_n),
      .in_valid(d_out_valid[DP_PE0 + p]), .in_ready(d_out_ready[DP_PE0 + p]),
      .in_data(d_out_pkt[DP_PE0 + p]),
      .rclk(pe_clk[p]), .rrst_n(rst_n),
      .out_valid(pin_valid[p]), .out_ready(pin_ready[p]), .out_data(pin_pkt[p]));

    pe #(.BANK_WORDS(BANK_WORDS)) u_pe (
      .clk(pe_clk[p]), .rst_n,
      .cpu_req(cpu_req[p]), .cpu_we(cpu_we[p]), .cpu_addr(cpu_addr[p]),
      .cpu_wdata(cpu_wdata[p]), .cpu_wstrb(cpu_wstrb[p]), .cpu_gnt(cpu_gnt[p]),
      .cpu_rvalid(cpu_rvalid[p]), .cpu_rdata(cpu_rdata[p]),
      .noc_in_valid(pin_valid[p]), .noc_in_ready(pin_ready[p]), .noc_in_pkt(pin_pkt[p]),
      .noc_out_valid(pout_valid[p]), .noc_out_ready(pout_ready[p]), .noc_out_pkt(pout_pkt[p]),
      .rm_req(rm_req[p]), .rm_we(rm_we[p]), .rm_addr(rm_addr[p]), .rm_wdata(rm_wdata[p]),
      .rm_wstrb(rm_wstrb[p]), .rm_gnt(rm_gnt[p]), .rm_rvalid(rm_rvalid[p]),
      .rm_rdata(rm_rdata[p]),
      .rs_req(rs_req[p]), .rs_we(rs_we[p]), .rs_addr(rs_addr[p]), .rs_wdata(rs_wdata[p]),
      .rs_wstrb(rs_wstrb[p]), .rs_gnt(rs_gnt[p]), .rs_rvalid(rs_rvalid[p]),
      .rs_rdata(rs_rdata[p]),
      .irq(pe_irq[p]), .pl(pe_pl[p]), .sleep(pe_sleep[p]));
  end

  qpe_xbar u_xbar (
    .clk(pe_clk[0]), .rst_n,
    .rm_req, .rm_we, .rm_addr, .rm_wdata, .rm_wstrb, .rm_gnt, .rm_rvalid, .rm_rdata,
    .rs_req, .rs_we, .rs_addr, .rs_wdata, .rs_wstrb, .rs_gnt, .rs_rvalid, .rs_rdata);

  // ---------------- CNoC router and bridges ----------------
  logic [CNOC_PORTS-1:0] c_in_valid, c_in_ready, c_out_valid, c_out_ready;
  cflit_t                c_in_flit [CNOC_PORTS];
  cflit_t                c_out_flit[CNOC_PORTS];

  cnoc_router u_cnoc (
    .clk(ref_clk), .rst_n, .my_x, .my_y,
    .in_valid(c_in_valid), .in_ready(c_in_ready), .in_flit(c_in_flit),
    .out_valid(c_out_valid), .out_ready(c_out_ready), .out_flit(c_out_flit));

  for (genvar d = 0; d < 4; d++) begin : g_cmesh
    assign c_in_valid[d]      = cmesh_in_valid[d];
    assign cmesh_in_ready[d]  = c_in_ready[d];
    assign c_in_flit[d]       = cmesh_in_flit[d];
    assign cmesh_out_valid[d] = c_out_valid[d];
    assign c_out_ready[d]     = cmesh_out_ready[d];
    assign cmesh_out_flit[d]  = c_out_flit[d];
  end

  // DNoC -> CNoC: async FIFO into ref_clk, then serialise
  logic     d2c_valid, d2c_ready;
  noc_pkt_t d2c_pkt;
  async_fifo #(.WIDTH($bits(noc_pkt_t)), .DEPTH(4)) u_d2c (
    .wclk(clk), .wrst_n(rst_n),
    .in_valid(d_out_valid[DP_CN]), .in_ready(d_out_ready[DP_CN]), .in_data(d_out_pkt[DP_CN]),
    .rclk(ref_clk), .rrst_n(rst_n),
    .out_valid(d2c_valid), .out_ready(d2c_ready), .out_data(d2c_pkt));
  noc_ser u_ser (
    .clk(ref_clk), .rst_n, .in_valid(d2c_valid), .in_ready(d2c_ready), .in_pkt(d2c_pkt),
    .out_valid(c_in_valid[CP_DN]), .out_ready(c_in_ready[CP_DN]), .out_flit(c_in_flit[CP_DN]));

  // CNoC -> DNoC: rebuild, the router's async input FIFO crosses from ref_clk
  noc_des u_des_dn (
    .clk(ref_clk), .rst_n,
    .in_valid(c_out_valid[CP_DN]), .in_ready(c_out_ready[CP_DN]), .in_flit(c_out_flit[CP_DN]),
    .out_valid(d_in_valid[DP_CN]), .out_ready(d_in_ready[DP_CN]), .out_pkt(d_in_pkt[DP_CN]));
  assign d_in_clk[DP_CN] = ref_clk;

  // CNoC -> register file
  logic     rf_valid, rf_ready;
  noc_pkt_t rf_pkt;
  noc_des u_des_rf (
    .clk(ref_clk), .rst_n,
    .in_valid(c_out_valid[CP_RF]), .in_ready(c_out_ready[CP_RF]), .in_flit(c_out_flit[CP_RF]),
    .out_valid(rf_valid), .out_ready(rf_ready), .out_pkt(rf_pkt));
  qpe_regfile #(.NREGS(NREGS)) u_rf (
    .clk(ref_clk), .rst_n, .in_valid(rf_valid), .in_ready(rf_ready), .in_pkt(rf_pkt),
    .cfg, .write_count());
  // the register file sends nothing into the CNoC
  assign c_in_valid[CP_RF] = 1'b0;
  assign c_in_flit[CP_RF]  = '0;
endmodule
