// spinnaker2_chip: SpiNNaker2 many-core top level: a 2-D mesh of QPE tiles
// joined by the data NoC and the configuration NoC, with the SpiNNaker packet
// router attached to the mesh.
//
// The tile grid is NQX x NQY (default 7 x 6). Tile (tx,ty) has NoC coordinates
// (tx+X0, ty+Y0); with the defaults these are the QPE positions x=1..7,
// y=1..6 of the chip floorplan, whose row/column 0 and 7 hold memory
// controllers, serial links, host interface and periphery. Tiles flagged in
// HOLES contain only the two NoC routers, no PEs: by default the two tiles of
// the SpiNNaker router at (4,3),(4,4) and the two of a serial link at
// (7,3),(7,4), which leaves the floorplan's 38 QPEs = 152 PEs. The SpiNNaker
// router sits on PE port 0 of tile SPR_TILE (default (4,3)).
// Mesh links that leave the grid are chip ports, numbered: north edge
// 0..NQX-1 (by x), east NQX.. (by y), south NQX+NQY.. (by x), west
// 2*NQX+NQY.. (by y). Off-chip-side blocks (LPDDR4 controllers, SerDes links,
// host interface, periphery) attach there; they are not part of this RTL.
// The SpiNNaker router's NLINK chip-to-chip links are ports of sp_pkt_t.
// PE p of tile t is PE index 4t+p for the processor buses, interrupts and
// the router's local route bits; bus ports of PE slots in HOLES tiles are
// inert (no grant, no data).
// Clocks: ref_clk for the CNoC, noc_clk[t] for the NoC logic of tile t,
// pe_clk[n] for PE n (GALS). The SpiNNaker router runs on the noc_clk of
// its tile.
module spinnaker2_chip
  import spinn2_pkg::*;
#(
  parameter int unsigned NQX        = 7,
  parameter int unsigned NQY        = 6,
  parameter int unsigned X0         = 1,
  parameter int unsigned Y0         = 1,
  parameter logic [63:0] HOLES      = (64'd1 << 17) | (64'd1 << 24) | (64'd1 << 20) | (64'd1 << 27),
  parameter int unsigned SPR_TILE   = 17,
  parameter int unsigned BANK_WORDS = 2048,
  parameter int unsigned NLINK      = 6,
  parameter int unsigned MC_ENTRIES = 1024,
  parameter int unsigned NREGS      = 16,
  localparam int unsigned NT        = NQX * NQY,
  localparam int unsigned NPE       = 4 * NT,
  localparam int unsigned NE        = 2 * (NQX + NQY)
) (
  input  logic               ref_clk,
  input  logic               rst_n,
  input  logic [NT-1:0]      noc_clk,
  input  logic [NPE-1:0]     pe_clk,
  // processor buses
  input  logic [NPE-1:0]     cpu_req,
  input  logic [NPE-1:0]     cpu_we,
  input  logic [31:0]        cpu_addr  [NPE],
  input  logic [31:0]        cpu_wdata [NPE],
  input  logic [3:0]         cpu_wstrb [NPE],
  output logic [NPE-1:0]     cpu_gnt,
  output logic [NPE-1:0]     cpu_rvalid,
  output logic [31:0]        cpu_rdata [NPE],
  output logic [3:0]         pe_irq    [NPE],
  output pl_e                pe_pl     [NPE],
  output logic [NPE-1:0]     pe_sleep,
  // DNoC mesh edge
  input  logic [NE-1:0]      edge_in_clk,
  input  logic [NE-1:0]      edge_in_valid,
  output logic [NE-1:0]      edge_in_ready,
  input  noc_pkt_t           edge_in_pkt  [NE],
  output logic [NE-1:0]      edge_out_valid,
  input  logic [NE-1:0]      edge_out_ready,
  output noc_pkt_t           edge_out_pkt [NE],
  // CNoC mesh edge (ref_clk)
  input  logic [NE-1:0]      cedge_in_valid,
  output logic [NE-1:0]      cedge_in_ready,
  input  cflit_t             cedge_in_flit  [NE],
  output logic [NE-1:0]      cedge_out_valid,
  input  logic [NE-1:0]      cedge_out_ready,
  output cflit_t             cedge_out_flit [NE],
  // SpiNNaker router chip-to-chip links and table
  input  logic [15:0]        chip_id,
  input  logic [NLINK-1:0]   link_in_valid,
  output logic [NLINK-1:0]   link_in_ready,
  input  sp_pkt_t            link_in_pkt [NLINK],
  output logic [NLINK-1:0]   link_out_valid,
  input  logic [NLINK-1:0]   link_out_ready,
  output sp_pkt_t            link_out_pkt,
  input  logic               tbl_we,
  input  logic [$clog2(MC_ENTRIES)-1:0] tbl_idx,
  input  logic               tbl_valid,
  input  logic [31:0]        tbl_key,
  input  logic [31:0]        tbl_mask,
  input  logic [NLINK+NPE-1:0] tbl_route,
  output logic [15:0]        spr_drop_count,
  output logic [15:0]        spr_mc_miss_count,
  output logic [31:0]        qpe_cfg [NT][NREGS]
);
  // per tile, per direction (N=0, E=1, S=2, W=3) mesh signals
  logic [3:0] d_in_clk  [NT];
  logic [3:0] d_in_valid[NT];
  logic [3:0] d_in_ready[NT];
  noc_pkt_t   d_in_pkt  [NT][4];
  logic [3:0] d_out_valid[NT];
  logic [3:0] d_out_ready[NT];
  noc_pkt_t   d_out_pkt [NT][4];
  logic [3:0] c_in_valid[NT];
  logic [3:0] c_in_ready[NT];
  cflit_t     c_in_flit [NT][4];
  logic [3:0] c_out_valid[NT];
  logic [3:0] c_out_ready[NT];
  cflit_t     c_out_flit[NT][4];

  // ---------------- mesh wiring ----------------
  for (genvar ty = 0; ty < NQY; ty++) begin : g_y
    for (genvar tx = 0; tx < NQX; tx++) begin : g_x
      for (genvar d = 0; d < 4; d++) begin : g_d
        localparam int T    = ty * NQX + tx;
        localparam int NX   = (d == 1) ? tx + 1 : (d == 3) ? tx - 1 : tx;
        localparam int NY   = (d == 0) ? ty + 1 : (d == 2) ? ty - 1 : ty;
        localparam bit HASN = NX >= 0 && NX < NQX && NY >= 0 && NY < NQY;
        localparam int NB   = HASN ? NY * NQX + NX : 0;
        localparam int OPP  = (d + 2) % 4;
        localparam int E    = (d == 0) ? tx : (d == 1) ? NQX + ty :
                              (d == 2) ? NQX + NQY + tx : 2 * NQX + NQY + ty;
        if (HASN) begin : g_nb
          assign d_in_clk[T][d]     = noc_clk[NB];
          assign d_in_valid[T][d]   = d_out_valid[NB][OPP];
          assign d_in_pkt[T][d]     = d_out_pkt[NB][OPP];
          assign d_out_ready[NB][OPP] = d_in_ready[T][d];
          assign c_in_valid[T][d]   = c_out_valid[NB][OPP];
          assign c_in_flit[T][d]    = c_out_flit[NB][OPP];
          assign c_out_ready[NB][OPP] = c_in_ready[T][d];
        end else begin : g_edge
          assign d_in_clk[T][d]     = edge_in_clk[E];
          assign d_in_valid[T][d]   = edge_in_valid[E];
          assign d_in_pkt[T][d]     = edge_in_pkt[E];
          assign edge_in_ready[E]   = d_in_ready[T][d];
          assign edge_out_valid[E]  = d_out_valid[T][d];
          assign edge_out_pkt[E]    = d_out_pkt[T][d];
          assign d_out_ready[T][d]  = edge_out_ready[E];
          assign c_in_valid[T][d]   = cedge_in_valid[E];
          assign c_in_flit[T][d]    = cedge_in_flit[E];
          assign cedge_in_ready[E]  = c_in_ready[T][d];
          assign cedge_out_valid[E] = c_out_valid[T][d];
          assign cedge_out_flit[E]  = c_out_flit[T][d];
          assign c_out_ready[T][d]  = cedge_out_ready[E];
        end
      end
    end
  end

  // SpiNNaker router attachment signals
  logic     br_in_valid, br_in_ready, br_out_valid, br_out_ready;
  noc_pkt_t br_in_pkt, br_out_pkt;

  // ---------------- tiles ----------------
  for (genvar t = 0; t < NT; t++) begin : g_tile
    localparam logic [COORD_W-1:0] MX = COORD_W'(X0 + t % NQX);
    localparam logic [COORD_W-1:0] MY = COORD_W'(Y0 + t / NQX);
    if (!HOLES[t]) begin : g_qpe
      logic [31:0] a [4], wd [4], rd [4];
      logic [3:0]  ws [4], irq [4];
      pl_e         pl [4];
      logic [31:0] cfg [NREGS];
      for (genvar p = 0; p < 4; p++) begin : g_p
        assign a[p]  = cpu_addr[4*t+p];
        assign wd[p] = cpu_wdata[4*t+p];
        assign ws[p] = cpu_wstrb[4*t+p];
        assign cpu_rdata[4*t+p] = rd[p];
        assign pe_irq[4*t+p]    = irq[p];
        assign pe_pl[4*t+p]     = pl[p];
      end
      for (genvar r = 0; r < NREGS; r++) begin : g_r
        assign qpe_cfg[t][r] = cfg[r];
      end
      qpe #(.BANK_WORDS(BANK_WORDS), .NREGS(NREGS)) u_qpe (
        .clk(noc_clk[t]), .ref_clk, .pe_clk(pe_clk[4*t +: 4]), .rst_n, .my_x(MX), .my_y(MY),
        .mesh_in_clk(d_in_clk[t]), .mesh_in_valid(d_in_valid[t]), .mesh_in_ready(d_in_ready[t]),
        .mesh_in_pkt(d_in_pkt[t]), .noc_clk_out(),
        .mesh_out_valid(d_out_valid[t]), .mesh_out_ready(d_out_ready[t]),
        .mesh_out_pkt(d_out_pkt[t]),
        .cmesh_in_valid(c_in_valid[t]), .cmesh_in_ready(c_in_ready[t]),
        .cmesh_in_flit(c_in_flit[t]),
        .cmesh_out_valid(c_out_valid[t]), .cmesh_out_ready(c_out_ready[t]),
        .cmesh_out_flit(c_out_flit[t]),
        .cpu_req(cpu_req[4*t +: 4]), .cpu_we(cpu_we[4*t +: 4]), .cpu_addr(a), .cpu_wdata(wd),
        .cpu_wstrb(ws), .cpu_gnt(cpu_gnt[4*t +: 4]), .cpu_rvalid(cpu_rvalid[4*t +: 4]),
        .cpu_rdata(rd), .pe_irq(irq), .pe_pl(pl), .pe_sleep(pe_sleep[4*t +: 4]),
        .cfg, .drop_count());
    end else begin : g_node
      // router-only tile
      logic [DNOC_PORTS-1:0] i_clk, i_valid, i_ready, o_valid, o_ready;
      noc_pkt_t              i_pkt [DNOC_PORTS];
      noc_pkt_t              o_pkt [DNOC_PORTS];
      logic [CNOC_PORTS-1:0] ci_valid, ci_ready, co_valid, co_ready;
      cflit_t                ci_flit [CNOC_PORTS];
      cflit_t                co_flit [CNOC_PORTS];
      for (genvar d = 0; d < 4; d++) begin : g_d
        assign i_clk[d] = d_in_clk[t][d];
        assign i_valid[d] = d_in_valid[t][d];
        assign i_pkt[d] = d_in_pkt[t][d];
        assign d_in_ready[t][d] = i_ready[d];
        assign d_out_valid[t][d] = o_valid[d];
        assign d_out_pkt[t][d] = o_pkt[d];
        assign o_ready[d] = d_out_ready[t][d];
        assign ci_valid[d] = c_in_valid[t][d];
        assign ci_flit[d] = c_in_flit[t][d];
        assign c_in_ready[t][d] = ci_ready[d];
        assign c_out_valid[t][d] = co_valid[d];
        assign c_out_flit[t][d] = co_flit[d];
        assign co_ready[d] = c_out_ready[t][d];
      end
      for (genvar p = int'(DP_PE0); p < DNOC_PORTS; p++) begin : g_loc
        assign i_clk[p] = noc_clk[t];
        if (t == SPR_TILE && p == int'(DP_PE0)) begin : g_spr
          assign i_valid[p]   = br_out_valid;
          assign i_pkt[p]     = br_out_pkt;
          assign br_out_ready = i_ready[p];
          assign br_in_valid  = o_valid[p];
          assign br_in_pkt    = o_pkt[p];
          assign o_ready[p]   = br_in_ready;
        end else begin : g_off
          assign i_valid[p] = 1'b0;
          assign i_pkt[p]   = '0;
          assign o_ready[p] = 1'b1;   // nothing attached: packets are discarded
        end
      end
      for (genvar p = int'(CP_RF); p < CNOC_PORTS; p++) begin : g_cloc
        assign ci_valid[p] = 1'b0;
        assign ci_flit[p]  = '0;
        assign co_ready[p] = 1'b1;
      end
      dnoc_router u_dnoc (
        .clk(noc_clk[t]), .rst_n, .my_x(MX), .my_y(MY),
        .in_clk(i_clk), .in_rst_n({DNOC_PORTS{rst_n}}), .in_valid(i_valid), .in_ready(i_ready),
        .in_pkt(i_pkt), .out_valid(o_valid), .out_ready(o_ready), .out_pkt(o_pkt),
        .drop_count());
      cnoc_router u_cnoc (
        .clk(ref_clk), .rst_n, .my_x(MX), .my_y(MY),
        .in_valid(ci_valid), .in_ready(ci_ready), .in_flit(ci_flit),
        .out_valid(co_valid), .out_ready(co_ready), .out_flit(co_flit));
      for (genvar p = 0; p < 4; p++) begin : g_p
        assign cpu_gnt[4*t+p]    = 1'b0;
        assign cpu_rvalid[4*t+p] = 1'b0;
        assign cpu_rdata[4*t+p]  = '0;
        assign pe_irq[4*t+p]     = '0;
        assign pe_pl[4*t+p]      = PL1;
        assign pe_sleep[4*t+p]   = 1'b1;
      end
      for (genvar r = 0; r < NREGS; r++) begin : g_r
        assign qpe_cfg[t][r] = '0;
      end
    end
  end

  // ---------------- SpiNNaker router ----------------
  logic                   sp_l_valid, sp_l_ready, sp_i_valid, sp_i_ready;
  sp_pkt_t                sp_l_pkt, sp_i_pkt;
  logic [$clog2(NPE)-1:0] sp_l_pe;
  logic [NLINK:0]         r_in_valid, r_in_ready;
  sp_pkt_t                r_in_pkt [NLINK+1];

  for (genvar l = 0; l < NLINK; l++) begin : g_lnk
    assign r_in_valid[l]    = link_in_valid[l];
    assign r_in_pkt[l]      = link_in_pkt[l];
    assign link_in_ready[l] = r_in_ready[l];
  end
  assign r_in_valid[NLINK] = sp_i_valid;
  assign r_in_pkt[NLINK]   = sp_i_pkt;
  assign sp_i_ready        = r_in_ready[NLINK];

  sp_router #(.NLINK(NLINK), .NPE(NPE), .MC_ENTRIES(MC_ENTRIES)) u_spr (
    .clk(noc_clk[SPR_TILE]), .rst_n, .chip_id,
    .in_valid(r_in_valid), .in_ready(r_in_ready), .in_pkt(r_in_pkt),
    .link_valid(link_out_valid), .link_ready(link_out_ready), .link_pkt(link_out_pkt),
    .loc_valid(sp_l_valid), .loc_ready(sp_l_ready), .loc_pkt(sp_l_pkt), .loc_pe(sp_l_pe),
    .tbl_we, .tbl_idx, .tbl_valid, .tbl_key, .tbl_mask, .tbl_route,
    .drop_count(spr_drop_count), .mc_miss_count(spr_mc_miss_count));

  sp_noc_bridge #(.NPE(NPE), .NQX(NQX), .X0(X0), .Y0(Y0)) u_bridge (
    .noc_in_valid(br_in_valid), .noc_in_ready(br_in_ready), .noc_in_pkt(br_in_pkt),
    .noc_out_valid(br_out_valid), .noc_out_ready(br_out_ready), .noc_out_pkt(br_out_pkt),
    .sp_out_valid(sp_i_valid), .sp_out_ready(sp_i_ready), .sp_out_pkt(sp_i_pkt),
    .sp_in_valid(sp_l_valid), .sp_in_ready(sp_l_ready), .sp_in_pkt(sp_l_pkt),
    .sp_in_pe(sp_l_pe));

  initial assert (HOLES[SPR_TILE]) else $error("SPR_TILE must be a router-only tile");
endmodule
