// pe: one SpiNNaker2 processing element without its processor core.
//
// Holds the 128 kB four-bank SRAM (pe_memory), the MAC accelerator, timer,
// pseudo random number generator, DVFS performance-level controller, DMA,
// the inbound NoC interface, the spike FIFO and the outbound spike path.
// The Arm Cortex-M4F core is vendor IP and is not part of this RTL: its data
// bus is the cpu_* port, a simple request/grant bus with 32-bit data
// (cpu_gnt in the request cycle, cpu_rvalid/cpu_rdata one cycle later for
// SRAM and registers). Its memory map (addr[31:28]):
//   0x0 local SRAM (128 kB)          0x1 SRAM of a neighbour PE in the QPE
//                                        (via the QPE crossbar, addr[21:20]
//                                        selects the PE)
//   0xE peripheral registers, addr[11:8]: 0 MAC, 1 timer, 2 PRNG, 3 DMA,
//       4 DVFS, 5 spike unit (0x00 w: send spike with this key, 0x04 r: pop
//       received key, 0x08 r: spikes waiting, 0x0C target of sent spikes in
//       the DMA DST format, 0x10 control byte of sent spikes).
// SRAM masters in bank-arbitration order: core, MAC, NoC inbound, DMA,
// neighbour PEs. Peripheral registers take the core first; configuration
// packets from the NoC wait while the core uses the register bus.
// Outbound NoC packets: sent spikes before DMA packets.
// irq: bit0 MAC done (pulse), bit1 timer tick pending, bit2 DMA done (pulse), bit3 spike
// FIFO not empty. Everything runs in the PE clock; the clock-domain crossings
// to the NoC are in the QPE.
// The block list follows the paper's PE description; the maps, the bus
// protocol (not AHB) and the FIFO sizes are this design's choice.
module pe
  import spinn2_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 2048,   // 4 x 2048 x 16 B = 128 kB
  parameter int unsigned SPK_DEPTH  = 128,
  parameter int unsigned OPA_DEPTH  = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  // processor data bus
  input  logic         cpu_req,
  input  logic         cpu_we,
  input  logic [31:0]  cpu_addr,
  input  logic [31:0]  cpu_wdata,
  input  logic [3:0]   cpu_wstrb,
  output logic         cpu_gnt,
  output logic         cpu_rvalid,
  output logic [31:0]  cpu_rdata,
  // NoC
  input  logic         noc_in_valid,
  output logic         noc_in_ready,
  input  noc_pkt_t     noc_in_pkt,
  output logic         noc_out_valid,
  input  logic         noc_out_ready,
  output noc_pkt_t     noc_out_pkt,
  // crossbar: this PE as master of a neighbour's SRAM
  output logic         rm_req,
  output logic         rm_we,
  output logic [31:0]  rm_addr,
  output logic [127:0] rm_wdata,
  output logic [15:0]  rm_wstrb,
  input  logic         rm_gnt,
  input  logic         rm_rvalid,
  input  logic [127:0] rm_rdata,
  // crossbar: a neighbour as master of this PE's SRAM
  input  logic         rs_req,
  input  logic         rs_we,
  input  logic [31:0]  rs_addr,
  input  logic [127:0] rs_wdata,
  input  logic [15:0]  rs_wstrb,
  output logic         rs_gnt,
  output logic         rs_rvalid,
  output logic [127:0] rs_rdata,
  output logic [3:0]   irq,
  output pl_e          pl,
  output logic         sleep
);
  localparam int unsigned NM = 5;

  // ---------------- SRAM ----------------
  logic [NM-1:0] m_req, m_we, m_gnt, m_rvalid;
  logic [31:0]   m_addr  [NM];
  logic [127:0]  m_wdata [NM];
  logic [15:0]   m_wstrb [NM];
  logic [127:0]  m_rdata [NM];

  pe_memory #(.NM(NM), .WORDS(BANK_WORDS)) u_mem (
    .clk, .rst_n, .req(m_req), .we(m_we), .addr(m_addr), .wdata(m_wdata), .wstrb(m_wstrb),
    .gnt(m_gnt), .rvalid(m_rvalid), .rdata(m_rdata));

  // ---------------- core bus decode ----------------
  logic sel_sram, sel_rem, sel_per;
  logic [15:0] lane_strb;
  assign sel_sram  = cpu_addr[31:28] == MAP_SRAM;
  assign sel_rem   = cpu_addr[31:28] == MAP_REMOTE;
  assign sel_per   = cpu_addr[31:28] == MAP_PERIPH;
  assign lane_strb = cpu_we ? (16'(cpu_wstrb) << (4*cpu_addr[3:2])) : 16'h0;

  assign m_req[0]   = cpu_req && sel_sram;
  assign m_we[0]    = cpu_we;
  assign m_addr[0]  = cpu_addr;
  assign m_wdata[0] = {4{cpu_wdata}};
  assign m_wstrb[0] = lane_strb;

  assign rm_req   = cpu_req && sel_rem;
  assign rm_we    = cpu_we;
  assign rm_addr  = cpu_addr;
  assign rm_wdata = {4{cpu_wdata}};
  assign rm_wstrb = lane_strb;

  assign m_req[4]   = rs_req;
  assign m_we[4]    = rs_we;
  assign m_addr[4]  = rs_addr;
  assign m_wdata[4] = rs_wdata;
  assign m_wstrb[4] = rs_wstrb;
  assign rs_gnt     = m_gnt[4];
  assign rs_rvalid  = m_rvalid[4];
  assign rs_rdata   = m_rdata[4];

  // ---------------- peripheral register bus ----------------
  logic        nif_reg_req, nif_reg_gnt;
  logic [11:0] nif_reg_addr;
  logic [31:0] nif_reg_wdata;
  logic        cpu_per;
  logic        r_we, r_re;
  logic [11:0] r_addr;
  logic [31:0] r_wdata, r_rdata;
  logic [31:0] rd_mac, rd_tim, rd_rng, rd_dma, rd_dvfs, rd_spk;
  logic        spk_tx_ready;
  logic        per_gnt;

  assign cpu_per     = cpu_req && sel_per;
  assign nif_reg_gnt = nif_reg_req && !cpu_per;
  assign r_addr      = cpu_per ? cpu_addr[11:0] : nif_reg_addr;
  assign r_wdata     = cpu_per ? cpu_wdata : nif_reg_wdata;
  // a spike send waits while the transmit FIFO is full
  assign per_gnt     = !(cpu_we && cpu_addr[11:8] == PB_SPIKE && cpu_addr[7:2] == 6'd0 && !spk_tx_ready);
  assign r_we        = (cpu_per && cpu_we && per_gnt) || nif_reg_gnt;
  assign r_re        = cpu_per && !cpu_we;

  function automatic logic blk(logic [11:0] a, logic [3:0] b);
    return a[11:8] == b;
  endfunction

  // ---------------- MAC accelerator ----------------
  logic        opa_in_valid, opa_in_ready, opa_valid, opa_ready;
  logic [31:0] opa_in_data, opa_data;
  logic        mac_irq, mac_busy;

  fifo_sync #(.WIDTH(32), .DEPTH(OPA_DEPTH)) u_opa (
    .clk, .rst_n, .in_valid(opa_in_valid), .in_ready(opa_in_ready), .in_data(opa_in_data),
    .out_valid(opa_valid), .out_ready(opa_ready), .out_data(opa_data), .count());

  mac_accel u_mac (
    .clk, .rst_n,
    .reg_we(r_we && blk(r_addr, PB_MAC)), .reg_addr(r_addr[7:0]), .reg_wdata(r_wdata),
    .reg_rdata(rd_mac),
    .opa_valid, .opa_ready, .opa_data,
    .mem_req(m_req[1]), .mem_we(m_we[1]), .mem_addr(m_addr[1]), .mem_wdata(m_wdata[1]),
    .mem_wstrb(m_wstrb[1]), .mem_gnt(m_gnt[1]), .mem_rvalid(m_rvalid[1]), .mem_rdata(m_rdata[1]),
    .irq(mac_irq), .busy(mac_busy));

  // ---------------- timer, PRNG ----------------
  logic tick, tim_irq;
  pe_timer u_timer (
    .clk, .rst_n, .reg_we(r_we && blk(r_addr, PB_TIMER)), .reg_addr(r_addr[7:0]),
    .reg_wdata(r_wdata), .reg_rdata(rd_tim), .tick, .irq(tim_irq));

  prng u_prng (
    .clk, .rst_n, .reg_we(r_we && blk(r_addr, PB_PRNG)), .reg_re(r_re && blk(r_addr, PB_PRNG)),
    .reg_addr(r_addr[7:0]), .reg_wdata(r_wdata), .reg_rdata(rd_rng));

  // ---------------- spike FIFO and spike transmit ----------------
  logic        spk_in_valid, spk_in_ready, spk_valid, spk_pop;
  logic [31:0] spk_in_key, spk_key;
  logic [$clog2(SPK_DEPTH):0] spk_count;
  logic [11:0] spk_dst;
  logic [7:0]  spk_ctrl;
  logic        stx_valid, stx_pop;
  logic [31:0] stx_key;

  fifo_sync #(.WIDTH(32), .DEPTH(SPK_DEPTH)) u_spk_rx (
    .clk, .rst_n, .in_valid(spk_in_valid), .in_ready(spk_in_ready), .in_data(spk_in_key),
    .out_valid(spk_valid), .out_ready(spk_pop), .out_data(spk_key), .count(spk_count));
  assign spk_pop = r_re && blk(r_addr, PB_SPIKE) && r_addr[7:2] == 6'd1;

  fifo_sync #(.WIDTH(32), .DEPTH(4)) u_spk_tx (
    .clk, .rst_n,
    .in_valid(r_we && cpu_per && blk(r_addr, PB_SPIKE) && r_addr[7:2] == 6'd0),
    .in_ready(spk_tx_ready), .in_data(r_wdata),
    .out_valid(stx_valid), .out_ready(stx_pop), .out_data(stx_key), .count());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin spk_dst <= '0; spk_ctrl <= '0; end
    else if (r_we && blk(r_addr, PB_SPIKE)) begin
      if (r_addr[7:2] == 6'd3) spk_dst  <= r_wdata[11:0];
      if (r_addr[7:2] == 6'd4) spk_ctrl <= r_wdata[7:0];
    end
  end
  always_comb begin
    unique case (r_addr[7:2])
      6'd1:    rd_spk = spk_key;
      6'd2:    rd_spk = 32'(spk_count);
      6'd3:    rd_spk = {20'd0, spk_dst};
      6'd4:    rd_spk = {24'd0, spk_ctrl};
      default: rd_spk = '0;
    endcase
  end

  // ---------------- DVFS ----------------
  dvfs_ctrl u_dvfs (
    .clk, .rst_n, .tick, .spike_count(16'(spk_count)),
    .reg_we(r_we && blk(r_addr, PB_DVFS)), .reg_addr(r_addr[7:0]), .reg_wdata(r_wdata),
    .reg_rdata(rd_dvfs), .pl, .sleep);

  // ---------------- DMA and NoC out ----------------
  logic     dma_valid, dma_ready, dma_irq;
  noc_pkt_t dma_pkt, stx_pkt;
  pe_dma u_dma (
    .clk, .rst_n, .reg_we(r_we && blk(r_addr, PB_DMA)), .reg_addr(r_addr[7:0]),
    .reg_wdata(r_wdata), .reg_rdata(rd_dma),
    .mem_req(m_req[3]), .mem_addr(m_addr[3]), .mem_gnt(m_gnt[3]), .mem_rvalid(m_rvalid[3]),
    .mem_rdata(m_rdata[3]),
    .out_valid(dma_valid), .out_ready(dma_ready), .out_pkt(dma_pkt), .irq(dma_irq));
  assign m_we[3] = 1'b0;
  assign m_wdata[3] = '0;
  assign m_wstrb[3] = '0;

  always_comb begin
    stx_pkt = '0;
    {stx_pkt.hdr.dx, stx_pkt.hdr.dy, stx_pkt.hdr.r, stx_pkt.hdr.pe, stx_pkt.hdr.c} = spk_dst;
    stx_pkt.phdr[PHDR_SPIKE] = 1'b1;
    stx_pkt.phdr[7:0] = spk_ctrl;
    stx_pkt.addr = stx_key;
  end
  assign noc_out_valid = stx_valid || dma_valid;
  assign noc_out_pkt   = stx_valid ? stx_pkt : dma_pkt;
  assign stx_pop       = stx_valid && noc_out_ready;
  assign dma_ready     = !stx_valid && noc_out_ready;

  // ---------------- NoC in ----------------
  pe_noc_if u_nif (
    .clk, .rst_n, .in_valid(noc_in_valid), .in_ready(noc_in_ready), .in_pkt(noc_in_pkt),
    .mem_req(m_req[2]), .mem_addr(m_addr[2]), .mem_wdata(m_wdata[2]), .mem_wstrb(m_wstrb[2]),
    .mem_gnt(m_gnt[2]),
    .opa_valid(opa_in_valid), .opa_ready(opa_in_ready), .opa_data(opa_in_data),
    .reg_req(nif_reg_req), .reg_gnt(nif_reg_gnt), .reg_addr(nif_reg_addr),
    .reg_wdata(nif_reg_wdata),
    .spk_valid(spk_in_valid), .spk_ready(spk_in_ready), .spk_key(spk_in_key));
  assign m_we[2] = 1'b1;

  // ---------------- core responses ----------------
  typedef enum logic [1:0] { RS_NONE, RS_SRAM, RS_REM, RS_REG } rsrc_e;
  rsrc_e       rsrc_q;
  logic        sel_per_q;
  logic [1:0]  lane_q;
  logic [31:0] reg_q;

  always_comb begin
    unique case (r_addr[11:8])
      PB_MAC:   r_rdata = rd_mac;
      PB_TIMER: r_rdata = rd_tim;
      PB_PRNG:  r_rdata = rd_rng;
      PB_DMA:   r_rdata = rd_dma;
      PB_DVFS:  r_rdata = rd_dvfs;
      PB_SPIKE: r_rdata = rd_spk;
      default:  r_rdata = '0;
    endcase
  end

  assign cpu_gnt = sel_sram ? m_gnt[0] : sel_rem ? rm_gnt : sel_per ? per_gnt : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsrc_q <= RS_NONE; lane_q <= '0; reg_q <= '0;
    end else begin
      rsrc_q <= RS_NONE;
      if (cpu_req && cpu_gnt && !cpu_we) begin
        lane_q <= cpu_addr[3:2];
        reg_q  <= r_rdata;
        rsrc_q <= sel_sram ? RS_SRAM : sel_rem ? RS_REM : RS_REG;
      end
    end
  end

  always_comb begin
    cpu_rvalid = 1'b0; cpu_rdata = '0;
    unique case (rsrc_q)
      RS_SRAM: begin cpu_rvalid = m_rvalid[0]; cpu_rdata = m_rdata[0][32*lane_q +: 32]; end
      RS_REM:  begin cpu_rvalid = rm_rvalid;   cpu_rdata = rm_rdata[32*lane_q +: 32]; end
      RS_REG:  begin cpu_rvalid = 1'b1;        cpu_rdata = sel_per_q ? reg_q : 32'd0; end
      default: ;
    endcase
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel_per_q <= 1'b0;
    else if (cpu_req && cpu_gnt) sel_per_q <= sel_per;
  end

  assign irq = {spk_valid, dma_irq, tim_irq, mac_irq};
endmodule
