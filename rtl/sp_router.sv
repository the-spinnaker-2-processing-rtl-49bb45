// sp_router: SpiNNaker packet router for multicast (MC), core-to-core (C2C)
// and nearest-neighbour (NN) packets.
//
// Structure after the paper's router drawing: the parallel inputs (NLINK
// chip-to-chip links plus one local input from the NoC) are merged by a
// round-robin arbiter into one pipeline, the packet type selects NN, C2C or MC
// routing, and the output stage copies the packet to every selected output,
// watched by a timer that drops what cannot leave.
//   MC: the 32-bit routing key is looked up in a ternary table of MC_ENTRIES
//       {key, mask, route} entries; an entry matches when
//       (key ^ entry.key) & entry.mask == 0, the lowest matching index wins.
//       route has one bit per link and one per local PE. A miss on a packet
//       from link i goes out on the opposite link (i+3) mod 6 (default
//       routing); a miss on a local packet is dropped.
//   C2C: key[31:16] is the destination chip (x in bits 15:8, y in 7:0) and
//       key[15:8] the destination PE. On this chip: that PE; otherwise X-first
//       towards the chip: link 0 (E) / 3 (W) on x, then 2 (N) / 5 (S) on y.
//   NN: from a link the packet goes to the local monitor (PE 0); from the
//       local input it leaves on link Route (ctrl[4:2]) or, for Route=7, on all
//       links; Route=6 is dropped.
// Output stage: links are independent valid/ready ports; local copies leave
// one per cycle on loc_out with the PE index. If some copies are still
// waiting DROP_WAIT cycles after the packet reached the output stage, they
// are dropped and drop_count counts the packet.
// Pipeline: input register, routing register, output stage; a packet that
// enters in cycle 0 can leave in cycle 2.
// The table is written through tbl_*; it resets to all entries invalid.
// From the paper: three packet types, formats, parallel inputs/outputs,
// MC key routing, C2C by destination, NN by destination port, timers and
// packet dropping. Not modelled: ECC on table SRAMs, TCAM built-in self test,
// clock gating, the out-of-order issue buffer. Table size, link numbering,
// default routing, C2C algorithm and drop wait are this design's choices.
module sp_router
  import spinn2_pkg::*;
#(
  parameter int unsigned NLINK      = 6,
  parameter int unsigned NPE        = 168,
  parameter int unsigned MC_ENTRIES = 1024,
  parameter int unsigned DROP_WAIT  = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [15:0]            chip_id,
  input  logic [NLINK:0]         in_valid,     // NLINK = local input
  output logic [NLINK:0]         in_ready,
  input  sp_pkt_t                in_pkt [NLINK+1],
  output logic [NLINK-1:0]       link_valid,
  input  logic [NLINK-1:0]       link_ready,
  output sp_pkt_t                link_pkt,
  output logic                   loc_valid,
  input  logic                   loc_ready,
  output sp_pkt_t                loc_pkt,
  output logic [$clog2(NPE)-1:0] loc_pe,
  input  logic                   tbl_we,
  input  logic [$clog2(MC_ENTRIES)-1:0] tbl_idx,
  input  logic                   tbl_valid,
  input  logic [31:0]            tbl_key,
  input  logic [31:0]            tbl_mask,
  input  logic [NLINK+NPE-1:0]   tbl_route,
  output logic [15:0]            drop_count,
  output logic [15:0]            mc_miss_count
);
  localparam int unsigned NIN = NLINK + 1;
  localparam int unsigned RW  = NLINK + NPE;
  localparam int unsigned SW  = $clog2(NIN);
  localparam int unsigned PW  = $clog2(NPE);

  // ---------------- routing table ----------------
  logic [MC_ENTRIES-1:0] t_valid;
  logic [31:0]           t_key   [MC_ENTRIES];
  logic [31:0]           t_mask  [MC_ENTRIES];
  logic [RW-1:0]         t_route [MC_ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) t_valid <= '0;
    else if (tbl_we) t_valid[tbl_idx] <= tbl_valid;
  end
  always_ff @(posedge clk) begin
    if (tbl_we) begin
      t_key[tbl_idx]   <= tbl_key;
      t_mask[tbl_idx]  <= tbl_mask;
      t_route[tbl_idx] <= tbl_route;
    end
  end

  // ---------------- stage 0: input arbitration ----------------
  logic          s1_valid, s1_take;
  sp_pkt_t       s1_pkt;
  logic [SW-1:0] s1_src;
  logic [SW-1:0] rr;
  logic [NIN-1:0] gnt;

  always_comb begin
    int idx;
    idx = 0;
    gnt = '0;
    if (!s1_valid || s1_take) begin
      for (int k = NIN; k >= 1; k--) begin
        idx = (int'(rr) + k) % NIN;
        if (in_valid[idx]) begin gnt = '0; gnt[idx] = 1'b1; end
      end
    end
  end
  assign in_ready = gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_pkt <= '0; s1_src <= '0; rr <= '0;
    end else begin
      if (s1_take) s1_valid <= 1'b0;
      for (int i = 0; i < NIN; i++)
        if (gnt[i]) begin
          s1_valid <= 1'b1; s1_pkt <= in_pkt[i]; s1_src <= SW'(i); rr <= SW'(i);
        end
    end
  end

  // ---------------- stage 1: NN / C2C / MC routing ----------------
  logic [RW-1:0] r_mc, r_c2c, r_nn, r_sel;
  logic          mc_hit;

  always_comb begin
    r_mc = '0; mc_hit = 1'b0;
    for (int e = MC_ENTRIES-1; e >= 0; e--)
      if (t_valid[e] && ((s1_pkt.key ^ t_key[e]) & t_mask[e]) == 32'd0) begin
        r_mc = t_route[e]; mc_hit = 1'b1;
      end
    if (!mc_hit && s1_src != SW'(NLINK))
      r_mc[(int'(s1_src) + NLINK/2) % NLINK] = 1'b1;
  end

  always_comb begin
    logic [7:0] cx, cy, tx, ty;
    cx = chip_id[15:8]; cy = chip_id[7:0];
    tx = s1_pkt.key[31:24]; ty = s1_pkt.key[23:16];
    r_c2c = '0;
    if (s1_pkt.key[31:16] == chip_id) begin
      if (32'(s1_pkt.key[15:8]) < NPE) r_c2c[NLINK + int'(s1_pkt.key[15:8])] = 1'b1;
    end
    else if (tx > cx) r_c2c[0] = 1'b1;
    else if (tx < cx) r_c2c[3 % NLINK] = 1'b1;
    else if (ty > cy) r_c2c[2 % NLINK] = 1'b1;
    else              r_c2c[5 % NLINK] = 1'b1;
  end

  always_comb begin
    r_nn = '0;
    if (s1_src != SW'(NLINK)) r_nn[NLINK] = 1'b1;           // to monitor PE 0
    else if (s1_pkt.ctrl[4:2] == 3'd7) r_nn[NLINK-1:0] = '1;
    else if (32'(s1_pkt.ctrl[4:2]) < NLINK) r_nn[int'(s1_pkt.ctrl[4:2])] = 1'b1;
  end

  always_comb begin
    unique case (s1_pkt.ctrl[7:6])
      SP_MC:   r_sel = r_mc;
      SP_C2C:  r_sel = r_c2c;
      SP_NN:   r_sel = r_nn;
      default: r_sel = '0;
    endcase
  end

  // ---------------- stage 2: output with drop timer ----------------
  logic          s2_valid;
  sp_pkt_t       s2_pkt;
  logic [RW-1:0] s2_left;
  logic [15:0]   s2_wait;
  logic [NLINK-1:0] link_go;
  logic [PW-1:0]    pe_first;
  logic             pe_any, s2_done, timeout;

  assign s1_take = s1_valid && (!s2_valid || s2_done);

  always_comb begin
    pe_any = 1'b0; pe_first = '0;
    for (int p = NPE-1; p >= 0; p--)
      if (s2_left[NLINK + p]) begin pe_any = 1'b1; pe_first = PW'(p); end
  end
  assign link_valid = s2_valid ? s2_left[NLINK-1:0] : '0;
  assign link_pkt   = s2_pkt;
  assign link_go    = link_valid & link_ready;
  assign loc_valid  = s2_valid && pe_any;
  assign loc_pkt    = s2_pkt;
  assign loc_pe     = pe_first;
  assign timeout    = s2_wait >= 16'(DROP_WAIT);

  logic [RW-1:0] left_nx;
  always_comb begin
    left_nx = s2_left;
    left_nx[NLINK-1:0] = s2_left[NLINK-1:0] & ~link_go;
    if (loc_valid && loc_ready) left_nx[NLINK + int'(pe_first)] = 1'b0;
  end
  assign s2_done = s2_valid && (left_nx == '0 || timeout);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0; s2_pkt <= '0; s2_left <= '0; s2_wait <= '0;
      drop_count <= '0; mc_miss_count <= '0;
    end else begin
      if (s2_valid) begin
        s2_left <= left_nx;
        s2_wait <= s2_wait + 16'd1;
      end
      drop_count <= drop_count + 16'(s2_valid && timeout && left_nx != '0)
                               + 16'(s1_take && r_sel == '0);
      if (s2_done) s2_valid <= 1'b0;
      if (s1_take) begin
        s2_valid <= r_sel != '0;
        s2_pkt   <= s1_pkt;
        s2_left  <= r_sel;
        s2_wait  <= '0;
        if (s1_pkt.ctrl[7:6] == SP_MC && !mc_hit) mc_miss_count <= mc_miss_count + 16'd1;
      end
    end
  end
endmodule
