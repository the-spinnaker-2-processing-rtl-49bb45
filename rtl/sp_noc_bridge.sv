// sp_noc_bridge: attaches the SpiNNaker packet router to a NoC router port.
//
// NoC -> router: a NoC packet whose packet header carries the spike marker
// (bit 16) is a SpiNNaker packet: control byte = packet header bits 7:0,
// key = address field, payload = data field. Other packets are discarded.
// Router -> NoC: a packet for local PE index n is sent to QPE tile
// (n/4) mod NQX, (n/4) / NQX of the QPE grid, at NoC coordinates offset by
// X0/Y0, with PE bit n mod 4 set; payload length from the control byte size
// code (0, 1, 2 or 4 words). One packet per cycle in each direction,
// combinational (no storage).
// The paper says spikes travel between PEs and router over the NoC and are
// routed by the NoC's X/Y coordinates and PE bits; the packing of a
// SpiNNaker packet into the NoC packet is this design's choice.
module sp_noc_bridge
  import spinn2_pkg::*;
#(
  parameter int unsigned NPE = 168,
  parameter int unsigned NQX = 7,
  parameter int unsigned X0  = 1,
  parameter int unsigned Y0  = 1
) (
  // NoC side
  input  logic                   noc_in_valid,
  output logic                   noc_in_ready,
  input  noc_pkt_t               noc_in_pkt,
  output logic                   noc_out_valid,
  input  logic                   noc_out_ready,
  output noc_pkt_t               noc_out_pkt,
  // router side
  output logic                   sp_out_valid,
  input  logic                   sp_out_ready,
  output sp_pkt_t                sp_out_pkt,
  input  logic                   sp_in_valid,
  output logic                   sp_in_ready,
  input  sp_pkt_t                sp_in_pkt,
  input  logic [$clog2(NPE)-1:0] sp_in_pe
);
  logic is_spike;
  assign is_spike     = noc_in_pkt.phdr[PHDR_SPIKE];
  assign sp_out_valid = noc_in_valid && is_spike;
  assign noc_in_ready = is_spike ? sp_out_ready : 1'b1;
  assign sp_out_pkt   = '{ctrl: noc_in_pkt.phdr[7:0], key: noc_in_pkt.addr, data: noc_in_pkt.data};

  int unsigned tile;
  always_comb begin
    tile = int'(sp_in_pe) / 4;
    noc_out_pkt = '0;
    noc_out_pkt.hdr.dx = COORD_W'(X0 + tile % NQX);
    noc_out_pkt.hdr.dy = COORD_W'(Y0 + tile / NQX);
    noc_out_pkt.hdr.pe = 4'b0001 << sp_in_pe[1:0];
    unique case (sp_in_pkt.ctrl[1:0])
      2'd0: noc_out_pkt.hdr.size = 3'd0;
      2'd1: noc_out_pkt.hdr.size = 3'd1;
      2'd2: noc_out_pkt.hdr.size = 3'd2;
      default: noc_out_pkt.hdr.size = 3'd4;
    endcase
    noc_out_pkt.phdr[PHDR_SPIKE] = 1'b1;
    noc_out_pkt.phdr[7:0] = sp_in_pkt.ctrl;
    noc_out_pkt.addr = sp_in_pkt.key;
    noc_out_pkt.data = sp_in_pkt.data;
  end
  assign noc_out_valid = sp_in_valid;
  assign sp_in_ready   = noc_out_ready;
endmodule
