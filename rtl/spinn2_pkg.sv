// spinn2_pkg: types and constants shared by the SpiNNaker2-style NoC, PE and
// packet-router RTL.
//
// NoC packet (192 bit, one DNoC flit): 15-bit NoC header, 17-bit packet
// header, 32-bit address, 0..128-bit payload aligned right. The field order
// of the NoC header (size, dest X, dest Y, R, PE0..3, C) follows the packet
// format drawing; the total of 15 bits, the 4 PE bits and the single R and C
// flags are given. The split size=3, X=3, Y=3 is this design's choice: 3-bit
// coordinates cover the 8x8 tile grid of the chip floorplan, and the 3-bit
// size counts 32-bit payload words (0..4, i.e. 0..16 bytes).
// The meaning of the 17-bit packet header is not given; this design uses
// bit 16 to mark a carried SpiNNaker packet and bits 7:0 for its control byte.
//
// SpiNNaker packet: 8-bit control byte, 32-bit key / destination / address
// word, 0..128-bit payload. Control-byte fields follow the packet drawing
// (type in bits 7:6: 00 multicast, 01 core-to-core, 10 nearest neighbour);
// the widths SW=2, TS=2, Size=2, N=1, Route=3 are this design's reading.
package spinn2_pkg;

  localparam int unsigned NOC_W      = 192;
  localparam int unsigned CNOC_W     = 32;
  localparam int unsigned PAYLOAD_W  = 128;
  localparam int unsigned COORD_W    = 3;

  typedef struct packed {
    logic [2:0]         size;   // payload length in 32-bit words, 0..4
    logic [COORD_W-1:0] dx;     // destination X
    logic [COORD_W-1:0] dy;     // destination Y
    logic               r;      // destination is the QPE register file
    logic [3:0]         pe;     // destination PE(s), multicast within a QPE
    logic               c;      // route via the configuration NoC
  } noc_hdr_t;

  typedef struct packed {
    noc_hdr_t      hdr;
    logic [16:0]   phdr;
    logic [31:0]   addr;
    logic [127:0]  data;
  } noc_pkt_t;

  // packet header bit marking a SpiNNaker packet carried over the NoC
  localparam int unsigned PHDR_SPIKE = 16;

  // DNoC router port numbering
  typedef enum logic [3:0] {
    DP_N = 4'd0, DP_E = 4'd1, DP_S = 4'd2, DP_W = 4'd3,
    DP_PE0 = 4'd4, DP_PE1 = 4'd5, DP_PE2 = 4'd6, DP_PE3 = 4'd7,
    DP_CN = 4'd8
  } dnoc_port_e;
  localparam int unsigned DNOC_PORTS = 9;

  // CNoC router port numbering
  typedef enum logic [2:0] {
    CP_N = 3'd0, CP_E = 3'd1, CP_S = 3'd2, CP_W = 3'd3,
    CP_RF = 3'd4, CP_DN = 3'd5
  } cnoc_port_e;
  localparam int unsigned CNOC_PORTS = 6;

  // CNoC flit: data plus a last-flit marker
  typedef struct packed {
    logic        last;
    logic [31:0] data;
  } cflit_t;

  // SpiNNaker packet types (control byte bits 7:6)
  typedef enum logic [1:0] {
    SP_MC = 2'b00, SP_C2C = 2'b01, SP_NN = 2'b10, SP_RSVD = 2'b11
  } sp_type_e;

  typedef struct packed {
    logic [7:0]   ctrl;
    logic [31:0]  key;
    logic [127:0] data;
  } sp_pkt_t;

  // PE local memory map (byte addresses as seen by the PE bus masters)
  localparam logic [31:0] PE_SRAM_BYTES = 32'h0002_0000; // 128 kB
  localparam logic [3:0]  MAP_SRAM      = 4'h0;          // addr[31:28]
  localparam logic [3:0]  MAP_REMOTE    = 4'h1;          // neighbour PE SRAM
  localparam logic [3:0]  MAP_MAC_OPA   = 4'h4;          // MAC op_a stream
  localparam logic [3:0]  MAP_PERIPH    = 4'hE;          // peripheral registers

  // peripheral register blocks, addr[11:8]
  localparam logic [3:0] PB_MAC   = 4'h0;
  localparam logic [3:0] PB_TIMER = 4'h1;
  localparam logic [3:0] PB_PRNG  = 4'h2;
  localparam logic [3:0] PB_DMA   = 4'h3;
  localparam logic [3:0] PB_DVFS  = 4'h4;
  localparam logic [3:0] PB_SPIKE = 4'h5;

  // DVFS performance levels of the test chip
  typedef enum logic [1:0] { PL1 = 2'd0, PL2 = 2'd1, PL3 = 2'd2 } pl_e;

endpackage
