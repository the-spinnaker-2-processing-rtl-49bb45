// noc_ser: cuts a 192-bit NoC packet into 32-bit CNoC flits.
//
// Flit order: head {NoC header, packet header}, the 32-bit address, then the
// payload words, lowest word first. The number of payload words is the size
// field of the NoC header (0..4), so a packet is 2..6 flits; the last flit
// carries last=1. DNoC and CNoC share the packet format (paper); the flit order
// and the last marker are this design's choice. One flit per cycle; a new
// packet is accepted the cycle after the last flit of the previous one left.
module noc_ser
  import spinn2_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  noc_pkt_t in_pkt,
  output logic     out_valid,
  input  logic     out_ready,
  output cflit_t   out_flit
);
  noc_pkt_t   pkt;
  logic       busy;
  logic [2:0] idx;
  logic [2:0] nflits_m1;

  assign in_ready  = !busy;
  assign out_valid = busy;
  assign nflits_m1 = 3'(pkt.hdr.size > 3'd4 ? 3'd4 : pkt.hdr.size) + 3'd1;

  always_comb begin
    unique case (idx)
      3'd0:    out_flit.data = {pkt.hdr, pkt.phdr};
      3'd1:    out_flit.data = pkt.addr;
      3'd2:    out_flit.data = pkt.data[31:0];
      3'd3:    out_flit.data = pkt.data[63:32];
      3'd4:    out_flit.data = pkt.data[95:64];
      default: out_flit.data = pkt.data[127:96];
    endcase
    out_flit.last = idx == nflits_m1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; idx <= '0; pkt <= '0;
    end else if (!busy) begin
      if (in_valid) begin pkt <= in_pkt; busy <= 1'b1; idx <= '0; end
    end else if (out_ready) begin
      if (out_flit.last) busy <= 1'b0;
      idx <= idx + 3'd1;
    end
  end
endmodule
