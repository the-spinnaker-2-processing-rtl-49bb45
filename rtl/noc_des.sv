// noc_des: rebuilds a 192-bit NoC packet from 32-bit CNoC flits.
//
// Inverse of noc_ser: head flit, address flit, payload words lowest first;
// the flit marked last completes the packet. Payload words not sent are zero.
// The finished packet is held at the output until taken; no flit is accepted
// meanwhile. One flit per cycle.
module noc_des
  import spinn2_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  cflit_t   in_flit,
  output logic     out_valid,
  input  logic     out_ready,
  output noc_pkt_t out_pkt
);
  logic [2:0] idx;
  logic       full;

  assign in_ready  = !full;
  assign out_valid = full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0; full <= 1'b0; out_pkt <= '0;
    end else if (full) begin
      if (out_ready) full <= 1'b0;
    end else if (in_valid) begin
      unique case (idx)
        3'd0: begin
          out_pkt <= '0;
          {out_pkt.hdr, out_pkt.phdr} <= in_flit.data;
        end
        3'd1: out_pkt.addr <= in_flit.data;
        3'd2: out_pkt.data[31:0]   <= in_flit.data;
        3'd3: out_pkt.data[63:32]  <= in_flit.data;
        3'd4: out_pkt.data[95:64]  <= in_flit.data;
        default: out_pkt.data[127:96] <= in_flit.data;
      endcase
      if (in_flit.last) begin
        full <= 1'b1; idx <= '0;
      end else idx <= idx + 3'd1;
    end
  end
endmodule
