// pe_noc_if: inbound NoC interface of the PE.
//
// Takes the NoC packets delivered to this PE and, by the top address nibble,
//   0x0: writes the payload words to local SRAM, word k to addr+4k, one
//        32-bit write per cycle through an SRAM master port;
//   0x4: pushes the payload words into the MAC accelerator's op_a stream;
//   0xE: performs peripheral register writes, word k to register addr+4k
//        (this is how a configuration packet controls the MAC accelerator
//        without the ARM core);
// other addresses are discarded. A packet whose packet header carries the
// spike marker (bit 16) is a SpiNNaker packet: its key (address field) is
// pushed into the spike FIFO that the core works through in the next time
// step. A packet with no payload is consumed in one cycle.
// The paper gives the targets (SRAM, MAC operand via the NoC interface,
// accelerator control by NoC packets, spike FIFO); the address map and the
// one-word-per-cycle schedule are this design's choice.
module pe_noc_if
  import spinn2_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  noc_pkt_t     in_pkt,
  // SRAM master
  output logic         mem_req,
  output logic [31:0]  mem_addr,
  output logic [127:0] mem_wdata,
  output logic [15:0]  mem_wstrb,
  input  logic         mem_gnt,
  // MAC op_a stream
  output logic         opa_valid,
  input  logic         opa_ready,
  output logic [31:0]  opa_data,
  // peripheral register writes
  output logic         reg_req,
  input  logic         reg_gnt,
  output logic [11:0]  reg_addr,
  output logic [31:0]  reg_wdata,
  // spike FIFO
  output logic         spk_valid,
  input  logic         spk_ready,
  output logic [31:0]  spk_key
);
  logic [2:0]  k;
  logic [2:0]  nwords;
  logic [31:0] word, a;
  logic        is_spike, last, step;

  assign nwords   = in_pkt.hdr.size > 3'd4 ? 3'd4 : in_pkt.hdr.size;
  assign is_spike = in_pkt.phdr[PHDR_SPIKE];
  assign word     = in_pkt.data[32*k +: 32];
  assign a        = in_pkt.addr + {27'd0, k, 2'b00};
  assign last     = (nwords == 3'd0) || (k == nwords - 3'd1);

  always_comb begin
    mem_req = 1'b0; mem_addr = a; mem_wdata = {4{word}}; mem_wstrb = 16'hF << (4*a[3:2]);
    opa_valid = 1'b0; opa_data = word;
    reg_req = 1'b0; reg_addr = a[11:0]; reg_wdata = word;
    spk_valid = 1'b0; spk_key = in_pkt.addr;
    step = 1'b0;
    if (in_valid) begin
      if (is_spike) begin
        spk_valid = 1'b1; step = spk_ready;
      end else if (nwords == 3'd0) begin
        step = 1'b1;
      end else begin
        unique case (in_pkt.addr[31:28])
          MAP_SRAM:    begin mem_req   = 1'b1; step = mem_gnt;   end
          MAP_MAC_OPA: begin opa_valid = 1'b1; step = opa_ready; end
          MAP_PERIPH:  begin reg_req   = 1'b1; step = reg_gnt;   end
          default:     step = 1'b1;
        endcase
      end
    end
  end
  assign in_ready = step && (is_spike || last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) k <= '0;
    else if (step) k <= in_ready ? 3'd0 : k + 3'd1;
  end
endmodule
