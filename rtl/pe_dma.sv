// pe_dma: DMA engine of the PE, copying local SRAM to a remote address over
// the data NoC.
//
// Programmed through registers (byte offset): 0x00 SRC (SRAM byte address,
// 16-byte aligned), 0x04 LEN (number of 128-bit lines), 0x08 DST (NoC header
// fields of the target: bits 11:9 dest X, 8:6 dest Y, 5 R, 4:1 PE mask, 0 C),
// 0x0C DST_ADDR (address at the target), 0x10 CTRL (w: bit0 start),
// 0x14 STATUS (r: bit0 busy, bit1 done).
// Line n is read from SRC+16n and sent as one 192-bit NoC packet with a full
// 16-byte payload to DST_ADDR+16n. The engine reads a line, waits for it,
// sends it, then reads the next: 3 cycles per line without back-pressure.
// irq pulses when the last packet has been accepted by the NoC.
// The paper names the DMA and its use (PE to PE and DRAM transfers over the
// NoC); register map, packet use and the one-line-at-a-time schedule are this
// design's choice.
module pe_dma
  import spinn2_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         reg_we,
  input  logic [7:0]   reg_addr,
  input  logic [31:0]  reg_wdata,
  output logic [31:0]  reg_rdata,
  output logic         mem_req,
  output logic [31:0]  mem_addr,
  input  logic         mem_gnt,
  input  logic         mem_rvalid,
  input  logic [127:0] mem_rdata,
  output logic         out_valid,
  input  logic         out_ready,
  output noc_pkt_t     out_pkt,
  output logic         irq
);
  typedef enum logic [1:0] { D_IDLE, D_READ, D_WAIT, D_SEND } dstate_e;
  dstate_e st;
  logic [31:0] src, dst_addr;
  logic [15:0] len, n;
  logic [11:0] dst;
  logic        done;
  logic [127:0] line;

  assign mem_req  = st == D_READ;
  assign mem_addr = src + {12'd0, n, 4'h0};
  assign out_valid = st == D_SEND;

  always_comb begin
    out_pkt = '0;
    out_pkt.hdr.size = 3'd4;
    {out_pkt.hdr.dx, out_pkt.hdr.dy, out_pkt.hdr.r, out_pkt.hdr.pe, out_pkt.hdr.c} = dst;
    out_pkt.addr = dst_addr + {12'd0, n, 4'h0};
    out_pkt.data = line;
  end

  always_comb begin
    unique case (reg_addr[7:2])
      6'd0:    reg_rdata = src;
      6'd1:    reg_rdata = {16'd0, len};
      6'd2:    reg_rdata = {20'd0, dst};
      6'd3:    reg_rdata = dst_addr;
      6'd5:    reg_rdata = {30'd0, done, st != D_IDLE};
      default: reg_rdata = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; src <= '0; dst_addr <= '0; len <= '0; n <= '0; dst <= '0;
      done <= 1'b0; line <= '0; irq <= 1'b0;
    end else begin
      irq <= 1'b0;
      if (reg_we && st == D_IDLE) begin
        unique case (reg_addr[7:2])
          6'd0: src      <= reg_wdata;
          6'd1: len      <= reg_wdata[15:0];
          6'd2: dst      <= reg_wdata[11:0];
          6'd3: dst_addr <= reg_wdata;
          6'd4: if (reg_wdata[0]) begin
                  n <= '0; done <= 1'b0;
                  st <= (len == 16'd0) ? D_IDLE : D_READ;
                end
          default: ;
        endcase
      end
      unique case (st)
        D_READ: if (mem_gnt) st <= D_WAIT;
        D_WAIT: if (mem_rvalid) begin line <= mem_rdata; st <= D_SEND; end
        D_SEND: if (out_ready) begin
          n <= n + 16'd1;
          if (n + 16'd1 == len) begin st <= D_IDLE; done <= 1'b1; irq <= 1'b1; end
          else st <= D_READ;
        end
        default: ;
      endcase
    end
  end
endmodule
