// sram_bank: one bank of the PE's local SRAM.
//
// Single-port synchronous memory, WORDS x WIDTH bits with byte write enables.
// A read issued in cycle t returns data in cycle t+1; a write updates the
// selected bytes at the clock edge. Written as an array, standing in for the
// dual-rail SRAM macro of the chip. The bank size follows from the paper's
// 128 kB per PE in four banks; the 128-bit width follows the 128 bit/clk SRAM
// connection of the MAC accelerator. Contents are not reset.
module sram_bank #(
  parameter int unsigned WORDS = 2048,
  parameter int unsigned WIDTH = 128
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [WIDTH/8-1:0]       wstrb,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < WIDTH/8; b++)
          if (wstrb[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
