// pe_memory: the PE's 128 kB local SRAM in four banks with a master crossbar.
//
// NM masters (ARM data/instruction bus, MAC accelerator, NoC inbound writer,
// DMA, neighbour PEs through the QPE crossbar) share four banks of
// 2048 x 128 bit. Byte address bits [16:15] select the bank (contiguous 32 kB
// banks), bits [14:4] the 128-bit line. Each bank grants one master per cycle,
// round-robin among the masters addressing it; masters on different banks
// proceed in parallel, which is why the paper splits the SRAM into banks.
// A master holds req and its request fields until gnt (combinational, same
// cycle); read data comes with rvalid one cycle after the grant.
// From the paper: 128 kB, four addressable banks, 128 bit/clk. Own choices:
// contiguous bank mapping, round-robin, the master list.
module pe_memory #(
  parameter int unsigned NM    = 5,
  parameter int unsigned WORDS = 2048   // 128-bit lines per bank
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NM-1:0]     req,
  input  logic [NM-1:0]     we,
  input  logic [31:0]       addr  [NM],
  input  logic [127:0]      wdata [NM],
  input  logic [15:0]       wstrb [NM],
  output logic [NM-1:0]     gnt,
  output logic [NM-1:0]     rvalid,
  output logic [127:0]      rdata [NM]
);
  localparam int unsigned LW = $clog2(WORDS);
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;

  logic [NM-1:0]  breq  [4];
  logic [NM-1:0]  bgnt  [4];
  logic [MW-1:0]  rr    [4];
  logic [3:0]     ben, bwe;
  logic [LW-1:0]  baddr [4];
  logic [127:0]   bwd   [4];
  logic [15:0]    bws   [4];
  logic [127:0]   brd   [4];
  logic [3:0]     bread_q;
  logic [MW-1:0]  who_q [4];

  function automatic logic [1:0] bank_of(logic [31:0] a);
    return a[LW+5:LW+4];
  endfunction

  for (genvar b = 0; b < 4; b++) begin : g_bank
    always_comb begin
      for (int m = 0; m < NM; m++) breq[b][m] = req[m] && bank_of(addr[m]) == 2'(b);
    end
    always_comb begin
      int idx;
      idx = 0;
      bgnt[b] = '0;
      for (int k = NM; k >= 1; k--) begin
        idx = (int'(rr[b]) + k) % NM;
        if (breq[b][idx]) begin bgnt[b] = '0; bgnt[b][idx] = 1'b1; end
      end
    end
    always_comb begin
      ben[b] = |bgnt[b];
      bwe[b] = 1'b0; baddr[b] = '0; bwd[b] = '0; bws[b] = '0;
      for (int m = 0; m < NM; m++)
        if (bgnt[b][m]) begin
          bwe[b] = we[m]; baddr[b] = addr[m][LW+3:4]; bwd[b] = wdata[m]; bws[b] = wstrb[m];
        end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rr[b] <= '0; bread_q[b] <= 1'b0; who_q[b] <= '0;
      end else begin
        bread_q[b] <= ben[b] && !bwe[b];
        for (int m = 0; m < NM; m++)
          if (bgnt[b][m]) begin rr[b] <= MW'(m); who_q[b] <= MW'(m); end
      end
    end
    sram_bank #(.WORDS(WORDS), .WIDTH(128)) u_bank (
      .clk, .en(ben[b]), .we(bwe[b]), .addr(baddr[b]), .wdata(bwd[b]), .wstrb(bws[b]),
      .rdata(brd[b]));
    assert property (@(posedge clk) disable iff (!rst_n) $onehot0(bgnt[b]));
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      gnt[m] = 1'b0;
      rvalid[m] = 1'b0;
      rdata[m] = '0;
      for (int b = 0; b < 4; b++) begin
        if (bgnt[b][m]) gnt[m] = 1'b1;
        if (bread_q[b] && who_q[b] == MW'(m)) begin rvalid[m] = 1'b1; rdata[m] = brd[b]; end
      end
    end
  end
endmodule
