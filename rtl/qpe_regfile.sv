// qpe_regfile: QPE configuration register file, reached over the CNoC.
//
// Takes whole NoC packets (rebuilt from CNoC flits by noc_des). A packet with
// N payload words (size field) writes word k to register (addr[31:2] + k)
// modulo NREGS, one register per cycle, so an N-word packet takes N cycles.
// A packet with no payload is consumed without effect. The registers drive
// the cfg outputs (used by the QPE as per-PE configuration words). Reset
// clears them. The paper names the register file and says the CNoC gives
// access to all registers at boot; the register count, the write-only access
// and the addressing are this design's choice.
module qpe_regfile
  import spinn2_pkg::*;
#(
  parameter int unsigned NREGS = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  noc_pkt_t    in_pkt,
  output logic [31:0] cfg [NREGS],
  output logic [15:0] write_count
);
  localparam int unsigned RW = $clog2(NREGS);
  logic [2:0] k;
  logic       last;
  logic [RW-1:0] ridx;
  logic [2:0] nwords;

  assign nwords   = in_pkt.hdr.size > 3'd4 ? 3'd4 : in_pkt.hdr.size;
  assign last     = (nwords == 3'd0) || (k == nwords - 3'd1);
  assign in_ready = in_valid && last;
  assign ridx     = RW'(in_pkt.addr[RW+1:2] + RW'(k));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k <= '0; write_count <= '0;
      for (int i = 0; i < NREGS; i++) cfg[i] <= '0;
    end else if (in_valid) begin
      if (nwords != 3'd0) begin
        cfg[ridx] <= in_pkt.data[32*k +: 32];
        write_count <= write_count + 16'd1;
      end
      k <= last ? 3'd0 : k + 3'd1;
    end
  end
endmodule
