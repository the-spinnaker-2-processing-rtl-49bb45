// dnoc_router: data-NoC router of one QPE (192-bit flits, one packet per flit).
//
// Nine ports: four mesh directions (N, E, S, W), the four PEs of the QPE and
// the bridge to the configuration NoC (CN). Each input follows the router
// structure of the paper: an asynchronous input FIFO that brings packets into
// the router clock domain, the routing logic, a second FIFO that shortens the
// critical path, then per output a port control that arbitrates round-robin
// and drives the crossbar, and an output FIFO.
//
// Routing is X-first dimension order on the destination coordinates of the
// NoC header (Y grows towards N). At the destination QPE the four PE bits are
// a multicast mask: one packet is copied to every selected PE port; an input
// keeps its packet until every selected output has taken a copy. R=1 sends
// the packet to the CN port (the register file sits behind the CNoC). C=1
// sends a packet arriving from a mesh or PE port into the CN port so that it
// travels over the CNoC; packets coming from CN ignore C. A packet for the
// local QPE with neither R nor any PE bit is dropped and counted.
//
// Timing with equal clocks: a packet presented at an input in cycle 0
// appears at the output in cycle 5 (3 cycles input CDC FIFO, 1 mid FIFO, 1
// output FIFO), matching the 5-cycle hop latency of the paper.
// What follows the paper: FIFO in / routing / FIFO / port control / FIFO out
// structure, X/Y routing, round robin, 192-bit flits, PE multicast bits.
// Own choices: FIFO depths, the drop rule, the C-bit handling.
//
// Lint notes: rst_n is an asynchronous reset of the flops and is also read
// by the 'disable iff' of the checking assertions, which makes Verilator
// report SYNCASYNCNET; the assertions are not circuit, so this is harmless.
// The FIFO 'count' outputs are left open on purpose (PINCONNECTEMPTY).
module dnoc_router
  import spinn2_pkg::*;
#(
  parameter int unsigned IN_DEPTH  = 4,
  parameter int unsigned MID_DEPTH = 2,
  parameter int unsigned OUT_DEPTH = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [COORD_W-1:0]   my_x,
  input  logic [COORD_W-1:0]   my_y,
  // inputs, each in the clock domain of its sender
  input  logic [DNOC_PORTS-1:0] in_clk,
  input  logic [DNOC_PORTS-1:0] in_rst_n,
  input  logic [DNOC_PORTS-1:0] in_valid,
  output logic [DNOC_PORTS-1:0] in_ready,
  input  noc_pkt_t              in_pkt   [DNOC_PORTS],
  // outputs, router clock domain
  output logic [DNOC_PORTS-1:0] out_valid,
  input  logic [DNOC_PORTS-1:0] out_ready,
  output noc_pkt_t              out_pkt  [DNOC_PORTS],
  output logic [15:0]           drop_count
);
  localparam int unsigned NP = DNOC_PORTS;

  function automatic logic [NP-1:0] route(noc_hdr_t h, logic [3:0] src,
                                          logic [COORD_W-1:0] x,
                                          logic [COORD_W-1:0] y);
    logic [NP-1:0] m;
    m = '0;
    if (h.c && src != DP_CN)      m[DP_CN] = 1'b1;
    else if (h.dx > x)            m[DP_E]  = 1'b1;
    else if (h.dx < x)            m[DP_W]  = 1'b1;
    else if (h.dy > y)            m[DP_N]  = 1'b1;
    else if (h.dy < y)            m[DP_S]  = 1'b1;
    else if (h.r)                 m[DP_CN] = 1'b1;
    else                          m[DP_PE3:DP_PE0] = h.pe;
    return m;
  endfunction

  typedef struct packed {
    logic [NP-1:0] mask;
    noc_pkt_t      pkt;
  } rpkt_t;

  noc_pkt_t       fin_pkt   [NP];
  logic [NP-1:0]  fin_valid, fin_ready;
  rpkt_t          mid_in    [NP];
  rpkt_t          mid_out   [NP];
  logic [NP-1:0]  mid_valid, mid_ready, mid_pop;
  logic [NP-1:0]  served    [NP];   // [input] outputs already served
  logic [NP-1:0]  grant     [NP];   // [output] one-hot input grant
  logic [NP-1:0]  req       [NP];   // [output] requesting inputs
  logic [NP-1:0]  served_now[NP];   // [input]
  logic [NP-1:0]  fout_ready;
  noc_pkt_t       fout_pkt  [NP];
  logic [$clog2(NP)-1:0] rr_ptr [NP];
  logic [NP-1:0]  drop;

  for (genvar i = 0; i < NP; i++) begin : g_in
    async_fifo #(.WIDTH($bits(noc_pkt_t)), .DEPTH(IN_DEPTH)) u_fin (
      .wclk(in_clk[i]), .wrst_n(in_rst_n[i]),
      .in_valid(in_valid[i]), .in_ready(in_ready[i]), .in_data(in_pkt[i]),
      .rclk(clk), .rrst_n(rst_n),
      .out_valid(fin_valid[i]), .out_ready(fin_ready[i]), .out_data(fin_pkt[i]));

    // routing logic
    assign mid_in[i].pkt  = fin_pkt[i];
    assign mid_in[i].mask = route(fin_pkt[i].hdr, 4'(i), my_x, my_y);
    assign drop[i]        = fin_valid[i] && (mid_in[i].mask == '0);

    fifo_sync #(.WIDTH($bits(rpkt_t)), .DEPTH(MID_DEPTH)) u_fmid (
      .clk, .rst_n,
      .in_valid(fin_valid[i] && !drop[i]), .in_ready(mid_ready[i]), .in_data(mid_in[i]),
      .out_valid(mid_valid[i]), .out_ready(mid_pop[i]), .out_data(mid_out[i]),
      .count());
    assign fin_ready[i] = mid_ready[i] || drop[i];

    always_comb begin
      served_now[i] = '0;
      for (int o = 0; o < NP; o++) served_now[i][o] = grant[o][i];
    end
    assign mid_pop[i] = mid_valid[i] &&
                        ((served[i] | served_now[i]) == mid_out[i].mask);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)          served[i] <= '0;
      else if (mid_pop[i]) served[i] <= '0;
      else                 served[i] <= served[i] | served_now[i];
    end
  end

  // port control: round-robin arbitration per output, crossbar
  for (genvar o = 0; o < NP; o++) begin : g_out
    always_comb begin
      for (int i = 0; i < NP; i++)
        req[o][i] = mid_valid[i] && mid_out[i].mask[o] && !served[i][o];
    end
    always_comb begin
      int idx;
      idx = 0;
      grant[o] = '0;
      if (fout_ready[o]) begin
        for (int k = NP; k >= 1; k--) begin
          idx = (int'(rr_ptr[o]) + k) % NP;
          if (req[o][idx]) grant[o] = '0;
          if (req[o][idx]) grant[o][idx] = 1'b1;
        end
      end
    end
    always_comb begin
      fout_pkt[o] = '0;
      for (int i = 0; i < NP; i++) if (grant[o][i]) fout_pkt[o] = mid_out[i].pkt;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) rr_ptr[o] <= '0;
      else begin
        for (int i = 0; i < NP; i++)
          if (grant[o][i]) rr_ptr[o] <= ($clog2(NP))'(i);
      end
    end

    fifo_sync #(.WIDTH($bits(noc_pkt_t)), .DEPTH(OUT_DEPTH)) u_fout (
      .clk, .rst_n,
      .in_valid(|grant[o]), .in_ready(fout_ready[o]), .in_data(fout_pkt[o]),
      .out_valid(out_valid[o]), .out_ready(out_ready[o]), .out_data(out_pkt[o]),
      .count());

    assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant[o]));
    assert property (@(posedge clk) disable iff (!rst_n)
                     out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_pkt[o]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) drop_count <= '0;
    else if (|drop) drop_count <= drop_count + 16'($countones(drop));
  end
endmodule
