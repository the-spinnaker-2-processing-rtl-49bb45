// cnoc_router: configuration-NoC router of one QPE (32-bit flits, wormhole).
//
// Six ports: N, E, S, W, the QPE register file (RF) and the bridge to the data
// NoC (DN). A packet is the 192-bit NoC packet cut into 32-bit flits (see
// noc_ser): the head flit holds the 15-bit NoC header and the 17-bit packet
// header, so the router routes on the head flit and then locks the chosen
// output to that input until the flit marked last has passed (wormhole
// switching). Routing is X-first on the header coordinates; at the
// destination R=1 selects RF, otherwise the packet goes to DN, which hands it
// to the data-NoC router for delivery to the PEs.
// The CNoC runs from the reference clock, so all ports share the router
// clock. Each input has a FIFO; outputs are arbitrated round-robin among the
// inputs whose head flit asks for them; each output has a FIFO. One flit per
// port per cycle; a head flit entering in cycle 0 leaves in cycle 2.
// From the paper: 32-bit flits, wormhole switching, ports of the QPE drawing.
// Own choices: the last-flit sideband bit, FIFO depths, arbitration order.
module cnoc_router
  import spinn2_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [COORD_W-1:0]    my_x,
  input  logic [COORD_W-1:0]    my_y,
  input  logic [CNOC_PORTS-1:0] in_valid,
  output logic [CNOC_PORTS-1:0] in_ready,
  input  cflit_t                in_flit  [CNOC_PORTS],
  output logic [CNOC_PORTS-1:0] out_valid,
  input  logic [CNOC_PORTS-1:0] out_ready,
  output cflit_t                out_flit [CNOC_PORTS]
);
  localparam int unsigned NP = CNOC_PORTS;
  localparam int unsigned PW = $clog2(NP);

  function automatic logic [PW-1:0] route(noc_hdr_t h, logic [COORD_W-1:0] x,
                                          logic [COORD_W-1:0] y);
    if (h.dx > x)      return PW'(CP_E);
    else if (h.dx < x) return PW'(CP_W);
    else if (h.dy > y) return PW'(CP_N);
    else if (h.dy < y) return PW'(CP_S);
    else if (h.r)      return PW'(CP_RF);
    else               return PW'(CP_DN);
  endfunction

  cflit_t        fin   [NP];
  logic [NP-1:0] fin_valid, fin_pop;
  logic [PW-1:0] want  [NP];      // output requested by the packet at head
  logic [NP-1:0] in_pkt;          // input is inside a packet (head consumed)
  logic [PW-1:0] cur   [NP];      // output of the packet in progress
  logic [NP-1:0] locked;          // output owned by an input
  logic [PW-1:0] owner [NP];
  logic [NP-1:0] fout_ready;
  logic [NP-1:0] push;
  cflit_t        fout_d[NP];
  logic [PW-1:0] rr    [NP];
  logic [NP-1:0] new_grant [NP];  // [output] input granted a new packet

  for (genvar i = 0; i < NP; i++) begin : g_in
    fifo_sync #(.WIDTH($bits(cflit_t)), .DEPTH(DEPTH)) u_fin (
      .clk, .rst_n, .in_valid(in_valid[i]), .in_ready(in_ready[i]), .in_data(in_flit[i]),
      .out_valid(fin_valid[i]), .out_ready(fin_pop[i]), .out_data(fin[i]), .count());
    assign want[i] = in_pkt[i] ? cur[i] : route(noc_hdr_t'(fin[i].data[31:17]), my_x, my_y);
  end

  for (genvar o = 0; o < NP; o++) begin : g_out
    always_comb begin
      int idx;
      idx = 0;
      new_grant[o] = '0;
      if (!locked[o]) begin
        for (int k = NP; k >= 1; k--) begin
          idx = (int'(rr[o]) + k) % NP;
          if (fin_valid[idx] && !in_pkt[idx] && want[idx] == PW'(o)) begin
            new_grant[o] = '0;
            new_grant[o][idx] = 1'b1;
          end
        end
      end
    end
  end

  // per input: may it send a flit this cycle?
  always_comb begin
    for (int i = 0; i < NP; i++) begin
      fin_pop[i] = 1'b0;
      if (fin_valid[i]) begin
        if (in_pkt[i])
          fin_pop[i] = locked[cur[i]] && owner[cur[i]] == PW'(i) && fout_ready[cur[i]];
        else
          fin_pop[i] = new_grant[want[i]][i] && fout_ready[want[i]];
      end
    end
    for (int o = 0; o < NP; o++) begin
      push[o]   = 1'b0;
      fout_d[o] = '0;
      for (int i = 0; i < NP; i++)
        if (fin_pop[i] && want[i] == PW'(o)) begin
          push[o]   = 1'b1;
          fout_d[o] = fin[i];
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt <= '0; locked <= '0;
      for (int i = 0; i < NP; i++) begin cur[i] <= '0; owner[i] <= '0; rr[i] <= '0; end
    end else begin
      for (int i = 0; i < NP; i++) begin
        if (fin_pop[i]) begin
          if (!in_pkt[i]) begin
            cur[i] <= want[i];
            locked[want[i]] <= !fin[i].last;
            owner[want[i]]  <= PW'(i);
            rr[want[i]]     <= PW'(i);
            in_pkt[i] <= !fin[i].last;
          end else if (fin[i].last) begin
            in_pkt[i] <= 1'b0;
            locked[cur[i]] <= 1'b0;
          end
        end
      end
    end
  end

  for (genvar o = 0; o < NP; o++) begin : g_fout
    fifo_sync #(.WIDTH($bits(cflit_t)), .DEPTH(2)) u_fout (
      .clk, .rst_n, .in_valid(push[o]), .in_ready(fout_ready[o]), .in_data(fout_d[o]),
      .out_valid(out_valid[o]), .out_ready(out_ready[o]), .out_data(out_flit[o]), .count());
    assert property (@(posedge clk) disable iff (!rst_n) $onehot0(new_grant[o]));
  end
endmodule
