// qpe_xbar: crossbar for memory sharing between the four PEs of a QPE.
//
// Each PE can read and write the SRAM of the PEs it is connected to: in the
// QPE drawing PE0-PE1, PE0-PE2, PE1-PE3 and PE2-PE3 are linked (PE0 top
// left, PE1 top right, PE2 bottom left, PE3 bottom right). A master request
// (rm_* of the source PE) names the target PE in addr[21:20] and the target
// SRAM address in addr[16:0]; the crossbar forwards it to the target's rs_*
// slave port. When both neighbours of a target ask in the same cycle, a
// round-robin bit per target decides. Requests to an unconnected PE (itself
// or the diagonal one) are granted and dropped; reads of them return zero.
// gnt is combinational; read data returns with rvalid one cycle after gnt.
// The crossbar is synchronous: PEs that share memory through it are assumed
// to run from the same clock (the paper does not describe how this path
// crosses the PEs' independent DVFS clocks).
module qpe_xbar (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [3:0]   rm_req,
  input  logic [3:0]   rm_we,
  input  logic [31:0]  rm_addr  [4],
  input  logic [127:0] rm_wdata [4],
  input  logic [15:0]  rm_wstrb [4],
  output logic [3:0]   rm_gnt,
  output logic [3:0]   rm_rvalid,
  output logic [127:0] rm_rdata [4],
  output logic [3:0]   rs_req,
  output logic [3:0]   rs_we,
  output logic [31:0]  rs_addr  [4],
  output logic [127:0] rs_wdata [4],
  output logic [15:0]  rs_wstrb [4],
  input  logic [3:0]   rs_gnt,
  input  logic [3:0]   rs_rvalid,
  input  logic [127:0] rs_rdata [4]
);
  // neighbours of each PE; index 0 and 1
  function automatic logic [1:0] nb(int t, int k);
    unique case (t)
      0: return k == 0 ? 2'd1 : 2'd2;
      1: return k == 0 ? 2'd0 : 2'd3;
      2: return k == 0 ? 2'd0 : 2'd3;
      default: return k == 0 ? 2'd1 : 2'd2;
    endcase
  endfunction
  function automatic logic linked(logic [1:0] s, logic [1:0] t);
    return (s ^ t) == 2'd1 || (s ^ t) == 2'd2;
  endfunction

  logic [1:0] tgt [4];
  logic [3:0] want_t [4];   // [target] sources requesting it
  logic [3:0] sel;          // [target] chosen neighbour index
  logic [3:0] rr;
  logic [3:0] dead;         // [source] request to an unconnected PE
  logic [1:0] src_q [4];    // [target] source of the last granted read
  logic [3:0] rd_q;         // [target] read pending
  logic [3:0] dead_rd_q;

  always_comb begin
    for (int s = 0; s < 4; s++) begin
      tgt[s]  = rm_addr[s][21:20];
      dead[s] = rm_req[s] && !linked(2'(s), tgt[s]);
    end
    for (int t = 0; t < 4; t++)
      for (int s = 0; s < 4; s++)
        want_t[t][s] = rm_req[s] && tgt[s] == 2'(t) && linked(2'(s), 2'(t));
  end

  logic [1:0] src_t [4];     // [target] granted source
  always_comb begin
    for (int t = 0; t < 4; t++) begin
      logic r0, r1;
      logic [1:0] s;
      r0 = want_t[t][nb(t, 0)];
      r1 = want_t[t][nb(t, 1)];
      sel[t] = (r0 && r1) ? rr[t] : r1;
      s = nb(t, int'(sel[t]));
      rs_req[t]   = r0 || r1;
      rs_we[t]    = rm_we[s];
      rs_addr[t]  = {15'd0, rm_addr[s][16:0]};
      rs_wdata[t] = rm_wdata[s];
      rs_wstrb[t] = rm_wstrb[s];
      src_t[t]    = s;
    end
  end
  always_comb begin
    rm_gnt = dead;
    for (int t = 0; t < 4; t++)
      if (rs_req[t] && rs_gnt[t]) rm_gnt[src_t[t]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0; rd_q <= '0; dead_rd_q <= '0;
      for (int t = 0; t < 4; t++) src_q[t] <= '0;
    end else begin
      dead_rd_q <= dead & ~rm_we;
      for (int t = 0; t < 4; t++) begin
        rd_q[t] <= rs_req[t] && rs_gnt[t] && !rs_we[t];
        if (rs_req[t] && rs_gnt[t]) begin
          rr[t]    <= !sel[t];
          src_q[t] <= nb(t, int'(sel[t]));
        end
      end
    end
  end

  always_comb begin
    rm_rvalid = dead_rd_q;
    for (int s = 0; s < 4; s++) rm_rdata[s] = '0;
    for (int t = 0; t < 4; t++)
      if (rd_q[t] && rs_rvalid[t]) begin
        rm_rvalid[src_q[t]] = 1'b1;
        rm_rdata[src_q[t]]  = rs_rdata[t];
      end
  end
endmodule
