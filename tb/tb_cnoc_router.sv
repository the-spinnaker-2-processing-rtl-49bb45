// tb_cnoc_router: configuration-NoC router at (2,2).
// Checks X-first routing of multi-flit packets to E, W, N, S, to the register
// file port (R=1) and to the data-NoC bridge port (R=0); wormhole switching
// (two packets racing for one output come out whole, one after the other,
// and neither loses a flit); and the flit order within a packet.
// Stimulus is driven at the falling edge, outputs are sampled at the rising
// edge while reset is released. All outputs are always ready except during
// the back-pressure test.
module tb_cnoc_router;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  localparam int NP = CNOC_PORTS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NP-1:0] iv, ir, ov, orr;
  cflit_t ifl [NP];
  cflit_t ofl [NP];
  cnoc_router dut (.clk, .rst_n, .my_x(3'd2), .my_y(3'd2), .in_valid(iv), .in_ready(ir),
    .in_flit(ifl), .out_valid(ov), .out_ready(orr), .out_flit(ofl));

  cflit_t got [NP][$];
  always @(posedge clk)
    for (int o = 0; o < NP; o++) if (rst_n && ov[o] && orr[o]) got[o].push_back(ofl[o]);

  // send a packet of n flits: head with header, then tag*16+k
  task automatic send(int port, int x, int y, bit r, int tag, int n);
    noc_hdr_t h;
    h = '0; h.size = 3'(n - 2); h.dx = 3'(x); h.dy = 3'(y); h.r = r;
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      iv[port] = 1'b1;
      ifl[port].data = (k == 0) ? {h, 17'(tag)} : 32'(tag * 16 + k);
      ifl[port].last = (k == n - 1);
      #1;
      while (!ir[port]) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk); iv[port] = 1'b0;
  endtask

  // check that port holds one whole packet with this tag, remove it
  task automatic expect_pkt(int port, int tag, int n, string m);
    int w;
    bit ok;
    w = 0;
    while (got[port].size() < n && w < 60) begin @(negedge clk); w++; end
    ok = got[port].size() >= n;
    for (int k = 0; ok && k < n; k++) begin
      if (k == 0) ok = got[port][0].data[16:0] == 17'(tag);
      else        ok = ok && got[port][k].data == 32'(tag * 16 + k);
      ok = ok && (got[port][k].last == (k == n - 1));
    end
    chk(ok, m);
    for (int k = 0; k < n && got[port].size() > 0; k++) void'(got[port].pop_front());
  endtask

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    iv = '0; orr = '1;
    for (int i = 0; i < NP; i++) ifl[i] = '0;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);

    send(CP_RF, 5, 2, 0, 1, 6); expect_pkt(CP_E, 1, 6, "east");
    send(CP_N, 0, 6, 0, 2, 3);  expect_pkt(CP_W, 2, 3, "west (X first)");
    send(CP_W, 2, 4, 0, 3, 4);  expect_pkt(CP_N, 3, 4, "north");
    send(CP_E, 2, 1, 1, 4, 2);  expect_pkt(CP_S, 4, 2, "south");
    send(CP_S, 2, 2, 1, 5, 3);  expect_pkt(CP_RF, 5, 3, "register file (R=1)");
    send(CP_N, 2, 2, 0, 6, 6);  expect_pkt(CP_DN, 6, 6, "data-NoC bridge (R=0)");
    for (int o = 0; o < NP; o++) chk(got[o].size() == 0, $sformatf("no stray flits on %0d", o));

    // wormhole: N, S and DN all send 6-flit packets to E at once, E stalls
    orr[CP_E] = 1'b0;
    fork
      send(CP_N, 6, 2, 0, 7, 6);
      send(CP_S, 6, 2, 0, 8, 6);
      send(CP_DN, 6, 2, 0, 9, 6);
      begin repeat (6) @(negedge clk); orr[CP_E] = 1'b1; end
    join
    repeat (30) @(negedge clk);
    chk(got[CP_E].size() == 18, $sformatf("18 flits out (%0d)", got[CP_E].size()));
    begin
      bit seen [int];
      for (int p = 0; p < 3; p++) begin
        int tag;
        tag = int'(got[CP_E][0].data[16:0]);
        chk(tag >= 7 && tag <= 9 && !seen.exists(tag), "packet head in order");
        seen[tag] = 1'b1;
        expect_pkt(CP_E, tag, 6, $sformatf("packet %0d not interleaved", tag));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
