// tb_sp_router: SpiNNaker packet router with 6 links, 8 local PEs, a
// 16-entry table and a 16-cycle drop wait, on chip (2,3).
// Checks MC table routing to links and several PEs, lowest matching entry
// winning, default routing of a link miss to the opposite link, dropping a
// local miss, C2C routing to a local PE and X-first to the four link
// directions, NN from a link to the monitor PE 0, NN from local to one link,
// to all links and the drop code, dropping after the wait when a link is
// blocked, and seven inputs arriving at once all being routed.
module tb_sp_router;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  localparam int NL = 6, NPE = 8, NE = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NL:0] iv, ir;
  sp_pkt_t ip [NL+1];
  logic [NL-1:0] lv, lr;
  sp_pkt_t lp, locp;
  logic locv, locr;
  logic [2:0] locpe;
  logic tbl_we, tbl_valid; logic [3:0] tbl_idx; logic [31:0] tbl_key, tbl_mask;
  logic [NL+NPE-1:0] tbl_route;
  logic [15:0] drops, misses;
  sp_router #(.NLINK(NL), .NPE(NPE), .MC_ENTRIES(NE), .DROP_WAIT(16)) dut (.clk, .rst_n,
    .chip_id({8'd2, 8'd3}), .in_valid(iv), .in_ready(ir), .in_pkt(ip), .link_valid(lv),
    .link_ready(lr), .link_pkt(lp), .loc_valid(locv), .loc_ready(locr), .loc_pkt(locp),
    .loc_pe(locpe), .tbl_we, .tbl_idx, .tbl_valid, .tbl_key, .tbl_mask, .tbl_route,
    .drop_count(drops), .mc_miss_count(misses));

  logic [31:0] lk [NL][$];
  logic [31:0] pk [NPE][$];
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NL; l++) if (lv[l] && lr[l]) lk[l].push_back(lp.key);
    if (locv && locr) pk[locpe].push_back(locp.key);
  end
  task automatic clear();
    for (int l = 0; l < NL; l++) lk[l].delete();
    for (int p = 0; p < NPE; p++) pk[p].delete();
  endtask
  // returns bitmask of links / PEs that saw the key exactly once
  function automatic logic [NL+NPE-1:0] seen(logic [31:0] key);
    logic [NL+NPE-1:0] m;
    m = '0;
    for (int l = 0; l < NL; l++) m[l] = lk[l].size() == 1 && lk[l][0] == key;
    for (int p = 0; p < NPE; p++) m[NL + p] = pk[p].size() == 1 && pk[p][0] == key;
    return m;
  endfunction
  function automatic bit quiet();
    for (int l = 0; l < NL; l++) if (lk[l].size() != 0) return 0;
    for (int p = 0; p < NPE; p++) if (pk[p].size() != 0) return 0;
    return 1;
  endfunction

  task automatic entry(int idx, logic [31:0] key, logic [31:0] mask, logic [NL+NPE-1:0] route);
    @(negedge clk); tbl_we = 1; tbl_idx = 4'(idx); tbl_valid = 1; tbl_key = key; tbl_mask = mask;
    tbl_route = route; @(negedge clk); tbl_we = 0;
  endtask
  task automatic send(int port, logic [7:0] ctrl, logic [31:0] key);
    @(negedge clk); iv[port] = 1; ip[port] = '{ctrl: ctrl, key: key, data: 128'(key)}; #1;
    while (!ir[port]) begin @(negedge clk); #1; end
    @(posedge clk); @(negedge clk); iv[port] = 0;
  endtask
  task automatic route_test(int port, logic [7:0] ctrl, logic [31:0] key, logic [NL+NPE-1:0] want, string m);
    clear(); send(port, ctrl, key); repeat (12) @(negedge clk);
    chk(seen(key) == want, $sformatf("%s (want %b got %b)", m, want, seen(key)));
  endtask
  localparam logic [7:0] MC = 8'h00, C2C = 8'h40;
  function automatic logic [7:0] nn(int r); return 8'h80 | 8'(r << 2); endfunction

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int d0;
    iv = '0; lr = '1; locr = 1; tbl_we = 0; tbl_idx = 0; tbl_valid = 0; tbl_key = 0; tbl_mask = 0; tbl_route = 0;
    for (int i = 0; i <= NL; i++) ip[i] = '0;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    entry(0, 32'h1000_0000, 32'hFFFF_0000, 14'b00101000_000010);
    entry(1, 32'h1000_0000, 32'hF000_0000, 14'b00000000_010000);
    entry(5, 32'h2000_00A0, 32'hFFFF_FFF0, 14'b11111111_000000);
    route_test(NL, MC, 32'h1000_1234, 14'b00101000_000010, "MC to link 1 and PEs 3, 5");
    route_test(NL, MC, 32'h1001_0000, 14'b00000000_010000, "MC lowest matching entry wins");
    route_test(0, MC, 32'h2000_00A7, 14'b11111111_000000, "MC to all eight PEs");
    route_test(2, MC, 32'h3000_0000, 14'b00000000_100000, "MC miss from link 2 default-routed to link 5");
    d0 = drops;
    route_test(NL, MC, 32'h3000_0001, 14'b0, "MC miss from local dropped");
    chk(drops == 16'(d0 + 1) && misses == 16'd2, "drop and miss counters");
    route_test(1, C2C, {8'd2, 8'd3, 8'd6, 8'd0}, 14'b01000000_000000, "C2C to local PE 6");
    route_test(NL, C2C, {8'd5, 8'd0, 8'd1, 8'd0}, 14'b00000000_000001, "C2C east first");
    route_test(NL, C2C, {8'd0, 8'd9, 8'd1, 8'd0}, 14'b00000000_001000, "C2C west first");
    route_test(NL, C2C, {8'd2, 8'd7, 8'd1, 8'd0}, 14'b00000000_000100, "C2C north");
    route_test(NL, C2C, {8'd2, 8'd1, 8'd1, 8'd0}, 14'b00000000_100000, "C2C south");
    route_test(3, nn(0), 32'h0000_0077, 14'b00000001_000000, "NN from link to monitor PE 0");
    route_test(NL, nn(4), 32'h0000_0078, 14'b00000000_010000, "NN local to link 4");
    route_test(NL, nn(7), 32'h0000_0079, 14'b00000000_111111, "NN local broadcast");
    d0 = drops;
    route_test(NL, nn(6), 32'h0000_007A, 14'b0, "NN drop code");
    chk(drops == 16'(d0 + 1), "NN drop counted");
    // blocked link 1: copy waits, then the packet is dropped
    lr[1] = 0; d0 = drops;
    clear(); send(NL, MC, 32'h1000_5555); repeat (40) @(negedge clk);
    chk(seen(32'h1000_5555) == 14'b00101000_000000 && drops == 16'(d0 + 1), "blocked link: dropped after wait");
    lr[1] = 1; repeat (5) @(negedge clk);
    chk(lk[1].size() == 0, "dropped copy never sent");
    // seven inputs at once
    clear();
    fork
      for (int p = 0; p <= NL; p++) begin
        automatic int q = p;
        fork send(q, MC, 32'h2000_00A0 + 32'(q)); join_none
      end
    join
    wait fork;
    repeat (100) @(negedge clk);
    begin
      bit ok;
      ok = 1;
      for (int pe = 0; pe < NPE; pe++) ok &= pk[pe].size() == NL + 1;
      if (!ok) $display("pe0 got %0d, drops %0d", pk[0].size(), drops);
      chk(ok, "seven simultaneous packets all delivered to eight PEs");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
