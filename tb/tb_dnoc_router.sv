// tb_dnoc_router: router at (2,2). Checks X-first routing to all four
// directions, PE multicast, register-file and C-bit routing to CN, the drop
// of packets without destination, the 5-cycle hop latency, and round-robin
// sharing of one output by two inputs without loss.
module tb_dnoc_router;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  localparam int NP = DNOC_PORTS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NP-1:0] iv, ir, ov, orr;
  noc_pkt_t ip [NP];
  noc_pkt_t op [NP];
  logic [15:0] drops;
  dnoc_router dut (.clk, .rst_n, .my_x(3'd2), .my_y(3'd2), .in_clk({NP{clk}}),
    .in_rst_n({NP{rst_n}}), .in_valid(iv), .in_ready(ir), .in_pkt(ip), .out_valid(ov),
    .out_ready(orr), .out_pkt(op), .drop_count(drops));

  noc_pkt_t got [NP][$];
  time      got_cyc [NP][$];
  always @(posedge clk) begin
    for (int o = 0; o < NP; o++)
      if (rst_n && ov[o] && orr[o]) begin got[o].push_back(op[o]); got_cyc[o].push_back($time); end
  end

  function automatic noc_pkt_t mk(int x, int y, bit r, logic [3:0] pe, bit c, int tag);
    noc_pkt_t p;
    p = '0;
    p.hdr.size = 3'd4; p.hdr.dx = 3'(x); p.hdr.dy = 3'(y); p.hdr.r = r; p.hdr.pe = pe;
    p.hdr.c = c; p.addr = 32'(tag); p.data = {4{32'(tag)}};
    return p;
  endfunction

  time acc_t;
  task automatic send(int port, noc_pkt_t p);
    @(negedge clk); iv[port] = 1'b1; ip[port] = p;
    #1;
    while (!ir[port]) begin @(negedge clk); #1; end
    @(posedge clk); acc_t = $time;
    @(negedge clk); iv[port] = 1'b0;
  endtask

  task automatic expect_at(int port, int tag, string m);
    int n;
    n = 0;
    while (got[port].size() == 0 && n < 40) begin @(negedge clk); n++; end
    chk(got[port].size() > 0 && got[port][0].addr == 32'(tag), m);
    if (got[port].size() > 0) begin void'(got[port].pop_front()); void'(got_cyc[port].pop_front()); end
  endtask

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int last_src, switches, n_a, n_b;
    iv = '0; orr = '1;
    for (int i = 0; i < NP; i++) ip[i] = '0;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);

    // latency and east routing
    send(DP_PE0, mk(5, 0, 0, 4'b0001, 0, 1));
    while (got[DP_E].size() == 0) @(negedge clk);
    chk((got_cyc[DP_E][0] - acc_t) == 50, $sformatf("hop latency 5 (got %0t)", got_cyc[DP_E][0] - acc_t));
    chk(got[DP_E][0].addr == 32'd1, "X first: east");
    void'(got[DP_E].pop_front()); void'(got_cyc[DP_E].pop_front());

    send(DP_N, mk(0, 7, 0, 4'b0001, 0, 2)); expect_at(DP_W, 2, "west");
    send(DP_W, mk(2, 5, 0, 4'b0001, 0, 3)); expect_at(DP_N, 3, "north (Y up)");
    send(DP_E, mk(2, 0, 0, 4'b0001, 0, 4)); expect_at(DP_S, 4, "south");
    send(DP_S, mk(2, 2, 1, 4'b0000, 0, 5)); expect_at(DP_CN, 5, "register file via CN");
    send(DP_PE1, mk(6, 6, 0, 4'b0001, 1, 6)); expect_at(DP_CN, 6, "C bit to CNoC");
    send(DP_CN, mk(2, 2, 0, 4'b0010, 1, 7)); expect_at(DP_PE1, 7, "from CN ignores C");

    // multicast to PE0 and PE2 with PE2 output stalled for a while
    orr[DP_PE2] = 1'b0;
    send(DP_W, mk(2, 2, 0, 4'b0101, 0, 8));
    expect_at(DP_PE0, 8, "multicast copy PE0");
    repeat (5) @(negedge clk);
    chk(got[DP_PE2].size() == 0, "stalled output holds copy");
    orr[DP_PE2] = 1'b1;
    expect_at(DP_PE2, 8, "multicast copy PE2");

    // drop
    send(DP_N, mk(2, 2, 0, 4'b0000, 0, 9));
    repeat (8) @(negedge clk);
    chk(drops == 16'd1, "packet without destination dropped");

    // contention: N and S both stream 8 packets to PE3
    fork
      for (int k = 0; k < 8; k++) send(DP_N, mk(2, 2, 0, 4'b1000, 0, 100 + k));
      for (int k = 0; k < 8; k++) send(DP_S, mk(2, 2, 0, 4'b1000, 0, 200 + k));
    join
    repeat (20) @(posedge clk);
    chk(got[DP_PE3].size() == 16, $sformatf("16 packets through shared output (%0d)", got[DP_PE3].size()));
    last_src = -1; switches = 0; n_a = 0; n_b = 0;
    foreach (got[DP_PE3][i]) begin
      int src;
      src = int'(got[DP_PE3][i].addr) / 100;
      if (src == 1) begin chk(int'(got[DP_PE3][i].addr) == 100 + n_a, "order N"); n_a++; end
      else begin chk(int'(got[DP_PE3][i].addr) == 200 + n_b, "order S"); n_b++; end
      if (last_src != -1 && src != last_src) switches++;
      last_src = src;
    end
    chk(switches >= 4, $sformatf("round robin interleaves (%0d switches)", switches));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
