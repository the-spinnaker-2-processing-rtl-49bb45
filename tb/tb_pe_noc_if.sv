// tb_pe_noc_if: inbound NoC interface. Sends SRAM-write, MAC-operand,
// register-write, spike, empty and unmapped packets with random grant and
// ready delays, and checks: word k to addr+4k with the right byte strobes
// and replicated data, op_a words in order, register writes at addr+4k,
// the spike key, and that empty and unmapped packets are consumed without
// side effects.
module tb_pe_noc_if;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ir, mem_req, mem_gnt, opa_valid, opa_ready, reg_req, reg_gnt, spk_valid, spk_ready;
  noc_pkt_t ip; logic [31:0] mem_addr, opa_data, reg_wdata, spk_key;
  logic [127:0] mem_wdata; logic [15:0] mem_wstrb; logic [11:0] reg_addr;
  pe_noc_if dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_pkt(ip), .mem_req, .mem_addr,
    .mem_wdata, .mem_wstrb, .mem_gnt, .opa_valid, .opa_ready, .opa_data, .reg_req, .reg_gnt,
    .reg_addr, .reg_wdata, .spk_valid, .spk_ready, .spk_key);
  typedef struct { int kind; logic [31:0] a, d; logic [15:0] s; } ev_t;
  ev_t ev [$];
  always @(negedge clk) begin
    mem_gnt = $urandom_range(0, 1); opa_ready = $urandom_range(0, 1);
    reg_gnt = $urandom_range(0, 1); spk_ready = $urandom_range(0, 1);
  end
  always @(posedge clk) if (rst_n) begin
    if (mem_req && mem_gnt)     ev.push_back('{0, mem_addr, mem_wdata[32*mem_addr[3:2] +: 32], mem_wstrb});
    if (opa_valid && opa_ready) ev.push_back('{1, 0, opa_data, 0});
    if (reg_req && reg_gnt)     ev.push_back('{2, 32'(reg_addr), reg_wdata, 0});
    if (spk_valid && spk_ready) ev.push_back('{3, spk_key, 0, 0});
  end
  task automatic send(noc_pkt_t p);
    @(negedge clk); iv = 1; ip = p; #1;
    while (!ir) begin @(negedge clk); #1; end
    @(posedge clk); @(negedge clk); iv = 0;
    repeat (2) @(negedge clk);
  endtask
  function automatic noc_pkt_t mk(int sz, logic [31:0] a, bit spike);
    noc_pkt_t p;
    p = '0; p.hdr.size = 3'(sz); p.addr = a; p.phdr[PHDR_SPIKE] = spike;
    p.data = {$urandom, $urandom, $urandom, $urandom};
    return p;
  endfunction

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    noc_pkt_t p;
    bit ok;
    iv = 0; ip = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int sz = 1; sz <= 4; sz++) begin
      p = mk(sz, 32'h0000_0104 + 32'(sz * 64), 0); ev.delete(); send(p);
      ok = ev.size() == sz;
      for (int k = 0; ok && k < sz; k++) begin
        logic [31:0] a;
        a = p.addr + 32'(4 * k);
        ok = ev[k].kind == 0 && ev[k].a == a && ev[k].d == p.data[32*k +: 32] && ev[k].s == (16'hF << 4 * a[3:2]);
      end
      chk(ok, $sformatf("SRAM write of %0d words", sz));
      p = mk(sz, 32'h4000_0000, 0); ev.delete(); send(p);
      ok = ev.size() == sz;
      for (int k = 0; ok && k < sz; k++) ok = ev[k].kind == 1 && ev[k].d == p.data[32*k +: 32];
      chk(ok, $sformatf("op_a stream of %0d words", sz));
      p = mk(sz, 32'hE000_0008, 0); ev.delete(); send(p);
      ok = ev.size() == sz;
      for (int k = 0; ok && k < sz; k++) ok = ev[k].kind == 2 && ev[k].a == 32'(8 + 4 * k) && ev[k].d == p.data[32*k +: 32];
      chk(ok, $sformatf("register write of %0d words", sz));
    end
    for (int n = 0; n < 10; n++) begin
      p = mk(n % 5, $urandom, 1); ev.delete(); send(p);
      chk(ev.size() == 1 && ev[0].kind == 3 && ev[0].a == p.addr, "spike key to FIFO");
    end
    p = mk(0, 32'h0000_0000, 0); ev.delete(); send(p); chk(ev.size() == 0, "empty packet consumed");
    p = mk(4, 32'h7000_0000, 0); ev.delete(); send(p); chk(ev.size() == 0, "unmapped address discarded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
