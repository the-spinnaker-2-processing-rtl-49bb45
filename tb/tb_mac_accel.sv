// tb_mac_accel: MAC accelerator with a behavioural SRAM (random grant delays
// in one run, always granted in another) and an op_a stream source.
// MM: a 4xK by Kx16 product with K=8 and K=37, the results read back from
// the SRAM model at OUT_ADDR + 4*(16i+j); checks the K+20 cycle timing with
// no stalls, STATUS busy/done, and the one-cycle irq.
// CONV: 4 output channels by 16 pixels, 21 taps, against a 1-D
// cross-correlation model; SRAM reads must be 1 + ceil(K/16) lines.
module tb_mac_accel;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic reg_we; logic [7:0] reg_addr; logic [31:0] reg_wdata, reg_rdata;
  logic opa_valid, opa_ready; logic [31:0] opa_data;
  logic mem_req, mem_we, mem_gnt, mem_rvalid, irq, busy;
  logic [31:0] mem_addr; logic [127:0] mem_wdata, mem_rdata; logic [15:0] mem_wstrb;
  mac_accel dut (.clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata,
    .opa_valid, .opa_ready, .opa_data, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_wstrb,
    .mem_gnt, .mem_rvalid, .mem_rdata, .irq, .busy);

  logic [127:0] sram [1024];
  bit stall = 0;
  int nreads = 0, nirq = 0;
  always @(negedge clk) mem_gnt = stall ? ($urandom_range(0, 2) == 0) : 1'b1;
  always @(posedge clk) begin
    mem_rvalid <= 0;
    if (rst_n && mem_req && mem_gnt) begin
      if (mem_we) begin
        for (int b = 0; b < 16; b++) if (mem_wstrb[b]) sram[mem_addr[13:4]][8*b +: 8] <= mem_wdata[8*b +: 8];
      end else begin mem_rdata <= sram[mem_addr[13:4]]; mem_rvalid <= 1; nreads++; end
    end
    if (rst_n && irq) nirq++;
  end

  logic [31:0] opq [$];
  always @(negedge clk) begin
    opa_valid = opq.size() > 0 && (!stall || $urandom_range(0, 1));
    opa_data = opq.size() > 0 ? opq[0] : 0;
  end
  always @(posedge clk) if (opa_valid && opa_ready) void'(opq.pop_front());

  task automatic wr(int a, int d);
    @(negedge clk); reg_we = 1; reg_addr = 8'(a); reg_wdata = 32'(d);
    @(negedge clk); reg_we = 0;
  endtask
  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk); reg_addr = 8'(a); #1; d = reg_rdata;
  endtask

  task automatic run_mm(int K, bit st);
    byte unsigned A [4][64]; byte unsigned B [64][16];
    int t0, t1, irq0;
    logic [31:0] s;
    bit ok;
    stall = st;
    for (int k = 0; k < K; k++) begin
      logic [31:0] w;
      for (int i = 0; i < 4; i++) begin A[i][k] = 8'($urandom); w[8*i +: 8] = A[i][k]; end
      opq.push_back(w);
      for (int j = 0; j < 16; j++) begin B[k][j] = 8'($urandom); sram[16 + k][8*j +: 8] = B[k][j]; end
    end
    wr(4, K); wr(8, 16 * 16); wr(12, 512 * 16);
    irq0 = nirq;
    @(negedge clk); reg_we = 1; reg_addr = 0; reg_wdata = 1;
    @(posedge clk); t0 = int'($time / 10);
    @(negedge clk); reg_we = 0;
    rd(16, s); chk(s[0] && !s[1], "STATUS busy while running");
    while (!irq) @(posedge clk);
    t1 = int'($time / 10);
    @(negedge clk);
    if (!st) chk(t1 - t0 == K + 20, $sformatf("MM K=%0d takes K+20 cycles (%0d)", K, t1 - t0));
    repeat (2) @(negedge clk);
    chk(nirq == irq0 + 1, "single irq pulse");
    rd(16, s); chk(s[1] && !s[0], "STATUS done");
    ok = 1;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 16; j++) begin
      int e, l;
      e = 0;
      for (int k = 0; k < K; k++) e += A[i][k] * B[k][j];
      l = 512 + (16 * i + j) / 4;
      ok &= sram[l][32 * ((16 * i + j) % 4) +: 32] == 32'(e);
    end
    chk(ok, $sformatf("MM K=%0d result (stall=%0d)", K, st));
  endtask

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    reg_we = 0; reg_addr = 0; reg_wdata = 0; mem_rvalid = 0; mem_rdata = 0;
    foreach (sram[i]) sram[i] = '0;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    run_mm(8, 0);
    run_mm(37, 0);
    run_mm(37, 1);
    // convolution
    begin
      byte unsigned x [48]; byte unsigned w [4][21];
      int K, r0;
      bit ok;
      K = 21; stall = 1;
      foreach (x[p]) begin x[p] = 8'($urandom); sram[100 + p / 16][8 * (p % 16) +: 8] = x[p]; end
      for (int k = 0; k < K; k++) begin
        logic [31:0] v;
        for (int i = 0; i < 4; i++) begin w[i][k] = 8'($urandom); v[8*i +: 8] = w[i][k]; end
        opq.push_back(v);
      end
      wr(4, K); wr(8, 100 * 16); wr(12, 600 * 16);
      r0 = nreads;
      wr(0, 3);
      while (!irq) @(posedge clk);
      repeat (2) @(negedge clk);
      chk(nreads - r0 == 1 + (K + 15) / 16, $sformatf("CONV reads %0d lines", nreads - r0));
      ok = 1;
      for (int i = 0; i < 4; i++) for (int j = 0; j < 16; j++) begin
        int e;
        e = 0;
        for (int k = 0; k < K; k++) e += w[i][k] * x[j + k];
        ok &= sram[600 + (16 * i + j) / 4][32 * ((16 * i + j) % 4) +: 32] == 32'(e);
      end
      chk(ok, "CONV 21 taps result");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
