// tb_pe_memory: four-bank PE SRAM shared by five masters.
// Each master issues random reads and byte-strobed writes, holding each
// request until granted. A byte-accurate model is updated at each write
// grant; every read must return the model line one cycle after its grant.
// It also checks that masters on different banks are granted in the same
// cycle, and that five masters hammering one bank are all served (round
// robin: no master waits more than NM grants).
module tb_pe_memory;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  localparam int NM = 5, W = 64, LINES = 4 * W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NM-1:0] req, we, gnt, rvalid;
  logic [31:0] addr [NM];
  logic [127:0] wdata [NM], rdata [NM];
  logic [15:0] wstrb [NM];
  pe_memory #(.NM(NM), .WORDS(W)) dut (.clk, .rst_n, .req, .we, .addr, .wdata, .wstrb,
    .gnt, .rvalid, .rdata);

  logic [127:0] model [LINES];
  logic [127:0] exp_rd [NM];
  bit pend [NM];
  bit was_gnt [NM];
  int parallel = 0, nread = 0, nwrite = 0, max_wait = 0;
  int waitc [NM];
  bit one_bank = 0;

  always @(posedge clk) if (rst_n) begin
    int ng;
    for (int m = 0; m < NM; m++) begin
      if (pend[m]) begin
        chk(rvalid[m] && rdata[m] == exp_rd[m], $sformatf("read data master %0d", m));
        pend[m] = 0;
      end else if (rvalid[m]) chk(0, "unexpected rvalid");
    end
    ng = 0;
    for (int m = 0; m < NM; m++) begin
      was_gnt[m] = req[m] && gnt[m];
      if (req[m] && !gnt[m]) begin waitc[m]++; if (waitc[m] > max_wait) max_wait = waitc[m]; end
      if (was_gnt[m]) begin
        int l;
        ng++; waitc[m] = 0;
        l = int'(addr[m][31:4]) % LINES;
        if (we[m]) begin
          for (int b = 0; b < 16; b++) if (wstrb[m][b]) model[l][8*b +: 8] = wdata[m][8*b +: 8];
          nwrite++;
        end else begin exp_rd[m] = model[l]; pend[m] = 1; nread++; end
      end
    end
    if (ng > 1) parallel++;
  end

  task automatic new_req(int m);
    req[m] = ($urandom_range(0, 3) != 0);
    we[m] = $urandom_range(0, 1);
    addr[m] = one_bank ? 32'(($urandom_range(0, W - 1)) * 16) : 32'($urandom_range(0, LINES - 1) * 16);
    wdata[m] = {$urandom, $urandom, $urandom, $urandom};
    wstrb[m] = 16'($urandom);
  endtask

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    req = '0; we = '0;
    for (int m = 0; m < NM; m++) begin addr[m] = 0; wdata[m] = 0; wstrb[m] = 0; waitc[m] = 0; pend[m] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    // initialise every line through master 0 with full strobes
    for (int l = 0; l < LINES; l++) begin
      @(negedge clk); req[0] = 1; we[0] = 1; addr[0] = 32'(l * 16); wstrb[0] = '1;
      wdata[0] = {$urandom, $urandom, $urandom, $urandom};
    end
    @(negedge clk); req = '0;
    @(negedge clk);
    for (int c = 0; c < 3000; c++) begin
      if (c == 2000) begin one_bank = 1; max_wait = 0; end
      for (int m = 0; m < NM; m++)
        if (!req[m] || was_gnt[m]) new_req(m);
      if (one_bank) req = '1;
      @(negedge clk);
    end
    req = '0;
    repeat (3) @(negedge clk);
    chk(parallel > 100, $sformatf("grants to different banks in one cycle (%0d)", parallel));
    chk(max_wait <= NM - 1, $sformatf("round robin bound on one bank (max wait %0d)", max_wait));
    chk(nread > 1000 && nwrite > 1000, $sformatf("traffic (%0d reads %0d writes)", nread, nwrite));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
