// tb_qpe_xbar: memory-sharing crossbar of a QPE with four behavioural SRAM
// slaves (random grant). Each PE issues random reads and writes to its
// linked neighbours; checks that every access reaches the right target at
// the right address (word model per target), that read data returns to the
// right source, that two neighbours of one target are both served (round
// robin), and that accesses to the diagonal PE or to itself are granted,
// dropped and read as zero.
module tb_qpe_xbar;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] rm_req, rm_we, rm_gnt, rm_rvalid, rs_req, rs_we, rs_gnt, rs_rvalid;
  logic [31:0] rm_addr [4], rs_addr [4];
  logic [127:0] rm_wdata [4], rm_rdata [4], rs_wdata [4], rs_rdata [4];
  logic [15:0] rm_wstrb [4], rs_wstrb [4];
  qpe_xbar dut (.clk, .rst_n, .rm_req, .rm_we, .rm_addr, .rm_wdata, .rm_wstrb, .rm_gnt,
    .rm_rvalid, .rm_rdata, .rs_req, .rs_we, .rs_addr, .rs_wdata, .rs_wstrb, .rs_gnt,
    .rs_rvalid, .rs_rdata);
  logic [127:0] mem [4][16];
  logic [127:0] exp_rd [4];
  bit pend [4], gq [4];
  int served [4][4];
  int dead_ok = 0;
  function automatic bit linked(int s, int t); return (s ^ t) == 1 || (s ^ t) == 2; endfunction

  always @(negedge clk) for (int t = 0; t < 4; t++) rs_gnt[t] = $urandom_range(0, 2) != 0;
  always @(posedge clk) begin
    for (int t = 0; t < 4; t++) begin
      rs_rvalid[t] <= 0;
      if (rst_n && rs_req[t] && rs_gnt[t]) begin
        if (rs_we[t]) mem[t][rs_addr[t][7:4]] <= rs_wdata[t];
        else begin rs_rdata[t] <= mem[t][rs_addr[t][7:4]]; rs_rvalid[t] <= 1; end
      end
    end
  end
  // source side checker
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < 4; s++) begin
      if (pend[s]) begin
        chk(rm_rvalid[s] && rm_rdata[s] == exp_rd[s], $sformatf("read data to PE%0d", s));
        pend[s] = 0;
      end
      gq[s] = rm_req[s] && rm_gnt[s];
      if (gq[s]) begin
        int t;
        t = int'(rm_addr[s][21:20]);
        if (linked(s, t)) begin
          served[t][s]++;
          if (!rm_we[s]) begin exp_rd[s] = mem[t][rm_addr[s][7:4]]; pend[s] = 1; end
          else begin
            // model sees the write at the target in the same edge
          end
        end else begin
          if (!rm_we[s]) begin exp_rd[s] = '0; pend[s] = 1; end
          dead_ok++;
        end
      end
    end
  end

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    rm_req = 0; rm_we = 0;
    for (int s = 0; s < 4; s++) begin rm_addr[s] = 0; rm_wdata[s] = 0; rm_wstrb[s] = 0; end
    foreach (mem[t, l]) mem[t][l] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int s = 0; s < 4; s++) if (!rm_req[s] || gq[s]) begin
        int t;
        t = (c < 2500) ? (s ^ ($urandom_range(0, 1) ? 1 : 2)) : $urandom_range(0, 3);
        if (c >= 1000 && c < 1500) t = (s == 1 || s == 2) ? 0 : 3;   // both neighbours on one target
        rm_req[s] = $urandom_range(0, 3) != 0;
        rm_we[s] = $urandom_range(0, 1);
        rm_addr[s] = {10'd0, 2'(t), 12'd0, 4'($urandom_range(0, 15)), 4'd0};
        rm_wdata[s] = {$urandom, $urandom, $urandom, $urandom}; rm_wstrb[s] = '1;
      end
    end
    @(negedge clk); rm_req = 0; repeat (3) @(negedge clk);
    for (int t = 0; t < 4; t++) for (int s = 0; s < 4; s++)
      if (linked(s, t)) chk(served[t][s] > 200, $sformatf("PE%0d -> PE%0d served (%0d)", s, t, served[t][s]));
      else chk(served[t][s] == 0, "no access across the diagonal");
    chk(dead_ok > 50, $sformatf("unlinked targets granted and dropped (%0d)", dead_ok));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
