// tb_prng: xorshift32 random number generator. Checks the reset seed
// sequence and seeded sequences against a software model over 1000 reads,
// that a zero seed is replaced by 1, that the state only advances on reads,
// and a rough balance of ones in the output bits.
module tb_prng;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic reg_we, reg_re; logic [7:0] reg_addr; logic [31:0] reg_wdata, reg_rdata;
  prng dut (.clk, .rst_n, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata);
  function automatic logic [31:0] nx(logic [31:0] x);
    x ^= x << 13; x ^= x >> 17; x ^= x << 5; return x;
  endfunction
  task automatic rd(output logic [31:0] d);
    @(negedge clk); reg_re = 1; reg_addr = 0; #1; d = reg_rdata;
    @(negedge clk); reg_re = 0;
  endtask

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [31:0] m, v;
    int ones, bad;
    reg_we = 0; reg_re = 0; reg_addr = 0; reg_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    m = 32'h2545F491;
    bad = 0; ones = 0;
    for (int i = 0; i < 1000; i++) begin rd(v); if (v != m) bad++; ones += $countones(v); m = nx(m); end
    chk(bad == 0, "reset seed sequence");
    chk(ones > 15000 && ones < 17000, $sformatf("bit balance (%0d of 32000)", ones));
    repeat (10) @(negedge clk);
    rd(v); chk(v == m, "state holds without reads"); m = nx(m);
    @(negedge clk); reg_we = 1; reg_wdata = 32'hDEADBEEF; @(negedge clk); reg_we = 0;
    m = 32'hDEADBEEF; bad = 0;
    for (int i = 0; i < 1000; i++) begin rd(v); if (v != m) bad++; m = nx(m); end
    chk(bad == 0, "seeded sequence");
    @(negedge clk); reg_we = 1; reg_wdata = 0; @(negedge clk); reg_we = 0;
    rd(v); chk(v == 1, "zero seed becomes 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
