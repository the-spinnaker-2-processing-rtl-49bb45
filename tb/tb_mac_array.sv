// tb_mac_array: 4x16 array of 8-bit MAC units with 29-bit accumulators.
// Matrix mode: 50 random steps of a (4 bytes) times b (16 bytes), checked
// against an integer model, including 255*255 extremes. Convolution mode:
// shift register loaded from b, one byte shifted in per step, column j sees
// x[j+k]; checked against a 1-D cross-correlation model. Also checks clear
// and that the accumulators hold when en is low.
module tb_mac_array;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, en, conv, sr_load, sr_shift;
  logic [31:0] a;
  logic [127:0] b;
  logic [7:0] sr_in;
  logic [28:0] acc [4][16];
  mac_array dut (.clk, .rst_n, .clr, .en, .conv, .sr_load, .sr_shift, .a, .b, .sr_in, .acc);
  longint m [4][16];

  function automatic bit match();
    for (int i = 0; i < 4; i++) for (int j = 0; j < 16; j++)
      if (longint'(acc[i][j]) != m[i][j]) return 0;
    return 1;
  endfunction

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    byte unsigned x [80];
    clr = 0; en = 0; conv = 0; sr_load = 0; sr_shift = 0; a = 0; b = 0; sr_in = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 16; j++) m[i][j] = 0;
    chk(match(), "clear");
    for (int k = 0; k < 50; k++) begin
      a = (k < 5) ? '1 : $urandom; b = (k < 5) ? '1 : {$urandom, $urandom, $urandom, $urandom};
      en = 1;
      for (int i = 0; i < 4; i++) for (int j = 0; j < 16; j++) m[i][j] += a[8*i +: 8] * b[8*j +: 8];
      @(negedge clk);
    end
    en = 0;
    chk(match(), "matrix mode 50 steps");
    a = '1; b = '1;
    repeat (3) @(negedge clk);
    chk(match(), "hold while en low");
    // convolution mode
    clr = 1; @(negedge clk); clr = 0;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 16; j++) m[i][j] = 0;
    foreach (x[p]) x[p] = 8'($urandom);
    for (int j = 0; j < 16; j++) b[8*j +: 8] = x[j];
    conv = 1; sr_load = 1; @(negedge clk); sr_load = 0;
    for (int k = 0; k < 40; k++) begin
      a = $urandom; en = 1; sr_shift = 1; sr_in = x[16 + k];
      for (int i = 0; i < 4; i++) for (int j = 0; j < 16; j++) m[i][j] += a[8*i +: 8] * x[j + k];
      @(negedge clk);
    end
    en = 0; sr_shift = 0;
    chk(match(), "convolution mode 40 taps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
