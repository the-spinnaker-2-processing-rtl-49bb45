// prng: pseudo random number generator of the PE (used for example for the
// noise currents of neuron models).
//
// 32-bit xorshift generator (x ^= x<<13; x ^= x>>17; x ^= x<<5). Register
// 0x00: reading returns the current number and advances the state by one step
// (reg_re marks the read); writing sets the seed (a zero seed is replaced by
// 1, since zero is a fixed point). Reset seed is 0x2545F491. One number per
// cycle. The paper names a pseudo random number generator but not its
// algorithm; xorshift is this design's choice.
module prng (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_we,
  input  logic        reg_re,
  input  logic [7:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata
);
  logic [31:0] x, nx;

  function automatic logic [31:0] step(logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  assign nx        = step(x);
  assign reg_rdata = (reg_addr[7:2] == 6'd0) ? x : 32'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) x <= 32'h2545_F491;
    else if (reg_we && reg_addr[7:2] == 6'd0) x <= (reg_wdata == 32'd0) ? 32'd1 : reg_wdata;
    else if (reg_re && reg_addr[7:2] == 6'd0) x <= nx;
  end
endmodule
