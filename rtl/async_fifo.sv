// async_fifo: dual-clock FIFO for the globally-asynchronous locally-synchronous
// (GALS) clock-domain crossings between PEs, NoC routers and neighbour QPEs.
//
// Classic Gray-coded pointer FIFO: each side keeps a binary and a Gray pointer;
// the Gray pointer of the other side passes through a two-flop synchronizer.
// Full and empty are therefore pessimistic by the synchronizer delay. With the
// same clock on both sides a word written at edge 0 is readable after edge 2,
// i.e. out_valid rises three cycles after in_valid. DEPTH is a power of two.
// That these crossings are asynchronous FIFOs follows the paper; the Gray
// pointer scheme and the two-flop synchronizer are this design's choice.
module async_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  input  logic             rclk,
  input  logic             rrst_n,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] b2g(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  logic [AW:0] wbin_nx;
  assign in_ready = b2g(wbin) != {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]};
  assign wbin_nx  = wbin + (AW+1)'(in_valid && in_ready);
  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin <= wbin_nx; wgray <= b2g(wbin_nx);
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
    end
  end
  always_ff @(posedge wclk) begin
    if (in_valid && in_ready) mem[wbin[AW-1:0]] <= in_data;
  end

  // read side
  logic [AW:0] rbin_nx;
  assign out_valid = b2g(rbin) != wgray_r2;
  assign out_data  = mem[rbin[AW-1:0]];
  assign rbin_nx   = rbin + (AW+1)'(out_valid && out_ready);
  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin <= rbin_nx; rgray <= b2g(rbin_nx);
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
    end
  end

  initial assert (DEPTH >= 4 && (DEPTH & (DEPTH-1)) == 0)
    else $error("async_fifo: DEPTH must be a power of two >= 4");
endmodule
