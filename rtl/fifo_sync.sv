// fifo_sync: single-clock FIFO used as the internal stages of the NoC routers
// and as buffers inside the PE.
//
// valid/ready on both sides. A word written at a clock edge is visible at the
// output after that edge (one cycle latency). Full throughput at DEPTH >= 2.
// Storage is a register array; out_data shows the oldest word whenever
// out_valid is high. DEPTH must be a power of two. Reset empties the FIFO.
module fifo_sync #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wptr, rptr;
  logic push, pop;

  assign count     = ($clog2(DEPTH)+1)'(wptr - rptr);
  assign in_ready  = (wptr - rptr) != (AW+1)'(DEPTH);
  assign out_valid = wptr != rptr;
  assign out_data  = mem[rptr[AW-1:0]];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr[AW-1:0]] <= in_data;
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH-1)) == 0)
    else $error("fifo_sync: DEPTH must be a power of two >= 2");
endmodule
