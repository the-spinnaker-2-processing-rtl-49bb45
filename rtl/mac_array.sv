// mac_array: broadcast, output-stationary array of ROWS x COLS 8-bit unsigned
// multiply-accumulate cells with 29-bit accumulators.
//
// Row i receives operand a_i (weights, one byte per row) and column j
// operand b_j (input feature map, one byte per column); every cycle with
// en=1 each cell (i,j) adds a_i * b_j to its accumulator, so ROWS*COLS MACs
// happen per clock. clr zeroes all accumulators (clr wins over en).
// Two operand modes for b (conv input):
//   matrix multiplication (conv=0): b_j comes straight from the 128-bit b bus.
//   2D convolution (conv=1): b_j comes from a COLS-byte shift register. sr_load
//     fills it from the b bus; sr_shift moves it one byte towards column 0 and
//     puts sr_in into the last column. Accumulation uses the register contents
//     before the shift of the same cycle, so streaming one new byte per cycle
//     slides the input window by one pixel per kernel tap, which is the input
//     feature map reuse of the paper.
// From the paper: 4x16 array, 8-bit unsigned operands, 29-bit accumulators,
// broadcast output-stationary dataflow, CONV/MM modes, shift register for
// input reuse. Own choice: the exact shift direction and control signals.
// Accumulators wrap modulo 2^29.
module mac_array #(
  parameter int unsigned ROWS  = 4,
  parameter int unsigned COLS  = 16,
  parameter int unsigned ACC_W = 29
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 en,
  input  logic                 conv,
  input  logic                 sr_load,
  input  logic                 sr_shift,
  input  logic [8*ROWS-1:0]    a,
  input  logic [8*COLS-1:0]    b,
  input  logic [7:0]           sr_in,
  output logic [ACC_W-1:0]     acc [ROWS][COLS]
);
  logic [7:0] sreg [COLS];
  logic [7:0] bsel [COLS];

  always_comb begin
    for (int j = 0; j < COLS; j++) bsel[j] = conv ? sreg[j] : b[8*j +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < COLS; j++) sreg[j] <= '0;
    end else if (sr_load) begin
      for (int j = 0; j < COLS; j++) sreg[j] <= b[8*j +: 8];
    end else if (sr_shift) begin
      for (int j = 0; j < COLS-1; j++) sreg[j] <= sreg[j+1];
      sreg[COLS-1] <= sr_in;
    end
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      logic [15:0] prod;
      assign prod = a[8*i +: 8] * bsel[j];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)   acc[i][j] <= '0;
        else if (clr) acc[i][j] <= '0;
        else if (en)  acc[i][j] <= acc[i][j] + ACC_W'(prod);
      end
    end
  end
endmodule
