// mac_accel: the PE's MAC accelerator: control register file, main control,
// SRAM interface, op_a (weight) stream from the NoC interface, and the 4x16
// mac_array.
//
// Operation (started by writing CTRL.start, from the ARM bus or by a NoC
// register-write packet; runs on its own afterwards):
//   MM  (CTRL.conv=0): for k = 0..K-1 the accelerator reads the 128-bit SRAM
//       line at B_ADDR+16k (16 bytes b_j of row k of B) and takes one 32-bit
//       word from the op_a stream (a_i = column k of A, byte i for row i).
//       Result C[i][j] = sum_k a_i(k) * b_j(k), a 4x16 block.
//   CONV(CTRL.conv=1): the SRAM line at B_ADDR loads the shift register with
//       input pixels x[0..15]; the following lines supply x[16..]. For tap k
//       the array sees x[j+k] in column j and weight w_i(k) from op_a, then one
//       new pixel is shifted in. Result O[i][j] = sum_k w_i(k) * x[j+k]
//       (a 1-D cross-correlation along the feature-map width, 4 output
//       channels by 16 output pixels). SRAM traffic drops to one line per 16
//       taps.
//   Afterwards the 64 accumulators are written to SRAM as 32-bit words,
//   result (i,j) at OUT_ADDR + 4*(16*i + j), four per 128-bit write (16
//   writes). Then STATUS.done is set and irq pulses for one cycle.
// Registers (byte offset): 0x00 CTRL (w: bit0 start, bit1 conv), 0x04 K,
// 0x08 B_ADDR, 0x0C OUT_ADDR, 0x10 STATUS (r: bit0 busy, bit1 done),
// 0x14 CYCLES (r: cycles of the last operation).
// Timing: with no SRAM contention and op_a data waiting, one MAC step per
// cycle; for an MM with K steps irq is high K + 20 clock edges after the
// edge that takes the start write (K MAC steps, pipeline fill, 16 writes).
// From the paper: 4x16 8-bit array, the two modes, 128 bit/clk SRAM port for
// operands and results, op_a via the NoC interface, start by ARM or NoC,
// interrupt on completion. Own choices: register map, data layouts, the
// 1-D form of CONV (one kernel row and one input row per run; a 2-D
// convolution is a sequence of such runs combined by software), result
// format.
module mac_accel #(
  parameter int unsigned BF_DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  // register bus
  input  logic         reg_we,
  input  logic [7:0]   reg_addr,
  input  logic [31:0]  reg_wdata,
  output logic [31:0]  reg_rdata,
  // op_a (weights) stream from the NoC interface
  input  logic         opa_valid,
  output logic         opa_ready,
  input  logic [31:0]  opa_data,
  // SRAM master port (128 bit)
  output logic         mem_req,
  output logic         mem_we,
  output logic [31:0]  mem_addr,
  output logic [127:0] mem_wdata,
  output logic [15:0]  mem_wstrb,
  input  logic         mem_gnt,
  input  logic         mem_rvalid,
  input  logic [127:0] mem_rdata,
  output logic         irq,
  output logic         busy
);
  typedef enum logic [1:0] { S_IDLE, S_RUN, S_WRITE } state_e;
  state_e state;

  logic        conv;
  logic [15:0] k_steps;
  logic [31:0] b_addr, out_addr, cycles;
  logic        done;
  logic        start;

  logic [15:0] ri, reads_needed, step;
  logic        inflight;
  logic        loaded;
  logic [3:0]  bi;
  logic [4:0]  wi;

  logic         bf_valid, bf_pop;
  logic [127:0] bf_data;
  logic [$clog2(BF_DEPTH):0] bf_count;

  logic        a_en, a_clr, a_load, a_shift;
  logic [28:0] acc [4][16];

  assign start = reg_we && reg_addr[7:2] == 6'd0 && reg_wdata[0] && state == S_IDLE;
  assign busy  = state != S_IDLE;

  always_comb begin
    unique case (reg_addr[7:2])
      6'd0:    reg_rdata = {30'd0, conv, 1'b0};
      6'd1:    reg_rdata = {16'd0, k_steps};
      6'd2:    reg_rdata = b_addr;
      6'd3:    reg_rdata = out_addr;
      6'd4:    reg_rdata = {30'd0, done, busy};
      6'd5:    reg_rdata = cycles;
      default: reg_rdata = '0;
    endcase
  end

  // operand fetch
  logic issue;
  assign issue = state == S_RUN && ri < reads_needed &&
                 (32'(bf_count) + 32'(inflight)) < BF_DEPTH;

  // consume
  always_comb begin
    a_en = 1'b0; a_load = 1'b0; a_shift = 1'b0; bf_pop = 1'b0; opa_ready = 1'b0;
    if (state == S_RUN && step < k_steps) begin
      if (conv && !loaded) begin
        if (bf_valid) begin a_load = 1'b1; bf_pop = 1'b1; end
      end else if (bf_valid && opa_valid) begin
        a_en = 1'b1; opa_ready = 1'b1;
        if (conv) begin
          a_shift = 1'b1;
          bf_pop  = (bi == 4'd15) || (step == k_steps - 16'd1);
        end else bf_pop = 1'b1;
      end
    end
  end
  assign a_clr = start;

  fifo_sync #(.WIDTH(128), .DEPTH(BF_DEPTH)) u_bf (
    .clk, .rst_n, .in_valid(mem_rvalid && state == S_RUN), .in_ready(), .in_data(mem_rdata),
    .out_valid(bf_valid), .out_ready(bf_pop), .out_data(bf_data), .count(bf_count));

  mac_array #(.ROWS(4), .COLS(16), .ACC_W(29)) u_array (
    .clk, .rst_n, .clr(a_clr), .en(a_en), .conv, .sr_load(a_load), .sr_shift(a_shift),
    .a(opa_data), .b(bf_data), .sr_in(bf_data[8*bi +: 8]), .acc);

  // SRAM port
  always_comb begin
    mem_req = 1'b0; mem_we = 1'b0; mem_addr = '0; mem_wdata = '0; mem_wstrb = '0;
    if (issue) begin
      mem_req  = 1'b1;
      mem_addr = b_addr + {12'd0, ri, 4'h0};
    end else if (state == S_WRITE) begin
      mem_req   = 1'b1;
      mem_we    = 1'b1;
      mem_addr  = out_addr + {23'd0, wi[3:0], 4'h0};
      mem_wstrb = '1;
      for (int c = 0; c < 4; c++)
        mem_wdata[32*c +: 32] = {3'd0, acc[wi[3:2]][{wi[1:0], 2'(c)}]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; conv <= 1'b0; k_steps <= '0; b_addr <= '0; out_addr <= '0;
      done <= 1'b0; cycles <= '0; ri <= '0; reads_needed <= '0; step <= '0;
      inflight <= 1'b0; loaded <= 1'b0; bi <= '0; wi <= '0; irq <= 1'b0;
    end else begin
      irq <= 1'b0;
      if (reg_we && state == S_IDLE) begin
        unique case (reg_addr[7:2])
          6'd0: conv     <= reg_wdata[1];
          6'd1: k_steps  <= reg_wdata[15:0];
          6'd2: b_addr   <= reg_wdata;
          6'd3: out_addr <= reg_wdata;
          default: ;
        endcase
      end
      if (state != S_IDLE) cycles <= cycles + 32'd1;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN; done <= 1'b0; cycles <= 32'd1;
          ri <= '0; step <= '0; inflight <= 1'b0; loaded <= 1'b0; bi <= '0; wi <= '0;
          reads_needed <= reg_wdata[1] ? 16'd1 + ((k_steps + 16'd15) >> 4) : k_steps;
        end
        S_RUN: begin
          if (issue && mem_gnt) ri <= ri + 16'd1;
          inflight <= issue && mem_gnt;
          if (a_load) loaded <= 1'b1;
          if (a_en) begin
            step <= step + 16'd1;
            bi   <= bf_pop ? 4'd0 : bi + 4'd1;
          end
          if (step == k_steps && !inflight) state <= S_WRITE;
        end
        S_WRITE: if (mem_gnt) begin
          wi <= wi + 5'd1;
          if (wi == 5'd15) begin state <= S_IDLE; done <= 1'b1; irq <= 1'b1; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
