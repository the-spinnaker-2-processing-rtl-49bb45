// dvfs_ctrl: performance-level (PL) controller for spike-driven dynamic
// voltage and frequency scaling of one PE.
//
// At each timer tick (start of a simulation time step) the PE wakes up and
// the controller picks the PL from the number of spikes waiting in the
// PE's spike FIFO: above LTH2 -> PL3, above LTH1 -> PL2, otherwise PL1.
// When software reports that the time step is processed (write CTRL.done)
// the PE returns to PL1 and sleeps until the next tick. The pl output selects
// supply rail and clock of the PE (done by the power-management circuits,
// not modelled here). Per-PL cycle counters give the time spent at each PL,
// the t_sp of the paper's energy model.
// Registers (byte offset): 0x00 LTH1 (reset 17), 0x04 LTH2 (reset 59),
// 0x08 STATUS (r: bits1:0 pl, bit2 sleep), 0x0C CTRL (w: bit0 done),
// 0x10/0x14/0x18 cycles spent awake at PL1/PL2/PL3, 0x1C number of PL changes.
// The new PL is visible the cycle after the tick.
// From the paper: three PLs of the test chip, thresholds 17 and 59 of the
// synfire benchmark, PL chosen from the spike count, return to PL1 and sleep
// after each step. Own choice: deciding only at the tick, the counters.
module dvfs_ctrl
  import spinn2_pkg::*;
#(
  parameter logic [15:0] LTH1_DEFAULT = 16'd17,
  parameter logic [15:0] LTH2_DEFAULT = 16'd59
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,
  input  logic [15:0] spike_count,
  input  logic        reg_we,
  input  logic [7:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output pl_e         pl,
  output logic        sleep
);
  logic [15:0] lth1, lth2;
  logic [31:0] cyc [3];
  logic [31:0] changes;
  pl_e         pl_new;

  always_comb begin
    if (spike_count > lth2)      pl_new = PL3;
    else if (spike_count > lth1) pl_new = PL2;
    else                         pl_new = PL1;
  end

  always_comb begin
    unique case (reg_addr[7:2])
      6'd0:    reg_rdata = {16'd0, lth1};
      6'd1:    reg_rdata = {16'd0, lth2};
      6'd2:    reg_rdata = {29'd0, sleep, pl};
      6'd4:    reg_rdata = cyc[0];
      6'd5:    reg_rdata = cyc[1];
      6'd6:    reg_rdata = cyc[2];
      6'd7:    reg_rdata = changes;
      default: reg_rdata = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lth1 <= LTH1_DEFAULT; lth2 <= LTH2_DEFAULT; pl <= PL1; sleep <= 1'b1;
      changes <= '0;
      for (int i = 0; i < 3; i++) cyc[i] <= '0;
    end else begin
      if (!sleep) cyc[pl] <= cyc[pl] + 32'd1;
      if (tick) begin
        sleep <= 1'b0;
        pl    <= pl_new;
        if (pl_new != pl) changes <= changes + 32'd1;
      end else if (reg_we && reg_addr[7:2] == 6'd3 && reg_wdata[0]) begin
        sleep <= 1'b1;
        pl    <= PL1;
        if (pl != PL1) changes <= changes + 32'd1;
      end
      if (reg_we && reg_addr[7:2] == 6'd0) lth1 <= reg_wdata[15:0];
      if (reg_we && reg_addr[7:2] == 6'd1) lth2 <= reg_wdata[15:0];
    end
  end
endmodule
