// pe_timer: PE timer that produces the periodic tick starting each
// simulation time step (typically 1 ms) and wakes the PE.
//
// A 32-bit down counter. Registers (byte offset): 0x00 LOAD (writing it also
// loads the counter), 0x04 VALUE (read), 0x08 CTRL (bit0 enable, bit1
// periodic), 0x0C STATUS (bit0 tick pending, write 1 to clear).
// While enabled the counter decrements once per cycle; in the cycle it is 0
// tick pulses for one cycle, the pending flag is set and the counter reloads
// (periodic) or the timer disables itself. With LOAD = N the tick period is
// N+1 cycles. The paper only says a timer tick triggers each time step; the
// register layout and counter behaviour are this design's choice.
module pe_timer (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_we,
  input  logic [7:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        tick,
  output logic        irq
);
  logic [31:0] load, value;
  logic        enable, periodic, pending;

  assign irq  = pending;
  assign tick = enable && value == 32'd0;

  always_comb begin
    unique case (reg_addr[7:2])
      6'd0:    reg_rdata = load;
      6'd1:    reg_rdata = value;
      6'd2:    reg_rdata = {30'd0, periodic, enable};
      6'd3:    reg_rdata = {31'd0, pending};
      default: reg_rdata = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      load <= '0; value <= '0; enable <= 1'b0; periodic <= 1'b0; pending <= 1'b0;
    end else begin
      if (enable) begin
        if (value == 32'd0) begin
          pending <= 1'b1;
          value   <= load;
          if (!periodic) enable <= 1'b0;
        end else value <= value - 32'd1;
      end
      if (reg_we) begin
        unique case (reg_addr[7:2])
          6'd0: begin load <= reg_wdata; value <= reg_wdata; end
          6'd2: begin enable <= reg_wdata[0]; periodic <= reg_wdata[1]; end
          6'd3: if (reg_wdata[0]) pending <= 1'b0;
          default: ;
        endcase
      end
    end
  end
endmodule
