`timescale 1ns/1ps
// ddr_tx -- 10-bit symbol serialiser for a 320 Mb/s DDR output at 160 MHz.
//
// Every five clock cycles a symbol is loaded ('load' high in the loading
// cycle, 'sym' sampled at its end). Each cycle two bits leave on dq: dq[1] is
// sent on the rising half of the clock and dq[0] on the falling half, bit 9
// ('a') first. The DDR pad cell that puts dq on the wire is not part of this
// block. The link rate (320 Mb/s, DDR) follows the chip; bit order is the
// usual 8b/10b order.
module ddr_tx (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [9:0] sym,
  output logic       load,      // sym is taken at the end of this cycle
  output logic [1:0] dq         // {rising-edge bit, falling-edge bit}
);
  logic [2:0] cnt;
  logic [9:0] sh;

  assign load = (cnt == 3'd4);
  assign dq   = sh[9:8];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cnt <= 3'd0;
      sh  <= 10'b1100000101;     // K28.5 (RD+): leaves RD- as the encoder starts
    end else begin
      cnt <= load ? 3'd0 : cnt + 3'd1;
      sh  <= load ? sym : {sh[7:0], 2'b00};
    end
endmodule
