`timescale 1ns/1ps
// trig_rx -- trigger input: 80 Mb/s bitstream, two bits per 25 ns bin.
//
// The line is sampled every second 160 MHz cycle: when the time tag's two low
// bits are 1 the L0 bit is taken and when they are 3 the L1 bit; in that
// second cycle the pair is delivered with 'stb' and the number of the bin in
// which it arrived (time tag divided by four). Which past bin a bit refers to
// is decided by the latency set in each trigger filter. Bit order and the
// alignment to the time tag are this design's choice.
module trig_rx #(
  parameter int unsigned TC_W = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            trig_in,
  input  logic [TC_W-1:0] tcoarse,
  output logic            stb,
  output logic            l0,
  output logic            l1,
  output logic [TC_W-3:0] bin
);
  logic l0_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      l0_q <= 1'b0; stb <= 1'b0; l0 <= 1'b0; l1 <= 1'b0; bin <= '0;
    end else begin
      stb <= 1'b0;
      if (tcoarse[1:0] == 2'd1) l0_q <= trig_in;
      if (tcoarse[1:0] == 2'd3) begin
        stb <= 1'b1;
        l0  <= l0_q;
        l1  <= trig_in;
        bin <= tcoarse[TC_W-1:2];
      end
    end
endmodule
