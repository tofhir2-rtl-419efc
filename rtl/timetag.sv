`timescale 1ns/1ps
// timetag -- coarse time-tag counter and Resync decoder.
//
// The time tag counts 160 MHz clock cycles since the last Resync and wraps
// at 2^TC_W. Resync is a level held for a number of cycles; when it falls the
// block acts on its length: shorter than LEN_CLEAR cycles resets only the
// time tag; from LEN_CLEAR up to LEN_FULL-1 it also clears the event
// processing chain (clear_chain, one cycle); LEN_FULL or longer also resets
// the configuration (full_reset, one cycle). In the cycle after Resync falls
// the time tag reads 0, so an external copy started from the same Resync
// stays equal to it. The three actions follow the chip; the lengths that
// select them are this design's choice.
module timetag #(
  parameter int unsigned TC_W      = 16,
  parameter int unsigned LEN_CLEAR = 4,
  parameter int unsigned LEN_FULL  = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            resync,
  output logic [TC_W-1:0] tcoarse,
  output logic            clear_chain,
  output logic            full_reset
);
  logic       rs_q;
  logic [7:0] len;
  logic       fall;

  assign fall = rs_q && !resync;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rs_q <= 1'b0; len <= '0; tcoarse <= '0; clear_chain <= 1'b0; full_reset <= 1'b0;
    end else begin
      rs_q        <= resync;
      clear_chain <= 1'b0;
      full_reset  <= 1'b0;
      if (resync) len <= (len == 8'hFF) ? len : len + 8'd1;
      else        len <= '0;
      if (fall) begin
        tcoarse <= '0;
        if (32'(len) >= LEN_CLEAR) clear_chain <= 1'b1;
        if (32'(len) >= LEN_FULL)  full_reset  <= 1'b1;
      end else begin
        tcoarse <= tcoarse + 1'b1;
      end
    end
endmodule
