`timescale 1ns/1ps
// sar_adc -- behavioural model of the channel's 10-bit SAR ADC.
//
// The converter itself is an external design (a fully differential
// capacitive-DAC SAR); this model reproduces its digital behaviour. A
// 'start' pulse while idle samples 'vin' (in LSB). The successive
// approximation then decides the bits from the MSB down, a few per clock
// cycle, so that a conversion takes CONV_CYCLES cycles of the 160 MHz clock
// (4 cycles = 40 MHz conversion rate). At the end 'done' is high for one
// cycle with the result on 'code', which holds until the next conversion.
module sar_adc #(
  parameter int unsigned BITS        = 10,
  parameter int unsigned CONV_CYCLES = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  real             vin,
  output logic            busy,
  output logic            done,
  output logic [BITS-1:0] code
);
  localparam int unsigned PER_CYCLE = (BITS + CONV_CYCLES - 1) / CONV_CYCLES;
  real                   vs;
  logic [BITS-1:0]       sar;
  int                    bitpos;

  always @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; code <= '0; sar <= '0; bitpos <= 0; vs = 0.0;
    end else begin
      done <= 1'b0;
      if (busy || start) begin
        logic [BITS-1:0] s;
        int              b;
        if (!busy) begin                       // sample and decide the first bits
          vs = vin;
          s  = '0;
          b  = BITS - 1;
        end else begin
          s = sar;
          b = bitpos;
        end
        for (int unsigned j = 0; j < PER_CYCLE; j++) begin
          if (b >= 0) begin
            s[b] = 1'b1;
            if (real'(s) > vs) s[b] = 1'b0;    // comparator: keep bit if DAC <= input
            b = b - 1;
          end
        end
        sar    <= s;
        bitpos <= b;
        busy   <= (b >= 0);
        if (b < 0) begin
          done <= 1'b1;
          code <= s;
        end
      end
    end
endmodule
