`timescale 1ns/1ps
// test_pulse_gen -- digital test pulse source.
//
// In external mode (tp_internal = 0) the pulse on tp_in is passed on as it
// is. In internal mode tp_in is a test-pulse clock: on its rising edges a
// counter produces a pulse 'length' cycles long every 'period' cycles, so the
// pulse phase relative to the chip clock follows the phase of the test-pulse
// clock. The pulse goes either to the channels' trigger logic (tp_digital) or
// to the analog injector in front of the pre-amplifier (tp_analog). Period
// and length are counted in test-pulse-clock cycles; a period of 0 stops the
// generator.
module test_pulse_gen (
  input  logic        rst_n,
  input  logic        tp_in,
  input  logic        tp_internal,
  input  logic        tp_target,      // 0: trigger logic, 1: analog injection
  input  logic [15:0] period,
  input  logic [7:0]  length,
  output logic        tp_digital,
  output logic        tp_analog
);
  logic [15:0] cnt;
  logic        gen;
  logic        pulse;

  always_ff @(posedge tp_in or negedge rst_n)
    if (!rst_n) begin
      cnt <= '0; gen <= 1'b0;
    end else if (period == '0) begin
      cnt <= '0; gen <= 1'b0;
    end else begin
      cnt <= (cnt >= period - 16'd1) ? '0 : cnt + 16'd1;
      gen <= ((cnt >= period - 16'd1) ? 16'd0 : cnt + 16'd1) < {8'd0, length};
    end

  assign pulse      = tp_internal ? gen : tp_in;
  assign tp_digital = pulse && !tp_target;
  assign tp_analog  = pulse &&  tp_target;
endmodule
