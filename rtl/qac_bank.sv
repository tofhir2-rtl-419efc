`timescale 1ns/1ps
// qac_bank -- behavioural model of one channel's eight charge-to-amplitude
// converters (integrators). Not synthesizable logic in the chip: it stands
// for switched-capacitor integrators.
//
// While 'integrate' is high the buffer selected by 'sel' accumulates, once
// per clock cycle, the energy-branch current sample i_in less the baseline
// cancellation current 'base' (both in ADC LSB per cycle). The integration
// starts from zero at the rising edge of 'integrate'. The stored value is
// clipped to the ADC range. 'vout' shows the buffer chosen by 'rd_sel'. The
// real integrator's transfer function is not modelled; the units are chosen
// so that the ADC reads the integrated charge directly. The blocking
// assignments in the clocked process are intended (BLKSEQ lint warning):
// they compute a real-valued model, not flip-flops.
module qac_bank #(
  parameter int unsigned N_BUF = 8
) (
  input  logic                     clk,
  input  logic                     integrate,
  input  logic [$clog2(N_BUF)-1:0] sel,
  input  logic [9:0]               i_in,
  input  logic [5:0]               base,
  input  logic [$clog2(N_BUF)-1:0] rd_sel,
  output real                      vout
);
  real  cap [N_BUF];
  logic int_q;

  initial begin
    int_q = 1'b0;
    for (int i = 0; i < N_BUF; i++) cap[i] = 0.0;
  end

  always @(posedge clk) begin
    if (integrate) begin
      real v;
      v = (int_q ? cap[sel] : 0.0) + real'(i_in) - real'(base);
      if (v < 0.0)    v = 0.0;
      if (v > 1023.0) v = 1023.0;
      cap[sel] = v;
    end
    int_q = integrate;
  end

  assign vout = cap[rd_sel];
endmodule
