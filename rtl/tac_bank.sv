`timescale 1ns/1ps
// tac_bank -- behavioural model of one channel's eight time-to-amplitude
// converters (TAC1 or TAC2 bank). Not synthesizable logic: it stands for
// switched-capacitor analog buffers.
//
// On the rising edge of 'start' the buffer selected by 'sel' begins to
// charge from a constant current; the next rising clock edge stops it. The
// stored value is therefore the time from the trigger edge to the next clock
// edge, the fine time, and is given here in TDC bins of BIN_PS picoseconds
// (ADC LSB), with an offset of OFFSET bins as a real TAC has a pedestal. A
// start while a buffer is charging is ignored. Blocking assignments in the
// event-driven processes are intended (BLKSEQ lint warnings): this is a
// simulation model of analog storage, not clocked logic. 'vout' shows the buffer
// chosen by 'rd_sel' to the ADC. Leakage and nonlinearity are not modelled.
module tac_bank #(
  parameter int unsigned N_BUF  = 8,
  parameter real         BIN_PS = 10.0,
  parameter real         OFFSET = 16.0
) (
  input  logic                     clk,
  input  logic                     start,
  input  logic [$clog2(N_BUF)-1:0] sel,
  input  logic [$clog2(N_BUF)-1:0] rd_sel,
  output real                      vout
);
  real                      cap [N_BUF];
  realtime                  t_start;
  logic                     charging;
  logic [$clog2(N_BUF)-1:0] csel;

  initial begin
    charging = 1'b0;
    for (int i = 0; i < N_BUF; i++) cap[i] = 0.0;
  end

  always @(posedge start)
    if (!charging) begin
      t_start  = $realtime;
      csel     = sel;
      charging = 1'b1;
    end

  always @(posedge clk)
    if (charging && $realtime > t_start) begin
      cap[csel] = OFFSET + ($realtime - t_start) * 1000.0 / BIN_PS;
      charging  = 1'b0;
    end

  assign vout = cap[rd_sel];
endmodule
