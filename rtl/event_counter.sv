`timescale 1ns/1ps
// event_counter -- the channel's 24-bit monitoring counter.
//
// When enabled it counts one of four discriminator-derived strobes chosen
// by 'mode' (T1 crossings for threshold scans and noise, T2-without-E
// rejections for low-energy monitoring, hits lost for lack of a free buffer
// set, or valid events). Every 2^period clock cycles the count is sent as a
// counter frame, word 0 {channel, 0, FT_COUNTER, 0, time tag}, word 1
// {8'h00, count}, and the counter restarts. If the previous frame has not
// left yet the counter keeps counting and the next period sends the sum. The
// 24-bit counter, its uses and the periodic special frame follow the chip;
// the encoding and period rule are this design's.
module event_counter
  import tofhir2_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic [4:0]      ch_id,
  input  logic            enable,
  input  cnt_mode_e       mode,
  input  logic [4:0]      period,
  input  logic [TC_W-1:0] tcoarse,
  input  logic [3:0]      strobes,      // indexed by cnt_mode_e
  output logic            out_valid,
  input  logic            out_ready,
  output logic [31:0]     out_data
);
  logic [CNT_W-1:0] cnt;
  logic [31:0]      tmr;
  logic             tick;
  logic             inc;
  logic             second;
  logic [CNT_W-1:0] snap;
  logic [TC_W-1:0]  snap_tc;
  word0_t           w0;

  assign inc  = strobes[mode];
  assign tick = enable && ((tmr & ((32'd1 << period) - 32'd1)) == 32'd0);

  always_comb begin
    w0         = '0;
    w0.ch      = ch_id;
    w0.ftype   = FT_COUNTER;
    w0.tcoarse = snap_tc;
  end
  assign out_data = second ? {8'h00, snap} : 32'(w0);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cnt <= '0; tmr <= 32'd1; out_valid <= 1'b0; second <= 1'b0; snap <= '0; snap_tc <= '0;
    end else if (clear) begin
      cnt <= '0; tmr <= 32'd1; out_valid <= 1'b0; second <= 1'b0;
    end else begin
      tmr <= tmr + 32'd1;
      if (out_valid && out_ready) begin
        if (second) out_valid <= 1'b0;
        second <= !second;
      end
      if (tick && !out_valid) begin
        snap      <= cnt + CNT_W'(inc);
        snap_tc   <= tcoarse;
        cnt       <= '0;
        out_valid <= 1'b1;
        second    <= 1'b0;
      end else if (enable && inc && cnt != '1) cnt <= cnt + CNT_W'(1);
    end
endmodule
