`timescale 1ns/1ps
// channel_digitizer -- digitisation queue and ADC sequencer of one channel.
//
// Valid events from the trigger generator (buffer set, coarse time, TAC2
// coarse offset) wait in a queue of NB entries; their buffer sets are marked
// busy so the trigger generator will not reuse them. For the oldest event the
// block asks the ADC for TAC1, then TAC2 (only in three-measurement mode),
// then QAC of that buffer set, one conversion at a time, frees the buffer
// set, and sends the event as two 32-bit words: word 0 {channel, buffer set,
// FT_EVENT, TAC2-TAC1 coarse difference, coarse time}, word 1 {TAC1 fine,
// TAC2 fine, QAC, flags}. With 4-cycle conversions an event takes about 15
// cycles (three measurements) before its words are offered. Sending the
// buffer set number with the event and the eight-deep buffering follow the
// chip; conversion order and word layout are this design's.
module channel_digitizer
  import tofhir2_pkg::*;
#(
  parameter int unsigned NB = N_BUF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic [4:0]            ch_id,
  input  logic                  three_meas,
  input  logic                  ev_valid,
  input  logic [$clog2(NB)-1:0] ev_buf,
  input  logic [TC_W-1:0]       ev_tcoarse,
  input  logic [5:0]            ev_dcoarse,
  input  logic                  ev_tac2,
  output logic [NB-1:0]         busy,
  // ADC
  output logic                  adc_start,
  output logic [1:0]            adc_mux,      // 0 TAC1, 1 TAC2, 2 QAC
  output logic [$clog2(NB)-1:0] rd_sel,
  input  logic                  adc_done,
  input  logic [ADC_W-1:0]      adc_code,
  // frames out
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [31:0]           out_data
);
  localparam int unsigned BW = $clog2(NB);
  localparam int unsigned QW = BW + TC_W + 6 + 1;
  typedef enum logic [2:0] {D_IDLE, D_TAC1, D_TAC2, D_QAC, D_W0, D_W1} dstate_e;

  logic          q_valid, q_ready, q_in_ready;
  logic [QW-1:0] q_data;
  logic [$clog2(NB+1)-1:0] q_count;

  sync_fifo #(.W(QW), .DEPTH(NB)) u_q (
    .clk, .rst_n, .clear,
    .in_valid(ev_valid), .in_ready(q_in_ready), .in_data({ev_buf, ev_tcoarse, ev_dcoarse, ev_tac2}),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data), .count(q_count)
  );

  // each queued event holds a distinct busy buffer set, so the queue cannot overflow
  a_queue_room: assert property (@(posedge clk) disable iff (!rst_n) ev_valid |-> (q_in_ready && 32'(q_count) < NB));

  dstate_e         st;
  logic            issued;
  logic [BW-1:0]   b;
  logic [TC_W-1:0] tc;
  logic [5:0]      dc;
  logic            t2f;
  word1_t          w1;
  word0_t          w0;

  assign q_ready   = (st == D_IDLE);
  assign rd_sel    = b;
  assign adc_start = (st == D_TAC1 || st == D_TAC2 || st == D_QAC) && !issued;
  always_comb begin
    unique case (st)
      D_TAC2:  adc_mux = 2'd1;
      D_QAC:   adc_mux = 2'd2;
      default: adc_mux = 2'd0;
    endcase
  end

  always_comb begin
    w0.ch      = ch_id;
    w0.buf_id  = 3'(b);
    w0.ftype   = FT_EVENT;
    w0.dcoarse = dc;
    w0.tcoarse = tc;
  end
  assign out_valid = (st == D_W0) || (st == D_W1);
  assign out_data  = (st == D_W0) ? 32'(w0) : 32'(w1);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= D_IDLE; issued <= 1'b0; b <= '0; tc <= '0; dc <= '0; t2f <= 1'b0; w1 <= '0; busy <= '0;
    end else if (clear) begin
      st <= D_IDLE; issued <= 1'b0; busy <= '0;
    end else begin
      if (ev_valid) busy[ev_buf] <= 1'b1;
      if (adc_start) issued <= 1'b1;
      unique case (st)
        D_IDLE: if (q_valid) begin
          {b, tc, dc, t2f} <= q_data;
          w1 <= '0;
          st <= D_TAC1;
        end
        D_TAC1: if (adc_done) begin
          w1.tfine1 <= adc_code;
          issued    <= 1'b0;
          st        <= three_meas ? D_TAC2 : D_QAC;
        end
        D_TAC2: if (adc_done) begin
          w1.tfine2 <= adc_code;
          issued    <= 1'b0;
          st        <= D_QAC;
        end
        D_QAC: if (adc_done) begin
          w1.qfine  <= adc_code;
          w1.flags  <= {t2f, three_meas};
          issued    <= 1'b0;
          busy[b]   <= 1'b0;
          st        <= D_W0;
        end
        D_W0: if (out_ready) st <= D_W1;
        default: if (out_ready) st <= D_IDLE;   // D_W1
      endcase
    end
endmodule
